// aer_encoder: packs address events into 32-bit words and queues them for
// the host link.
//
// Address-event representation sends only the active taxels, each event
// carrying where, when and which sign. The word layout is this design's:
//   [31:16] timestamp (frame number)   [15:9] zero
//   [8]     polarity (1 = positive)    [7:4]  row y    [3:0] column x
// Events enter on a valid/ready port and wait in a DEPTH-entry FIFO. When
// the FIFO is full `in_ready` drops and the event source stalls; nothing is
// dropped. The cycles spent full are counted in `full_cycles`.
//
// Timing: an event accepted in one cycle can leave on the output from the
// next cycle; one word enters and one leaves per cycle at most.
module aer_encoder
  import eskin_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  aer_event_t  in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_word,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic [31:0] full_cycles
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic         push, pop;

  assign in_ready  = (level != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (level != '0);
  assign out_word  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= {in_ev.t, 7'b0, in_ev.pol, in_ev.y, in_ev.x};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp          <= '0;
      rp          <= '0;
      level       <= '0;
      full_cycles <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (push && !pop)      level <= level + 1'b1;
      else if (pop && !push) level <= level - 1'b1;
      if (!in_ready) full_cycles <= full_cycles + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
