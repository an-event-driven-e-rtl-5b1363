// tb_aer_encoder: pushes random events through the AER FIFO with random
// valid on the input and random ready on the output, and checks every
// output word against the packing [31:16] t, [8] pol, [7:4] y, [3:0] x in
// arrival order, that nothing is lost when the FIFO fills, the fill level
// never exceeds DEPTH, and the one-cycle fall-through latency.
module tb_aer_encoder;
  import eskin_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  aer_event_t in_ev = '0;
  logic [31:0] out_word;
  logic [$clog2(DEPTH+1)-1:0] level;
  logic [31:0] full_cycles;
  int checks = 0, failures = 0;

  aer_encoder #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_q [$];
  int sent = 0, got = 0, in_pct = 50, out_pct = 50;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back({in_ev.t, 7'b0, in_ev.pol, in_ev.y, in_ev.x});
      sent++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("word from empty FIFO"); end
      else begin
        logic [31:0] e;
        e = exp_q.pop_front();
        if (out_word !== e) begin failures++; $display("word %h expected %h", out_word, e); end
      end
      got++;
    end
    checks++;
    if (level > DEPTH) begin failures++; $display("level %0d", level); end
  end

  always @(negedge clk) if (rst_n) begin
    if (!in_valid || in_ready) begin
      in_valid = ($urandom_range(0, 99) < in_pct);
      in_ev = '{t: 16'($urandom), x: 4'($urandom), y: 4'($urandom), pol: 1'($urandom)};
    end
    out_ready = ($urandom_range(0, 99) < out_pct);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one word into an empty FIFO is visible on the next cycle
    @(negedge clk);
    repeat (3000) @(negedge clk);
    in_pct = 90; out_pct = 20;
    repeat (3000) @(negedge clk);
    in_pct = 10; out_pct = 90;
    repeat (3000) @(negedge clk);
    in_pct = 0; out_pct = 100;
    repeat (50) @(negedge clk);
    checks++;
    if (sent != got || exp_q.size() != 0) begin failures++; $display("sent %0d got %0d", sent, got); end
    checks++;
    if (full_cycles == 0) begin failures++; $display("FIFO never filled"); end
    // fall-through latency
    out_pct = 0; out_ready = 0;
    @(negedge clk);
    begin
      aer_event_t e1;
      e1 = '{t: 16'h1234, x: 4'h5, y: 4'h9, pol: 1'b1};
      force in_valid = 1'b1;
      force in_ev = e1;
      @(negedge clk);
      release in_valid; release in_ev;
      force in_valid = 1'b0;
      checks++;
      if (!out_valid || out_word !== 32'h1234_0195) begin
        failures++; $display("latency/packing: valid %b word %h", out_valid, out_word);
      end
      release in_valid;
    end
    $display("sent %0d, FIFO full for %0d cycles", sent, full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
