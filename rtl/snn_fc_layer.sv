// snn_fc_layer: fully connected spiking layer with LIF neurons, used for the
// hidden layer FC1 (512 -> 128) and the output layer (128 -> 9).
//
// Event driven like the convolution layers: the binary input spike vector
// is walked one position per cycle, and for every input spike the whole
// weight row of that input (NOUT weights) is added to the NOUT membranes in
// the same cycle. Inputs without a spike cost a cycle and no arithmetic.
// After the last input one FIRE cycle applies the LIF rule of eskin_pkg to
// all neurons in parallel.
//
// Timing: a step takes NIN + 1 cycles after `start`; then `done` pulses and
// `out_spk` holds the output spikes until the next start.
//
// Layer sizes follow the system description (FC1 width 128 is the value for
// which the reported weight memory is matched exactly, see snn_conv_layer).
// The LIF constants and the one-row-per-cycle organisation are this
// design's. Weights are written while idle: row = input index, column =
// output index. `clear` zeroes all membranes.
module snn_fc_layer
  import eskin_pkg::*;
#(
  parameter int unsigned NIN        = 512,
  parameter int unsigned NOUT       = 128,
  parameter int          VTH        = 16,
  parameter int unsigned LEAK_SHIFT = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     w_we,
  input  logic [$clog2(NIN)-1:0]   w_row,
  input  logic [$clog2(NOUT)-1:0]  w_col,
  input  weight_t                  w_data,
  input  logic                     start,
  input  logic [NIN-1:0]           in_spk,
  output logic                     busy,
  output logic                     done,
  output logic [NOUT-1:0]          out_spk,
  output logic [31:0]              syn_ops
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FIRE} state_t;

  weight_t wmem [NIN][NOUT];
  logic [NOUT-1:0][VBITS-1:0] mem;

  state_t                 state;
  logic [NIN-1:0]         ispk;
  logic [$clog2(NIN)-1:0] i;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_row][w_col] <= w_data;
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      mem <= '0;
    end else if (state == S_SCAN && ispk[i]) begin
      for (int n = 0; n < NOUT; n++) mem[n] <= vmem_add(vmem_t'(mem[n]), wmem[i][n], 1'b0);
    end else if (state == S_FIRE) begin
      for (int n = 0; n < NOUT; n++)
        mem[n] <= (vmem_t'(mem[n]) >= vmem_t'(VTH)) ? '0 : vmem_leak(vmem_t'(mem[n]), LEAK_SHIFT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ispk    <= '0;
      i       <= '0;
      done    <= 1'b0;
      out_spk <= '0;
      syn_ops <= '0;
    end else begin
      done <= 1'b0;
      if (clear) syn_ops <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          ispk  <= in_spk;
          i     <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (ispk[i]) syn_ops <= syn_ops + NOUT;
          if (int'(i) == NIN - 1) state <= S_FIRE;
          else                    i <= i + 1'b1;
        end
        S_FIRE: begin
          for (int n = 0; n < NOUT; n++) out_spk[n] <= (vmem_t'(mem[n]) >= vmem_t'(VTH));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
