// snn_conv_layer: one convolutional spiking layer of the classifier: 3x3
// convolution ('same' size, zero padding), leaky integrate-and-fire (LIF)
// neurons and 2x2 pooling of the output spikes.
//
// The layer is event driven: instead of sliding the kernel over every output
// position, it walks the input spike map and, for each input spike only,
// scatters the 3x3 kernel of that input channel into the membranes of the
// outputs it reaches, COUT output channels at a time. Zero inputs cost one
// cycle each and no arithmetic, which is where the sparse spike input pays
// off. With ternary input (the first layer, fed by delta modulation) a
// negative spike subtracts the weights instead of adding them.
//
// A time step runs in three phases after `start`:
//   SCAN     one cycle per input position (CIN*H*W cycles), in the order
//            ci, y, x; an active input enters SCATTER
//   SCATTER  9 cycles per input spike, one kernel tap per cycle, then one
//            more SCAN cycle on the same (now cleared) input:
//            mem[y-ky+1][x-kx+1][co] += +/- w[ci][ky*3+kx][co], all co
//   FIRE     one cycle per output position (H*W cycles): the LIF rule of
//            eskin_pkg for all COUT channels, and a 2x2 OR-pool of the
//            spikes (for binary spikes, max-pooling is an OR)
// so a step takes CIN*H*W + 10*(input spikes) + H*W cycles, then `done`
// pulses and `out_spk` holds the pooled spikes, index
// (co*(H/2) + y/2)*(W/2) + x/2, until the next start.
//
// The layer shapes, the 3x3 kernels, the LIF neurons, the 2x2 pooling and
// 5-bit weights follow the system description. No bias terms are used: with
// 1->16 and 16->32 channel convolutions, a 512->128 and a 128->9 fully
// connected layer the weight count is exactly 71,440, the reported weight
// memory (44,650 bytes) at 5 bits each. The LIF constants, the scatter order
// and the phase structure are this design's.
//
// Weights are written one at a time while the layer is idle: row
// ci*9 + ky*3 + kx, column co. `clear` (while idle) zeroes all membranes,
// one position per cycle, for the start of a new classification window;
// `busy` stays high for those H*W cycles.
module snn_conv_layer
  import eskin_pkg::*;
#(
  parameter int unsigned H          = 16,
  parameter int unsigned W          = 16,
  parameter int unsigned CIN        = 1,
  parameter int unsigned COUT       = 16,
  parameter int          VTH        = 16,
  parameter int unsigned LEAK_SHIFT = 4,
  localparam int unsigned NIN  = CIN * H * W,
  localparam int unsigned NOUT = COUT * (H / 2) * (W / 2),
  localparam int unsigned WROWS = CIN * 9
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  // weight load
  input  logic                       w_we,
  input  logic [$clog2(WROWS)-1:0]   w_row,
  input  logic [$clog2(COUT)-1:0]    w_col,
  input  weight_t                    w_data,
  // one time step
  input  logic                       start,
  input  logic [NIN-1:0]             in_pos,
  input  logic [NIN-1:0]             in_neg,    // tie to 0 for binary input
  output logic                       busy,
  output logic                       done,
  output logic [NOUT-1:0]            out_spk,
  output logic [31:0]                syn_ops    // weight additions performed
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_SCAN, S_SCATTER, S_FIRE} state_t;

  localparam int unsigned CW = (CIN > 1) ? $clog2(CIN) : 1;
  localparam int unsigned YW = $clog2(H);
  localparam int unsigned XW = $clog2(W);

  weight_t wmem [WROWS][COUT];
  // one word per position, all output channels side by side
  logic [COUT-1:0][VBITS-1:0] mem [H*W];

  state_t          state;
  logic [NIN-1:0]  ipos, ineg;
  logic [CW-1:0]   ci;
  logic [YW-1:0]   yi;
  logic [XW-1:0]   xi;
  logic [1:0]      ky, kx;
  logic [$clog2(H*W)-1:0] q;

  // current input index and its activity
  logic [$clog2(NIN)-1:0] iidx;
  logic                   iact, ineg_cur, last_in;
  assign iidx     = ($clog2(NIN))'((int'(ci) * H + int'(yi)) * W + int'(xi));
  assign iact     = ipos[iidx] | ineg[iidx];
  assign ineg_cur = ineg[iidx];
  assign last_in  = (int'(ci) == CIN - 1) && (int'(yi) == H - 1) && (int'(xi) == W - 1);

  // scatter target of the current tap
  logic signed [YW+2:0] oy;
  logic signed [XW+2:0] ox;
  logic                 o_ok;
  logic [$clog2(H*W)-1:0] oidx;
  logic [$clog2(WROWS)-1:0] wrow;
  assign oy   = (YW+3)'(signed'({1'b0, yi})) - (YW+3)'(signed'({1'b0, ky})) + (YW+3)'(1);
  assign ox   = (XW+3)'(signed'({1'b0, xi})) - (XW+3)'(signed'({1'b0, kx})) + (XW+3)'(1);
  assign o_ok = (oy >= 0) && (oy < (YW+3)'(H)) && (ox >= 0) && (ox < (XW+3)'(W));
  assign oidx = ($clog2(H*W))'(int'(oy) * W + int'(ox));
  assign wrow = ($clog2(WROWS))'(int'(ci) * 9 + int'(ky) * 3 + int'(kx));

  // pooled index of output position q
  logic [$clog2(NOUT)-1:0] pbase;
  assign pbase = ($clog2(NOUT))'((int'(q) / W / 2) * (W / 2) + (int'(q) % W) / 2);

  assign busy = (state != S_IDLE);

  // Weight memory
  always_ff @(posedge clk) begin
    if (w_we) wmem[w_row][w_col] <= w_data;
  end

  // Membranes: one read-modify-write per cycle
  always_ff @(posedge clk) begin
    if (state == S_CLEAR) begin
      mem[q] <= '0;
    end else if (state == S_SCATTER && o_ok) begin
      for (int c = 0; c < COUT; c++)
        mem[oidx][c] <= vmem_add(vmem_t'(mem[oidx][c]), wmem[wrow][c], ineg_cur);
    end else if (state == S_FIRE) begin
      for (int c = 0; c < COUT; c++)
        mem[q][c] <= (vmem_t'(mem[q][c]) >= vmem_t'(VTH)) ? '0 : vmem_leak(vmem_t'(mem[q][c]), LEAK_SHIFT);
    end
  end

  // Control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ipos    <= '0;
      ineg    <= '0;
      ci      <= '0;
      yi      <= '0;
      xi      <= '0;
      ky      <= '0;
      kx      <= '0;
      q       <= '0;
      done    <= 1'b0;
      out_spk <= '0;
      syn_ops <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (clear) begin
          syn_ops <= '0;
          q       <= '0;
          state   <= S_CLEAR;
        end else if (start) begin
          ipos    <= in_pos;
          ineg    <= in_neg;
          ci      <= '0;
          yi      <= '0;
          xi      <= '0;
          out_spk <= '0;
          state   <= S_SCAN;
        end
        S_CLEAR: begin
          if (int'(q) == H*W - 1) state <= S_IDLE;
          else                    q <= q + 1'b1;
        end
        S_SCAN: begin
          if (iact) begin
            ky    <= '0;
            kx    <= '0;
            state <= S_SCATTER;
          end else if (last_in) begin
            q     <= '0;
            state <= S_FIRE;
          end else begin
            // advance x, y, ci
            if (int'(xi) == W - 1) begin
              xi <= '0;
              if (int'(yi) == H - 1) begin
                yi <= '0;
                ci <= ci + 1'b1;
              end else yi <= yi + 1'b1;
            end else xi <= xi + 1'b1;
          end
        end
        S_SCATTER: begin
          if (o_ok) syn_ops <= syn_ops + COUT;
          if (kx == 2'd2) begin
            kx <= '0;
            if (ky == 2'd2) begin
              // this input is done: clear it and go back to scanning
              ipos[iidx] <= 1'b0;
              ineg[iidx] <= 1'b0;
              state      <= S_SCAN;
            end else ky <= ky + 1'b1;
          end else kx <= kx + 1'b1;
        end
        S_FIRE: begin
          for (int c = 0; c < COUT; c++)
            if (vmem_t'(mem[q][c]) >= vmem_t'(VTH))
              out_spk[c * (H/2) * (W/2) + int'(pbase)] <= 1'b1;
          if (int'(q) == H*W - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else q <= q + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_no_clear_when_busy: assert property (@(posedge clk) disable iff (!rst_n) clear |-> !busy);

endmodule
