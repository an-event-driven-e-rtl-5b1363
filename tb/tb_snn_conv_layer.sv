// tb_snn_conv_layer: drives a small convolution layer (8x8, 2 -> 4
// channels, ternary input) with random 5-bit weights and random sparse
// ternary spike maps for a run of time steps, and compares the pooled
// output spikes with a gather-form reference model written here
// (out[y][x][co] = sum over ci, ky, kx of w * in[y+ky-1][x+kx-1], LIF, 2x2
// OR-pool). Also checks the step time CIN*H*W + 10*spikes + H*W and that
// `clear` returns the layer to its initial state.
module tb_snn_conv_layer;
  import eskin_pkg::*;
  localparam int H = 8, W = 8, CIN = 2, COUT = 4, VTH = 16, LS = 4;
  localparam int NIN = CIN*H*W, NOUT = COUT*(H/2)*(W/2);

  logic clk = 0, rst_n = 0, clear = 0, w_we = 0, start = 0;
  logic [$clog2(CIN*9)-1:0] w_row = '0;
  logic [$clog2(COUT)-1:0]  w_col = '0;
  weight_t w_data = '0;
  logic [NIN-1:0] in_pos = '0, in_neg = '0;
  logic busy, done;
  logic [NOUT-1:0] out_spk;
  logic [31:0] syn_ops;
  int checks = 0, failures = 0;

  snn_conv_layer #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .VTH(VTH), .LEAK_SHIFT(LS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wref [CIN*9][COUT];
  int vref [H*W][COUT];

  task automatic ref_step(output logic [NOUT-1:0] exp_spk);
    int acc, inval, iy, ix;
    exp_spk = '0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int co = 0; co < COUT; co++) begin
          acc = vref[y*W+x][co];
          for (int ci = 0; ci < CIN; ci++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                iy = y + ky - 1; ix = x + kx - 1;
                if (iy >= 0 && iy < H && ix >= 0 && ix < W) begin
                  inval = in_pos[(ci*H+iy)*W+ix] ? 1 : (in_neg[(ci*H+iy)*W+ix] ? -1 : 0);
                  acc += inval * wref[ci*9+ky*3+kx][co];
                end
              end
          if (acc >= VTH) begin
            exp_spk[(co*(H/2) + y/2)*(W/2) + x/2] = 1'b1;
            vref[y*W+x][co] = 0;
          end else begin
            vref[y*W+x][co] = acc - (acc >>> LS);
          end
        end
  endtask

  task automatic run_step(int density);
    logic [NOUT-1:0] exp_spk;
    int nsp, cyc;
    nsp = 0;
    for (int i = 0; i < NIN; i++) begin
      int r = $urandom_range(0, 99);
      in_pos[i] = (r < density);
      in_neg[i] = (r >= density && r < 2*density);
      nsp += (r < 2*density) ? 1 : 0;
    end
    ref_step(exp_spk);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (out_spk !== exp_spk) begin
      failures++; $display("spikes %h expected %h", out_spk, exp_spk);
    end
    checks++;
    if (cyc != NIN + 10*nsp + H*W + 1) begin
      failures++; $display("step took %0d cycles, expected %0d", cyc, NIN + 10*nsp + H*W + 1);
    end
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    foreach (vref[a, c]) vref[a][c] = 0;
  endtask

  initial begin
    int nspk_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    for (int r = 0; r < CIN*9; r++)
      for (int c = 0; c < COUT; c++) begin
        wref[r][c] = $urandom_range(0, 31) - 16;
        @(negedge clk); w_we = 1; w_row = r[$clog2(CIN*9)-1:0]; w_col = c[$clog2(COUT)-1:0];
        w_data = weight_t'(wref[r][c]);
      end
    @(negedge clk); w_we = 0;
    do_clear();
    for (int s = 0; s < 30; s++) begin
      run_step((s % 3 == 0) ? 20 : 5);
      nspk_total += $countones(out_spk);
    end
    do_clear();
    for (int s = 0; s < 10; s++) run_step(10);
    checks++;
    if (nspk_total == 0) begin failures++; $display("no output spikes at all"); end
    $display("output spikes seen: %0d", nspk_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
