// tb_snn_fc_layer: drives a fully connected LIF layer (64 -> 12) with random
// 5-bit weights and random binary input spikes over many time steps,
// including dense inputs that drive one neuron far negative, and
// compares the output spikes with a reference model written here. Checks
// the step time NIN + 1 cycles and that `clear` zeroes the membranes.
module tb_snn_fc_layer;
  import eskin_pkg::*;
  localparam int NIN = 64, NOUT = 12, VTH = 16, LS = 4;

  logic clk = 0, rst_n = 0, clear = 0, w_we = 0, start = 0;
  logic [$clog2(NIN)-1:0]  w_row = '0;
  logic [$clog2(NOUT)-1:0] w_col = '0;
  weight_t w_data = '0;
  logic [NIN-1:0] in_spk = '0;
  logic busy, done;
  logic [NOUT-1:0] out_spk;
  logic [31:0] syn_ops;
  int checks = 0, failures = 0;

  snn_fc_layer #(.NIN(NIN), .NOUT(NOUT), .VTH(VTH), .LEAK_SHIFT(LS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wref [NIN][NOUT];
  int vref [NOUT];
  int nspk = 0;

  function automatic int sat16(int v);
    return (v > 32767) ? 32767 : ((v < -32768) ? -32768 : v);
  endfunction

  task automatic run_step(int density);
    logic [NOUT-1:0] exp_spk;
    int cyc;
    for (int i = 0; i < NIN; i++) in_spk[i] = ($urandom_range(0, 99) < density);
    for (int n = 0; n < NOUT; n++) begin
      for (int i = 0; i < NIN; i++) if (in_spk[i]) vref[n] = sat16(vref[n] + wref[i][n]);
      exp_spk[n] = (vref[n] >= VTH);
      vref[n] = exp_spk[n] ? 0 : vref[n] - (vref[n] >>> LS);
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (out_spk !== exp_spk) begin failures++; $display("spikes %h expected %h", out_spk, exp_spk); end
    checks++;
    if (cyc != NIN + 2) begin failures++; $display("step took %0d cycles", cyc); end
    nspk += $countones(out_spk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NIN; i++)
      for (int n = 0; n < NOUT; n++) begin
        // strongly negative weights for neuron 0 to reach the lower rail
        wref[i][n] = (n == 0) ? -16 : $urandom_range(0, 31) - 16;
        @(negedge clk); w_we = 1; w_row = 6'(i); w_col = 4'(n); w_data = weight_t'(wref[i][n]);
      end
    @(negedge clk); w_we = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (vref[n]) vref[n] = 0;
    for (int s = 0; s < 40; s++) run_step(s < 20 ? 10 : 90);
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (vref[n]) vref[n] = 0;
    for (int s = 0; s < 20; s++) run_step(30);
    checks++;
    if (nspk == 0) begin failures++; $display("no output spikes"); end
    $display("output spikes seen: %0d", nspk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
