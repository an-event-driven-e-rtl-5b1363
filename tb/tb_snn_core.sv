// tb_snn_core: runs the full-size Conv-SNN (16x16x1 -> conv 16 -> pool ->
// conv 32 -> pool -> FC 128 -> 9) over two short classification windows of
// random sparse ternary spike frames with random 5-bit weights, and checks
// each layer's spikes at every step, the per-class spike counts and the
// decided class against a reference model written here in gather form.
// Also checks that a frame arriving during a step is dropped and counted,
// and that a new window starts from cleared membranes.
module tb_snn_core;
  import eskin_pkg::*;
  localparam int T = 30, VTH = 16, LS = 4;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  layer_sel_t w_layer = LAYER_CONV1;
  logic [8:0] w_row = '0;
  logic [6:0] w_col = '0;
  weight_t w_data = '0;
  logic win_start = 0, frame_valid = 0;
  logic [255:0] frame_pos = '0, frame_neg = '0;
  logic win_open, busy, result_valid;
  logic [8:0] step;
  logic [15:0] dropped;
  logic [3:0] result_class;
  logic [NCLASS-1:0][7:0] counts;
  logic [31:0] syn_ops;
  int checks = 0, failures = 0;

  snn_core #(.T_STEPS(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference weights and state
  int w1 [9][16];
  int w2 [144][32];
  int w3 [512][128];
  int w4 [128][9];
  int v1 [256][16];
  int v2 [64][32];
  int v3 [128];
  int v4 [9];
  int cnt [9];

  function automatic int lif(ref int v, input int acc);
    if (acc >= VTH) begin v = 0; return 1; end
    v = acc - (acc >>> LS);
    return 0;
  endfunction

  task automatic ref_clear();
    foreach (v1[a, b]) v1[a][b] = 0;
    foreach (v2[a, b]) v2[a][b] = 0;
    foreach (v3[a]) v3[a] = 0;
    foreach (v4[a]) v4[a] = 0;
    foreach (cnt[a]) cnt[a] = 0;
  endtask

  task automatic ref_step(input logic [255:0] ip, input logic [255:0] ineg,
                          output logic [1023:0] o1, output logic [511:0] o2,
                          output logic [127:0] o3, output logic [8:0] o4);
    int acc, iv;
    o1 = '0; o2 = '0; o3 = '0; o4 = '0;
    for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) for (int c = 0; c < 16; c++) begin
      acc = v1[y*16+x][c];
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        int iy = y+ky-1, ix = x+kx-1;
        if (iy >= 0 && iy < 16 && ix >= 0 && ix < 16) begin
          iv = ip[iy*16+ix] ? 1 : (ineg[iy*16+ix] ? -1 : 0);
          acc += iv * w1[ky*3+kx][c];
        end
      end
      if (lif(v1[y*16+x][c], acc)) o1[(c*8 + y/2)*8 + x/2] = 1'b1;
    end
    for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) for (int c = 0; c < 32; c++) begin
      acc = v2[y*8+x][c];
      for (int ci = 0; ci < 16; ci++)
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int iy = y+ky-1, ix = x+kx-1;
          if (iy >= 0 && iy < 8 && ix >= 0 && ix < 8 && o1[(ci*8+iy)*8+ix])
            acc += w2[ci*9+ky*3+kx][c];
        end
      if (lif(v2[y*8+x][c], acc)) o2[(c*4 + y/2)*4 + x/2] = 1'b1;
    end
    for (int n = 0; n < 128; n++) begin
      acc = v3[n];
      for (int i = 0; i < 512; i++) if (o2[i]) acc += w3[i][n];
      o3[n] = 1'(lif(v3[n], acc));
    end
    for (int n = 0; n < 9; n++) begin
      acc = v4[n];
      for (int i = 0; i < 128; i++) if (o3[i]) acc += w4[i][n];
      o4[n] = 1'(lif(v4[n], acc));
      if (o4[n]) cnt[n]++;
    end
  endtask

  task automatic wr(layer_sel_t l, int r, int c, int v);
    @(negedge clk);
    w_we = 1; w_layer = l; w_row = 9'(r); w_col = 7'(c); w_data = weight_t'(v);
  endtask

  int act1 = 0, act2 = 0, act3 = 0, act4 = 0, ndrop = 0;

  task automatic run_window(int seed_density);
    logic [1023:0] e1; logic [511:0] e2; logic [127:0] e3; logic [8:0] e4;
    int best;
    @(negedge clk); win_start = 1;
    @(negedge clk); win_start = 0;
    while (busy) @(negedge clk);
    ref_clear();
    for (int s = 0; s < T; s++) begin
      // a moving blob of ternary spikes
      frame_pos = '0; frame_neg = '0;
      for (int p = 0; p < 256; p++) begin
        int r = $urandom_range(0, 99);
        if (r < seed_density) frame_pos[p] = 1'b1;
        else if (r < 2*seed_density) frame_neg[p] = 1'b1;
      end
      ref_step(frame_pos, frame_neg, e1, e2, e3, e4);
      @(negedge clk); frame_valid = 1;
      @(negedge clk); frame_valid = 0;
      if (s == 3) begin
        // a second frame while the step runs: must be dropped
        repeat (20) @(negedge clk);
        frame_valid = 1;
        @(negedge clk); frame_valid = 0;
        ndrop++;
      end
      while (!dut.dn1) @(negedge clk);
      checks++; if (dut.s1 !== e1) begin failures++; $display("step %0d conv1 mismatch", s); end
      while (!dut.dn2) @(negedge clk);
      checks++; if (dut.s2 !== e2) begin failures++; $display("step %0d conv2 mismatch", s); end
      while (!dut.dn3) @(negedge clk);
      checks++; if (dut.s3 !== e3) begin failures++; $display("step %0d fc1 mismatch", s); end
      while (!dut.dn4) @(negedge clk);
      checks++; if (dut.s4 !== e4) begin failures++; $display("step %0d fc2 mismatch %b %b", s, dut.s4, e4); end
      act1 += $countones(e1); act2 += $countones(e2); act3 += $countones(e3); act4 += $countones(e4);
      if (s != T - 1) while (busy) @(negedge clk);
    end
    while (!result_valid) @(negedge clk);
    best = 0;
    for (int k = 1; k < 9; k++) if (cnt[k] > cnt[best]) best = k;
    for (int k = 0; k < 9; k++) begin
      checks++;
      if (int'(counts[k]) != cnt[k]) begin failures++; $display("count %0d: %0d expected %0d", k, counts[k], cnt[k]); end
    end
    checks++;
    if (int'(result_class) != best + 1) begin failures++; $display("class %0d expected %0d", result_class, best+1); end
    $display("window: class %0d counts %p", result_class, cnt);
    @(negedge clk);
    checks++;
    if (win_open) begin failures++; $display("window still open"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (w1[r, c]) begin w1[r][c] = $urandom_range(0, 23) - 8; wr(LAYER_CONV1, r, c, w1[r][c]); end
    foreach (w2[r, c]) begin w2[r][c] = $urandom_range(0, 23) - 9; wr(LAYER_CONV2, r, c, w2[r][c]); end
    foreach (w3[r, c]) begin w3[r][c] = $urandom_range(0, 31) - 16; wr(LAYER_FC1, r, c, w3[r][c]); end
    foreach (w4[r, c]) begin w4[r][c] = $urandom_range(0, 23) - 8; wr(LAYER_FC2, r, c, w4[r][c]); end
    @(negedge clk); w_we = 0;
    run_window(3);
    run_window(6);
    checks++;
    if (int'(dropped) != ndrop) begin failures++; $display("dropped %0d expected %0d", dropped, ndrop); end
    checks++;
    if (act1 == 0 || act2 == 0 || act3 == 0 || act4 == 0) begin
      failures++; $display("a layer never spiked");
    end
    $display("spikes per layer: %0d %0d %0d %0d, synaptic ops %0d", act1, act2, act3, act4, syn_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
