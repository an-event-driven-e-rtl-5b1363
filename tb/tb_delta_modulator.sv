// tb_delta_modulator: feeds random 3x3 sample windows (and empty frames) to
// the delta modulator with random back-pressure on the event port, and
// checks against a reference model written here: the spike frame, every
// address event in order (timestamp, x, y, polarity), the spike counters,
// the sweep time of 256 cycles plus the stalled cycles, and that `clear`
// zeroes the references.
module tb_delta_modulator;
  import eskin_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  adc_code_t delta = 8'd6;
  logic smp_valid = 0, frame_done = 0;
  logic [3:0] smp_x = '0, smp_y = '0;
  adc_code_t smp_val = '0;
  logic ev_valid, ev_ready, frame_valid;
  aer_event_t ev;
  logic [255:0] spk_pos, spk_neg;
  logic [TSBITS-1:0] t_now;
  logic [31:0] n_pos, n_neg, stall_cycles;
  int checks = 0, failures = 0;

  delta_modulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure
  int ready_pct = 100;
  always @(negedge clk) ev_ready = ($urandom_range(0, 99) < ready_pct);

  int refm [256];
  aer_event_t exp_q [$];
  int exp_pos = 0, exp_neg = 0, stalled = 0;
  int frame_no = 0;

  // event monitor
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    aer_event_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected event"); end
    else begin
      e = exp_q.pop_front();
      if (ev !== e) begin failures++; $display("event %p expected %p", ev, e); end
    end
  end

  task automatic run_frame(int cx, int cy, int level);
    int val [256];
    logic [255:0] ep, en;
    int cyc, st0;
    foreach (val[i]) val[i] = 0;
    ep = '0; en = '0;
    if (level >= 0) begin
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++) begin
          int x = cx + dx, y = cy + dy;
          if (x >= 0 && x < 16 && y >= 0 && y < 16) begin
            int v = level + $urandom_range(0, 30);
            if (v > 255) v = 255;
            val[y*16+x] = v;
            @(negedge clk); smp_valid = 1; smp_x = 4'(x); smp_y = 4'(y); smp_val = 8'(v);
          end
        end
      @(negedge clk); smp_valid = 0;
    end
    for (int p = 0; p < 256; p++) begin
      if (val[p] - refm[p] >= int'(delta) && delta != 0) begin
        ep[p] = 1; refm[p] += delta; exp_pos++;
        exp_q.push_back('{t: 16'(frame_no), x: 4'(p % 16), y: 4'(p / 16), pol: 1'b1});
      end else if (refm[p] - val[p] >= int'(delta) && delta != 0) begin
        en[p] = 1; refm[p] -= delta; exp_neg++;
        exp_q.push_back('{t: 16'(frame_no), x: 4'(p % 16), y: 4'(p / 16), pol: 1'b0});
      end
    end
    st0 = int'(stall_cycles);
    @(negedge clk); frame_done = 1;
    @(negedge clk); frame_done = 0; cyc = 1;
    while (!frame_valid) begin @(negedge clk); cyc++; end
    frame_no++;
    checks++;
    if (spk_pos !== ep || spk_neg !== en) begin failures++; $display("frame %0d spike map mismatch", frame_no); end
    checks++;
    if (cyc != 257 + (int'(stall_cycles) - st0)) begin
      failures++; $display("sweep took %0d cycles, stalls %0d", cyc, int'(stall_cycles) - st0);
    end
    stalled += int'(stall_cycles) - st0;
    checks++;
    if (int'(t_now) != frame_no) begin failures++; $display("t_now %0d", t_now); end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    foreach (refm[i]) refm[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // press rising at (5,9), moving, releasing; some frames with no samples
    for (int f = 0; f < 12; f++) run_frame(5, 9, 10*f);
    ready_pct = 30;
    for (int f = 0; f < 12; f++) run_frame(5 + f/4, 9 - f/3, 120);
    for (int f = 0; f < 25; f++) run_frame(0, 0, -1);
    ready_pct = 60;
    for (int f = 0; f < 10; f++) run_frame(15, 15, 60);
    delta = 8'd20;
    for (int f = 0; f < 10; f++) run_frame(0, 15, 8*f);
    // clear references
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (refm[i]) refm[i] = 0;
    delta = 8'd6;
    for (int f = 0; f < 5; f++) run_frame(8, 8, 90);
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d events missing", exp_q.size()); end
    checks++;
    if (int'(n_pos) != exp_pos || int'(n_neg) != exp_neg) begin
      failures++; $display("counters %0d/%0d expected %0d/%0d", n_pos, n_neg, exp_pos, exp_neg);
    end
    checks++;
    if (stalled == 0) begin failures++; $display("back-pressure never stalled the sweep"); end
    $display("positive %0d negative %0d stalled %0d", exp_pos, exp_neg, stalled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
