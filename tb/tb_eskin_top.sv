// tb_eskin_top: end-to-end test of the e-skin design at a reduced frame period
// (20,000 clock cycles per frame instead of 416,666) and a 60-frame
// classification window instead of 240.
//
// A behavioural crossbar/ADC model is driven with a handwriting stroke: a
// pressed blob (centre 120, four neighbours 50 on the 0..255 code scale)
// that appears, slides along a digit-5-like path one taxel every two
// frames, and lifts off. The network gets random 5-bit weights through the
// load port. The test checks:
//  - the touch is found by a monitor scan and localised, the hotspot
//    follows the stroke (refocus) and the event ends after lift-off
//  - the reference setting is written once over I2C and acknowledged
//  - address events: every word is well formed and addresses a taxel that
//    was pressed at some time, their number equals the
//    design's positive and negative spike counters, and random back-pressure
//    on the host port stalls the encoder without losing events
//  - classification: the spike frames rebuilt from the AER words are run
//    through a reference model of the network written here; per-class
//    spike counts and the decided digit must match the design's result
// and counts how often each mechanism happened; one that never happened is
// a failure.
module tb_eskin_top;
  import eskin_pkg::*;
  localparam int T     = 60;
  localparam int VTH   = 16;
  localparam int LS    = 4;

  logic clk = 0, rst_n = 0;
  adc_code_t cfg_thr_event = 8'd30, cfg_delta = 8'd6;
  logic cfg_range = 0, cfg_ref_clear = 0;
  logic row_ser, row_srclk, row_rclk, adc_cs_n, adc_sclk, adc_mosi, adc_miso;
  logic w_we = 0;
  layer_sel_t w_layer = LAYER_CONV1;
  logic [8:0] w_row = '0;
  logic [6:0] w_col = '0;
  weight_t w_data = '0;
  logic aer_valid, aer_ready = 1;
  logic [31:0] aer_word;
  logic result_valid;
  logic [3:0] result_class;
  logic [NCLASS-1:0][7:0] result_counts;
  logic tracking, win_open, adc_addr_err;
  logic [3:0] hot_x, hot_y;
  logic [7:0] loc_scans;
  logic [15:0] tick_overruns, frames_dropped;
  logic [31:0] spikes_pos, spikes_neg, aer_stall_cycles, syn_ops;
  logic [255:0][7:0] press = '0;
  logic [15:0] row_en;
  logic touch_start, touch_end;
  logic [15:0] frame_count;
  logic [8:0] win_step;
  logic [4:0] aer_fifo_level;
  logic [31:0] aer_full_cycles;
  logic [3:0] adc_last_ch;
  logic [3:0] engine_busy;
  logic vref_done, vref_nack, i2c_scl_oe, i2c_sda_oe;
  logic [7:0] cfg_vref_code = 8'hA7;
  logic cfg_vref_write = 0;
  int adc_frames;
  int checks = 0, failures = 0;

  eskin_top #(.CLK_HZ(2_400_000), .T_STEPS(60)) dut (
    .clk, .rst_n, .cfg_thr_event, .cfg_delta, .cfg_range, .cfg_ref_clear,
    .row_ser, .row_srclk, .row_rclk, .adc_cs_n, .adc_sclk, .adc_mosi, .adc_miso,
    .w_we, .w_layer, .w_row, .w_col, .w_data,
    .aer_valid, .aer_ready, .aer_word,
    .result_valid, .result_class, .result_counts,
    .tracking, .hot_x, .hot_y, .loc_scans, .win_open, .tick_overruns, .frames_dropped,
    .spikes_pos, .spikes_neg, .aer_stall_cycles, .syn_ops, .adc_addr_err,
    .touch_start, .touch_end, .frame_count, .win_step, .aer_fifo_level, .aer_full_cycles,
    .adc_last_ch, .engine_busy,
    .cfg_vref_code, .cfg_vref_write, .i2c_scl_oe, .i2c_sda_oe, .i2c_sda_i, .vref_done, .vref_nack);

  afe_adc_model u_afe (.cs_n(adc_cs_n), .sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso),
    .ser(row_ser), .srclk(row_srclk), .rclk(row_rclk), .press, .row_en, .frames(adc_frames));

  always #10 clk = ~clk;   // 50 MHz

  // ---- I2C reference generator: acknowledges every byte, keeps the last
  // three bytes of a write -------------------------------------------------
  logic i2c_ack = 0, scl_q = 1, sda_q = 1;
  logic i2c_sda_i;
  assign i2c_sda_i = !(i2c_sda_oe || i2c_ack);
  int i2c_bit = 0, i2c_byte = 0, n_vref_writes = 0;
  logic [7:0] i2c_sh = '0;
  logic [7:0] i2c_rx [3];
  always @(posedge clk) if (rst_n) begin
    if (!i2c_scl_oe && scl_q && sda_q && !i2c_sda_i) begin i2c_bit = -1; i2c_byte = 0; end  // START
    if (!i2c_scl_oe && !scl_q && i2c_bit >= 0 && i2c_bit < 8) i2c_sh = {i2c_sh[6:0], i2c_sda_i};
    if (i2c_scl_oe && scl_q) begin
      if (i2c_bit < 0) i2c_bit = 0;
      else if (i2c_bit == 7) begin
        if (i2c_byte < 3) i2c_rx[i2c_byte] = i2c_sh;
        i2c_ack <= 1'b1; i2c_bit = 8;
      end else if (i2c_bit == 8) begin
        i2c_ack <= 1'b0; i2c_bit = 0; i2c_byte++;
      end else i2c_bit++;
    end
    if (vref_done) n_vref_writes++;
    scl_q <= !i2c_scl_oe;
    sda_q <= i2c_sda_i;
  end

  // ---- mechanism counters ---------------------------------------------------
  int n_monitor = 0, n_localise = 0, n_refocus = 0, n_event_end = 0, n_track_frames = 0;
  int n_frames = 0, max_level = 0;
  int n_aer_pos = 0, n_aer_neg = 0, n_aer_stall = 0, n_windows = 0, n_snn_steps = 0;
  logic [3:0] last_hx, last_hy;
  logic last_tracking = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_scan.rows_load && dut.u_scan.rows_word == 16'hFFFF) n_monitor++;
    if (touch_start) n_localise++;
    if (touch_end) n_event_end++;
    if (dut.frame_done && tracking) n_track_frames++;
    if (tracking && last_tracking && (hot_x != last_hx || hot_y != last_hy)) n_refocus++;
    if (aer_valid && !aer_ready) n_aer_stall++;
    if (dut.u_snn.st1) n_snn_steps++;
    if (dut.frame_done) n_frames++;
    if (int'(aer_fifo_level) > max_level) max_level = int'(aer_fifo_level);
    last_hx <= hot_x; last_hy <= hot_y; last_tracking <= tracking;
  end

  // ---- host side: random back-pressure, AER capture -------------------------
  logic [255:0] fpos [int];
  logic [255:0] fneg [int];
  int bad_words = 0, misplaced = 0;
  logic [255:0] ever_pressed = '0;
  always @(posedge clk) for (int i = 0; i < 256; i++) if (press[i] != 0) ever_pressed[i] = 1'b1;
  always @(negedge clk) aer_ready = ($urandom_range(0, 99) < 40);
  always @(posedge clk) if (rst_n && aer_valid && aer_ready) begin
    int t, p;
    t = int'(aer_word[31:16]);
    p = int'(aer_word[7:4]) * 16 + int'(aer_word[3:0]);
    if (aer_word[15:9] != 0) bad_words++;
    if (!ever_pressed[p]) misplaced++;
    if (!fpos.exists(t)) begin fpos[t] = '0; fneg[t] = '0; end
    if (aer_word[8]) begin n_aer_pos++; fpos[t][p] = 1'b1; end
    else             begin n_aer_neg++; fneg[t][p] = 1'b1; end
  end

  // the result pulse may come while the stroke is still being drawn
  int n_result = 0;
  always @(posedge clk) if (rst_n && result_valid) n_result++;

  // first frame of the classification window: the frame counter when the
  // window opens
  int t_first = -1;
  always @(posedge clk) if (rst_n && touch_start && t_first < 0) t_first = int'(frame_count);

  // ---- reference network ----------------------------------------------------
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

  task automatic ref_step(input logic [255:0] ip, input logic [255:0] ineg);
    logic [1023:0] o1; logic [511:0] o2; logic [127:0] o3;
    int acc, iv;
    o1 = '0; o2 = '0; o3 = '0;
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
      if (lif(v4[n], acc)) cnt[n]++;
    end
  endtask

  task automatic wr(layer_sel_t l, int r, int c, int v);
    @(negedge clk);
    w_we = 1; w_layer = l; w_row = 9'(r); w_col = 7'(c); w_data = weight_t'(v);
  endtask

  // ---- stroke ---------------------------------------------------------------
  int path_x [$], path_y [$];
  task automatic seg(int x0, int y0, int x1, int y1);
    int x = x0, y = y0;
    while (x != x1 || y != y1) begin
      path_x.push_back(x); path_y.push_back(y);
      if (x != x1) x += (x1 > x) ? 1 : -1;
      else         y += (y1 > y) ? 1 : -1;
    end
  endtask

  task automatic draw(int x, int y, int level);
    press = '0;
    if (level == 0) return;
    press[y*16+x] = 8'(level);
    if (x > 0)  press[y*16+x-1] = 8'(level*5/12);
    if (x < 15) press[y*16+x+1] = 8'(level*5/12);
    if (y > 0)  press[(y-1)*16+x] = 8'(level*5/12);
    if (y < 15) press[(y+1)*16+x] = 8'(level*5/12);
  endtask

  task automatic wait_frames(int n);
    repeat (n) begin
      @(posedge clk iff dut.tick);
    end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best;
    seg(13, 3, 5, 3); seg(5, 3, 5, 8); seg(5, 8, 10, 9); seg(10, 9, 11, 12); seg(11, 12, 4, 14);
    path_x.push_back(4); path_y.push_back(14);
    foreach (cnt[k]) cnt[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (w1[r, c]) begin w1[r][c] = $urandom_range(0, 23) - 8; wr(LAYER_CONV1, r, c, w1[r][c]); end
    foreach (w2[r, c]) begin w2[r][c] = $urandom_range(0, 23) - 9; wr(LAYER_CONV2, r, c, w2[r][c]); end
    foreach (w3[r, c]) begin w3[r][c] = $urandom_range(0, 31) - 16; wr(LAYER_FC1, r, c, w3[r][c]); end
    foreach (w4[r, c]) begin w4[r][c] = $urandom_range(0, 23) - 8; wr(LAYER_FC2, r, c, w4[r][c]); end
    @(negedge clk); w_we = 0;

    @(negedge clk); cfg_vref_write = 1;    // set the reference
    @(negedge clk); cfg_vref_write = 0;
    wait_frames(8);                        // idle array
    for (int lvl = 30; lvl <= 120; lvl += 30) begin   // pen down
      draw(path_x[0], path_y[0], lvl);
      wait_frames(1);
    end
    foreach (path_x[i]) begin             // stroke
      draw(path_x[i], path_y[i], 120);
      wait_frames(2);
    end
    for (int lvl = 90; lvl >= 0; lvl -= 30) begin    // lift-off
      draw(path_x[path_x.size()-1], path_y[path_y.size()-1], lvl);
      wait_frames(1);
    end
    // let the window run out
    while (n_result == 0) @(posedge clk);
    @(negedge clk);
    checks++;
    if (n_result != 1) begin failures++; $display("%0d results", n_result); end

    // reference classification from the AER stream
    for (int t = t_first; t < t_first + T; t++) begin
      logic [255:0] p, n;
      p = fpos.exists(t) ? fpos[t] : '0;
      n = fneg.exists(t) ? fneg[t] : '0;
      ref_step(p, n);
    end
    best = 0;
    for (int k = 1; k < 9; k++) if (cnt[k] > cnt[best]) best = k;
    for (int k = 0; k < 9; k++) begin
      checks++;
      if (int'(result_counts[k]) != cnt[k]) begin
        failures++; $display("class %0d count %0d expected %0d", k+1, result_counts[k], cnt[k]);
      end
    end
    checks++;
    if (int'(result_class) != best + 1) begin failures++; $display("class %0d expected %0d", result_class, best+1); end
    n_windows++;

    // drain the host port
    repeat (200) @(posedge clk);
    checks++;
    if (n_aer_pos != int'(spikes_pos) || n_aer_neg != int'(spikes_neg)) begin
      failures++; $display("AER %0d/%0d, counters %0d/%0d", n_aer_pos, n_aer_neg, spikes_pos, spikes_neg);
    end
    checks++;
    if (misplaced != 0) begin failures++; $display("%0d events at taxels never pressed", misplaced); end
    checks++;
    if (bad_words != 0) begin failures++; $display("%0d malformed AER words", bad_words); end
    checks++;
    if (hot_x != 4'(path_x[path_x.size()-1]) && tracking) begin failures++; $display("hotspot lost"); end
    checks++;
    if (tracking) begin failures++; $display("event did not end after lift-off"); end
    checks++;
    if (adc_addr_err) begin failures++; $display("ADC channel tag error"); end
    checks++;
    if (tick_overruns != 0 || frames_dropped != 0) begin
      failures++; $display("overruns %0d, dropped frames %0d", tick_overruns, frames_dropped);
    end
    checks++;
    if (n_frames - int'(frame_count) > 1 || int'(frame_count) > n_frames) begin failures++; $display("frame count %0d, %0d frames", frame_count, n_frames); end
    checks++;
    if (max_level == 0 || max_level > 16) begin failures++; $display("AER FIFO peak level %0d", max_level); end
    checks++;
    if (engine_busy[2] || win_open || int'(win_step) != T) begin
      failures++; $display("network busy %0d, open %0d, %0d steps after the window", engine_busy[2], win_open, win_step);
    end
    checks++;
    if (n_snn_steps != T) begin failures++; $display("%0d network steps", n_snn_steps); end

    $display("monitor scans %0d, localisations %0d, tracking frames %0d, refocus moves %0d, event ends %0d",
             n_monitor, n_localise, n_track_frames, n_refocus, n_event_end);
    $display("spikes +%0d -%0d, AER stall cycles %0d, windows %0d, class %0d, counts %p",
             n_aer_pos, n_aer_neg, n_aer_stall, n_windows, result_class, cnt);
    $display("last localisation used %0d conversions; synaptic ops %0d", loc_scans, syn_ops);
    checks++;
    if (n_vref_writes != 1 || vref_nack || i2c_rx[0] != 8'h58 || i2c_rx[2] != cfg_vref_code) begin
      failures++; $display("Vref write: %0d writes, nack %0d, bytes %h %h %h", n_vref_writes, vref_nack, i2c_rx[0], i2c_rx[1], i2c_rx[2]);
    end
    checks++; if (n_monitor == 0)      begin failures++; $display("no monitor scan"); end
    checks++; if (n_localise == 0)     begin failures++; $display("no localisation"); end
    checks++; if (n_track_frames == 0) begin failures++; $display("no tracking frame"); end
    checks++; if (n_refocus == 0)      begin failures++; $display("no refocus"); end
    checks++; if (n_event_end == 0)    begin failures++; $display("no event end"); end
    checks++; if (n_aer_pos == 0)      begin failures++; $display("no positive spike"); end
    checks++; if (n_aer_neg == 0)      begin failures++; $display("no negative spike"); end
    checks++; if (n_aer_stall == 0)    begin failures++; $display("no AER back-pressure"); end
    checks++; if (n_windows == 0)      begin failures++; $display("no classification"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
