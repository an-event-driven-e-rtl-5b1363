// tb_scan_controller: closes the loop scan controller -> row register
// driver -> SPI ADC master -> behavioural crossbar/ADC model and checks the
// scan strategy:
//  - with no touch, a monitor scan of 16 conversions on every 6th tick only
//  - a single pressed taxel at (x, y) is localised exactly, with x+1 column
//    conversions plus 4 binary-search conversions
//  - each tracking frame delivers the 3x3 window (clipped at the edges),
//    each sample equal to that taxel's pressure, and then one frame_done
//  - the hotspot moves to the strongest taxel of the window (refocus)
//  - a release ends the event and returns to monitoring
//  - a tick during a scan is counted as an overrun
//  - a touch at every one of the 256 positions: 3200 localisation
//    conversions in total, 12.5 on average
module tb_scan_controller;
  import eskin_pkg::*;
  localparam int TICK = 8000;

  logic clk = 0, rst_n = 0, tick = 0;
  adc_code_t thr_event = 8'd30;
  logic rows_load, rows_done, rows_busy, adc_req, adc_valid, adc_busy, addr_err;
  logic [15:0] rows_word;
  logic [3:0] adc_ch, ch_out;
  adc_code_t adc_code;
  logic smp_valid, frame_done, tracking, event_start, event_end;
  logic [3:0] smp_x, smp_y, hot_x, hot_y;
  adc_code_t smp_val;
  logic [7:0] loc_scans;
  logic [15:0] overruns;
  logic ser, srclk, rclk, cs_n, sclk, mosi, miso;
  logic [255:0][7:0] press = '0;
  logic [15:0] row_en;
  int frames;
  int checks = 0, failures = 0;

  scan_controller #(.MON_DIV(6), .SETTLE(16)) dut (.*);
  row_reg_driver #(.NROWS(16), .HALF(2)) u_rows (.clk, .rst_n, .load(rows_load), .word(rows_word),
    .busy(rows_busy), .done(rows_done), .ser, .srclk, .rclk);
  adc_spi_master u_adc (.clk, .rst_n, .req(adc_req), .ch(adc_ch), .range_sel(1'b0), .busy(adc_busy),
    .valid(adc_valid), .code(adc_code), .ch_out, .addr_err, .cs_n, .sclk, .mosi, .miso);
  afe_adc_model u_afe (.cs_n, .sclk, .mosi, .miso, .ser, .srclk, .rclk, .press, .row_en, .frames);

  always #10 clk = ~clk;

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-frame bookkeeping
  int n_req = 0, n_smp = 0, n_start = 0, n_end = 0;
  int smp_bad = 0;
  logic [255:0] seen;
  always @(posedge clk) if (rst_n) begin
    if (adc_req) n_req++;
    if (event_start) n_start++;
    if (event_end) n_end++;
    if (smp_valid) begin
      n_smp++;
      seen[{smp_y, smp_x}] = 1'b1;
      if (smp_val != press[{smp_y, smp_x}]) smp_bad++;
    end
  end

  // one frame: tick, wait for frame_done; returns conversions used
  task automatic frame(output int reqs, output int smps);
    n_req = 0; n_smp = 0; smp_bad = 0; seen = '0;
    @(negedge clk); tick = 1;
    @(negedge clk); tick = 0;
    while (!frame_done) @(negedge clk);
    reqs = n_req; smps = n_smp;
    repeat (TICK) @(negedge clk);
  endtask

  function automatic int win_count(int x, int y);
    int n = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (x+dx >= 0 && x+dx < 16 && y+dy >= 0 && y+dy < 16) n++;
    return n;
  endfunction

  // wait for monitor frames until the event starts; check localisation
  task automatic localise(int x, int y);
    int r, s, k;
    k = 0;
    n_start = 0;
    while (n_start == 0 && k < 8) begin frame(r, s); k++; end
    checks++;
    if (n_start != 1 || !tracking) begin failures++; $display("touch at %0d,%0d not detected", x, y); end
    checks++;
    if (hot_x != x || hot_y != y) begin failures++; $display("hotspot %0d,%0d expected %0d,%0d", hot_x, hot_y, x, y); end
    checks++;
    if (loc_scans != 8'(x + 1 + 4)) begin failures++; $display("localisation used %0d conversions", loc_scans); end
    // the detecting frame already sampled the window
    checks++;
    if (s != win_count(x, y) || smp_bad != 0) begin failures++; $display("window %0d samples, %0d bad", s, smp_bad); end
  endtask

  task automatic release_all();
    int r, s;
    press = '0;
    n_end = 0;
    frame(r, s);
    checks++;
    if (n_end != 1 || tracking) begin failures++; $display("release not detected"); end
  endtask

  initial begin
    int r, s, sum_scans, nloc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);

    // idle: monitor scan only on every 6th tick
    for (int t = 0; t < 12; t++) begin
      frame(r, s);
      checks++;
      if (r != ((t % 6 == 0) ? 16 : 0) || s != 0) begin
        failures++; $display("idle tick %0d: %0d conversions, %0d samples", t, r, s);
      end
    end

    // single touches, including corners
    sum_scans = 0; nloc = 0;
    for (int i = 0; i < 10; i++) begin
      int x, y;
      case (i)
        0: begin x = 0;  y = 0;  end
        1: begin x = 15; y = 15; end
        2: begin x = 15; y = 0;  end
        default: begin x = $urandom_range(0, 15); y = $urandom_range(0, 15); end
      endcase
      press[y*16+x] = 8'd100;
      localise(x, y);
      sum_scans += loc_scans; nloc++;
      // tracking frames: 9 samples (clipped), values right
      for (int f = 0; f < 3; f++) begin
        frame(r, s);
        checks++;
        if (s != win_count(x, y) || r != win_count(x, y) || smp_bad != 0) begin
          failures++; $display("track frame: %0d samples %0d conversions %0d bad", s, r, smp_bad);
        end
      end
      release_all();
    end
    $display("average localisation conversions over %0d touches: %0d/%0d", nloc, sum_scans, nloc);

    // scan-count workload: a touch at each of the 256 positions in turn.
    // Column x costs x+1+4 conversions, so the total is
    // 16 * sum(x+5, x=0..15) = 3200, an average of 12.5 at N = 256.
    sum_scans = 0;
    for (int p = 0; p < 256; p++) begin
      press = '0;
      press[p] = 8'd100;
      localise(p % 16, p / 16);
      sum_scans += loc_scans;
      release_all();
    end
    checks++;
    if (sum_scans != 3200) begin failures++; $display("256-position scan total %0d, expected 3200", sum_scans); end
    $display("scan count over all 256 positions: %0d conversions, average %0d.%0d",
             sum_scans, sum_scans / 256, (sum_scans % 256) * 10 / 256);

    // refocus: the touch slides right and down, one taxel per frame
    press = '0;
    press[5*16+5] = 8'd80;
    localise(5, 5);
    for (int k = 1; k <= 4; k++) begin
      press = '0;
      press[(5+k-1)*16 + (5+k-1)] = 8'd60;
      press[(5+k)*16 + (5+k)] = 8'd120;
      frame(r, s);
      checks++;
      if (hot_x != 4'(5+k) || hot_y != 4'(5+k)) begin
        failures++; $display("refocus to %0d,%0d got %0d,%0d", 5+k, 5+k, hot_x, hot_y);
      end
    end

    // overrun: a tick while the frame is being scanned
    begin
      int o0;
      o0 = int'(overruns);
      @(negedge clk); tick = 1;
      @(negedge clk); tick = 0;
      repeat (100) @(negedge clk);
      @(negedge clk); tick = 1;
      @(negedge clk); tick = 0;
      while (!frame_done) @(negedge clk);
      checks++;
      if (int'(overruns) != o0 + 1) begin failures++; $display("overrun not counted"); end
    end
    release_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
