// tb_adc_spi_master: reads random channels of the behavioural ADC model
// under random taxel pressures and row selections, and checks the returned
// code against the column sum computed here, the channel tag, the number of
// SPI frames per request (3), the request latency and that one frame is
// no shorter than 1 us at 50 MHz (the ADC's 1 Msample/s limit).
module tb_adc_spi_master;
  import eskin_pkg::*;
  localparam int unsigned SCLK_HALF = 2, CS_HIGH = 4, NFRAMES = 3;
  localparam int unsigned FRAME_CYC = 32*SCLK_HALF + CS_HIGH;

  logic clk = 0, rst_n = 0;
  logic req = 0, range_sel = 0;
  logic [3:0] ch = '0;
  logic busy, valid, addr_err, cs_n, sclk, mosi, miso;
  adc_code_t code;
  logic [3:0] ch_out;
  int checks = 0, failures = 0;

  logic ser = 0, srclk = 0, rclk = 0;
  logic [255:0][7:0] press;
  logic [15:0] row_en;
  int frames;

  adc_spi_master #(.SCLK_HALF(SCLK_HALF), .CS_HIGH(CS_HIGH), .NFRAMES(NFRAMES)) dut (.*);
  afe_adc_model adc (.cs_n, .sclk, .mosi, .miso, .ser, .srclk, .rclk, .press, .row_en, .frames);

  always #10 clk = ~clk;   // 50 MHz

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_rows(logic [15:0] w);
    for (int i = 15; i >= 0; i--) begin
      ser = w[i]; #5 srclk = 1; #5 srclk = 0;
    end
    #5 rclk = 1; #5 rclk = 0;
  endtask

  function automatic int expect_code(logic [3:0] c, logic [15:0] rows);
    int s = 0;
    for (int r = 0; r < 16; r++) if (rows[r]) s += press[r*16 + c];
    return (s > 255) ? 255 : s;
  endfunction

  task automatic read(logic [3:0] c, logic [15:0] rows);
    int f0, cyc;
    f0 = frames;
    @(negedge clk); ch = c; range_sel = 1'($urandom); req = 1;
    @(negedge clk); req = 0; cyc = 1;
    while (!valid) begin @(negedge clk); cyc++; end
    checks++;
    if (int'(code) != expect_code(c, rows)) begin
      failures++; $display("ch %0d code %0d expected %0d", c, code, expect_code(c, rows));
    end
    checks++;
    if (ch_out != c || addr_err) begin failures++; $display("channel tag %0d for %0d", ch_out, c); end
    checks++;
    if (frames - f0 != NFRAMES) begin failures++; $display("%0d frames", frames - f0); end
    checks++;
    if (cyc != NFRAMES*FRAME_CYC + 1) begin failures++; $display("latency %0d", cyc); end
  endtask

  initial begin
    logic [15:0] rows;
    for (int i = 0; i < 256; i++) press[i] = 8'($urandom_range(0, 40));
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (FRAME_CYC * 20 < 1000) begin failures++; $display("frame shorter than 1 us"); end
    for (int n = 0; n < 60; n++) begin
      rows = (n % 4 == 0) ? 16'hFFFF : 16'($urandom);
      set_rows(rows);
      read(4'($urandom), rows);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
