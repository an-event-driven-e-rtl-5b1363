// tb_row_reg_driver: loads random and corner-case row words through the
// driver into a model of a serial-in, latched-output register and checks
// the latched word, that the outputs do not change until the latch pulse,
// and the load time of (2*NROWS+1)*HALF + 1 cycles.
module tb_row_reg_driver;
  localparam int unsigned HALF = 2;
  logic clk = 0, rst_n = 0;
  logic load = 0;
  logic [15:0] word = '0;
  logic busy, done, ser, srclk, rclk;
  int checks = 0, failures = 0;

  row_reg_driver #(.NROWS(16), .HALF(HALF)) dut (.*);

  always #5 clk = ~clk;

  // external register model
  logic [15:0] sh = '0, outq = '0;
  always @(posedge srclk) sh <= {sh[14:0], ser};
  always @(posedge rclk)  outq <= sh;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_load(logic [15:0] w);
    int cyc;
    logic [15:0] prev_q;
    prev_q = outq;
    @(negedge clk);
    word = w; load = 1;
    @(negedge clk);
    load = 0; word = '0;
    cyc = 1;
    while (!done) begin
      checks++;
      if (outq !== prev_q && !rclk) begin
        failures++; $display("outputs changed prev_q latch");
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (outq !== w) begin failures++; $display("word %h latched %h", w, outq); end
    checks++;
    if (cyc != (2*16+1)*HALF + 1) begin failures++; $display("load took %0d cycles", cyc); end
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_load(16'hFFFF);
    do_load(16'h0001);
    do_load(16'h8000);
    do_load(16'h00FF);
    for (int i = 0; i < 20; i++) do_load(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
