// tb_i2c_vref_master: runs reference-setting writes through the I2C master
// into a bus model with a pull-up on each line and a slave that
// acknowledges its own address only. Checks, for random values:
//  - one START and one STOP per write, with SDA changing only while SCL is
//    low everywhere else on the bus
//  - the three bytes received: {address, W}, command, value
//  - 27 SCL pulses, each high for 2*Q cycles, plus the rise of the STOP,
//    and the write time of (4 + 27*4 + 4)*Q + 1 cycles from start to done
//  - `nack` clear when the slave answers, set when the address is wrong
//    (the slave then ignores the write)
module tb_i2c_vref_master;
  localparam int CLK_HZ = 4_000_000;
  localparam int I2C_HZ = 100_000;
  localparam int Q      = CLK_HZ / (4 * I2C_HZ);
  localparam logic [6:0] ADDR = 7'h2C;
  localparam logic [7:0] CMD  = 8'h00;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, nack;
  logic [7:0] value = '0;
  logic scl_oe, sda_oe;
  logic slv_sda_oe = 0;
  logic scl, sda;
  int checks = 0, failures = 0;

  // open-drain bus with pull-ups
  assign scl = !scl_oe;
  assign sda = !(sda_oe || slv_sda_oe);

  i2c_vref_master #(.CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .DEV_ADDR(ADDR), .CMD(CMD)) dut (
    .clk, .rst_n, .start, .value, .busy, .done, .nack, .scl_oe, .sda_oe, .sda_i(sda));

  always #10 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- slave model and bus monitor (sampled on the system clock) ----------
  logic [6:0] slv_addr = ADDR;     // the address this slave answers to
  logic scl_q = 1, sda_q = 1;
  int n_start = 0, n_stop = 0, n_pulses = 0, bad_high = 0;
  int bitcnt = 0, bytecnt = 0, high_len = 0;
  logic [7:0] sh = '0;
  logic [7:0] rx [3];
  logic selected = 0;
  always @(posedge clk) if (rst_n) begin
    if (scl) high_len++;
    // START / STOP: SDA edge while SCL stays high
    if (scl && scl_q && sda_q && !sda) begin n_start++; bitcnt = -1; bytecnt = 0; selected = 0; end
    else if (scl && scl_q && !sda_q && sda) n_stop++;
    // rising SCL: take a bit
    if (scl && !scl_q) begin
      n_pulses++;
      high_len = 1;
      if (bitcnt < 8) sh = {sh[6:0], sda};
    end
    // falling SCL: end of a bit
    if (!scl && scl_q) begin
      if (bitcnt >= 0 && high_len != 2 * Q) bad_high++;
      if (bitcnt < 0) bitcnt = 0;          // SCL falling after START
      else if (bitcnt == 7) begin
        if (bytecnt < 3) rx[bytecnt] = sh;
        if (bytecnt == 0) selected = (sh[7:1] == slv_addr) && !sh[0];
        slv_sda_oe <= selected;            // acknowledge
        bitcnt = 8;
      end else if (bitcnt == 8) begin
        slv_sda_oe <= 1'b0;
        bitcnt = 0;
        bytecnt++;
      end else bitcnt++;
    end
    scl_q <= scl;
    sda_q <= sda;
  end

  task automatic write(logic [7:0] v, logic expect_ack);
    int t;
    n_start = 0; n_stop = 0; n_pulses = 0; bad_high = 0;
    rx[0] = '0; rx[1] = '0; rx[2] = '0;
    @(negedge clk); start = 1; value = v;
    @(negedge clk); start = 0; value = $urandom;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    checks++;
    if (t != (4 + 27*4 + 4) * Q + 1) begin failures++; $display("write took %0d cycles", t); end
    repeat (3 * Q) @(negedge clk);
    checks++;
    if (n_start != 1 || n_stop != 1) begin failures++; $display("%0d starts, %0d stops", n_start, n_stop); end
    checks++;
    if (n_pulses != 28 || bad_high != 0) begin failures++; $display("%0d SCL pulses, %0d wrong high times", n_pulses, bad_high); end
    checks++;
    if (rx[0] != {ADDR, 1'b0} || rx[1] != CMD || rx[2] != v) begin
      failures++; $display("received %h %h %h for value %h", rx[0], rx[1], rx[2], v);
    end
    checks++;
    if (nack != !expect_ack) begin failures++; $display("nack %0d, expected %0d", nack, !expect_ack); end
    checks++;
    if (busy || !scl || !sda) begin failures++; $display("bus not released"); end
  endtask

  // SDA may change while SCL is high only at START or STOP
  int edges_high = 0;
  always @(posedge clk) if (rst_n && scl && scl_q && sda != sda_q) edges_high++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (!scl || !sda || busy) begin failures++; $display("bus not idle after reset"); end
    write(8'h00, 1);
    write(8'hFF, 1);
    for (int i = 0; i < 20; i++) write(8'($urandom), 1);
    slv_addr = ADDR ^ 7'h01;       // nobody answers
    write(8'h5A, 0);
    slv_addr = ADDR;
    write(8'hA5, 1);
    checks++;
    if (edges_high != 2 * 24) begin failures++; $display("%0d SDA edges while SCL high, expected %0d", edges_high, 2 * 24); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
