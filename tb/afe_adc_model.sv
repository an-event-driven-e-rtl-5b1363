// afe_adc_model: behavioural model, for testbenches only, of everything
// between the FPGA pins and the taxels: the row register, the row switches,
// the 16x16 piezoresistive crossbar, the column amplifiers and the 16-channel
// 8-bit SPI ADC.
//
// Sensor and amplifier: with a set of rows selected, a column amplifier sees
// the selected taxels of its column in parallel, so its output grows with
// the sum of their conductances. The model turns this into an ADC code equal
// to the sum of the `press` values (0..255 per taxel) of the selected rows in
// that column, saturated at 255.
//
// Row register: serial in on the rising edge of `srclk` (MSB first), copied
// to the row outputs on the rising edge of `rclk`; bit r = 1 selects row r.
//
// ADC: manual-channel mode. The word shifted in during a frame selects the
// channel (bits 10..7, when bit 11 is set); that channel is sampled when the
// next frame starts and returned in the frame after that as
// {channel, code, 4'b0}. MISO holds its first bit when CS_n falls and moves
// on each falling SCLK edge; MOSI is taken on each rising edge.
module afe_adc_model (
  input  logic            cs_n,
  input  logic            sclk,
  input  logic            mosi,
  output logic            miso,
  input  logic            ser,
  input  logic            srclk,
  input  logic            rclk,
  input  logic [255:0][7:0] press,   // press[y*16+x]
  output logic [15:0]     row_en,
  output int              frames
);

  logic [15:0] shreg = '0;
  logic [15:0] din   = '0;
  logic [15:0] dout  = '0;
  logic [3:0]  sel_ch = '0;
  logic [3:0]  conv_ch = '0;
  logic [7:0]  conv_code = '0;

  initial begin
    row_en = '0;
    frames = 0;
    miso   = 1'b0;
  end

  always @(posedge srclk) shreg <= {shreg[14:0], ser};
  always @(posedge rclk)  row_en <= shreg;

  function automatic logic [7:0] column_code(logic [3:0] c);
    int s;
    s = 0;
    for (int r = 0; r < 16; r++)
      if (row_en[r]) s += int'(press[r*16 + int'(c)]);
    return (s > 255) ? 8'd255 : 8'(s);
  endfunction

  always @(negedge cs_n) begin
    frames++;
    dout      = {conv_ch, conv_code, 4'b0};
    conv_ch   = sel_ch;
    conv_code = column_code(sel_ch);
    miso      = dout[15];
  end

  always @(posedge sclk) if (!cs_n) din = {din[14:0], mosi};

  always @(negedge sclk) if (!cs_n) begin
    dout = {dout[14:0], 1'b0};
    miso = dout[15];
  end

  always @(posedge cs_n) if (din[15:12] == 4'b0001 && din[11]) sel_ch = din[10:7];

endmodule
