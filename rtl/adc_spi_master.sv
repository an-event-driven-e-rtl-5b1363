// adc_spi_master: reads one channel of the 16-channel, 8-bit SAR ADC
// (ADS7961-class) over SPI.
//
// The front end has one amplifier per crossbar column, each on its own ADC
// channel, and the ADC talks to the FPGA over SPI. The frame format used
// here is the manual-channel mode of that ADC family (from its data sheet,
// not from the system description): each frame is 16 SCLK periods with
// CS_n low. The word sent on MOSI is
//   [15:12] 4'b0001  manual mode     [11]  1: program bits 10..0
//   [10:7]  channel                  [6]   input range select
//   [5:0]   0 (no power-down, no GPIO read)
// and the word returned on MISO is [15:12] channel, [11:4] 8-bit code,
// [3:0] zero. The ADC returns the conversion of a channel two frames after
// the frame that selected it, so a request runs NFRAMES (3) frames with the
// same command and takes the result from the last one; the channel field of
// that result must equal the request, otherwise `addr_err` is raised with
// the result. Running three frames also means the sample is taken a whole
// frame after the request, which lets the row switches settle.
//
// SPI timing: MOSI changes on the falling SCLK edge, MISO is sampled on the
// rising edge; SCLK idles low. SCLK period is 2*SCLK_HALF clk cycles and
// CS_n stays high CS_HIGH cycles between frames, so one frame occupies
// 32*SCLK_HALF + CS_HIGH cycles (68 at 50 MHz: 0.74 Msample/s, inside the
// ADC's 1 Msample/s).
//
// Interface: pulse `req` with `ch` and `range_sel` while `busy` is low;
// `valid` pulses with `code` and `ch_out` when the request is done.
module adc_spi_master
  import eskin_pkg::*;
#(
  parameter int unsigned SCLK_HALF = 2,
  parameter int unsigned CS_HIGH   = 4,
  parameter int unsigned NFRAMES   = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req,
  input  logic [3:0] ch,
  input  logic       range_sel,
  output logic       busy,
  output logic       valid,
  output adc_code_t  code,
  output logic [3:0] ch_out,
  output logic       addr_err,
  // SPI pins
  output logic       cs_n,
  output logic       sclk,
  output logic       mosi,
  input  logic       miso
);

  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_GAP} state_t;

  localparam int unsigned TW = $clog2(SCLK_HALF + CS_HIGH + 1);

  state_t                      state;
  logic [15:0]                 cmd;
  logic [15:0]                 txsh;
  logic [15:0]                 rxsh;
  logic [4:0]                  bitn;
  logic [TW-1:0]               tmr;
  logic [$clog2(NFRAMES+1)-1:0] frame;
  logic [3:0]                  req_ch;

  assign busy = (state != S_IDLE);
  assign mosi = txsh[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cmd      <= '0;
      txsh     <= '0;
      rxsh     <= '0;
      bitn     <= '0;
      tmr      <= '0;
      frame    <= '0;
      req_ch   <= '0;
      cs_n     <= 1'b1;
      sclk     <= 1'b0;
      valid    <= 1'b0;
      code     <= '0;
      ch_out   <= '0;
      addr_err <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (req) begin
            cmd    <= {4'b0001, 1'b1, ch, range_sel, 6'b0};
            txsh   <= {4'b0001, 1'b1, ch, range_sel, 6'b0};
            req_ch <= ch;
            frame  <= '0;
            bitn   <= '0;
            tmr    <= '0;
            cs_n   <= 1'b0;
            state  <= S_LOW;
          end
        end
        S_LOW: begin
          if (tmr == TW'(SCLK_HALF - 1)) begin
            tmr   <= '0;
            sclk  <= 1'b1;
            rxsh  <= {rxsh[14:0], miso};      // sample on rising edge
            state <= S_HIGH;
          end else tmr <= tmr + 1'b1;
        end
        S_HIGH: begin
          if (tmr == TW'(SCLK_HALF - 1)) begin
            tmr  <= '0;
            sclk <= 1'b0;
            txsh <= {txsh[14:0], 1'b0};       // next bit on falling edge
            if (bitn == 5'd15) begin
              cs_n  <= 1'b1;
              frame <= frame + 1'b1;
              state <= S_GAP;
            end else begin
              bitn  <= bitn + 1'b1;
              state <= S_LOW;
            end
          end else tmr <= tmr + 1'b1;
        end
        S_GAP: begin
          if (tmr == TW'(CS_HIGH - 1)) begin
            tmr <= '0;
            if (frame == ($clog2(NFRAMES+1))'(NFRAMES)) begin
              valid    <= 1'b1;
              ch_out   <= rxsh[15:12];
              code     <= rxsh[11:4];
              addr_err <= (rxsh[15:12] != req_ch);
              state    <= S_IDLE;
            end else begin
              txsh  <= cmd;
              bitn  <= '0;
              cs_n  <= 1'b0;
              state <= S_LOW;
            end
          end else tmr <= tmr + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_when_idle: assert property (@(posedge clk) disable iff (!rst_n) req |-> !busy);

endmodule
