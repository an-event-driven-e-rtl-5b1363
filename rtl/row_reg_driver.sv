// row_reg_driver: loads the row-select word into the external row register
// that controls the row switches of the sensor crossbar.
//
// Each bit of the word drives one row switch: 1 connects the row to GND,
// which selects it (its taxels then conduct into the column amplifiers), and
// 0 leaves it at Vref. The system puts an external register between the FPGA
// and the switch ICs; this design drives it as a serial-in, parallel-out
// shift register with a separate output latch (data, shift clock, latch
// clock), which is the usual part for this job but not a detail the system
// description gives.
//
// Interface: pulse `load` with `word` (held only in that cycle). The word is
// shifted out MSB first; `ser` is set up while `srclk` is low and the
// register samples it on the rising edge. After the last bit `rclk` pulses
// high for HALF cycles to move the word to the outputs, `done` pulses for one
// cycle and `busy` drops. `done` is high (2*NROWS+1)*HALF + 1 cycles after
// the cycle in which `load` is given.
module row_reg_driver #(
  parameter int unsigned NROWS = 16,
  parameter int unsigned HALF  = 2     // clk cycles per half shift-clock period
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [NROWS-1:0] word,
  output logic             busy,
  output logic             done,
  output logic             ser,
  output logic             srclk,
  output logic             rclk
);

  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH, S_LATCH} state_t;

  state_t                     state;
  logic [NROWS-1:0]           shreg;
  logic [$clog2(NROWS+1)-1:0] bits_left;
  logic [$clog2(HALF+1)-1:0]  tmr;

  assign busy = (state != S_IDLE);
  assign ser  = shreg[NROWS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      shreg     <= '0;
      bits_left <= '0;
      tmr       <= '0;
      srclk     <= 1'b0;
      rclk      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (load) begin
            shreg     <= word;
            bits_left <= ($clog2(NROWS+1))'(NROWS);
            tmr       <= '0;
            state     <= S_LOW;
          end
        end
        S_LOW: begin              // data set up, shift clock low
          if (tmr == ($clog2(HALF+1))'(HALF - 1)) begin
            tmr   <= '0;
            srclk <= 1'b1;
            state <= S_HIGH;
          end else tmr <= tmr + 1'b1;
        end
        S_HIGH: begin             // shift clock high, register samples ser
          if (tmr == ($clog2(HALF+1))'(HALF - 1)) begin
            tmr       <= '0;
            srclk     <= 1'b0;
            shreg     <= {shreg[NROWS-2:0], 1'b0};
            bits_left <= bits_left - 1'b1;
            if (bits_left == 1) begin
              rclk  <= 1'b1;
              state <= S_LATCH;
            end else state <= S_LOW;
          end else tmr <= tmr + 1'b1;
        end
        S_LATCH: begin
          if (tmr == ($clog2(HALF+1))'(HALF - 1)) begin
            tmr   <= '0;
            rclk  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else tmr <= tmr + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new load must wait for the previous one to finish
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);

endmodule
