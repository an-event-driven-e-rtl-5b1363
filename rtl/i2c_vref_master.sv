// i2c_vref_master: writes the setting of the adjustable reference-voltage
// generator over I2C (IIC).
//
// The column amplifiers and the ADC share a reference voltage Vref, made by
// a low-noise reference followed by an adjustable divider that the FPGA
// sets over I2C. This module performs the one transaction that needs: a
// three-byte write
//   START, {DEV_ADDR, W=0}, ACK, CMD, ACK, value, ACK, STOP
// The device address, the command byte and the use of a single write are
// this design's assumptions (the divider part is not named); only the I2C
// link from the FPGA to the reference generator follows the system
// description. The acknowledge bits are sampled and any missing one sets
// `nack` for that transaction; the write is not retried.
//
// Bus: open-drain. `scl_oe`/`sda_oe` high pull the line low, low releases it
// (the external pull-up makes it high); `sda_i` is the SDA line level. The
// master does not support clock stretching or multi-master arbitration.
//
// Timing: every bit is four phases of Q = CLK_HZ / (4*I2C_HZ) cycles
// (SCL low with data set up, rising edge, SCL high with ACK sampled, SCL
// low), so SCL runs at I2C_HZ (100 kHz by default). START and STOP take four
// phases each; a write takes (4 + 27*4 + 4) * Q cycles from `start` to
// `done` (1 + 1 cycles of handshake).
//
// Interface: pulse `start` with `value` while `busy` is low. `done` pulses at
// the end with `nack` valid until the next start.
module i2c_vref_master #(
  parameter int unsigned CLK_HZ   = 50_000_000,
  parameter int unsigned I2C_HZ   = 100_000,
  parameter logic [6:0]  DEV_ADDR = 7'h2C,
  parameter logic [7:0]  CMD      = 8'h00
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] value,
  output logic       busy,
  output logic       done,
  output logic       nack,
  output logic       scl_oe,
  output logic       sda_oe,
  input  logic       sda_i
);

  localparam int unsigned Q  = CLK_HZ / (4 * I2C_HZ);
  localparam int unsigned QW = $clog2(Q + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BITS, S_STOP} state_t;

  state_t        state;
  logic [QW-1:0] qcnt;
  logic [1:0]    phase;
  logic [23:0]   shreg;      // bytes still to send, MSB first
  logic [3:0]    bitn;       // 0..7 data bits, 8 = acknowledge
  logic [1:0]    byten;
  logic          phase_end;

  assign busy      = (state != S_IDLE);
  assign phase_end = (qcnt == QW'(Q - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      qcnt   <= '0;
      phase  <= '0;
      shreg  <= '0;
      bitn   <= '0;
      byten  <= '0;
      done   <= 1'b0;
      nack   <= 1'b0;
      scl_oe <= 1'b0;
      sda_oe <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) qcnt <= phase_end ? '0 : qcnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          scl_oe <= 1'b0;
          sda_oe <= 1'b0;
          if (start) begin
            shreg <= {DEV_ADDR, 1'b0, CMD, value};
            nack  <= 1'b0;
            qcnt  <= '0;
            phase <= '0;
            state <= S_START;
          end
        end
        // both lines high, then SDA falls while SCL is high, then SCL falls
        S_START: if (phase_end) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: sda_oe <= 1'b1;
            2'd1: ;
            2'd2: scl_oe <= 1'b1;
            2'd3: begin
              bitn  <= '0;
              byten <= '0;
              state <= S_BITS;
            end
          endcase
        end
        S_BITS: if (phase_end) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: begin                     // SCL low: put the bit on SDA
              scl_oe <= 1'b1;
              sda_oe <= (bitn == 4'd8) ? 1'b0 : !shreg[23];
            end
            2'd1: scl_oe <= 1'b0;           // SCL rises
            2'd2: if (bitn == 4'd8 && sda_i) nack <= 1'b1;
            2'd3: begin                     // SCL falls
              scl_oe <= 1'b1;
              if (bitn == 4'd8) begin
                bitn <= '0;
                if (byten == 2'd2) state <= S_STOP;
                byten <= byten + 1'b1;
              end else begin
                shreg <= {shreg[22:0], 1'b0};
                bitn  <= bitn + 1'b1;
              end
            end
          endcase
        end
        // SDA low, SCL rises, then SDA rises while SCL is high
        S_STOP: if (phase_end) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: sda_oe <= 1'b1;
            2'd1: scl_oe <= 1'b0;
            2'd2: sda_oe <= 1'b0;
            2'd3: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
