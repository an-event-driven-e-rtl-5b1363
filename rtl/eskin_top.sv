// eskin_top: FPGA design of the event-driven tactile e-skin: scanning of
// the 16x16 resistive crossbar, spike encoding, address-event output and
// on-line digit classification with a convolutional spiking network.
//
// Data path, one frame every 1/FRAME_HZ s (120 Hz):
//   frame tick -> scan_controller -> row_reg_driver (row switches)
//                                 -> adc_spi_master (column ADC channels)
//              -> samples -> delta_modulator -> spike frame -> snn_core
//                                            -> address events -> aer_encoder
// The scan controller watches the whole array at 20 Hz with all rows on,
// localises a touch by a column search and a binary search over the rows,
// then samples only the 3x3 window around it at 120 Hz until the touch
// goes away. The delta modulator turns the samples into ternary spikes. A
// detected touch (`event_start`) opens a 240-frame classification window in
// the spiking network, whose result comes out on `result_*`.
//
// External parts reached through ports: the row register and switches
// (`row_*`), the SPI ADC (`adc_*`), the I2C-adjustable reference
// generator (`i2c_*`, written by `cfg_vref_write`; a write requested while
// one is in progress is ignored), the host link (AER words on a valid/ready
// port and the result) and a weight-load port for the network.
//
// Bits [15:9] of `aer_word` are always zero (reserved in the event word).
// The sub-modules carry assertions whose `disable iff (!rst_n)` makes lint
// see rst_n used both as asynchronous reset and as a synchronous signal;
// the assertions are not part of the circuit.
//
// The frame tick is derived from the clock: one tick every CLK_HZ/FRAME_HZ
// cycles. The clock rate is this design's choice (50 MHz); the frame rates,
// array size, Delta = 6 and the network follow the system description.
module eskin_top
  import eskin_pkg::*;
#(
  parameter int unsigned CLK_HZ    = 50_000_000,
  parameter int unsigned FRAME_HZ  = 120,
  parameter int unsigned MON_DIV   = 6,
  parameter int unsigned T_STEPS   = 240,
  parameter int unsigned SCLK_HALF = 2,
  parameter int unsigned SETTLE    = 16,
  parameter int unsigned AER_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  adc_code_t   cfg_thr_event,   // activity threshold on ADC codes
  input  adc_code_t   cfg_delta,       // delta-modulation threshold
  input  logic        cfg_range,       // ADC input range select
  input  logic        cfg_ref_clear,   // zero all delta references
  input  logic [7:0]  cfg_vref_code,   // setting of the adjustable Vref divider
  input  logic        cfg_vref_write,  // pulse: send cfg_vref_code over I2C
  // row register (serial in, latched outputs)
  output logic        row_ser,
  output logic        row_srclk,
  output logic        row_rclk,
  // I2C to the reference generator (open drain: 1 pulls the line low)
  output logic        i2c_scl_oe,
  output logic        i2c_sda_oe,
  input  logic        i2c_sda_i,
  // SPI ADC
  output logic        adc_cs_n,
  output logic        adc_sclk,
  output logic        adc_mosi,
  input  logic        adc_miso,
  // network weights
  input  logic        w_we,
  input  layer_sel_t  w_layer,
  input  logic [8:0]  w_row,
  input  logic [6:0]  w_col,
  input  weight_t     w_data,
  // host link: address events
  output logic        aer_valid,
  input  logic        aer_ready,
  output logic [31:0] aer_word,
  // host link: classification
  output logic        result_valid,
  output logic [3:0]  result_class,
  output logic [NCLASS-1:0][7:0] result_counts,
  // status
  output logic        tracking,
  output logic        touch_start,     // pulse: touch localised, window opens
  output logic        touch_end,       // pulse: touch gone, back to monitoring
  output logic [TSBITS-1:0] frame_count,  // frames encoded (AER timestamp)
  output logic [3:0]  hot_x,
  output logic [3:0]  hot_y,
  output logic [7:0]  loc_scans,
  output logic        win_open,
  output logic [8:0]  win_step,        // time steps done in the open window
  output logic [15:0] tick_overruns,
  output logic [15:0] frames_dropped,
  output logic [31:0] spikes_pos,
  output logic [31:0] spikes_neg,
  output logic [31:0] aer_stall_cycles,
  output logic [$clog2(AER_DEPTH+1)-1:0] aer_fifo_level,
  output logic [31:0] aer_full_cycles,
  output logic [31:0] syn_ops,
  output logic        adc_addr_err,
  output logic [3:0]  adc_last_ch,     // channel named in the last ADC reply
  output logic        vref_done,       // pulse: Vref write finished
  output logic        vref_nack,       // last Vref write was not acknowledged
  output logic [3:0]  engine_busy      // {I2C, network, ADC, row register} busy
);

  localparam int unsigned TICK_DIV = CLK_HZ / FRAME_HZ;

  // ---- frame tick ----------------------------------------------------------
  logic [$clog2(TICK_DIV)-1:0] tick_cnt;
  logic tick;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_cnt <= '0;
      tick     <= 1'b0;
    end else begin
      tick <= (tick_cnt == ($clog2(TICK_DIV))'(TICK_DIV - 1));
      tick_cnt <= (tick_cnt == ($clog2(TICK_DIV))'(TICK_DIV - 1)) ? '0 : tick_cnt + 1'b1;
    end
  end

  // ---- scanning ------------------------------------------------------------
  logic        rows_load, rows_done;
  logic [15:0] rows_word;
  logic        adc_req, adc_valid;
  logic [3:0]  adc_ch;
  adc_code_t   adc_code;
  logic        smp_valid, frame_done;
  logic [3:0]  smp_x, smp_y;
  adc_code_t   smp_val;

  scan_controller #(.MON_DIV(MON_DIV), .SETTLE(SETTLE)) u_scan (
    .clk, .rst_n, .tick, .thr_event(cfg_thr_event),
    .rows_load, .rows_word, .rows_done,
    .adc_req, .adc_ch, .adc_valid, .adc_code,
    .smp_valid, .smp_x, .smp_y, .smp_val, .frame_done,
    .tracking, .event_start(touch_start), .event_end(touch_end), .hot_x, .hot_y, .loc_scans,
    .overruns(tick_overruns));

  row_reg_driver #(.NROWS(16)) u_rows (
    .clk, .rst_n, .load(rows_load), .word(rows_word), .busy(engine_busy[0]), .done(rows_done),
    .ser(row_ser), .srclk(row_srclk), .rclk(row_rclk));

  adc_spi_master #(.SCLK_HALF(SCLK_HALF)) u_adc (
    .clk, .rst_n, .req(adc_req), .ch(adc_ch), .range_sel(cfg_range),
    .busy(engine_busy[1]), .valid(adc_valid), .code(adc_code), .ch_out(adc_last_ch),
    .addr_err(adc_addr_err),
    .cs_n(adc_cs_n), .sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso));

  // ---- reference voltage setting ------------------------------------------
  i2c_vref_master #(.CLK_HZ(CLK_HZ)) u_vref (
    .clk, .rst_n, .start(cfg_vref_write && !engine_busy[3]), .value(cfg_vref_code),
    .busy(engine_busy[3]), .done(vref_done), .nack(vref_nack),
    .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe), .sda_i(i2c_sda_i));

  // ---- encoding ------------------------------------------------------------
  logic         ev_valid, ev_ready, spk_frame_valid;
  aer_event_t   ev;
  logic [255:0] spk_pos, spk_neg;

  delta_modulator u_dm (
    .clk, .rst_n, .delta(cfg_delta), .clear(cfg_ref_clear),
    .smp_valid, .smp_x, .smp_y, .smp_val, .frame_done,
    .ev_valid, .ev_ready, .ev,
    .frame_valid(spk_frame_valid), .spk_pos, .spk_neg, .t_now(frame_count),
    .n_pos(spikes_pos), .n_neg(spikes_neg), .stall_cycles(aer_stall_cycles));


  aer_encoder #(.DEPTH(AER_DEPTH)) u_aer (
    .clk, .rst_n, .in_valid(ev_valid), .in_ready(ev_ready), .in_ev(ev),
    .out_valid(aer_valid), .out_ready(aer_ready), .out_word(aer_word),
    .level(aer_fifo_level), .full_cycles(aer_full_cycles));

  // ---- classification ------------------------------------------------------

  snn_core #(.T_STEPS(T_STEPS)) u_snn (
    .clk, .rst_n,
    .w_we, .w_layer, .w_row, .w_col, .w_data,
    .win_start(touch_start), .frame_valid(spk_frame_valid),
    .frame_pos(spk_pos), .frame_neg(spk_neg),
    .win_open, .busy(engine_busy[2]), .step(win_step), .dropped(frames_dropped),
    .result_valid, .result_class, .counts(result_counts), .syn_ops);

endmodule
