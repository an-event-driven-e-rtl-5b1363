// scan_controller: event-based binary scan search over the 16x16 crossbar.
//
// The controller decides which rows are connected and which column channel
// is converted, so that ADC conversions go only where the skin is touched.
// It follows the flow of the system's scan strategy:
//
//  1. Monitor (20 Hz). All rows are selected, so each column amplifier sees
//     the whole column in parallel: an untouched column (GOhm taxels) reads
//     near zero, a column with a pressed taxel reads high. Columns are
//     converted in order 0..15 and the search stops at the first column whose
//     code reaches `thr_event`. No such column: the frame ends with no
//     samples.
//  2. Binary search. With that column fixed, the candidate rows lo..hi are
//     halved: rows lo..mid are selected and the column converted; a code at
//     or above the threshold keeps lo..mid, otherwise mid+1..hi is kept.
//     Four conversions localise one of 16 rows. A touch in column c is found
//     after c+1 + 4 conversions, on average sqrt(N)/2 + log2(N)/2 for a
//     uniformly placed touch.
//  3. Sample reallocation (120 Hz). Every frame, each row of the 3x3 window
//     around the hotspot is selected alone and the three columns of the
//     window are converted, giving 9 samples (fewer at the array edge),
//     which go out on the sample port. The hotspot then moves to the largest
//     of the 9 (refocus).
//  4. If none of the 9 reaches the threshold the event has disappeared and
//     the controller returns to monitoring.
//
// The choice of the first active column (rather than the strongest), the
// comparison with a single threshold, the settle delay after a row change
// and the order of conversions are this design's; the system description
// gives the flow, the two rates, the binary search and the 3x3 window.
//
// Timing: `tick` is the 120 Hz frame tick. In monitor mode only every
// MON_DIV-th tick scans (120/6 = 20 Hz). Each tick's work ends with a
// one-cycle `frame_done`; the samples of that frame precede it. A tick that
// arrives while the previous frame is still being scanned is dropped and
// counted in `overruns`. Row changes wait for the row register load plus
// SETTLE cycles before the next conversion.
module scan_controller
  import eskin_pkg::*;
#(
  parameter int unsigned MON_DIV = 6,      // 120 Hz / 20 Hz
  parameter int unsigned SETTLE  = 16      // cycles after a row change
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  adc_code_t   thr_event,
  // row register driver
  output logic        rows_load,
  output logic [15:0] rows_word,
  input  logic        rows_done,
  // ADC
  output logic        adc_req,
  output logic [3:0]  adc_ch,
  input  logic        adc_valid,
  input  adc_code_t   adc_code,
  // samples of the current frame
  output logic        smp_valid,
  output logic [3:0]  smp_x,
  output logic [3:0]  smp_y,
  output adc_code_t   smp_val,
  output logic        frame_done,
  // status
  output logic        tracking,
  output logic        event_start,
  output logic        event_end,
  output logic [3:0]  hot_x,
  output logic [3:0]  hot_y,
  output logic [7:0]  loc_scans,       // conversions used by the last localisation
  output logic [15:0] overruns
);

  typedef enum logic [3:0] {
    S_IDLE, S_M_ROWS, S_M_CONV, S_B_ROWS, S_B_CONV,
    S_T_ROWS, S_T_CONV, S_T_EVAL, S_WAIT_ROWS, S_SETTLE, S_WAIT_ADC, S_FRAME_END
  } state_t;

  state_t     state, ret_state;
  logic [$clog2(MON_DIV+1)-1:0] mon_cnt;
  logic [3:0] col;
  logic [3:0] lo, hi;
  logic [3:0] mid;
  logic [1:0] dy, dx;
  logic [7:0] scans;
  logic [$clog2(SETTLE+1)-1:0] settle_cnt;
  adc_code_t  best;
  logic [3:0] best_x, best_y;
  logic       best_any;
  // window coordinates of the current conversion (signed, may fall outside)
  logic signed [5:0] wy, wx;

  assign mid = 4'((5'(lo) + 5'(hi)) >> 1);
  assign wy  = 6'(signed'({2'b00, hot_y})) + 6'(signed'({4'b0, dy})) - 6'sd1;
  assign wx  = 6'(signed'({2'b00, hot_x})) + 6'(signed'({4'b0, dx})) - 6'sd1;

  function automatic logic [15:0] range_mask(logic [3:0] a, logic [3:0] b);
    logic [15:0] m;
    for (int i = 0; i < 16; i++) m[i] = (4'(i) >= a) && (4'(i) <= b);
    return m;
  endfunction

  function automatic logic in_array(logic signed [5:0] v);
    return (v >= 0) && (v <= 15);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      ret_state   <= S_IDLE;
      mon_cnt     <= '0;
      col         <= '0;
      lo          <= '0;
      hi          <= '0;
      dy          <= '0;
      dx          <= '0;
      scans       <= '0;
      settle_cnt  <= '0;
      best        <= '0;
      best_x      <= '0;
      best_y      <= '0;
      best_any    <= 1'b0;
      rows_load   <= 1'b0;
      rows_word   <= '0;
      adc_req     <= 1'b0;
      adc_ch      <= '0;
      smp_valid   <= 1'b0;
      smp_x       <= '0;
      smp_y       <= '0;
      smp_val     <= '0;
      frame_done  <= 1'b0;
      tracking    <= 1'b0;
      event_start <= 1'b0;
      event_end   <= 1'b0;
      hot_x       <= '0;
      hot_y       <= '0;
      loc_scans   <= '0;
      overruns    <= '0;
    end else begin
      rows_load   <= 1'b0;
      adc_req     <= 1'b0;
      smp_valid   <= 1'b0;
      frame_done  <= 1'b0;
      event_start <= 1'b0;
      event_end   <= 1'b0;
      if (tick && state != S_IDLE) overruns <= overruns + 1'b1;

      unique case (state)
        S_IDLE: if (tick) begin
          if (tracking) begin
            dy       <= '0;
            dx       <= '0;
            best     <= '0;
            best_any <= 1'b0;
            state    <= S_T_ROWS;
          end else if (mon_cnt == '0) begin
            mon_cnt <= ($clog2(MON_DIV+1))'(MON_DIV - 1);
            state   <= S_M_ROWS;
          end else begin
            mon_cnt <= mon_cnt - 1'b1;
            state   <= S_FRAME_END;
          end
        end

        // ---- monitor: all rows on, first active column --------------------
        S_M_ROWS: begin
          rows_word <= '1;
          rows_load <= 1'b1;
          col       <= '0;
          scans     <= '0;
          ret_state <= S_M_CONV;
          state     <= S_WAIT_ROWS;
        end
        S_M_CONV: begin
          // entered with the conversion of `col` done
          if (adc_code >= thr_event) begin
            lo    <= '0;
            hi    <= 4'd15;
            state <= S_B_ROWS;
          end else if (col == 4'd15) begin
            state <= S_FRAME_END;
          end else begin
            col       <= col + 1'b1;
            adc_ch    <= col + 1'b1;
            adc_req   <= 1'b1;
            scans     <= scans + 1'b1;
            ret_state <= S_M_CONV;
            state     <= S_WAIT_ADC;
          end
        end

        // ---- binary search over rows of column `col` ----------------------
        S_B_ROWS: begin
          if (lo == hi) begin
            hot_x       <= col;
            hot_y       <= lo;
            loc_scans   <= scans;
            tracking    <= 1'b1;
            event_start <= 1'b1;
            dy          <= '0;
            dx          <= '0;
            best        <= '0;
            best_any    <= 1'b0;
            state       <= S_T_ROWS;
          end else begin
            rows_word <= range_mask(lo, mid);
            rows_load <= 1'b1;
            ret_state <= S_B_CONV;
            state     <= S_WAIT_ROWS;
          end
        end
        S_B_CONV: begin
          if (adc_code >= thr_event) hi <= mid;
          else                       lo <= mid + 1'b1;
          state <= S_B_ROWS;
        end

        // ---- 3x3 window sampling around the hotspot -----------------------
        S_T_ROWS: begin
          if (dy == 2'd3) begin
            state <= S_T_EVAL;
          end else if (!in_array(wy)) begin
            dy <= dy + 1'b1;
          end else begin
            rows_word <= 16'(1) << wy[3:0];
            rows_load <= 1'b1;
            dx        <= '0;
            ret_state <= S_T_CONV;
            state     <= S_WAIT_ROWS;
          end
        end
        S_T_CONV: begin
          // entered after a row change or after the previous conversion
          if (dx == 2'd3) begin
            dy    <= dy + 1'b1;
            state <= S_T_ROWS;
          end else if (!in_array(wx)) begin
            dx <= dx + 1'b1;
          end else begin
            adc_ch    <= wx[3:0];
            adc_req   <= 1'b1;
            scans     <= scans + 1'b1;
            ret_state <= S_T_CONV;
            state     <= S_WAIT_ADC;
          end
        end
        S_T_EVAL: begin
          if (!best_any || best < thr_event) begin
            tracking  <= 1'b0;
            event_end <= 1'b1;
            mon_cnt   <= ($clog2(MON_DIV+1))'(MON_DIV - 1);
          end else begin
            hot_x <= best_x;
            hot_y <= best_y;
          end
          state <= S_FRAME_END;
        end

        // ---- shared waits ---------------------------------------------------
        S_WAIT_ROWS: if (rows_done) begin
          settle_cnt <= '0;
          state      <= S_SETTLE;
        end
        S_SETTLE: begin
          if (settle_cnt == ($clog2(SETTLE+1))'(SETTLE)) begin
            if (ret_state == S_M_CONV || ret_state == S_B_CONV) begin
              adc_ch  <= col;
              adc_req <= 1'b1;
              scans   <= scans + 1'b1;
              state   <= S_WAIT_ADC;
            end else begin
              state <= ret_state;
            end
          end else settle_cnt <= settle_cnt + 1'b1;
        end
        S_WAIT_ADC: if (adc_valid) begin
          if (ret_state == S_T_CONV) begin
            smp_valid <= 1'b1;
            smp_x     <= adc_ch;
            smp_y     <= wy[3:0];
            smp_val   <= adc_code;
            if (!best_any || adc_code > best) begin
              best     <= adc_code;
              best_x   <= adc_ch;
              best_y   <= wy[3:0];
              best_any <= 1'b1;
            end
            dx <= dx + 1'b1;
          end
          state <= ret_state;
        end

        S_FRAME_END: begin
          frame_done <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
