// delta_modulator: turns the sampled taxel values of each frame into ternary
// spikes by delta modulation, and emits them both as a 16x16 spike frame
// (for the classifier) and as address events (timestamp, x, y, polarity).
//
// Each taxel p keeps a reference level ref[p]. At the end of a frame every
// taxel is visited once, in order p = y*16 + x, with input level
//   v = value sampled for p in this frame, or 0 if p was not sampled.
//   v - ref >= DELTA : spike +1, ref <- ref + DELTA
//   ref - v >= DELTA : spike -1, ref <- ref - DELTA
//   otherwise        : no spike
// So a taxel fires at most one spike per frame and its reference walks
// towards the input by DELTA per frame; a rising press gives a run of
// positive spikes and a release a run of negative ones. Treating unsampled
// taxels as 0 is this design's reading of the sample-reallocation scheme:
// the scanner samples only the 3x3 window around the touch, and taxels
// outside it are taken as released, so their references decay through
// negative spikes. The threshold rule and DELTA = 6 follow the system
// description; the one-spike-per-frame limit and the reference update are
// choices of this design.
//
// After reset, and whenever `clear` is high, all references are 0.
//
// Interface: `smp_*` writes the samples of the current frame (at most one
// per taxel per frame). `frame_done` starts the sweep, which takes 256
// cycles plus one cycle for every cycle `ev_ready` is low while an event is
// waiting. The frame's spikes are then presented on `spk_pos`/`spk_neg`
// with a one-cycle `frame_valid`; they stay there until the next sweep
// starts. The frame number `t_now` counts frame_done pulses and is the AER
// timestamp.
module delta_modulator
  import eskin_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  adc_code_t    delta,
  input  logic         clear,          // reset all references to 0
  // samples
  input  logic         smp_valid,
  input  logic [3:0]   smp_x,
  input  logic [3:0]   smp_y,
  input  adc_code_t    smp_val,
  input  logic         frame_done,
  // address events
  output logic         ev_valid,
  input  logic         ev_ready,
  output aer_event_t   ev,
  // spike frame
  output logic         frame_valid,
  output logic [255:0] spk_pos,
  output logic [255:0] spk_neg,
  output logic [TSBITS-1:0] t_now,
  output logic [31:0]  n_pos,
  output logic [31:0]  n_neg,
  output logic [31:0]  stall_cycles
);

  adc_code_t    cur  [NTAXEL];
  adc_code_t    refl [NTAXEL];
  logic [255:0] sampled;
  logic         sweeping;
  logic [7:0]   p;
  logic         out_busy;
  logic         init_done;    // references are cleared once after reset
  logic         clear_all;

  // Comparison of taxel p
  adc_code_t  v_in, r_in;
  logic [8:0] up_diff, dn_diff;
  logic       fire_pos, fire_neg;

  always_comb begin
    v_in     = sampled[p] ? cur[p] : '0;
    r_in     = refl[p];
    up_diff  = {1'b0, v_in} - {1'b0, r_in};
    dn_diff  = {1'b0, r_in} - {1'b0, v_in};
    fire_pos = (v_in > r_in) && (up_diff >= {1'b0, delta}) && (delta != 0);
    fire_neg = (r_in > v_in) && (dn_diff >= {1'b0, delta}) && (delta != 0);
  end

  assign out_busy  = ev_valid && !ev_ready;
  assign clear_all = clear || !init_done;

  always_ff @(posedge clk) begin
    if (smp_valid) cur[{smp_y, smp_x}] <= smp_val;
    if (clear_all) begin
      for (int i = 0; i < 256; i++) refl[i] <= '0;
    end else if (sweeping && !out_busy) begin
      if (fire_pos)      refl[p] <= r_in + delta;
      else if (fire_neg) refl[p] <= r_in - delta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done    <= 1'b0;
      sampled      <= '0;
      sweeping     <= 1'b0;
      p            <= '0;
      ev_valid     <= 1'b0;
      ev           <= '0;
      frame_valid  <= 1'b0;
      spk_pos      <= '0;
      spk_neg      <= '0;
      t_now        <= '0;
      n_pos        <= '0;
      n_neg        <= '0;
      stall_cycles <= '0;
    end else begin
      frame_valid <= 1'b0;
      init_done   <= 1'b1;
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (smp_valid) sampled[{smp_y, smp_x}] <= 1'b1;

      if (frame_done && !sweeping) begin
        sweeping <= 1'b1;
        p        <= '0;
        spk_pos  <= '0;
        spk_neg  <= '0;
      end else if (sweeping) begin
        if (out_busy) begin
          stall_cycles <= stall_cycles + 1'b1;
        end else begin
          if (fire_pos || fire_neg) begin
            ev_valid <= 1'b1;
            ev       <= '{t: t_now, x: p[3:0], y: p[7:4], pol: fire_pos};
          end
          if (fire_pos) begin
            spk_pos[p] <= 1'b1;
            n_pos      <= n_pos + 1'b1;
          end
          if (fire_neg) begin
            spk_neg[p] <= 1'b1;
            n_neg      <= n_neg + 1'b1;
          end
          if (p == 8'd255) begin
            sweeping    <= 1'b0;
            sampled     <= '0;
            frame_valid <= 1'b1;
            t_now       <= t_now + 1'b1;
          end
          p <= p + 1'b1;
        end
      end
    end
  end

  a_no_sample_in_sweep: assert property (@(posedge clk) disable iff (!rst_n) !(smp_valid && sweeping));
  a_no_frame_in_sweep:  assert property (@(posedge clk) disable iff (!rst_n) !(frame_done && sweeping));

endmodule
