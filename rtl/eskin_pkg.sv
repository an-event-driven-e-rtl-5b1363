// eskin_pkg: types and constants shared by the e-skin scan front end and the
// Conv-SNN classifier.
//
// The array is a 16x16 resistive crossbar read through 16 column channels of
// an 8-bit ADC. Taxel index p = y*16 + x, with x the column (ADC channel) and
// y the row. Spikes from the delta modulator are ternary (+1, 0, -1) and are
// carried as two bits per taxel. Network weights are 5-bit two's complement,
// the quantisation the classifier is reported with; membrane potentials are
// 16-bit signed, which is a choice of this design.
//
// The LIF update used by every layer (this design's choice of leak and reset):
//   integrate during the time step:  v <- sat(v + w) for each input spike
//   at the end of the step:          fire = (v >= VTH)
//                                    v <- fire ? 0 : v - (v >>> LEAK_SHIFT)
//
// Not every module uses every constant here (lint reports the unused ones
// per module); they are kept together as the one description of the array
// and number formats.
package eskin_pkg;

  localparam int unsigned ROWS     = 16;
  localparam int unsigned COLS     = 16;
  localparam int unsigned NTAXEL   = ROWS * COLS;
  localparam int unsigned ADC_BITS = 8;
  localparam int unsigned WBITS    = 5;   // weight width
  localparam int unsigned VBITS    = 16;  // membrane width
  localparam int unsigned TSBITS   = 16;  // AER timestamp (frame count)
  localparam int unsigned NCLASS   = 9;   // digits 1..9

  typedef logic [ADC_BITS-1:0]     adc_code_t;
  typedef logic signed [WBITS-1:0] weight_t;
  typedef logic signed [VBITS-1:0] vmem_t;

  // Ternary spike of one taxel
  typedef enum logic [1:0] {
    SPK_NONE = 2'b00,
    SPK_POS  = 2'b01,
    SPK_NEG  = 2'b10
  } spike_t;

  // One address event: timestamp, column, row, polarity (1 = on / positive)
  typedef struct packed {
    logic [TSBITS-1:0] t;
    logic [3:0]        x;
    logic [3:0]        y;
    logic              pol;
  } aer_event_t;

  // Weight-load layer select
  typedef enum logic [1:0] {
    LAYER_CONV1 = 2'd0,
    LAYER_CONV2 = 2'd1,
    LAYER_FC1   = 2'd2,
    LAYER_FC2   = 2'd3
  } layer_sel_t;

  // Saturating add of a signed weight (with sign flip for negative input
  // spikes) to a membrane potential.
  localparam logic signed [VBITS:0] VMAX = (VBITS+1)'((1 << (VBITS-1)) - 1);
  localparam logic signed [VBITS:0] VMIN = -(VBITS+1)'(1 << (VBITS-1));

  function automatic vmem_t vmem_add(vmem_t v, weight_t w, logic neg);
    logic signed [VBITS:0] s;
    logic signed [VBITS:0] wx;
    wx = (VBITS+1)'(w);
    if (neg) wx = -wx;
    s = (VBITS+1)'(v) + wx;
    if (s > VMAX)      return VMAX[VBITS-1:0];
    else if (s < VMIN) return VMIN[VBITS-1:0];
    else               return s[VBITS-1:0];
  endfunction

  // End-of-step leak applied to a membrane that did not fire.
  function automatic vmem_t vmem_leak(vmem_t v, int unsigned shift);
    return v - (v >>> shift);
  endfunction

endpackage
