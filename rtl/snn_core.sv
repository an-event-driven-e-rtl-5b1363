// snn_core: the convolutional spiking neural network (Conv-SNN) that
// classifies handwritten digits 1..9 from the tactile spike stream.
//
// Network (one time step per 16x16 ternary spike frame):
//   16x16x1  --3x3 conv, LIF--> 16x16x16 --2x2 pool--> 8x8x16
//            --3x3 conv, LIF--> 8x8x32   --2x2 pool--> 4x4x32 = 512
//            --FC1, LIF--> 128 --FC2, LIF--> 9 output neurons
// A classification window is T_STEPS frames (240 = 2 s at 120 frames/s).
// The membranes of all layers carry over from step to step within a window
// and are cleared when a window starts. The output neurons' spikes are
// counted over the window and the class is the neuron with the most spikes
// (lowest index on a tie), reported as digit 1..9.
//
// The layer sequence, the sizes, the 240-step input and the 9 classes
// follow the system description; rate decoding by spike count, the tie
// rule and the strictly sequential layer schedule are this design's.
//
// Timing: `win_start` (while idle and no window open) clears the network,
// which takes 257 cycles, and opens a window. Each `frame_valid` inside a window runs the four layers one
// after the other; a step takes about 256 + 1024 + 512 + 128 + 256 + 64
// cycles plus 10 per active input of each convolution layer. A frame that
// arrives while a step is still running is dropped and counted in
// `dropped`. After the last step `result_valid` pulses with `result_class`
// and `counts` (output spikes per class over the window).
//
// Weights are loaded through one port while the core is idle: `w_layer`
// selects the layer (eskin_pkg::layer_sel_t), `w_row`/`w_col` as in the
// layer modules.
module snn_core
  import eskin_pkg::*;
#(
  parameter int unsigned T_STEPS    = 240,
  parameter int          VTH1       = 16,
  parameter int          VTH2       = 16,
  parameter int          VTH3       = 16,
  parameter int          VTH4       = 16,
  parameter int unsigned LEAK_SHIFT = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight load
  input  logic               w_we,
  input  layer_sel_t         w_layer,
  input  logic [8:0]         w_row,
  input  logic [6:0]         w_col,
  input  weight_t            w_data,
  // spike frames
  input  logic               win_start,
  input  logic               frame_valid,
  input  logic [255:0]       frame_pos,
  input  logic [255:0]       frame_neg,
  // status and result
  output logic               win_open,
  output logic               busy,
  output logic [8:0]         step,
  output logic [15:0]        dropped,
  output logic               result_valid,
  output logic [3:0]         result_class,
  output logic [NCLASS-1:0][7:0] counts,
  output logic [31:0]        syn_ops
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_L1, S_L2, S_L3, S_L4, S_COUNT, S_DECIDE} state_t;
  state_t state;

  logic clear;
  logic st1, st2, st3, st4;
  logic bz1, bz2, bz3, bz4;
  logic dn1, dn2, dn3, dn4;
  logic [1023:0] s1;
  logic [511:0]  s2;
  logic [127:0]  s3;
  logic [NCLASS-1:0] s4;
  logic [31:0] ops1, ops2, ops3, ops4;

  assign busy    = (state != S_IDLE);
  assign syn_ops = ops1 + ops2 + ops3 + ops4;

  snn_conv_layer #(.H(16), .W(16), .CIN(1), .COUT(16), .VTH(VTH1), .LEAK_SHIFT(LEAK_SHIFT)) u_conv1 (
    .clk, .rst_n, .clear,
    .w_we(w_we && w_layer == LAYER_CONV1), .w_row(w_row[3:0]), .w_col(w_col[3:0]), .w_data,
    .start(st1), .in_pos(frame_pos), .in_neg(frame_neg),
    .busy(bz1), .done(dn1), .out_spk(s1), .syn_ops(ops1));

  snn_conv_layer #(.H(8), .W(8), .CIN(16), .COUT(32), .VTH(VTH2), .LEAK_SHIFT(LEAK_SHIFT)) u_conv2 (
    .clk, .rst_n, .clear,
    .w_we(w_we && w_layer == LAYER_CONV2), .w_row(w_row[7:0]), .w_col(w_col[4:0]), .w_data,
    .start(st2), .in_pos(s1), .in_neg('0),
    .busy(bz2), .done(dn2), .out_spk(s2), .syn_ops(ops2));

  snn_fc_layer #(.NIN(512), .NOUT(128), .VTH(VTH3), .LEAK_SHIFT(LEAK_SHIFT)) u_fc1 (
    .clk, .rst_n, .clear,
    .w_we(w_we && w_layer == LAYER_FC1), .w_row(w_row[8:0]), .w_col(w_col[6:0]), .w_data,
    .start(st3), .in_spk(s2),
    .busy(bz3), .done(dn3), .out_spk(s3), .syn_ops(ops3));

  snn_fc_layer #(.NIN(128), .NOUT(NCLASS), .VTH(VTH4), .LEAK_SHIFT(LEAK_SHIFT)) u_fc2 (
    .clk, .rst_n, .clear,
    .w_we(w_we && w_layer == LAYER_FC2), .w_row(w_row[6:0]), .w_col(w_col[3:0]), .w_data,
    .start(st4), .in_spk(s3),
    .busy(bz4), .done(dn4), .out_spk(s4), .syn_ops(ops4));

  // argmax of the counts, lowest index wins a tie
  logic [3:0] amax;
  always_comb begin
    amax = '0;
    for (int k = 1; k < NCLASS; k++)
      if (counts[k] > counts[amax]) amax = 4'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      clear        <= 1'b0;
      st1          <= 1'b0;
      st2          <= 1'b0;
      st3          <= 1'b0;
      st4          <= 1'b0;
      win_open     <= 1'b0;
      step         <= '0;
      dropped      <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
      counts       <= '0;
    end else begin
      clear        <= 1'b0;
      st1          <= 1'b0;
      st2          <= 1'b0;
      st3          <= 1'b0;
      st4          <= 1'b0;
      result_valid <= 1'b0;
      if (frame_valid && win_open && state != S_IDLE) dropped <= dropped + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (!win_open && win_start) begin
            clear    <= 1'b1;
            win_open <= 1'b1;
            step     <= '0;
            counts   <= '0;
            state    <= S_CLEAR;
          end else if (win_open && frame_valid) begin
            st1   <= 1'b1;
            state <= S_L1;
          end
        end
        S_CLEAR: if (!clear && !bz1 && !bz2) state <= S_IDLE;
        S_L1: if (dn1) begin st2 <= 1'b1; state <= S_L2; end
        S_L2: if (dn2) begin st3 <= 1'b1; state <= S_L3; end
        S_L3: if (dn3) begin st4 <= 1'b1; state <= S_L4; end
        S_L4: if (dn4) state <= S_COUNT;
        S_COUNT: begin
          for (int k = 0; k < NCLASS; k++)
            if (s4[k] && counts[k] != 8'hFF) counts[k] <= counts[k] + 1'b1;
          step <= step + 1'b1;
          if (int'(step) == T_STEPS - 1) state <= S_DECIDE;
          else                          state <= S_IDLE;
        end
        S_DECIDE: begin
          result_valid <= 1'b1;
          result_class <= amax + 4'd1;
          win_open     <= 1'b0;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_layers_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    state != S_CLEAR |-> $onehot0({bz1, bz2, bz3, bz4}));
  a_load_when_idle: assert property (@(posedge clk) disable iff (!rst_n) w_we |-> !busy);

endmodule
