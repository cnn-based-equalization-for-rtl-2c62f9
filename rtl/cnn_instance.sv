// One hardware instance of the equalizer CNN: L streaming convolution layers in a pipeline.
//
// Layer 1 takes V_p new samples per beat (one input channel) with stride V_p and produces C
// channels; layers 2..L-1 map C to C channels with stride 1; layer L maps C channels to V_p
// channels with stride N_os. Layers 1..L-1 apply ReLU. The V_p channels of one output
// position of the last layer are flattened into V_p consecutive symbols (channel o becomes
// symbol o of the beat). With the defaults (V_p = 8, K = 9, C = 5, L = 3, N_os = 2) an
// instance accepts 8 samples every cycle and delivers 8 soft symbols every second cycle.
//
// The layer structure, kernel size, channel counts and strides follow the paper. The
// stall scheme is this design's: the whole instance is frozen (en low, in_ready low) while
// its output is valid but not accepted, so no data is ever lost. Windows are not cleared
// between blocks: only the first receptive field of each block depends on the previous
// one, and that part lies in the overlap that is later removed.
//
// Latency: 3 cycles per layer from the beat completing a window to the layer output.
module cnn_instance
  import cnneq_pkg::*;
#(
  parameter int unsigned VP    = cnneq_pkg::CNN_VP,
  parameter int unsigned L     = cnneq_pkg::CNN_L,
  parameter int unsigned K     = cnneq_pkg::CNN_K,
  parameter int unsigned C     = cnneq_pkg::CNN_C,
  parameter int unsigned NOS   = cnneq_pkg::CNN_NOS,
  parameter int unsigned A_W   = cnneq_pkg::CNN_A_W,
  parameter int unsigned W_W   = cnneq_pkg::CNN_W_W,
  parameter int unsigned B_W   = cnneq_pkg::CNN_B_W,
  parameter int unsigned NMID  = (L > 2) ? L - 2 : 1
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     in_valid,
  output logic                                     in_ready,
  input  logic [VP-1:0][A_W-1:0]                   in_data,
  input  tag_t                                     in_tag,
  output logic                                     out_valid,
  input  logic                                     out_ready,
  output logic [VP-1:0][A_W-1:0]                   out_data,
  output tag_t                                     out_tag,
  input  logic [C-1:0][0:0][K-1:0][W_W-1:0]        w_first,
  input  logic [C-1:0][B_W-1:0]                    b_first,
  input  logic [NMID-1:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid,
  input  logic [NMID-1:0][C-1:0][B_W-1:0]          b_mid,
  input  logic [VP-1:0][C-1:0][K-1:0][W_W-1:0]     w_last,
  input  logic [VP-1:0][B_W-1:0]                   b_last
);
  logic en;
  assign en       = !(out_valid && !out_ready);
  assign in_ready = en;

  // activations between layers: index 0 = output of layer 1
  logic [L-2:0]                     a_valid;
  logic [L-2:0][C-1:0][A_W-1:0]     a_data;
  tag_t [L-2:0]                     a_tag;

  conv_layer #(
    .IC(1), .OC(C), .K(K), .IN_POS(VP), .STRIDE(VP),
    .A_W(A_W), .W_W(W_W), .B_W(B_W), .RELU(1'b1)
  ) u_first (
    .clk, .rst_n, .en,
    .in_valid (in_valid),
    .in_data  (in_data),
    .in_tag   (in_tag),
    .weights  (w_first),
    .bias     (b_first),
    .out_valid(a_valid[0]),
    .out_data (a_data[0]),
    .out_tag  (a_tag[0])
  );

  for (genvar l = 0; l < int'(L) - 2; l++) begin : g_mid
    conv_layer #(
      .IC(C), .OC(C), .K(K), .IN_POS(1), .STRIDE(1),
      .A_W(A_W), .W_W(W_W), .B_W(B_W), .RELU(1'b1)
    ) u_mid (
      .clk, .rst_n, .en,
      .in_valid (a_valid[l]),
      .in_data  (a_data[l]),
      .in_tag   (a_tag[l]),
      .weights  (w_mid[l]),
      .bias     (b_mid[l]),
      .out_valid(a_valid[l+1]),
      .out_data (a_data[l+1]),
      .out_tag  (a_tag[l+1])
    );
  end

  conv_layer #(
    .IC(C), .OC(VP), .K(K), .IN_POS(1), .STRIDE(NOS),
    .A_W(A_W), .W_W(W_W), .B_W(B_W), .RELU(1'b0)
  ) u_last (
    .clk, .rst_n, .en,
    .in_valid (a_valid[L-2]),
    .in_data  (a_data[L-2]),
    .in_tag   (a_tag[L-2]),
    .weights  (w_last),
    .bias     (b_last),
    .out_valid(out_valid),
    .out_data (out_data),
    .out_tag  (out_tag)
  );

endmodule
