// One streaming 1-D convolution layer of the equalizer CNN.
//
// Every accepted input beat brings IN_POS new positions of IC channels. The layer keeps the
// newest K positions in a window register; after STRIDE/IN_POS beats it computes one output
// position of OC channels:
//   y[o] = sat( act( (sum_i sum_k win[k][i] * w[o][i][k] + bias[o]) >>> SHIFT ) )
// where win[0] is the oldest position of the window, act() is ReLU when RELU = 1 and the
// identity otherwise, and sat() saturates to A_W signed bits. All OC*IC*K products are
// formed in the same cycle (parallel over kernel, input and output channels), so the layer
// sustains one output position per cycle.
//
// Following the paper: the kernel size, the strides, the channel counts, the full spatial
// parallelism over K, Ic and Oc, and ReLU after every layer but the last. This design's own
// choices: batch normalisation is folded into the weights plus a per-channel offset (bias,
// given at accumulator scale); the window is causal, i.e. the output stands for the
// position (K-1)/2 positions before the newest one, and no zero padding is inserted (the
// overlap added around each block absorbs edge effects); requantisation truncates.
//
// Timing: three register stages (window, accumulator, output). out_valid follows the input
// beat that completes a window by three enabled cycles. When en is low every register
// holds, so a stall anywhere downstream freezes the layer. out_tag is the tag of the beat
// that completed the window.
module conv_layer
  import cnneq_pkg::*;
#(
  parameter int unsigned IC     = 1,
  parameter int unsigned OC     = 5,
  parameter int unsigned K      = 9,
  parameter int unsigned IN_POS = 8,
  parameter int unsigned STRIDE = 8,
  parameter int unsigned A_W    = cnneq_pkg::CNN_A_W,
  parameter int unsigned W_W    = cnneq_pkg::CNN_W_W,
  parameter int unsigned B_W    = cnneq_pkg::CNN_B_W,
  parameter int unsigned ACC_W  = cnneq_pkg::CNN_ACC_W,
  parameter int unsigned SHIFT  = cnneq_pkg::CNN_SHIFT,
  parameter bit          RELU   = 1'b1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       en,
  input  logic                                       in_valid,
  input  logic [IN_POS-1:0][IC-1:0][A_W-1:0]         in_data,
  input  tag_t                                       in_tag,
  input  logic [OC-1:0][IC-1:0][K-1:0][W_W-1:0]      weights,
  input  logic [OC-1:0][B_W-1:0]                     bias,
  output logic                                       out_valid,
  output logic [OC-1:0][A_W-1:0]                     out_data,
  output tag_t                                       out_tag
);
  localparam int unsigned BPO = STRIDE / IN_POS;            // beats per output
  localparam int unsigned PCW = (BPO > 1) ? $clog2(BPO) : 1;

  // K >= IN_POS and STRIDE a multiple of IN_POS are required by the window organisation.
  if (K < IN_POS || (STRIDE % IN_POS) != 0) begin : g_bad_cfg
    $error("conv_layer: needs K >= IN_POS and STRIDE %% IN_POS == 0");
  end

  logic [K-1:0][IC-1:0][A_W-1:0] win, win_next;
  logic [PCW-1:0]                phase;
  logic                          v1, v2;
  tag_t                          t1, t2;
  logic signed [ACC_W-1:0]       acc     [OC];
  logic signed [ACC_W-1:0]       acc_sum [OC];
  logic                          accept, fire;

  assign accept = in_valid && en;
  assign fire   = (phase == PCW'(BPO - 1)) || in_tag.blk_last;

  // Shift IN_POS new positions into the window (index K-1 is the newest).
  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      if (k < int'(K - IN_POS)) win_next[k] = win[k + int'(IN_POS)];
      else                      win_next[k] = in_data[k - int'(K - IN_POS)];
    end
  end

  // Fully parallel multiply-accumulate over kernel taps and input channels.
  always_comb begin
    for (int o = 0; o < int'(OC); o++) begin
      acc_sum[o] = '0;
      for (int i = 0; i < int'(IC); i++) begin
        for (int k = 0; k < int'(K); k++) begin
          acc_sum[o] += ACC_W'($signed(win[k][i]) * $signed(weights[o][i][k]));
        end
      end
    end
  end

  function automatic logic [A_W-1:0] requant(logic signed [ACC_W-1:0] a,
                                             logic signed [B_W-1:0]   b);
    logic signed [ACC_W:0] s;
    s = (ACC_W+1)'(a) + (ACC_W+1)'(b);
    s = s >>> SHIFT;
    if (RELU && s < 0) s = '0;
    if (s > $signed((ACC_W+1)'((1 << (A_W - 1)) - 1)))  return {1'b0, {(A_W-1){1'b1}}};
    if (s < $signed(-(ACC_W+1)'(1 << (A_W - 1))))       return {1'b1, {(A_W-1){1'b0}}};
    return s[A_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win       <= '0;
      phase     <= '0;
      v1        <= 1'b0;
      v2        <= 1'b0;
      t1        <= '0;
      t2        <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_data  <= '0;
      for (int o = 0; o < int'(OC); o++) acc[o] <= '0;
    end else if (en) begin
      // stage 1: window
      v1 <= 1'b0;
      if (accept) begin
        win <= win_next;
        t1  <= in_tag;
        if (fire) begin
          v1    <= 1'b1;
          phase <= '0;
        end else begin
          phase <= phase + 1'b1;
        end
      end
      // stage 2: accumulate
      v2 <= v1;
      t2 <= t1;
      for (int o = 0; o < int'(OC); o++) acc[o] <= acc_sum[o];
      // stage 3: offset, activation, requantisation
      out_valid <= v2;
      out_tag   <= t2;
      for (int o = 0; o < int'(OC); o++) out_data[o] <= requant(acc[o], $signed(bias[o]));
    end
  end

endmodule
