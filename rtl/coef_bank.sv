// Coefficient bank: trained weights and folded batch-norm offsets of all CNN layers.
//
// A register array of n_coef() words is written one word per cycle through we/waddr/wdata
// and presented in parallel to the convolution layers. One bank is shared by all CNN
// instances, since every instance runs the same network. Address map, layer by layer:
//   layer 1:        w[o][k] at o*K + k            (C*K words), then b[o] (C words)
//   middle layer m: w[o][i][k] at (o*C + i)*K + k (C*C*K words), then b[o] (C words)
//   last layer:     w[o][i][k] at (o*C + i)*K + k (V_p*C*K words), then b[o] (V_p words)
// Weights use the low W_W bits of a word, offsets all B_W bits. That the parameters are
// held on chip follows the paper; the shared bank, its write port and the address map are
// this design's choices. Timing: a write is visible on the outputs the next cycle; reset
// clears all words.
module coef_bank
  import cnneq_pkg::*;
#(
  parameter int unsigned VP   = cnneq_pkg::CNN_VP,
  parameter int unsigned L    = cnneq_pkg::CNN_L,
  parameter int unsigned K    = cnneq_pkg::CNN_K,
  parameter int unsigned C    = cnneq_pkg::CNN_C,
  parameter int unsigned W_W  = cnneq_pkg::CNN_W_W,
  parameter int unsigned B_W  = cnneq_pkg::CNN_B_W,
  parameter int unsigned AW   = 10,
  parameter int unsigned NMID = (L > 2) ? L - 2 : 1
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          we,
  input  logic [AW-1:0]                                 waddr,
  input  logic [B_W-1:0]                                wdata,
  output logic [C-1:0][0:0][K-1:0][W_W-1:0]             w_first,
  output logic [C-1:0][B_W-1:0]                         b_first,
  output logic [NMID-1:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid,
  output logic [NMID-1:0][C-1:0][B_W-1:0]               b_mid,
  output logic [VP-1:0][C-1:0][K-1:0][W_W-1:0]          w_last,
  output logic [VP-1:0][B_W-1:0]                        b_last
);
  localparam int unsigned NC     = n_coef(K, C, VP, L);
  localparam int unsigned MID0   = C * K + C;
  localparam int unsigned MIDSZ  = C * C * K + C;
  localparam int unsigned LAST0  = MID0 + (L - 2) * MIDSZ;

  if (NC > (1 << AW)) begin : g_bad_aw
    $error("coef_bank: AW too small for the coefficient count");
  end

  logic [B_W-1:0] mem [NC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int a = 0; a < int'(NC); a++) mem[a] <= '0;
    end else if (we && (32'(waddr) < NC)) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb begin
    w_mid = '0;
    b_mid = '0;
    for (int o = 0; o < int'(C); o++) begin
      for (int k = 0; k < int'(K); k++) w_first[o][0][k] = mem[o*K + k][W_W-1:0];
      b_first[o] = mem[C*K + o];
    end
    for (int m = 0; m < int'(L) - 2; m++) begin
      for (int o = 0; o < int'(C); o++) begin
        for (int i = 0; i < int'(C); i++)
          for (int k = 0; k < int'(K); k++)
            w_mid[m][o][i][k] = mem[MID0 + m*MIDSZ + (o*C + i)*K + k][W_W-1:0];
        b_mid[m][o] = mem[MID0 + m*MIDSZ + C*C*K + o];
      end
    end
    for (int o = 0; o < int'(VP); o++) begin
      for (int i = 0; i < int'(C); i++)
        for (int k = 0; k < int'(K); k++)
          w_last[o][i][k] = mem[LAST0 + (o*C + i)*K + k][W_W-1:0];
      b_last[o] = mem[LAST0 + VP*C*K + o];
    end
  end

endmodule
