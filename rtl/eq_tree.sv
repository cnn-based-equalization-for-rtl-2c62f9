// Hierarchical split / process / merge tree of N CNN instances (N a power of two).
//
// For N = 1 the tree is a single CNN instance. For N > 1 a split stream module divides the
// N*V_p-sample input stream block by block into two N/2*V_p-sample streams, each feeding a
// sub-tree of N/2 instances, and a merge stream module joins the two N/2*V_p-symbol result
// streams into one N*V_p-symbol stream. The recursion gives N-1 split and N-1 merge modules
// arranged as binary trees, so block b of the input ends up in the instance whose index is
// b mod N read with its bits reversed, and the merge tree restores the original order.
//
// The binary, hierarchical arrangement follows the paper (it keeps the wires between the
// stream modules and the instances short). FIFO depths are derived from BMAX, the longest
// block in samples, so that each split FIFO holds one block at its level and each merge FIFO
// one block of symbols; these sizes are this design's choice.
//
// Linting this module on its own, Verilator reports the hand-shake and data signals between
// the stream modules and the recursive sub-trees as undriven: it does not follow the ports of
// the recursive instance. They are driven by the sub-tree outputs, as the end-to-end
// simulations of the full 64-instance tree show.
module eq_tree
  import cnneq_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned VP    = cnneq_pkg::CNN_VP,
  parameter int unsigned L     = cnneq_pkg::CNN_L,
  parameter int unsigned K     = cnneq_pkg::CNN_K,
  parameter int unsigned C     = cnneq_pkg::CNN_C,
  parameter int unsigned NOS   = cnneq_pkg::CNN_NOS,
  parameter int unsigned A_W   = cnneq_pkg::CNN_A_W,
  parameter int unsigned W_W   = cnneq_pkg::CNN_W_W,
  parameter int unsigned B_W   = cnneq_pkg::CNN_B_W,
  parameter int unsigned BMAX  = 18432,
  parameter int unsigned NMID  = (L > 2) ? L - 2 : 1
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          in_valid,
  output logic                                          in_ready,
  input  logic [N*VP-1:0][A_W-1:0]                      in_data,
  input  tag_t                                          in_tag,
  output logic                                          out_valid,
  input  logic                                          out_ready,
  output logic [N*VP-1:0][A_W-1:0]                      out_data,
  output tag_t                                          out_tag,
  input  logic [C-1:0][0:0][K-1:0][W_W-1:0]             w_first,
  input  logic [C-1:0][B_W-1:0]                         b_first,
  input  logic [NMID-1:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid,
  input  logic [NMID-1:0][C-1:0][B_W-1:0]               b_mid,
  input  logic [VP-1:0][C-1:0][K-1:0][W_W-1:0]          w_last,
  input  logic [VP-1:0][B_W-1:0]                        b_last
);
  if (N == 1) begin : g_leaf
    cnn_instance #(
      .VP(VP), .L(L), .K(K), .C(C), .NOS(NOS), .A_W(A_W), .W_W(W_W), .B_W(B_W)
    ) u_cnn (
      .clk, .rst_n,
      .in_valid, .in_ready, .in_data, .in_tag,
      .out_valid, .out_ready, .out_data, .out_tag,
      .w_first, .b_first, .w_mid, .b_mid, .w_last, .b_last
    );
  end else begin : g_node
    localparam int unsigned HW     = N * VP / 2;
    localparam int unsigned SDEPTH = (BMAX + N * VP - 1) / (N * VP);
    localparam int unsigned MDEPTH = (BMAX + 2 * N * VP - 1) / (2 * N * VP);

    logic [1:0]                   s_valid, s_ready, m_valid, m_ready;
    logic [1:0][HW-1:0][A_W-1:0]  s_data, m_data;
    tag_t [1:0]                   s_tag, m_tag;

    ssm #(.W(N * VP), .A_W(A_W), .DEPTH(SDEPTH)) u_ssm (
      .clk, .rst_n,
      .in_valid, .in_ready, .in_data, .in_tag,
      .o0_valid(s_valid[0]), .o0_ready(s_ready[0]), .o0_data(s_data[0]), .o0_tag(s_tag[0]),
      .o1_valid(s_valid[1]), .o1_ready(s_ready[1]), .o1_data(s_data[1]), .o1_tag(s_tag[1])
    );

    for (genvar j = 0; j < 2; j++) begin : g_sub
      eq_tree #(
        .N(N / 2), .VP(VP), .L(L), .K(K), .C(C), .NOS(NOS),
        .A_W(A_W), .W_W(W_W), .B_W(B_W), .BMAX(BMAX)
      ) u_sub (
        .clk, .rst_n,
        .in_valid (s_valid[j]), .in_ready (s_ready[j]), .in_data (s_data[j]), .in_tag (s_tag[j]),
        .out_valid(m_valid[j]), .out_ready(m_ready[j]), .out_data(m_data[j]), .out_tag(m_tag[j]),
        .w_first, .b_first, .w_mid, .b_mid, .w_last, .b_last
      );
    end

    msm #(.W(HW), .A_W(A_W), .DEPTH(MDEPTH)) u_msm (
      .clk, .rst_n,
      .i0_valid(m_valid[0]), .i0_ready(m_ready[0]), .i0_data(m_data[0]), .i0_tag(m_tag[0]),
      .i1_valid(m_valid[1]), .i1_ready(m_ready[1]), .i1_data(m_data[1]), .i1_tag(m_tag[1]),
      .out_valid, .out_ready, .out_data, .out_tag
    );
  end

endmodule
