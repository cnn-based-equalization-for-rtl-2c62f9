// CNN equalizer, high-throughput configuration: N_i parallel CNN instances fed from one
// wide sample stream.
//
// Data flow: the required throughput t_req selects the sub-sequence length l_inst in the
// look-up table (linst_lut). The overlap generate module (ogm) cuts each input sequence into
// blocks of l_inst samples plus o_act overlap samples on each side. A binary tree of split
// stream modules deals the blocks round robin to the N_i CNN instances, each of which
// equalizes V_p samples per cycle; a mirrored tree of merge stream modules puts the results
// back in order, the overlap remove module (orm) drops the o_act/N_os overlap symbols at both
// ends of every block, and the slicer takes hard PAM2 decisions. All coefficients come from
// one coefficient bank written through the coef_* port.
//
// Interface: in_data carries N_i*V_p samples per beat (element 0 is the earliest); in_last
// marks the final beat of a sequence; t_req is read when a sequence starts. out_soft/out_bits
// carry N_i*V_p symbols per beat, out_last marks the final beat of a sequence. All streams
// use valid/ready. The output of a sequence is the equalized sequence in order; its final
// beat may contain symbols computed from the zero fill behind the sequence end.
//
// Sizes follow the paper: N_i = 64, V_p = 8, L = 3, K = 9, C = 5, N_os = 2, 13-bit weights,
// 10-bit activations, o_act = 1024 samples. l_inst is restricted to multiples of
// 2*N_i*V_p samples and to at most L_MAX (both choices of this design).
module cnn_equalizer_top
  import cnneq_pkg::*;
#(
  parameter int unsigned NI        = cnneq_pkg::CNN_NI,
  parameter int unsigned VP        = cnneq_pkg::CNN_VP,
  parameter int unsigned L         = cnneq_pkg::CNN_L,
  parameter int unsigned K         = cnneq_pkg::CNN_K,
  parameter int unsigned C         = cnneq_pkg::CNN_C,
  parameter int unsigned NOS       = cnneq_pkg::CNN_NOS,
  parameter int unsigned A_W       = cnneq_pkg::CNN_A_W,
  parameter int unsigned W_W       = cnneq_pkg::CNN_W_W,
  parameter int unsigned B_W       = cnneq_pkg::CNN_B_W,
  parameter int unsigned F_CLK_MHZ = cnneq_pkg::CNN_F_CLK_MHZ,
  parameter int unsigned L_MAX     = 16384,
  parameter int unsigned T_W       = 7,
  parameter int unsigned AW        = 10,
  parameter int unsigned LW        = 17
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [T_W-1:0]            t_req,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [NI*VP-1:0][A_W-1:0] in_data,
  input  logic                      in_last,
  input  logic                      coef_we,
  input  logic [AW-1:0]             coef_addr,
  input  logic [B_W-1:0]            coef_wdata,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [NI*VP-1:0][A_W-1:0] out_soft,
  output logic [NI*VP-1:0]          out_bits,
  output logic                      out_last,
  output logic [LW-1:0]             linst,
  output logic                      treq_unmet,
  output logic                      busy
);
  localparam int unsigned W    = NI * VP;
  localparam int unsigned OACT = o_act(K, VP, L, NI);
  localparam int unsigned OB   = OACT / W;          // overlap beats (even)
  localparam int unsigned BMAX = L_MAX + 2 * OACT;  // longest block in samples
  localparam int unsigned NMID = (L > 2) ? L - 2 : 1;

  logic [C-1:0][0:0][K-1:0][W_W-1:0]             w_first;
  logic [C-1:0][B_W-1:0]                         b_first;
  logic [NMID-1:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid;
  logic [NMID-1:0][C-1:0][B_W-1:0]               b_mid;
  logic [VP-1:0][C-1:0][K-1:0][W_W-1:0]          w_last;
  logic [VP-1:0][B_W-1:0]                        b_last;

  logic [LW-1:0]           linst_beats;
  logic                    g_valid, g_ready, t_valid, t_ready;
  logic [W-1:0][A_W-1:0]   g_data, t_data;
  tag_t                    g_tag, t_tag;

  coef_bank #(
    .VP(VP), .L(L), .K(K), .C(C), .W_W(W_W), .B_W(B_W), .AW(AW)
  ) u_coef (
    .clk, .rst_n,
    .we(coef_we), .waddr(coef_addr), .wdata(coef_wdata),
    .w_first, .b_first, .w_mid, .b_mid, .w_last, .b_last
  );

  linst_lut #(
    .NI(NI), .VP(VP), .F_CLK_MHZ(F_CLK_MHZ), .OACT(OACT), .GRAN(2 * W),
    .L_MAX(L_MAX), .T_W(T_W), .LW(LW)
  ) u_lut (
    .t_req, .linst, .linst_beats, .unmet(treq_unmet)
  );

  ogm #(.W(W), .A_W(A_W), .OB(OB), .LBW(LW)) u_ogm (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_last,
    .linst_beats,
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data), .out_tag(g_tag),
    .busy
  );

  eq_tree #(
    .N(NI), .VP(VP), .L(L), .K(K), .C(C), .NOS(NOS),
    .A_W(A_W), .W_W(W_W), .B_W(B_W), .BMAX(BMAX)
  ) u_tree (
    .clk, .rst_n,
    .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data), .in_tag(g_tag),
    .out_valid(t_valid), .out_ready(t_ready), .out_data(t_data), .out_tag(t_tag),
    .w_first, .b_first, .w_mid, .b_mid, .w_last, .b_last
  );

  orm #(.W(W), .A_W(A_W), .DROP(OB / 2)) u_orm (
    .clk, .rst_n,
    .in_valid(t_valid), .in_ready(t_ready), .in_data(t_data), .in_tag(t_tag),
    .out_valid, .out_ready, .out_data(out_soft), .out_last
  );

  slicer #(.N(W), .A_W(A_W)) u_slicer (
    .sym_in(out_soft), .dec_out(out_bits)
  );

endmodule
