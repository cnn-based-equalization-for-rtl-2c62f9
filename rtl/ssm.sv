// Split stream module (SSM): one stream of W samples per beat in, two streams of W/2 out.
//
// Whole blocks (sub-sequences, closed by blk_last) are sent alternately to output 0 and
// output 1, starting with output 0. Each output has a FIFO that stores full input beats;
// its read side hands out the lower half of the head entry first, then the upper half (the
// lower half holds the earlier samples). Because the outputs are half as wide, a block is
// written twice as fast as it is drained, so the FIFO of the active output absorbs the
// difference and the input stalls (in_ready low) when that FIFO is full.
//
// The paper gives the function and the port widths (N_i*V_p at the root, halving at each
// level down to V_p); the FIFO buffering, the blk_last framing and DEPTH (default: one block
// of 18432 samples at the 512-sample root) are this design's choices. The tag of a FIFO
// entry is passed on with its upper half only. Latency: one cycle from input to output.
module ssm
  import cnneq_pkg::*;
#(
  parameter int unsigned W     = 512,
  parameter int unsigned A_W   = cnneq_pkg::CNN_A_W,
  parameter int unsigned DEPTH = 36
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0][A_W-1:0]      in_data,
  input  tag_t                       in_tag,
  output logic                       o0_valid,
  input  logic                       o0_ready,
  output logic [W/2-1:0][A_W-1:0]    o0_data,
  output tag_t                       o0_tag,
  output logic                       o1_valid,
  input  logic                       o1_ready,
  output logic [W/2-1:0][A_W-1:0]    o1_data,
  output tag_t                       o1_tag
);
  localparam int unsigned FW = W * A_W + $bits(tag_t);

  logic       sel;                 // output receiving the current block
  logic [1:0] f_wr_ready, f_rd_valid, f_rd_ready, half;
  logic [1:0][FW-1:0] f_rd_data;
  logic [1:0] o_valid, o_ready;
  logic [1:0][W/2-1:0][A_W-1:0] o_data;
  tag_t [1:0] o_tag;

  assign in_ready = f_wr_ready[sel];

  for (genvar j = 0; j < 2; j++) begin : g_out
    logic [W-1:0][A_W-1:0] beat;
    tag_t                  tag;

    stream_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_valid (in_valid && (sel == 1'(j))),
      .wr_ready (f_wr_ready[j]),
      .wr_data  ({in_tag, in_data}),
      .rd_valid (f_rd_valid[j]),
      .rd_ready (f_rd_ready[j]),
      .rd_data  (f_rd_data[j])
    );

    assign {tag, beat}   = f_rd_data[j];
    assign o_valid[j]    = f_rd_valid[j];
    assign o_data[j]     = half[j] ? beat[W-1:W/2] : beat[W/2-1:0];
    assign o_tag[j]      = half[j] ? tag : tag_t'('0);
    assign f_rd_ready[j] = o_ready[j] && half[j];

    always_ff @(posedge clk) begin
      if (!rst_n)                        half[j] <= 1'b0;
      else if (o_valid[j] && o_ready[j]) half[j] <= !half[j];
    end
  end

  assign o0_valid = o_valid[0];
  assign o0_data  = o_data[0];
  assign o0_tag   = o_tag[0];
  assign o_ready[0] = o0_ready;
  assign o1_valid = o_valid[1];
  assign o1_data  = o_data[1];
  assign o1_tag   = o_tag[1];
  assign o_ready[1] = o1_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) sel <= 1'b0;
    else if (in_valid && in_ready && in_tag.blk_last) sel <= !sel;
  end

  // A producer must hold a beat until it is accepted.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data) && $stable(in_tag));

endmodule
