// Merge stream module (MSM): two streams of W symbols per beat in, one stream of 2W out.
//
// It takes one whole block (closed by blk_last) from input 0, then one from input 1, and so
// on, mirroring the round robin of the split stream module so that blocks leave in their
// original order. On each input two consecutive beats are packed into one output-width word
// (the first beat in the lower half) and written into that input's FIFO, which buffers a
// block while the other input is being drained. Blocks must therefore have an even number
// of beats at this level.
//
// The paper gives the function and the widths (V_p at the leaves, doubling to N_i*V_p);
// packing, FIFO buffering and DEPTH are this design's choices. Latency: one cycle from the
// second beat of a pair to the output.
module msm
  import cnneq_pkg::*;
#(
  parameter int unsigned W     = 8,
  parameter int unsigned A_W   = cnneq_pkg::CNN_A_W,
  parameter int unsigned DEPTH = 576
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       i0_valid,
  output logic                       i0_ready,
  input  logic [W-1:0][A_W-1:0]      i0_data,
  input  tag_t                       i0_tag,
  input  logic                       i1_valid,
  output logic                       i1_ready,
  input  logic [W-1:0][A_W-1:0]      i1_data,
  input  tag_t                       i1_tag,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [2*W-1:0][A_W-1:0]    out_data,
  output tag_t                       out_tag
);
  localparam int unsigned FW = 2 * W * A_W + $bits(tag_t);

  logic                     sel;   // input whose block is being emitted
  logic [1:0]               i_valid, i_ready, f_wr_ready, f_rd_valid, f_rd_ready;
  logic [1:0][W-1:0][A_W-1:0] i_data;
  tag_t [1:0]               i_tag;
  logic [1:0][FW-1:0]       f_rd_data;

  assign i_valid = {i1_valid, i0_valid};
  assign i_data  = {i1_data, i0_data};
  assign i_tag   = {i1_tag, i0_tag};
  assign i0_ready = i_ready[0];
  assign i1_ready = i_ready[1];

  for (genvar j = 0; j < 2; j++) begin : g_in
    logic                  half;
    logic [W-1:0][A_W-1:0] low;

    assign i_ready[j] = !half || f_wr_ready[j];

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        half <= 1'b0;
        low  <= '0;
      end else if (i_valid[j] && i_ready[j]) begin
        half <= !half;
        if (!half) low <= i_data[j];
      end
    end

    stream_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_valid (i_valid[j] && half),
      .wr_ready (f_wr_ready[j]),
      .wr_data  ({i_tag[j], i_data[j], low}),
      .rd_valid (f_rd_valid[j]),
      .rd_ready (f_rd_ready[j]),
      .rd_data  (f_rd_data[j])
    );

    assign f_rd_ready[j] = out_ready && (sel == 1'(j));

    // A block may not end on the first beat of a pair.
    a_even_block: assert property (@(posedge clk) disable iff (!rst_n)
      i_valid[j] && i_ready[j] && !half |-> !i_tag[j].blk_last);
  end

  assign out_valid = f_rd_valid[sel];
  assign {out_tag, out_data} = f_rd_data[sel];

  always_ff @(posedge clk) begin
    if (!rst_n) sel <= 1'b0;
    else if (out_valid && out_ready && out_tag.blk_last) sel <= !sel;
  end

endmodule
