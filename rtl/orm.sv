// Overlap remove module (ORM): removes the overlap symbols from the merged output stream.
//
// Each block of the merged stream carries DROP beats of overlap symbols at its start and at
// its end (DROP = o_act / N_os symbols expressed in beats of W symbols). The first DROP beats
// of a block are discarded on arrival. Later beats pass through a buffer of DROP entries:
// a beat is only sent on once DROP newer beats of the same block have arrived, so when the
// beat with blk_last comes in, the DROP beats still buffered (the trailing overlap) are
// discarded and the oldest buffered beat, the last kept one, leaves with out_last set if the
// block closed its sequence.
//
// The function follows the paper; the buffer scheme is this design's. Timing: out_valid is
// combinational from in_valid, the data comes from the buffer registers; DROP >= 1.
module orm
  import cnneq_pkg::*;
#(
  parameter int unsigned W    = 512,
  parameter int unsigned A_W  = cnneq_pkg::CNN_A_W,
  parameter int unsigned DROP = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [W-1:0][A_W-1:0]   in_data,
  input  tag_t                    in_tag,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [W-1:0][A_W-1:0]   out_data,
  output logic                    out_last
);
  localparam int unsigned CW = $clog2(DROP + 1);

  logic [DROP-1:0][W-1:0][A_W-1:0] buffer;   // index 0 = oldest
  logic [CW-1:0]                   head;     // leading beats dropped so far (saturates)
  logic [CW-1:0]                   cnt;      // beats held in the buffer
  logic                            leading, emit, acc;

  assign leading   = (head != CW'(DROP));
  assign emit      = in_valid && !leading && (cnt == CW'(DROP));
  assign out_valid = emit;
  assign out_data  = buffer[0];
  assign out_last  = in_tag.blk_last && in_tag.seq_last;
  assign in_ready  = !emit || out_ready;
  assign acc       = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buffer <= '0;
      head   <= '0;
      cnt    <= '0;
    end else if (acc) begin
      if (in_tag.blk_last) begin
        head <= '0;
        cnt  <= '0;
      end else if (leading) begin
        head <= head + 1'b1;
      end else begin
        for (int d = 0; d < int'(DROP) - 1; d++) buffer[d] <= (emit ? buffer[d+1] : buffer[d]);
        if (emit) buffer[DROP-1] <= in_data;
        else begin
          buffer[cnt] <= in_data;
          cnt         <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
