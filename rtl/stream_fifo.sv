// Synchronous first-word-fall-through FIFO with valid/ready handshakes on both sides.
//
// The storage is a plain array with a registered write and an asynchronous read, so the
// head entry is visible on rd_data whenever rd_valid is high. DEPTH need not be a power of
// two. One write and one read can happen in the same cycle. Used as the block buffer of
// the split and merge stream modules; the buffer organisation is this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [CW-1:0]    cnt;
  logic             do_wr, do_rd;

  assign wr_ready = (cnt != CW'(DEPTH));
  assign rd_valid = (cnt != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) wp <= incr(wp);
      if (do_rd) rp <= incr(rp);
      if (do_wr && !do_rd)      cnt <= cnt + 1'b1;
      else if (do_rd && !do_wr) cnt <= cnt - 1'b1;
    end
  end

endmodule
