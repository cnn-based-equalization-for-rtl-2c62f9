// Overlap generate module (OGM): cuts the input sequence into blocks and adds the overlap.
//
// With l = linst_beats (sub-sequence length in beats of W samples) and OB overlap beats
// (o_act samples), block n of a sequence x holds the beats x[n*l - OB, (n+1)*l + OB): its
// kept part x[n*l, (n+1)*l) is surrounded by OB beats of context on either side. Beats
// before the start and after the end of the sequence are zero. The module keeps the last
// 2*OB beats it has emitted from the sequence in a history buffer; every block after the
// first starts by replaying this history (the 2*OB beats shared with the previous block)
// and then passes l fresh input beats. The first block replays OB zero beats and passes
// l + OB input beats. After in_last, blocks are completed with zero beats, and the first
// block whose kept part reaches the end of the input closes the sequence (seq_last).
//
// The overlap rule and the formula for o_act follow the paper; the replay buffer, the zero
// fill at the sequence edges and the requirement that l be a whole number of output beats
// are this design's choices. linst_beats is sampled when the first beat of a sequence is
// seen. Timing: the data path is combinational from input to output (replayed beats come
// from registers); one idle cycle separates two sequences.
module ogm
  import cnneq_pkg::*;
#(
  parameter int unsigned W   = 512,
  parameter int unsigned A_W = cnneq_pkg::CNN_A_W,
  parameter int unsigned OB  = 2,
  parameter int unsigned LBW = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [W-1:0][A_W-1:0]   in_data,
  input  logic                    in_last,
  input  logic [LBW-1:0]          linst_beats,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [W-1:0][A_W-1:0]   out_data,
  output tag_t                    out_tag,
  output logic                    busy
);
  typedef enum logic [1:0] {S_IDLE, S_REPLAY, S_PASS} state_t;

  localparam int unsigned HB  = 2 * OB;
  localparam int unsigned RPW = $clog2(HB + 1);

  state_t                       st;
  logic [HB-1:0][W-1:0][A_W-1:0] hist;      // index HB-1 = newest
  logic [RPW-1:0]               rp;
  logic [LBW-1:0]               lb;
  logic [31:0]                  pcnt, npass, xcnt, kept_end;
  logic                         eos;

  logic take_in, fire, blk_end, eos_now, done;
  logic [31:0] xcnt_now;

  assign busy = (st != S_IDLE);

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    in_ready  = 1'b0;
    case (st)
      S_REPLAY: begin
        out_valid = 1'b1;
        out_data  = hist[rp];
      end
      S_PASS: begin
        out_valid = eos ? 1'b1 : in_valid;
        out_data  = eos ? '0 : in_data;
        in_ready  = !eos && out_ready;
      end
      default: ;
    endcase
  end

  assign fire     = out_valid && out_ready;
  assign take_in  = (st == S_PASS) && fire && !eos;
  assign blk_end  = (st == S_PASS) && (pcnt == npass - 1);
  assign eos_now  = eos || (take_in && in_last);
  assign xcnt_now = xcnt + (take_in ? 32'd1 : 32'd0);
  assign done     = eos_now && (xcnt_now <= kept_end);

  always_comb begin
    out_tag          = '0;
    out_tag.blk_last = blk_end;
    out_tag.seq_last = blk_end && done;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      for (int h = 0; h < int'(HB); h++) hist[h] <= '0;
      rp       <= '0;
      lb       <= '0;
      pcnt     <= '0;
      npass    <= '0;
      xcnt     <= '0;
      kept_end <= '0;
      eos      <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (in_valid) begin
          lb       <= linst_beats;
          for (int h = 0; h < int'(HB); h++) hist[h] <= '0;
          rp       <= RPW'(OB);
          npass    <= 32'(linst_beats) + OB;
          kept_end <= 32'(linst_beats);
          xcnt     <= '0;
          eos      <= 1'b0;
          st       <= S_REPLAY;
        end
        S_REPLAY: if (fire) begin
          if (rp == RPW'(HB - 1)) begin
            pcnt <= '0;
            st   <= S_PASS;
          end else begin
            rp <= rp + 1'b1;
          end
        end
        S_PASS: if (fire) begin
          for (int h = 0; h < int'(HB) - 1; h++) hist[h] <= hist[h+1];
          hist[HB-1] <= out_data;
          xcnt <= xcnt_now;
          eos  <= eos_now;
          pcnt <= pcnt + 1;
          if (blk_end) begin
            if (done) begin
              st <= S_IDLE;
            end else begin
              rp       <= '0;
              npass    <= 32'(lb);
              kept_end <= kept_end + 32'(lb);
              st       <= S_REPLAY;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_lb_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && in_valid) |-> (linst_beats != '0));

endmodule
