// Self-checking test of the merge stream module (two 4-symbol inputs, one 8-symbol output,
// FIFO depth 2). Blocks 0, 2, 4, ... arrive on input 0 and blocks 1, 3, 5, ... on input 1,
// each of an even number of beats; the two producers run independently with random gaps
// and the output sees random back-pressure. The output must carry the blocks in their
// original order, every two input beats packed into one output beat (earlier beat in the
// lower half) with the tag of the second beat.
module tb_msm;
  import cnneq_pkg::*;

  localparam int W = 4, A_W = 10, NBLK = 50;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                  i0_valid = 0, i1_valid = 0, i0_ready, i1_ready, out_valid, out_ready = 0;
  logic [W-1:0][A_W-1:0] i0_data = '0, i1_data = '0;
  tag_t                  i0_tag = '0, i1_tag = '0, out_tag;
  logic [2*W-1:0][A_W-1:0] out_data;

  msm #(.W(W), .A_W(A_W), .DEPTH(2)) dut (.*);

  typedef struct packed { logic [W-1:0][A_W-1:0] d; tag_t t; } beat_t;
  typedef struct packed { logic [2*W-1:0][A_W-1:0] d; tag_t t; } obeat_t;
  beat_t  src [2][$];
  obeat_t exp_q[$];
  int checks = 0, failures = 0, nacc[2] = '{0, 0}, waits = 0;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (i0_valid && i0_ready) nacc[0]++;
    if (i1_valid && i1_ready) nacc[1]++;
    if (out_valid && out_ready) begin
      obeat_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if ({out_data, out_tag} != e) begin
          failures++;
          if (failures < 10) $display("mismatch got %h exp %h", {out_data, out_tag}, e);
        end
      end
    end
    if (!out_valid && exp_q.size() != 0) waits++;
  end

  task automatic drive(int j);
    int b = 0;
    bit v = 0;
    while (nacc[j] < src[j].size()) begin
      @(negedge clk);
      if (!(v && nacc[j] == b)) begin
        b = nacc[j];
        v = (b < src[j].size()) && ($urandom_range(0, 2) != 0);
      end
      if (j == 0) begin
        i0_valid = v;
        if (b < src[j].size()) {i0_data, i0_tag} = src[j][b];
      end else begin
        i1_valid = v;
        if (b < src[j].size()) {i1_data, i1_tag} = src[j][b];
      end
    end
    @(negedge clk);
    if (j == 0) i0_valid = 0; else i1_valid = 0;
  endtask

  initial begin
    for (int blk = 0; blk < NBLK; blk++) begin
      int len;
      len = 2 * $urandom_range(1, 4);
      for (int i = 0; i < len; i += 2) begin
        beat_t a, c;
        for (int s = 0; s < W; s++) begin a.d[s] = A_W'($urandom); c.d[s] = A_W'($urandom); end
        a.t = '0;
        c.t.blk_last = (i == len - 2);
        c.t.seq_last = c.t.blk_last && (blk % 5 == 4);
        src[blk % 2].push_back(a);
        src[blk % 2].push_back(c);
        exp_q.push_back({c.d, a.d, c.t});
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      drive(0);
      drive(1);
      begin
        while (exp_q.size() != 0) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("left %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
