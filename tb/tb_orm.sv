// Self-checking test of the overlap remove module (2-sample beats, 2 overlap beats per side).
// Random blocks of 5..12 beats, some closing a sequence, are sent with random input gaps and
// random output back-pressure. The expected output is every block without its first and
// last DROP beats, with out_last on the final kept beat of a block that carries seq_last.
// Counts the dropped beats and the stalls caused by back-pressure.
module tb_orm;
  import cnneq_pkg::*;

  localparam int W = 2, A_W = 10, DROP = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                  in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [W-1:0][A_W-1:0] in_data = '0, out_data;
  tag_t                  in_tag = '0;

  orm #(.W(W), .A_W(A_W), .DROP(DROP)) dut (.*);

  typedef struct packed { logic [W-1:0][A_W-1:0] d; tag_t t; } ibeat_t;
  typedef struct packed { logic [W-1:0][A_W-1:0] d; logic l; } obeat_t;
  ibeat_t in_q[$];
  obeat_t exp_q[$];
  int checks = 0, failures = 0, nacc = 0, stalls = 0, dropped = 0;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) nacc++;
    if (in_valid && !in_ready) stalls++;
    if (out_valid && out_ready) begin
      obeat_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if ({out_data, out_last} != e) begin
          failures++;
          if (failures < 10) $display("mismatch got %h exp %h", {out_data, out_last}, e);
        end
      end
    end
  end

  initial begin
    for (int blk = 0; blk < 60; blk++) begin
      automatic int nb = $urandom_range(2*DROP + 1, 12);
      automatic bit seq = ($urandom_range(0, 3) == 0) || (blk == 59);
      for (int i = 0; i < nb; i++) begin
        ibeat_t b;
        for (int s = 0; s < W; s++) b.d[s] = A_W'($urandom);
        b.t.blk_last = (i == nb - 1);
        b.t.seq_last = b.t.blk_last && seq;
        in_q.push_back(b);
        if (i >= DROP && i < nb - DROP) exp_q.push_back({b.d, seq && (i == nb - DROP - 1)});
        else dropped++;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        automatic int n = in_q.size(), b = 0;
        automatic bit v = 0;
        while (nacc < n) begin
          @(negedge clk);
          if (!(v && nacc == b)) begin
            b = nacc;
            v = (b < n) && ($urandom_range(0, 3) != 0);
          end
          in_valid = v;
          if (b < n) {in_data, in_tag} = in_q[b];
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (1) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join_any
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("left %0d", exp_q.size()); end
    checks++;
    if (stalls == 0) failures++;
    $display("dropped beats: %0d, input stalls: %0d", dropped, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
