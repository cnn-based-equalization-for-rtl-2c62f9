// Self-checking test of the split stream module (8-sample input, two 4-sample outputs,
// FIFO depth 3). Blocks of random length (1..6 beats, closed by blk_last, some with
// seq_last) and random samples are sent with random gaps; both outputs see random
// back-pressure. Every output half-beat, with its tag, is compared with the expected block
// assignment (block j goes to output j mod 2, lower half first). The test also requires
// that input stalls occurred (the FIFO of the active output filled up) and checks the
// one-cycle latency of an empty module.
module tb_ssm;
  import cnneq_pkg::*;

  localparam int W = 8, A_W = 10, NBLK = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                  in_valid = 0, in_ready, o0_valid, o1_valid, o0_ready = 0, o1_ready = 0;
  logic [W-1:0][A_W-1:0] in_data = '0;
  tag_t                  in_tag = '0, o0_tag, o1_tag;
  logic [W/2-1:0][A_W-1:0] o0_data, o1_data;

  ssm #(.W(W), .A_W(A_W), .DEPTH(3)) dut (.*);

  typedef struct packed { logic [W/2-1:0][A_W-1:0] d; tag_t t; } half_t;
  half_t exp_q [2][$];
  logic [W-1:0][A_W-1:0] beats[$];
  tag_t tags[$];
  int checks = 0, failures = 0, nacc = 0, stalls = 0, cycle = 0, t_first_in = -1, t_first_out = -1;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        nacc++;
        if (t_first_in < 0) t_first_in = cycle;
      end
      if (in_valid && !in_ready) stalls++;
      if (o0_valid && o0_ready) check(0, {o0_data, o0_tag});
      if (o1_valid && o1_ready) check(1, {o1_data, o1_tag});
      if (t_first_out < 0 && o0_valid) t_first_out = cycle;
    end
  end

  task automatic check(int j, half_t got);
    half_t e;
    checks++;
    if (exp_q[j].size() == 0) begin
      failures++; $display("unexpected output on %0d", j); return;
    end
    e = exp_q[j].pop_front();
    if (got != e) begin
      failures++;
      if (failures < 10) $display("out %0d mismatch: got %h exp %h", j, got, e);
    end
  endtask

  initial begin
    int blk = 0, b, total;
    // build the stimulus and the expectation
    for (blk = 0; blk < NBLK; blk++) begin
      int len;
      len = $urandom_range(1, 6);
      for (int i = 0; i < len; i++) begin
        logic [W-1:0][A_W-1:0] d;
        tag_t t;
        for (int s = 0; s < W; s++) d[s] = A_W'($urandom);
        t.blk_last = (i == len - 1);
        t.seq_last = t.blk_last && (blk % 7 == 6);
        beats.push_back(d);
        tags.push_back(t);
        exp_q[blk % 2].push_back({d[W/2-1:0], tag_t'('0)});
        exp_q[blk % 2].push_back({d[W-1:W/2], t});
      end
    end
    total = beats.size();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // first beat alone with ready outputs: latency
    @(negedge clk);
    o0_ready = 1; o1_ready = 1;
    b = 0;
    while (nacc < total) begin
      @(negedge clk);
      if (!(in_valid && nacc == b)) begin
        b = nacc;
        in_valid = (b < total) && ($urandom_range(0, 4) != 0);
        if (b < total) begin
          in_data = beats[b];
          in_tag  = tags[b];
        end
      end
      if (cycle > 40) begin
        o0_ready = ($urandom_range(0, 2) == 0);
        o1_ready = ($urandom_range(0, 2) == 0);
      end
    end
    @(negedge clk);
    in_valid = 0;
    o0_ready = 1; o1_ready = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q[0].size() != 0 || exp_q[1].size() != 0) begin
      failures++; $display("left over %0d %0d", exp_q[0].size(), exp_q[1].size());
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no input stall seen"); end
    checks++;
    if (t_first_out - t_first_in != 1) begin
      failures++; $display("latency %0d", t_first_out - t_first_in);
    end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
