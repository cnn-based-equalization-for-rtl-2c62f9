// Self-checking test of the overlap generate module (4-sample beats, 2 overlap beats).
// Several sequences of different lengths, each with its own sub-sequence length, are sent
// with random input gaps and random output back-pressure. The expected output is built
// from the definition: with z = (OB zero beats, the sequence, zero beats), block n is
// z[n*l, n*l + l + 2*OB), blocks continue until the kept part n*l..(n+1)*l-1 covers the last
// input beat, blk_last closes every block and seq_last the final one. Counts how many
// blocks had to be completed with zero fill.
module tb_ogm;
  import cnneq_pkg::*;

  localparam int W = 4, A_W = 10, OB = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                  in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, busy;
  logic [W-1:0][A_W-1:0] in_data = '0, out_data;
  logic [15:0]           linst_beats = '0;
  tag_t                  out_tag;

  ogm #(.W(W), .A_W(A_W), .OB(OB), .LBW(16)) dut (.*);

  typedef struct packed { logic [W-1:0][A_W-1:0] d; tag_t t; } obeat_t;
  obeat_t exp_q[$];
  logic [W-1:0][A_W-1:0] x[$];
  int checks = 0, failures = 0, nacc = 0, zero_fill_blocks = 0;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) nacc++;
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
  end

  task automatic run_seq(int r, int lb);
    logic [W-1:0][A_W-1:0] z[$];
    int n = 0, b = 0, base;
    bit v = 0;
    x.delete();
    for (int i = 0; i < r; i++) begin
      logic [W-1:0][A_W-1:0] d;
      for (int s = 0; s < W; s++) d[s] = A_W'($urandom);
      x.push_back(d);
    end
    for (int i = 0; i < OB; i++) z.push_back('0);
    foreach (x[i]) z.push_back(x[i]);
    while (1) begin
      for (int i = 0; i < lb + 2*OB; i++) begin
        obeat_t e;
        e.d = (n*lb + i < z.size()) ? z[n*lb + i] : '0;
        e.t.blk_last = (i == lb + 2*OB - 1);
        e.t.seq_last = e.t.blk_last && ((n + 1) * lb >= r);
        exp_q.push_back(e);
      end
      if (n*lb + lb + 2*OB > z.size()) zero_fill_blocks++;
      if ((n + 1) * lb >= r) break;
      n++;
    end
    base = nacc;
    linst_beats = 16'(lb);
    while (nacc - base < r) begin
      @(negedge clk);
      if (!(v && nacc - base == b)) begin
        b = nacc - base;
        v = (b < r) && ($urandom_range(0, 3) != 0);
      end
      in_valid = v;
      if (b < r) begin
        in_data = x[b];
        in_last = (b == r - 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
    in_last  = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        run_seq(13, 4);
        run_seq(12, 6);
        run_seq(1, 3);
        run_seq(9, 4);
        run_seq(20, 2);
      end
      begin
        while (1) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join_any
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("left %0d", exp_q.size()); end
    checks++;
    if (zero_fill_blocks == 0) failures++;
    $display("zero-filled blocks: %0d", zero_fill_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
