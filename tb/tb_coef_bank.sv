// Self-checking test of the coefficient bank with the paper's network size (V_p=8, L=3,
// K=9, C=5: 648 words). Checks that reset clears every output, then writes a random word to
// every address in random order and compares every weight and offset output with the
// address map w1, b1, (w_mid, b_mid) per middle layer, w_L, b_L. Also checks that a write
// becomes visible one cycle later and that a write beyond the last address changes nothing.
module tb_coef_bank;
  import cnneq_pkg::*;

  localparam int VP = CNN_VP, L = CNN_L, K = CNN_K, C = CNN_C, W_W = CNN_W_W, B_W = CNN_B_W;
  localparam int NC = n_coef(K, C, VP, L);
  localparam int MID0 = C*K + C, MIDSZ = C*C*K + C, LAST0 = MID0 + (L-2)*MIDSZ;

  logic clk = 0, rst_n = 0, we = 0;
  always #5 clk = !clk;

  logic [9:0]     waddr = '0;
  logic [B_W-1:0] wdata = '0;
  logic [C-1:0][0:0][K-1:0][W_W-1:0]   w_first;
  logic [C-1:0][B_W-1:0]               b_first;
  logic [0:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid;
  logic [0:0][C-1:0][B_W-1:0]          b_mid;
  logic [VP-1:0][C-1:0][K-1:0][W_W-1:0] w_last;
  logic [VP-1:0][B_W-1:0]               b_last;

  coef_bank dut (.*);

  logic [B_W-1:0] model [NC];
  int checks = 0, failures = 0;

  task automatic compare();
    for (int o = 0; o < C; o++) begin
      for (int k = 0; k < K; k++) begin
        checks++;
        if (w_first[o][0][k] != model[o*K + k][W_W-1:0]) failures++;
      end
      checks++;
      if (b_first[o] != model[C*K + o]) failures++;
      for (int i = 0; i < C; i++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (w_mid[0][o][i][k] != model[MID0 + (o*C + i)*K + k][W_W-1:0]) failures++;
        end
      checks++;
      if (b_mid[0][o] != model[MID0 + C*C*K + o]) failures++;
    end
    for (int o = 0; o < VP; o++) begin
      for (int i = 0; i < C; i++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (w_last[o][i][k] != model[LAST0 + (o*C + i)*K + k][W_W-1:0]) failures++;
        end
      checks++;
      if (b_last[o] != model[LAST0 + VP*C*K + o]) failures++;
    end
  endtask

  initial begin
    int order[NC];
    for (int a = 0; a < NC; a++) begin model[a] = '0; order[a] = a; end
    order.shuffle();
    repeat (3) @(negedge clk);
    rst_n = 1;
    compare();
    foreach (order[i]) begin
      model[order[i]] = B_W'($urandom);
      we    = 1;
      waddr = 10'(order[i]);
      wdata = model[order[i]];
      @(negedge clk);
    end
    we = 0;
    compare();
    // a single write shows up after one clock edge
    waddr = 10'(LAST0);
    wdata = ~model[LAST0];
    we    = 1;
    #1;
    checks++;
    if (w_last[0][0][0] != model[LAST0][W_W-1:0]) failures++;
    @(negedge clk);
    we = 0;
    model[LAST0] = ~model[LAST0];
    compare();
    // out-of-range write is ignored
    waddr = 10'(NC);
    wdata = '1;
    we    = 1;
    @(negedge clk);
    we = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
