// Self-checking test of one CNN instance (default network: V_p = 8, L = 3, K = 9, C = 5).
//
// Random coefficients and random samples; the instance output is compared symbol by symbol
// with the integer reference model run over the same sample stream. Phase 1 streams with
// valid and ready always high and checks the rate (one input beat per cycle, one output beat
// every N_os cycles) and the pipeline latency (10 cycles from the first input to the first
// output: 3 per layer plus one extra input beat for the stride of the last layer). Phase 2
// adds random input gaps and random output back-pressure.
module tb_cnn_instance;
  import cnneq_pkg::*;
  import cnn_ref_pkg::*;

  localparam int VP = 8, NL = 3, K = 9, C = 5, NOS = 2;
  localparam int A_W = 10, W_W = 13, B_W = 24;
  localparam int NB1 = 200, NB2 = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic                     in_valid, in_ready, out_valid, out_ready;
  logic [VP-1:0][A_W-1:0]   in_data, out_data;
  tag_t                     in_tag, out_tag;
  logic [C-1:0][0:0][K-1:0][W_W-1:0]        w_first;
  logic [C-1:0][B_W-1:0]                    b_first;
  logic [0:0][C-1:0][C-1:0][K-1:0][W_W-1:0] w_mid;
  logic [0:0][C-1:0][B_W-1:0]               b_mid;
  logic [VP-1:0][C-1:0][K-1:0][W_W-1:0]     w_last;
  logic [VP-1:0][B_W-1:0]                   b_last;

  cnn_instance dut (.*);

  int coef[], x[], y[];
  int checks = 0, failures = 0;
  int cycle = 0, first_in = -1, first_out = -1, stalls1 = 0, outs1 = 0;
  int n_out = 0;
  int n_acc = 0;

  always @(posedge clk) if (phase2 && in_valid && in_ready) n_acc++;
  bit phase2 = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (first_out < 0) first_out = cycle;
      if (!phase2) outs1++;
      for (int o = 0; o < VP; o++) begin
        checks++;
        if ($signed(out_data[o]) != y[n_out*VP + o]) begin
          failures++;
          if (failures < 10) $display("mismatch beat %0d sym %0d: got %0d exp %0d",
                                      n_out, o, $signed(out_data[o]), y[n_out*VP + o]);
        end
      end
      n_out++;
    end
  end

  initial begin
    int b;
    random_coef(VP, NL, K, C, 300, 20000, B_W, coef);
    for (int o = 0; o < C; o++) begin
      for (int kk = 0; kk < K; kk++) w_first[o][0][kk] = W_W'(coef[o*K + kk]);
      b_first[o] = B_W'(coef[C*K + o]);
    end
    for (int o = 0; o < C; o++) begin
      for (int i = 0; i < C; i++)
        for (int kk = 0; kk < K; kk++) w_mid[0][o][i][kk] = W_W'(coef[C*K + C + (o*C + i)*K + kk]);
      b_mid[0][o] = B_W'(coef[C*K + C + C*C*K + o]);
    end
    for (int o = 0; o < VP; o++) begin
      for (int i = 0; i < C; i++)
        for (int kk = 0; kk < K; kk++)
          w_last[o][i][kk] = W_W'(coef[2*(C*K + C) + C*C*K - C*K + (o*C + i)*K + kk]);
      b_last[o] = B_W'(coef[2*(C*K + C) + C*C*K - C*K + VP*C*K + o]);
    end
    x = new[(NB1 + NB2) * VP];
    foreach (x[i]) x[i] = int'($urandom_range(0, 600)) - 300;
    network(x, VP, NL, K, C, NOS, coef, W_W, B_W, 10, A_W, y);

    in_valid = 0; in_data = '0; in_tag = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // phase 1: full rate
    b = 0;
    while (b < NB1) begin
      in_valid = 1;
      for (int s = 0; s < VP; s++) in_data[s] = A_W'(x[b*VP + s]);
      @(posedge clk);
      if (first_in < 0) first_in = cycle - 1;
      if (!in_ready) stalls1++;
      else b++;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (stalls1 != 0) begin failures++; $display("stalls at full rate: %0d", stalls1); end
    checks++;
    if (outs1 != NB1 / NOS) begin failures++; $display("phase 1 outputs %0d", outs1); end
    checks++;
    if (first_out - first_in != 10) begin
      failures++; $display("latency %0d cycles, expected 10", first_out - first_in);
    end
    // phase 2: random gaps and back-pressure (inputs change on the falling edge)
    phase2 = 1;
    n_acc = b;
    while (n_acc < NB1 + NB2) begin
      @(negedge clk);
      b = n_acc;
      in_valid  = (b < NB1 + NB2) && ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      if (b < NB1 + NB2) for (int s = 0; s < VP; s++) in_data[s] = A_W'(x[b*VP + s]);
    end
    in_valid = 0;
    while (n_out < (NB1 + NB2) / NOS) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk);
    out_ready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_out != (NB1 + NB2) / NOS) begin failures++; $display("output count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
