// End-to-end test of the equalizer top at a reduced size (N_i = 4 instances, V_p = 8,
// L = 3, K = 9, C = 5, N_os = 2, so 32 samples per beat and o_act = 128 samples = 4 beats;
// L_MAX = 2048 so that a high throughput request cannot be met).
//
// Sequences of different lengths and throughput requests are sent through the top with
// random input gaps and random output back-pressure, one of them after new coefficients
// were written. Every output symbol and decision is compared with the integer reference
// network: the output symbol q of a sequence x equals symbol q + o_act/2 of the reference
// network run over (o_act zeros, x, zeros), because the left overlap is longer than the
// receptive field of the network. The last sequence runs at full rate and checks the
// throughput model: the number of cycles it takes must stay within one block time plus a
// fill allowance of the ideal count, blocks * (l_inst + 2*o_act) / (N_i*V_p).
//
// Each mechanism is counted and the test fails if one never happened: input stall,
// output back-pressure, zero fill after a sequence end, block split (more than one block per
// sequence), both split directions used, change of l_inst between sequences, unmet
// throughput request, coefficient reload.
module tb_cnn_equalizer_top;
  import cnneq_pkg::*;
  import cnn_ref_pkg::*;

  localparam int NI = 4, VP = 8, NL = 3, K = 9, C = 5, NOS = 2;
  localparam int A_W = 10, W_W = 13, B_W = 24, LMAX = 2048;
  localparam int W = NI * VP;
  localparam int OACT = o_act(K, VP, NL, NI);   // 128
  localparam int OB = OACT / W;                 // 4 beats

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic [6:0]            t_req = '0;
  logic                  in_valid = 0, in_ready, in_last = 0;
  logic [W-1:0][A_W-1:0] in_data = '0, out_soft;
  logic                  coef_we = 0;
  logic [9:0]            coef_addr = '0;
  logic [B_W-1:0]        coef_wdata = '0;
  logic                  out_valid, out_ready = 0, out_last, treq_unmet, busy;
  logic [W-1:0]          out_bits;
  logic [16:0]           linst;

  cnn_equalizer_top #(.NI(NI), .L_MAX(LMAX)) dut (.*);

  typedef struct packed { logic [W-1:0][A_W-1:0] d; logic l; } obeat_t;
  obeat_t exp_q[$];
  int coef[];
  int checks = 0, failures = 0, nacc = 0, nout = 0;
  int in_stalls = 0, out_stalls = 0, zero_fill = 0, split_seqs = 0, linst_changes = 0;
  int unmet_seen = 0, coef_reloads = 0, side0 = 0, side1 = 0;
  int last_linst = -1;
  bit full_rate = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) nacc++;
    if (in_valid && !in_ready) in_stalls++;
    if (out_valid && !out_ready) out_stalls++;
    if (dut.u_tree.g_node.s_valid[0] && dut.u_tree.g_node.s_ready[0]) side0++;
    if (dut.u_tree.g_node.s_valid[1] && dut.u_tree.g_node.s_ready[1]) side1++;
    if (out_valid && out_ready) begin
      obeat_t e;
      nout++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        checks++;
        if ({out_soft, out_last} != e) begin
          failures++;
          if (failures < 10) $display("beat %0d mismatch", nout);
        end
        for (int s = 0; s < W; s++) begin
          checks++;
          if (out_bits[s] != !e.d[s][A_W-1]) failures++;
        end
      end
    end
  end

  task automatic load_coef();
    random_coef(VP, NL, K, C, 300, 20000, B_W, coef);
    foreach (coef[a]) begin
      @(negedge clk);
      coef_we    = 1;
      coef_addr  = 10'(a);
      coef_wdata = B_W'(coef[a]);
    end
    @(negedge clk);
    coef_we = 0;
  endtask

  // sends one sequence of r beats with throughput request t, returns the cycles it took
  task automatic run_seq(int r, int t, output int cycles);
    int x[], z[], y[];
    int lb, nblk, nsym, base, b = 0, c0;
    bit v = 0;
    t_req = 7'(t);
    #1;
    lb = int'(linst) / W;
    if (treq_unmet) unmet_seen++;
    if (last_linst >= 0 && last_linst != int'(linst)) linst_changes++;
    last_linst = int'(linst);
    nblk = (r + lb - 1) / lb;
    if (nblk * lb > r) zero_fill++;
    if (nblk > 1) split_seqs++;
    x = new[r * W];
    foreach (x[i]) x[i] = int'($urandom_range(0, 600)) - 300;
    z = new[OACT + nblk * lb * W + OACT];
    foreach (z[i]) z[i] = 0;
    foreach (x[i]) z[OACT + i] = x[i];
    network(z, VP, NL, K, C, NOS, coef, W_W, B_W, CNN_SHIFT, A_W, y);
    nsym = nblk * lb * W / NOS;
    for (int j = 0; j < nsym / W; j++) begin
      obeat_t e;
      for (int s = 0; s < W; s++) e.d[s] = A_W'(y[j*W + s + OACT/NOS]);
      e.l = (j == nsym / W - 1);
      exp_q.push_back(e);
    end
    base = nacc;
    c0 = 0;
    while (nacc - base < r) begin
      @(negedge clk);
      c0++;
      if (!(v && nacc - base == b)) begin
        b = nacc - base;
        v = (b < r) && (full_rate || $urandom_range(0, 3) != 0);
      end
      in_valid = v;
      if (b < r) begin
        for (int s = 0; s < W; s++) in_data[s] = A_W'(x[b*W + s]);
        in_last = (b == r - 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
    in_last  = 0;
    while (busy) begin @(negedge clk); c0++; end
    cycles = c0;
  endtask

  // waits until every expected beat has come out, at most 20000 cycles
  task automatic drain();
    int n = 0;
    while (exp_q.size() != 0 && n < 20000) begin
      @(negedge clk);
      n++;
    end
  endtask

  initial begin
    int cyc, lb, ideal;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_coef();
    fork
      begin
        run_seq(75, 5, cyc);     // l_inst = 960: 3 blocks, zero fill
        run_seq(16, 2, cyc);     // l_inst = 128: 4 blocks, exact multiple
        run_seq(1, 5, cyc);      // single beat
        drain();
        load_coef();
        coef_reloads++;
        run_seq(100, 6, cyc);    // unmet: l_inst = L_MAX
        run_seq(37, 3, cyc);
        drain();
        full_rate = 1;
        run_seq(300, 5, cyc);    // 10 blocks at full rate
        lb = int'(linst) / W;
        ideal = 10 * (lb + 2 * OB);
        $display("full rate: %0d cycles for %0d blocks, model %0d", cyc, 10, ideal);
        checks++;
        if (cyc > ideal + (lb + 2 * OB) + 64) begin
          failures++;
          $display("throughput below the model");
        end
        drain();
      end
      begin
        while (1) begin
          @(negedge clk);
          out_ready = full_rate || ($urandom_range(0, 2) != 0);
        end
      end
    join_any
    repeat (50) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing %0d beats", exp_q.size()); end
    $display("in_stalls=%0d out_stalls=%0d zero_fill=%0d split_seqs=%0d side0=%0d side1=%0d",
             in_stalls, out_stalls, zero_fill, split_seqs, side0, side1);
    $display("linst_changes=%0d unmet_seen=%0d coef_reloads=%0d", linst_changes, unmet_seen,
             coef_reloads);
    checks += 9;
    if (in_stalls == 0) failures++;
    if (out_stalls == 0) failures++;
    if (zero_fill == 0) failures++;
    if (split_seqs == 0) failures++;
    if (side0 == 0) failures++;
    if (side1 == 0) failures++;
    if (linst_changes == 0) failures++;
    if (unmet_seen == 0) failures++;
    if (coef_reloads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
