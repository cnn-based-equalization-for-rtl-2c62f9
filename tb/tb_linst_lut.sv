// Self-checking test of the sub-sequence length table.
// Two instances: the default one (granularity 2*N_i*V_p = 1024 samples) and one with a
// granularity of V_p samples, which must give the paper's l_inst = 7320 for 80 Gsamples/s.
// For every table index the entry is checked against the timing model evaluated here in
// floating point: T_net(l) >= T_req, T_net(l - GRAN) < T_req (minimality), a multiple of the
// granularity, the unmet flag only where T_net(L_MAX) < T_req, and linst_beats = l/(N_i*V_p).
// Purely combinational; each index is applied for one time step.
module tb_linst_lut;
  import cnneq_pkg::*;

  localparam int NI = CNN_NI, VP = CNN_VP, OACT = 1024, LMAX = 16384;

  logic [6:0]  t_req = '0;
  logic [16:0] l_a, lb_a, l_b, lb_b;
  logic        u_a, u_b;

  linst_lut dut_a (.t_req(t_req), .linst(l_a), .linst_beats(lb_a), .unmet(u_a));
  linst_lut #(.GRAN(VP)) dut_b (.t_req(t_req), .linst(l_b), .linst_beats(lb_b), .unmet(u_b));

  int checks = 0, failures = 0;

  function automatic real tnet(int l);
    return real'(NI * VP) * 0.2 / (1.0 + 2.0 * real'(OACT) / real'(l));   // Gsamples/s
  endfunction

  task automatic check_entry(int t, int l, int gran, logic u, int lbeats);
    checks++;
    if (l % gran != 0 || l < gran || l > LMAX) failures++;
    checks++;
    if (lbeats != l / (NI * VP)) failures++;
    checks++;
    if (u != (tnet(LMAX) < real'(t))) failures++;
    if (!u) begin
      checks++;
      if (tnet(l) < real'(t)) begin failures++; $display("t=%0d l=%0d too short", t, l); end
      if (l > gran) begin
        checks++;
        if (tnet(l - gran) >= real'(t)) begin failures++; $display("t=%0d l=%0d not minimal", t, l); end
      end
    end else begin
      checks++;
      if (l != LMAX) failures++;
    end
  endtask

  initial begin
    for (int t = 1; t < 128; t++) begin
      t_req = 7'(t);
      #1;
      check_entry(t, int'(l_a), 2 * NI * VP, u_a, int'(lb_a));
      check_entry(t, int'(l_b), VP, u_b, int'(lb_b));
    end
    t_req = 7'd80;
    #1;
    checks++;
    if (l_b != 17'd7320) begin failures++; $display("paper value: got %0d", l_b); end
    checks++;
    if (l_a != 17'd8192 || lb_a != 17'd16) failures++;
    t_req = 7'd103;
    #1;
    checks++;
    if (!u_a || !u_b) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
