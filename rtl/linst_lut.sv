// Sub-sequence length look-up table: required throughput in, block length l_inst out.
//
// Each block of l_inst samples is processed together with 2*o_act overlap samples, so the
// net throughput of the equalizer is
//   T_net = N_i * V_p * f_clk / (1 + 2*o_act / l_inst)
// and grows with l_inst, while the latency grows linearly with it. The table holds, for
// every required throughput T_req (in Gsamples/s, the index), the smallest l_inst that is a
// multiple of GRAN and reaches T_net >= T_req. Where even L_MAX does not reach T_req, the
// entry is L_MAX and unmet is raised.
//
// The table contents follow the paper's timing model; here they are computed at
// elaboration by the function below instead of being produced by an offline generator.
// GRAN defaults to 2*N_i*V_p samples, the granularity the stream tree of this design needs;
// with GRAN = V_p the table reproduces the paper's l_inst = 7320 for 80 Gsamples/s.
// The read is combinational.
module linst_lut
  import cnneq_pkg::*;
#(
  parameter int unsigned NI        = cnneq_pkg::CNN_NI,
  parameter int unsigned VP        = cnneq_pkg::CNN_VP,
  parameter int unsigned F_CLK_MHZ = cnneq_pkg::CNN_F_CLK_MHZ,
  parameter int unsigned OACT      = cnneq_pkg::o_act(cnneq_pkg::CNN_K, cnneq_pkg::CNN_VP,
                                                      cnneq_pkg::CNN_L, cnneq_pkg::CNN_NI),
  parameter int unsigned GRAN      = 2 * NI * VP,
  parameter int unsigned L_MAX     = 16384,
  parameter int unsigned T_W       = 7,
  parameter int unsigned LW        = 17
) (
  input  logic [T_W-1:0] t_req,
  output logic [LW-1:0]  linst,        // samples
  output logic [LW-1:0]  linst_beats,  // beats of N_i*V_p samples
  output logic           unmet
);
  localparam int unsigned NT = 1 << T_W;
  typedef logic [NT-1:0][LW:0] table_t;   // {unmet, l_inst}

  function automatic table_t gen_table();
    table_t      tab;
    longint      tmax, need, l;
    logic        miss;
    tmax = longint'(NI) * VP * F_CLK_MHZ;           // Msamples/s
    for (int t = 0; t < int'(NT); t++) begin
      need = longint'(t) * 1000;
      miss = 1'b0;
      if (need == 0) l = longint'(GRAN);
      else if (tmax <= need) begin
        l    = longint'(L_MAX);
        miss = 1'b1;
      end else begin
        l = (2 * longint'(OACT) * need + (tmax - need) - 1) / (tmax - need);
        l = ((l + longint'(GRAN) - 1) / longint'(GRAN)) * longint'(GRAN);
        if (l < longint'(GRAN)) l = longint'(GRAN);
        if (l > longint'(L_MAX)) begin
          l    = longint'(L_MAX);
          miss = 1'b1;
        end
      end
      tab[t] = {miss, LW'(l)};
    end
    return tab;
  endfunction

  localparam table_t TABLE = gen_table();

  assign {unmet, linst} = TABLE[t_req];
  assign linst_beats    = linst / LW'(NI * VP);

endmodule
