// Self-checking test of the slicer at its default width of 512 symbols: random soft values
// plus the edge values 0, -1, the largest and the smallest are compared with the decision
// rule bit = (soft >= 0). Combinational; each vector is applied for one time step.
module tb_slicer;
  import cnneq_pkg::*;

  localparam int N = 512, A_W = CNN_A_W;

  logic [N-1:0][A_W-1:0] sym_in = '0;
  logic [N-1:0]          dec_out;

  slicer dut (.sym_in(sym_in), .dec_out(dec_out));

  int checks = 0, failures = 0;

  initial begin
    for (int v = 0; v < 40; v++) begin
      for (int n = 0; n < N; n++) begin
        case (n % 8)
          0:       sym_in[n] = '0;
          1:       sym_in[n] = '1;
          2:       sym_in[n] = {1'b0, {(A_W-1){1'b1}}};
          3:       sym_in[n] = {1'b1, {(A_W-1){1'b0}}};
          default: sym_in[n] = A_W'($urandom);
        endcase
      end
      #1;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (dec_out[n] != !sym_in[n][A_W-1]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
