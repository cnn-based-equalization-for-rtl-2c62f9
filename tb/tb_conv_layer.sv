// Self-checking test of the convolution layer in two configurations of the network:
// the first layer (1 -> 5 channels, 8 positions per beat, stride 8, ReLU) and the last
// layer (5 -> 8 channels, 1 position per beat, stride 2, no ReLU). Random inputs, random
// weights and offsets large enough to exercise saturation; the outputs are compared with
// the reference model. The enable is toggled randomly in the second half to check that a
// stall freezes the pipeline; with the enable high the latency must be 3 cycles.
module tb_conv_layer;
  import cnneq_pkg::*;
  import cnn_ref_pkg::*;

  localparam int A_W = 10, W_W = 13, B_W = 24, K = 9;
  localparam int NB = 400;

  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = !clk;

  // DUT A: first layer
  logic                          a_in_valid, a_out_valid;
  logic [7:0][0:0][A_W-1:0]      a_in_data;
  tag_t                          a_in_tag, a_out_tag, b_in_tag, b_out_tag;
  logic [4:0][0:0][K-1:0][W_W-1:0] a_w;
  logic [4:0][B_W-1:0]           a_b;
  logic [4:0][A_W-1:0]           a_out_data;
  // DUT B: last layer
  logic                          b_in_valid, b_out_valid;
  logic [0:0][4:0][A_W-1:0]      b_in_data;
  logic [7:0][4:0][K-1:0][W_W-1:0] b_w;
  logic [7:0][B_W-1:0]           b_b;
  logic [7:0][A_W-1:0]           b_out_data;

  conv_layer #(.IC(1), .OC(5), .K(K), .IN_POS(8), .STRIDE(8), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .en, .in_valid(a_in_valid), .in_data(a_in_data), .in_tag(a_in_tag),
    .weights(a_w), .bias(a_b), .out_valid(a_out_valid), .out_data(a_out_data),
    .out_tag(a_out_tag));
  conv_layer #(.IC(5), .OC(8), .K(K), .IN_POS(1), .STRIDE(2), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .en, .in_valid(b_in_valid), .in_data(b_in_data), .in_tag(b_in_tag),
    .weights(b_w), .bias(b_b), .out_valid(b_out_valid), .out_data(b_out_data),
    .out_tag(b_out_tag));

  int ca[], cb[], xa[], xb[], ya[], yb[];
  int na, nb_out, checks = 0, failures = 0, ia = 0, ib = 0;
  int cycle = 0, lat_checks = 0;
  int in_cycles[$];
  bit rand_en = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en) begin
    if (a_in_valid) in_cycles.push_back(cycle);
    if (a_out_valid) begin
      begin
        int t_in;
        t_in = in_cycles.pop_front();
        if (!rand_en) begin
          checks++;
          lat_checks++;
          if (cycle - t_in != 3) begin
            failures++; $display("layer A latency %0d", cycle - t_in);
          end
        end
      end
      for (int o = 0; o < 5; o++) begin
        checks++;
        if ($signed(a_out_data[o]) != ya[ia*5 + o]) begin
          failures++;
          if (failures < 10) $display("A %0d/%0d got %0d exp %0d", ia, o, $signed(a_out_data[o]), ya[ia*5+o]);
        end
      end
      ia++;
    end
    if (b_out_valid) begin
      for (int o = 0; o < 8; o++) begin
        checks++;
        if ($signed(b_out_data[o]) != yb[ib*8 + o]) begin
          failures++;
          if (failures < 10) $display("B %0d/%0d got %0d exp %0d", ib, o, $signed(b_out_data[o]), yb[ib*8+o]);
        end
      end
      checks++;
      if (b_out_tag.blk_last != (ib % 10 == 9)) begin failures++; $display("B tag %0d", ib); end
      ib++;
    end
  end

  initial begin
    int b;
    ca = new[5*K + 5];
    foreach (ca[i]) ca[i] = int'($urandom_range(0, 2000)) - 1000;
    cb = new[8*5*K + 8];
    foreach (cb[i]) cb[i] = int'($urandom_range(0, 600)) - 300;
    for (int o = 0; o < 5; o++) begin
      for (int k = 0; k < K; k++) a_w[o][0][k] = W_W'(ca[o*K + k]);
      a_b[o] = B_W'(ca[5*K + o]);
      ca[5*K + o] = ca[5*K + o] & ((1 << B_W) - 1);
    end
    for (int o = 0; o < 8; o++) begin
      for (int i = 0; i < 5; i++) for (int k = 0; k < K; k++) b_w[o][i][k] = W_W'(cb[(o*5+i)*K + k]);
      b_b[o] = B_W'(cb[8*5*K + o]);
      cb[8*5*K + o] = cb[8*5*K + o] & ((1 << B_W) - 1);
    end
    foreach (ca[i]) ca[i] = ca[i] & ((1 << B_W) - 1);
    foreach (cb[i]) cb[i] = cb[i] & ((1 << B_W) - 1);
    xa = new[NB * 8];
    foreach (xa[i]) xa[i] = int'($urandom_range(0, 1023)) - 512;
    xb = new[NB * 5];
    foreach (xb[i]) xb[i] = int'($urandom_range(0, 1023)) - 512;
    layer(xa, NB*8, 1, 5, K, 8, ca, 0, 5*K, W_W, B_W, 10, A_W, 1'b1, ya, na);
    layer(xb, NB, 5, 8, K, 2, cb, 0, 8*5*K, W_W, B_W, 10, A_W, 1'b0, yb, nb_out);

    a_in_valid = 0; b_in_valid = 0; a_in_data = '0; b_in_data = '0;
    a_in_tag = '0; b_in_tag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    b = 0;
    while (b < NB) begin
      @(negedge clk);
      if (b >= NB / 2) begin
        rand_en = 1;
        en = ($urandom_range(0, 2) != 0);
      end
      a_in_valid = ($urandom_range(0, 3) != 0);
      b_in_valid = a_in_valid;
      for (int s = 0; s < 8; s++) a_in_data[s] = A_W'(xa[b*8 + s]);
      for (int i = 0; i < 5; i++) b_in_data[0][i] = A_W'(xb[b*5 + i]);
      b_in_tag.blk_last = (b % 20 == 19);
      @(posedge clk);
      if (a_in_valid && en) b++;
    end
    @(negedge clk);
    a_in_valid = 0; b_in_valid = 0; en = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (ia != na || ib != nb_out) begin failures++; $display("counts %0d/%0d %0d/%0d", ia, na, ib, nb_out); end
    checks++;
    if (lat_checks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
