// tb_pca_layer: self-checking test of the PCA projection T = X * W_L run as a
// dense layer without ReLU on the DNN kernel (default N_PU = 4, N_PE = 8).
// A 50-element feature vector is projected onto 10 random "eigenvector"
// columns; the projections, which are negative as often as positive, must
// match a reference product bit for bit, and the latency must be
// 1 + G*C + 3 clock edges with G = 3 groups and C = 7 chunks.
module tb_pca_layer;
  import deepfense_pkg::*;
  localparam int P = 50, L = 10, FRAC = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, b_we, l_we, nl_we, x_we, start, busy, done;
  logic [7:0] w_addr;
  logic [4:0] w_lane;
  logic signed [15:0] w_data, b_data, x_data, rd_data;
  logic [5:0] b_addr;
  logic [1:0] l_idx;
  layer_desc_t l_desc;
  logic [2:0] nl_data;
  logic [6:0] x_addr, rd_addr;
  logic [11:0] out_dim;

  dnn_kernel #(.MAX_ACT(128), .WMEM_WORDS(256), .BMEM_DEPTH(64)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  shortint WL [L][P];
  shortint X [P];
  int negatives = 0;

  initial begin
    int cyc;
    {w_we, b_we, l_we, nl_we, x_we, start} = '0;
    w_addr = '0; w_lane = '0; w_data = '0; b_addr = '0; b_data = '0; l_idx = '0;
    l_desc = '0; nl_data = '0; x_addr = '0; x_data = '0; rd_addr = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int o = 0; o < L; o++) begin
      for (int i = 0; i < P; i++) begin
        WL[o][i] = shortint'($signed($urandom_range(0, 511)) - 256);
        @(negedge clk); w_we = 1; w_addr = 8'((o / 4) * 7 + i / 8);
        w_lane = 5'((o % 4) * 8 + i % 8); w_data = WL[o][i];
      end
      @(negedge clk); w_we = 0; b_we = 1; b_addr = 6'(o); b_data = '0;
    end
    @(negedge clk); b_we = 0; l_we = 1; l_idx = 0;
    l_desc = '{in_dim: 12'(P), out_dim: 12'(L), relu: 1'b0, w_base: 16'd0, b_base: 12'd0,
              ltype: LT_DENSE, img: 6'd0, ksz: 3'd0};
    @(negedge clk); l_we = 0; nl_we = 1; nl_data = 1;
    for (int i = 0; i < P; i++) begin
      X[i] = shortint'($urandom_range(0, 256));
      @(negedge clk); nl_we = 0; x_we = 1; x_addr = 7'(i); x_data = X[i];
    end
    @(negedge clk); x_we = 0; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 2 + 3 * 7 + 3) begin failures++; $display("latency %0d", cyc); end
    for (int o = 0; o < L; o++) begin
      longint acc;
      longint s;
      acc = 0;
      for (int i = 0; i < P; i++) acc += longint'(WL[o][i]) * longint'(X[i]);
      s = acc >>> FRAC;
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      if (s < 0) negatives++;
      rd_addr = 7'(o); #1;
      checks++;
      if (longint'(rd_data) != s) begin failures++; $display("T[%0d] = %0d expected %0d", o, rd_data, s); end
    end
    checks++;
    if (negatives == 0) begin failures++; $display("no negative projection exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
