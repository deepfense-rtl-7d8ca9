// tb_latent_defender: end-to-end test of one latent defender.
// Network: 24 inputs -> 12 (ReLU) -> PCA projection to L_DIM = 10 (no ReLU).
// For each sample and a random predicted class, the reference computes the
// PCA features, the squared distance to that class's center, and the
// decision; class thresholds are set just below or just above the distance so
// both decisions occur. Checks dist_sq, adv and the latency (DNN latency plus
// L_DIM + 2 cycles after the DNN finishes).
module tb_latent_defender;
  import deepfense_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_PU = 4, N_PE = 8, FRAC = 8, NC = 10, LD = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, b_we, l_we, nl_we, x_we, c_we, t_we, start, busy, done, adv;
  logic [7:0] w_addr;
  logic [4:0] w_lane;
  logic signed [15:0] w_data, b_data, x_data, c_data;
  logic [5:0] b_addr;
  logic [1:0] l_idx;
  layer_desc_t l_desc;
  logic [2:0] nl_data;
  logic [6:0] x_addr;
  logic [3:0] c_class, c_dim, t_class, cls;
  logic [47:0] t_data, dist_sq;

  latent_defender #(.MAX_ACT(128), .WMEM_WORDS(256), .BMEM_DEPTH(64), .N_CLASS(NC), .L_DIM(LD)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dims [] = '{24, 12, LD};
  bit relu [] = '{1'b1, 1'b0};
  int seed = 5;

  initial begin
    int wa = 0, ba = 0, cyc, exp_cyc, k, n_adv = 0, n_ok = 0;
    longint dref;
    shortint x [], y [];
    {w_we, b_we, l_we, nl_we, x_we, c_we, t_we, start} = '0;
    w_addr = '0; w_lane = '0; w_data = '0; b_addr = '0; b_data = '0; l_idx = '0;
    l_desc = '0; nl_data = '0; x_addr = '0; x_data = '0; c_class = '0; c_dim = '0;
    c_data = '0; t_class = '0; t_data = '0; cls = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    exp_cyc = 2 + LD + 2;
    for (int l = 0; l < 2; l++) begin
      int C, G;
      C = (dims[l] + N_PE - 1) / N_PE;
      G = (dims[l+1] + N_PU - 1) / N_PU;
      for (int o = 0; o < dims[l+1]; o++) begin
        for (int i = 0; i < dims[l]; i++) begin
          @(negedge clk); w_we = 1; w_addr = 8'(wa + (o / N_PU) * C + i / N_PE);
          w_lane = 5'((o % N_PU) * N_PE + i % N_PE); w_data = val(seed, l, o, i, 64);
        end
        @(negedge clk); w_we = 0; b_we = 1; b_addr = 6'(ba + o); b_data = val(seed, l + 100, o, 0, 256);
        @(negedge clk); b_we = 0;
      end
      @(negedge clk); l_we = 1; l_idx = 2'(l);
      l_desc = '{in_dim: 12'(dims[l]), out_dim: 12'(dims[l+1]), relu: relu[l],
                 w_base: 16'(wa), b_base: 12'(ba), ltype: LT_DENSE, img: 6'd0, ksz: 3'd0};
      @(negedge clk); l_we = 0;
      wa += G * C; ba += dims[l+1];
      exp_cyc += G * C + 3;
    end
    @(negedge clk); nl_we = 1; nl_data = 2; @(negedge clk); nl_we = 0;
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < LD; j++) begin
        @(negedge clk); c_we = 1; c_class = 4'(c); c_dim = 4'(j); c_data = val(seed, 7, c, j, 2000);
      end
    @(negedge clk); c_we = 0;
    x = new[dims[0]];
    for (int s = 0; s < 10; s++) begin
      k = $urandom_range(0, NC - 1);
      for (int i = 0; i < dims[0]; i++) begin
        x[i] = val(seed + s + 1, 0, 0, i, 255);
        @(negedge clk); x_we = 1; x_addr = 7'(i); x_data = x[i];
      end
      forward(seed, 2, dims, relu, FRAC, 64, 256, x, y);
      dref = 0;
      for (int j = 0; j < LD; j++) dref += (longint'(y[j]) - longint'(val(seed, 7, k, j, 2000))) ** 2;
      @(negedge clk); x_we = 0; t_we = 1; t_class = 4'(k); t_data = 48'((s % 2) ? dref : dref - 1);
      @(negedge clk); t_we = 0; start = 1; cls = 4'(k);
      @(negedge clk); start = 0; cls = 4'($urandom); cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (longint'(dist_sq) != dref) begin failures++; $display("dist %0d expected %0d", dist_sq, dref); end
      if (adv != !(s % 2)) begin failures++; $display("adv %0d at sample %0d", adv, s); end
      if (cyc != exp_cyc) begin failures++; $display("latency %0d expected %0d", cyc, exp_cyc); end
      if (adv) n_adv++; else n_ok++;
    end
    checks++;
    if (n_adv == 0 || n_ok == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
