// tb_victim_dnn: runs a small victim network (24 -> 12 ReLU -> 10 scores) on
// victim_dnn for several inputs and checks the predicted class against the
// arg-max of the reference scores (one input is all zeros, so the scores are
// the biases alone) and the latency: DNN latency plus N_CLASS + 2.
module tb_victim_dnn;
  import deepfense_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_PU = 4, N_PE = 8, FRAC = 8, NC = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, b_we, l_we, nl_we, x_we, start, busy, done;
  logic [7:0] w_addr;
  logic [4:0] w_lane;
  logic signed [15:0] w_data, b_data, x_data;
  logic [5:0] b_addr;
  logic [1:0] l_idx;
  layer_desc_t l_desc;
  logic [2:0] nl_data;
  logic [6:0] x_addr;
  logic [3:0] pred;

  victim_dnn #(.MAX_ACT(128), .WMEM_WORDS(256), .BMEM_DEPTH(64), .N_CLASS(NC)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dims [] = '{24, 12, 10};
  bit relu [] = '{1'b1, 1'b0};
  int seed = 11;

  initial begin
    int wa = 0, ba = 0, cyc, exp_cyc, best;
    shortint x [], y [];
    {w_we, b_we, l_we, nl_we, x_we, start} = '0;
    w_addr = '0; w_lane = '0; w_data = '0; b_addr = '0; b_data = '0; l_idx = '0;
    l_desc = '0; nl_data = '0; x_addr = '0; x_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    exp_cyc = 2 + NC + 2;
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
    x = new[dims[0]];
    for (int s = 0; s < 8; s++) begin
      for (int i = 0; i < dims[0]; i++) begin
        x[i] = (s == 7) ? 16'sd0 : val(seed + s + 1, 0, 0, i, 255);
        @(negedge clk); x_we = 1; x_addr = 7'(i); x_data = x[i];
      end
      @(negedge clk); x_we = 0; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      forward(seed, 2, dims, relu, FRAC, 64, 256, x, y);
      best = 0;
      for (int c = 1; c < NC; c++) if (y[c] > y[best]) best = c;
      checks += 2;
      if (int'(pred) != best) begin failures++; $display("sample %0d pred %0d expected %0d", s, pred, best); end
      if (cyc != exp_cyc) begin failures++; $display("latency %0d expected %0d", cyc, exp_cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
