// tb_dnn_kernel: self-checking test of the layer-sequenced DNN kernel.
// Programs a random three-layer network (ReLU on the first two layers, none on
// the last), with dimensions that are not multiples of N_PU or N_PE, runs it
// twice with different inputs, and compares every output with a reference
// forward pass computed here with the same fixed-point rules (full-precision
// accumulation, floor shift by FRAC, saturation to 16 bits). The latency from
// start to done is checked against 1 + sum(G*C + 3) clock edges. A second run with a
// single layer checks that the result buffer follows the layer count.
module tb_dnn_kernel;
  import deepfense_pkg::*;
  localparam int N_PU = 3, N_PE = 4, FRAC = 8, MAX_LAYERS = 4, MAX_ACT = 64;
  localparam int WMEM_WORDS = 256, BMEM_DEPTH = 128;
  localparam int NW = N_PU * N_PE;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, b_we, l_we, nl_we, x_we, start, busy, done;
  logic [$clog2(WMEM_WORDS)-1:0] w_addr;
  logic [$clog2(NW)-1:0] w_lane;
  logic signed [15:0] w_data, b_data, x_data, rd_data;
  logic [$clog2(BMEM_DEPTH)-1:0] b_addr;
  logic [$clog2(MAX_LAYERS)-1:0] l_idx;
  layer_desc_t l_desc;
  logic [$clog2(MAX_LAYERS+1)-1:0] nl_data;
  logic [$clog2(MAX_ACT)-1:0] x_addr, rd_addr;
  logic [11:0] out_dim;

  dnn_kernel #(.N_PU(N_PU), .N_PE(N_PE), .FRAC(FRAC), .MAX_LAYERS(MAX_LAYERS),
               .MAX_ACT(MAX_ACT), .WMEM_WORDS(WMEM_WORDS), .BMEM_DEPTH(BMEM_DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference network
  int dims [4] = '{23, 10, 7, 5};
  int relu [3] = '{1, 1, 0};
  int wbase [3], bbase [3];
  shortint W [3][32][32];
  shortint B [3][32];
  shortint X [32];
  shortint ref_act [32];

  task automatic wr_weight(int l, int o, int i, shortint v);
    int C = (dims[l] + N_PE - 1) / N_PE;
    @(negedge clk);
    w_we = 1; w_addr = $bits(w_addr)'(wbase[l] + (o / N_PU) * C + i / N_PE);
    w_lane = $bits(w_lane)'((o % N_PU) * N_PE + (i % N_PE)); w_data = v;
    @(negedge clk); w_we = 0;
  endtask

  function automatic shortint narrow(longint acc, int r);
    longint s = acc >>> FRAC;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (r != 0 && s < 0) s = 0;
    return shortint'(s);
  endfunction

  task automatic ref_forward(int nl);
    shortint cur [32], nxt [32];
    for (int i = 0; i < 32; i++) cur[i] = X[i];
    for (int l = 0; l < nl; l++) begin
      for (int o = 0; o < dims[l+1]; o++) begin
        longint acc = longint'(B[l][o]) <<< FRAC;
        for (int i = 0; i < dims[l]; i++) acc += longint'(W[l][o][i]) * longint'(cur[i]);
        nxt[o] = narrow(acc, relu[l]);
      end
      for (int i = 0; i < 32; i++) cur[i] = nxt[i];
    end
    for (int i = 0; i < 32; i++) ref_act[i] = cur[i];
  endtask

  task automatic run_and_check(int nl);
    int cyc = 0, expect_cyc = 2;  // counted from the negedge that raises start
    for (int l = 0; l < nl; l++)
      expect_cyc += ((dims[l+1] + N_PU - 1) / N_PU) * ((dims[l] + N_PE - 1) / N_PE) + 3;
    for (int i = 0; i < dims[0]; i++) begin
      @(negedge clk); x_we = 1; x_addr = $bits(x_addr)'(i); x_data = X[i];
    end
    @(negedge clk); x_we = 0; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    ref_forward(nl);
    checks++;
    if (cyc != expect_cyc) begin failures++; $display("latency %0d expected %0d", cyc, expect_cyc); end
    checks++;
    if (int'(out_dim) != dims[nl]) begin failures++; $display("out_dim %0d", out_dim); end
    for (int o = 0; o < dims[nl]; o++) begin
      rd_addr = $bits(rd_addr)'(o); #1;
      checks++;
      if (rd_data != ref_act[o]) begin
        failures++; $display("layers=%0d out[%0d] = %0d expected %0d", nl, o, rd_data, ref_act[o]);
      end
    end
  endtask

  int wa, ba;
  initial begin
    {w_we, b_we, l_we, nl_we, x_we, start} = '0;
    w_addr = '0; w_lane = '0; w_data = '0; b_addr = '0; b_data = '0; l_idx = '0;
    l_desc = '0; nl_data = '0; x_addr = '0; x_data = '0; rd_addr = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    wa = 0; ba = 0;
    for (int l = 0; l < 3; l++) begin
      wbase[l] = wa; bbase[l] = ba;
      wa += ((dims[l+1] + N_PU - 1) / N_PU) * ((dims[l] + N_PE - 1) / N_PE);
      ba += dims[l+1];
      for (int o = 0; o < dims[l+1]; o++) begin
        B[l][o] = shortint'($signed($urandom_range(0, 511)) - 256);
        for (int i = 0; i < dims[l]; i++) begin
          W[l][o][i] = shortint'($signed($urandom_range(0, 255)) - 128);
          wr_weight(l, o, i, W[l][o][i]);
        end
        @(negedge clk); b_we = 1; b_addr = $bits(b_addr)'(bbase[l] + o); b_data = B[l][o];
        @(negedge clk); b_we = 0;
      end
      @(negedge clk); l_we = 1; l_idx = $bits(l_idx)'(l);
      l_desc = '{in_dim: 12'(dims[l]), out_dim: 12'(dims[l+1]), relu: relu[l][0],
                 w_base: 16'(wbase[l]), b_base: 12'(bbase[l]), ltype: LT_DENSE, img: 6'd0, ksz: 3'd0};
      @(negedge clk); l_we = 0;
    end
    // saturating weights on one neuron to exercise clipping
    W[0][0][0] = 16'sh7fff; wr_weight(0, 0, 0, W[0][0][0]);
    @(negedge clk); nl_we = 1; nl_data = 3; @(negedge clk); nl_we = 0;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < dims[0]; i++) X[i] = shortint'($urandom_range(0, 255));
      if (r == 0) X[0] = 16'sh7fff;
      run_and_check(3);
    end
    @(negedge clk); nl_we = 1; nl_data = 1; @(negedge clk); nl_we = 0;
    for (int i = 0; i < dims[0]; i++) X[i] = shortint'($urandom_range(0, 255));
    run_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
