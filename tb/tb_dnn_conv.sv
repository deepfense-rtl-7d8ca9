// tb_dnn_conv: self-checking test of the convolution and max-pooling layers of
// the DNN kernel. Programs a three-layer network: a 3x3 convolution from 5
// input channels of 7x7 to 3 output channels of 5x5 (ReLU), a 2x2 max-pooling
// to 3x2x2 (the odd last row and column dropped), and a 12 -> 5 dense layer
// without ReLU, i.e. a miniature of a convolutional victim network. 5 input
// channels with N_PE = 4 make a convolution chunk span a partial channel
// group, and 3 output channels with N_PU = 2 leave a PU idle. The reference
// is computed here directly from the definition of each layer with the same
// fixed-point rules. Every output is compared, over two runs with different
// inputs, and the latency is checked against
// 1 + (OW^2*G*C + 3) + (1 + 4*CH*OWp^2 + 1) + (G*C + 3) clock edges after the
// edge that samples start.
module tb_dnn_conv;
  import deepfense_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_PU = 2, N_PE = 4, FRAC = 8, MAX_LAYERS = 4, MAX_ACT = 512;
  localparam int WMEM_WORDS = 256, BMEM_DEPTH = 64;
  localparam int NW = N_PU * N_PE;
  localparam int IC = 5, IMG = 7, K = 3, OC = 3, OW = IMG - K + 1, PW_ = OW / 2, NO = 5;
  localparam int NFC = OC * PW_ * PW_;

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int SEED = 77;
  // conv weight (oc, ic, ky, kx) and FC weight (o, i); biases per channel
  function automatic shortint wc(int oc, int ic, int ky, int kx);
    return val(SEED, 0, oc, (ic * K + ky) * K + kx, 40);
  endfunction
  function automatic shortint wf(int o, int i); return val(SEED, 2, o, i, 60); endfunction
  function automatic shortint bc(int oc); return val(SEED, 100, oc, 0, 300); endfunction
  function automatic shortint bf(int o); return val(SEED, 102, o, 0, 300); endfunction

  localparam int CCONV = K * K * ((IC + N_PE - 1) / N_PE);   // conv chunks
  localparam int CFC   = (NFC + N_PE - 1) / N_PE;
  localparam int WB_FC = ((OC + N_PU - 1) / N_PU) * CCONV;   // FC weight base

  task automatic wr_w(int addr, int lane, shortint v);
    @(negedge clk); w_we = 1; w_addr = $bits(w_addr)'(addr); w_lane = $bits(w_lane)'(lane); w_data = v;
    @(negedge clk); w_we = 0;
  endtask

  shortint X [IC*IMG*IMG];
  shortint Y [NO];

  task automatic reference();
    shortint cv [OC*OW*OW];
    shortint pl [NFC];
    longint acc;
    for (int oc = 0; oc < OC; oc++)
      for (int y = 0; y < OW; y++)
        for (int x = 0; x < OW; x++) begin
          acc = longint'(bc(oc)) <<< FRAC;
          for (int ic = 0; ic < IC; ic++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                acc += longint'(wc(oc, ic, ky, kx)) * longint'(X[ic*IMG*IMG + (y+ky)*IMG + x+kx]);
          cv[oc*OW*OW + y*OW + x] = narrow(acc, FRAC, 1'b1);
        end
    for (int ch = 0; ch < OC; ch++)
      for (int y = 0; y < PW_; y++)
        for (int x = 0; x < PW_; x++) begin
          shortint m;
          m = cv[ch*OW*OW + (2*y)*OW + 2*x];
          for (int q = 1; q < 4; q++)
            if (cv[ch*OW*OW + (2*y + q/2)*OW + 2*x + q%2] > m) m = cv[ch*OW*OW + (2*y + q/2)*OW + 2*x + q%2];
          pl[ch*PW_*PW_ + y*PW_ + x] = m;
        end
    for (int o = 0; o < NO; o++) begin
      acc = longint'(bf(o)) <<< FRAC;
      for (int i = 0; i < NFC; i++) acc += longint'(wf(o, i)) * longint'(pl[i]);
      Y[o] = narrow(acc, FRAC, 1'b0);
    end
  endtask

  initial begin
    int t0, lat, exp_lat;
    w_we = 0; b_we = 0; l_we = 0; nl_we = 0; x_we = 0; start = 0;
    w_addr = '0; w_lane = '0; w_data = '0; b_addr = '0; b_data = '0; l_idx = '0;
    l_desc = '0; nl_data = '0; x_addr = '0; x_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // conv weights: word g*CCONV + (ky*K + kx)*n_icc + icc, lane u*N_PE + e
    for (int g = 0; g < (OC + N_PU - 1) / N_PU; g++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          for (int icc = 0; icc < (IC + N_PE - 1) / N_PE; icc++)
            for (int u = 0; u < N_PU; u++)
              for (int e = 0; e < N_PE; e++) begin
                int oc, ic;
                oc = g * N_PU + u; ic = icc * N_PE + e;
                wr_w(g * CCONV + (ky * K + kx) * ((IC + N_PE - 1) / N_PE) + icc, u * N_PE + e,
                     (oc < OC && ic < IC) ? wc(oc, ic, ky, kx) : 16'sd0);
              end
    for (int g = 0; g < (NO + N_PU - 1) / N_PU; g++)
      for (int c = 0; c < CFC; c++)
        for (int u = 0; u < N_PU; u++)
          for (int e = 0; e < N_PE; e++) begin
            int o, i;
            o = g * N_PU + u; i = c * N_PE + e;
            wr_w(WB_FC + g * CFC + c, u * N_PE + e, (o < NO && i < NFC) ? wf(o, i) : 16'sd0);
          end
    for (int oc = 0; oc < OC; oc++) begin
      @(negedge clk); b_we = 1; b_addr = $bits(b_addr)'(oc); b_data = bc(oc);
    end
    for (int o = 0; o < NO; o++) begin
      @(negedge clk); b_we = 1; b_addr = $bits(b_addr)'(16 + o); b_data = bf(o);
    end
    @(negedge clk); b_we = 0;
    @(negedge clk); l_we = 1; l_idx = 0;
    l_desc = '{ltype: LT_CONV, img: 6'(IMG), ksz: 3'(K), in_dim: 12'(IC), out_dim: 12'(OC),
               relu: 1'b1, w_base: 16'd0, b_base: 12'd0};
    @(negedge clk); l_idx = 1;
    l_desc = '{ltype: LT_POOL, img: 6'(OW), ksz: 3'd0, in_dim: 12'(OC), out_dim: 12'(OC),
               relu: 1'b0, w_base: 16'd0, b_base: 12'd0};
    @(negedge clk); l_idx = 2;
    l_desc = '{ltype: LT_DENSE, img: 6'd0, ksz: 3'd0, in_dim: 12'(NFC), out_dim: 12'(NO),
               relu: 1'b0, w_base: 16'(WB_FC), b_base: 12'd16};
    @(negedge clk); l_we = 0; nl_we = 1; nl_data = 3;
    @(negedge clk); nl_we = 0;

    // counted from the negedge that raises start: one more than the edges
    // from the start edge to done
    exp_lat = 2 + (OW * OW * ((OC + N_PU - 1) / N_PU) * CCONV + 3)
                + (1 + 4 * OC * PW_ * PW_ + 1)
                + (((NO + N_PU - 1) / N_PU) * CFC + 3);
    for (int run = 0; run < 2; run++) begin
      for (int i = 0; i < IC * IMG * IMG; i++) begin
        X[i] = val(SEED + run, 50, i, 0, 400);
        @(negedge clk); x_we = 1; x_addr = $bits(x_addr)'(i); x_data = X[i];
      end
      @(negedge clk); x_we = 0;
      reference();
      @(negedge clk); start = 1; t0 = $time;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      lat = ($time - t0) / 10;
      checks++;
      if (lat != exp_lat) begin
        failures++; $display("latency %0d expected %0d", lat, exp_lat);
      end
      checks++;
      if (out_dim != 12'(NO)) failures++;
      for (int o = 0; o < NO; o++) begin
        rd_addr = $bits(rd_addr)'(o); #1;
        checks++;
        if (rd_data != Y[o]) begin
          failures++; $display("run %0d out %0d got %0d expected %0d", run, o, rd_data, Y[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
