// dnn_kernel: layer-sequenced neural-network engine of the victim model and of
// each latent defender, including the PCA projection.
//
// The kernel runs a list of layers one after another: dense (matrix-vector
// product), square convolution (stride 1, no padding) and 2x2 max-pooling
// (stride 2), which are the layer kinds of the benchmark networks; dense and
// convolution layers have an optional ReLU. Two levels of parallelism, as in
// the source: N_PU processing units each produce one output neuron / output
// channel (output parallelism) and each PU multiplies N_PE inputs per cycle
// (input parallelism) and reduces them with an adder tree (pu_dot_tree). The
// PCA kernel of a latent defender is, as the source describes, one more dense
// layer (T = X * W_L, the columns of W_L being the eigenvectors) appended to
// the list with ReLU switched off.
//
// Memories (BRAM in an FPGA): the weight memory holds words of N_PU*N_PE
// weights. For layer descriptor d, output group g (neurons or channels
// g*N_PU .. +N_PU-1) and input chunk c the word is d.w_base + g*C + c, and
// lane u*N_PE+e holds the weight to output g*N_PU+u.
//   dense: C = ceil(in/N_PE); chunk c holds inputs c*N_PE+e.
//   conv:  C = ksz*ksz*ceil(in_ch/N_PE); chunk c = (ky*ksz + kx)*ceil(in_ch/N_PE)
//          + icc holds tap (ky, kx) of input channels icc*N_PE+e.
// Lanes beyond the layer's size must hold zero. Biases sit at d.b_base +
// neuron (or channel). Feature maps are stored channel-major
// (ch*img*img + y*img + x), so a dense layer after them sees the usual
// flattened vector. The activations live in two ping-pong buffers: the host
// writes the input into buffer A, layer 0 reads A and writes B, layer 1 reads
// B and writes A, and so on. Weights are loaded through the w_* port (the
// source moves them from DRAM into BRAM before computing).
//
// A convolution reuses the dense datapath unchanged: for every output pixel
// it runs all groups and chunks, the gather of lane e reading input
// (icc*N_PE+e, oy+ky, ox+kx). Max-pooling bypasses the processing units: it
// reads one window element per cycle and writes the maximum after four.
//
// Number format (this design's choice): activations, weights and biases are
// signed DATA_W-bit with FRAC fraction bits; products are accumulated at full
// precision (2*FRAC fraction bits), then shifted right by FRAC (floor) and
// saturated to DATA_W bits. Pooling moves values unchanged.
//
// Timing: the weight memory has a one-cycle read, so the datapath is a
// two-stage pipeline (issue/read, multiply-accumulate) plus a write-back
// cycle. A dense layer with G = ceil(out/N_PU) groups and C chunks takes
// G*C + 3 cycles, a convolution OW*OW*G*C + 3 (OW = img - ksz + 1), a pooling
// layer 2 + 4*ch*OW*OW (OW = floor(img/2)). From the edge that samples start,
// done is high 1 + sum over layers of those counts later, for one cycle. busy
// is high in between. Configuration writes and rd_* reads are for use while
// idle. The window-address arithmetic (one multiply by img*img per lane)
// and unpadded, stride-1 convolution are this design's choices.
module dnn_kernel
  import deepfense_pkg::*;
#(
  parameter int N_PU       = 4,
  parameter int N_PE       = 8,
  parameter int DATA_W     = 16,
  parameter int FRAC       = 8,
  parameter int ACC_W      = 40,
  parameter int MAX_LAYERS = 8,
  parameter int MAX_ACT    = 16384,
  parameter int WMEM_WORDS = 13824,
  parameter int BMEM_DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight / bias / layer configuration
  input  logic                           w_we,
  input  logic [$clog2(WMEM_WORDS)-1:0]  w_addr,
  input  logic [$clog2(N_PU*N_PE)-1:0]   w_lane,
  input  logic signed [DATA_W-1:0]       w_data,
  input  logic                           b_we,
  input  logic [$clog2(BMEM_DEPTH)-1:0]  b_addr,
  input  logic signed [DATA_W-1:0]       b_data,
  input  logic                           l_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]  l_idx,
  input  layer_desc_t                    l_desc,
  input  logic                           nl_we,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] nl_data,
  // input activations (buffer A)
  input  logic                           x_we,
  input  logic [$clog2(MAX_ACT)-1:0]     x_addr,
  input  logic signed [DATA_W-1:0]       x_data,
  // control
  input  logic                           start,
  output logic                           busy,
  output logic                           done,
  // result of the last layer
  input  logic [$clog2(MAX_ACT)-1:0]     rd_addr,
  output logic signed [DATA_W-1:0]       rd_data,
  output logic [11:0]                    out_dim
);
  localparam int NW  = N_PU * N_PE;
  localparam int WAW = $clog2(WMEM_WORDS);
  localparam int AAW = $clog2(MAX_ACT);
  localparam int LAW = $clog2(MAX_LAYERS);

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ---------------- storage ----------------
  data_t       wmem [WMEM_WORDS][NW];
  data_t       bmem [BMEM_DEPTH];
  layer_desc_t ltab [MAX_LAYERS];
  logic [$clog2(MAX_LAYERS+1)-1:0] n_layers;
  data_t       act_a [MAX_ACT];
  data_t       act_b [MAX_ACT];

  // ---------------- control state ----------------
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_POOL, S_WAIT, S_DONE} state_e;
  state_e state;

  logic [LAW-1:0] layer;
  logic [11:0]    g, c;          // group and chunk counters
  layer_desc_t    cur;
  logic [11:0]    n_grp, n_chk, n_icc;
  logic           is_conv, is_pool;
  logic [5:0]     ow;            // output map width (conv / pool)
  // convolution position: output pixel (oy, ox), kernel tap (ky, kx) and
  // input-channel chunk icc; chunk c = (ky*ksz + kx)*n_icc + icc
  logic [5:0]     oy, ox;
  logic [2:0]     ky, kx;
  logic [11:0]    icc;
  // max-pooling position: channel pch, output pixel (oy, ox), window tap pq
  logic [11:0]    pch;
  logic [1:0]     pq;
  data_t          pmax;
  int             pool_src, pool_dst;
  data_t          pool_rd, pool_val;

  assign cur     = ltab[layer];
  assign is_conv = (cur.ltype == LT_CONV);
  assign is_pool = (cur.ltype == LT_POOL);
  assign ow      = is_pool ? (cur.img >> 1) : 6'(cur.img - 6'(cur.ksz) + 6'd1);
  assign n_grp   = 12'((cur.out_dim + 12'(N_PU - 1)) / 12'(N_PU));
  assign n_icc   = 12'((cur.in_dim  + 12'(N_PE - 1)) / 12'(N_PE));
  assign n_chk   = is_conv ? 12'(32'(cur.ksz) * 32'(cur.ksz) * 32'(n_icc)) : n_icc;

  logic src_b;                   // 1: layer reads buffer B
  assign src_b = layer[0];

  // pipeline stage 1 registers
  logic        v1, first1, last1;
  logic [11:0] g1;
  logic [11:0] pix1, pixwb;      // output pixel index oy*ow + ox (conv)
  logic [11:0] mapwb;            // output map size ow*ow (conv), 1 (dense)
  data_t       w1 [NW];
  data_t       x1 [N_PE];
  // accumulators and write-back stage
  acc_t        acc [N_PU];
  logic        wb;
  logic [11:0] gwb;
  layer_desc_t dwb;
  logic        wb_to_b;

  logic issue;
  assign issue = (state == S_RUN) && !is_pool;

  // stage 0 -> 1: weight BRAM read and activation chunk gather
  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr][w_lane] <= w_data;
    if (issue) w1 <= wmem[WAW'(32'(cur.w_base) + 32'(g) * 32'(n_chk) + 32'(c))];
  end

  always_ff @(posedge clk) begin
    if (b_we) bmem[b_addr] <= b_data;
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      for (int e = 0; e < N_PE; e++) begin
        automatic int ch  = is_conv ? int'(icc) * N_PE + e : int'(c) * N_PE + e;
        automatic int idx = is_conv ? ch * int'(cur.img) * int'(cur.img)
                                      + (int'(oy) + int'(ky)) * int'(cur.img)
                                      + int'(ox) + int'(kx)
                                    : ch;
        if (ch < int'(cur.in_dim) && idx < MAX_ACT)
          x1[e] <= src_b ? act_b[AAW'(idx)] : act_a[AAW'(idx)];
        else
          x1[e] <= '0;
      end
    end
  end

  // stage 1: processing units
  acc_t psum [N_PU];
  for (genvar u = 0; u < N_PU; u++) begin : g_pu
    data_t wl [N_PE];
    for (genvar e = 0; e < N_PE; e++) begin : g_lane
      assign wl[e] = w1[u*N_PE + e];
    end
    pu_dot_tree #(.N(N_PE), .IN_W(DATA_W), .ACC_W(ACC_W)) u_pu (
      .a(wl), .b(x1), .sum(psum[u]));
  end

  function automatic data_t narrow(input acc_t v, input logic relu);
    logic signed [63:0] s;
    s = sat_shift(64'(v), FRAC, DATA_W);
    if (relu && s < 0) s = '0;
    return data_t'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; layer <= '0; g <= '0; c <= '0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; g1 <= '0;
      wb <= 1'b0; gwb <= '0; dwb <= '0; wb_to_b <= 1'b0;
      n_layers <= '0; done <= 1'b0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; icc <= '0; pch <= '0; pq <= '0;
      pmax <= '0; pix1 <= '0; pixwb <= '0; mapwb <= '0;
      for (int u = 0; u < N_PU; u++) acc[u] <= '0;
    end else begin
      done <= 1'b0;
      if (nl_we) n_layers <= nl_data;
      // stage 1 bookkeeping
      v1     <= issue;
      first1 <= issue && (c == 0);
      last1  <= issue && (c == n_chk - 1);
      g1     <= g;
      pix1   <= 12'(32'(oy) * 32'(ow) + 32'(ox));
      pixwb  <= pix1;
      if (v1) begin
        for (int u = 0; u < N_PU; u++) begin
          automatic int o = int'(g1) * N_PU + u;
          automatic acc_t bias = acc_t'(bmem[$clog2(BMEM_DEPTH)'(int'(dwb.b_base) + o)]) <<< FRAC;
          acc[u] <= (first1 ? bias : acc[u]) + psum[u];
        end
      end
      wb      <= v1 && last1;
      gwb     <= g1;
      // the layer currently accumulating (captured when issued)
      if (issue) begin
        dwb     <= cur;
        wb_to_b <= ~src_b;
        mapwb   <= is_conv ? 12'(32'(ow) * 32'(ow)) : 12'd1;
      end
      // sequencing
      case (state)
        S_IDLE: if (start) begin
          layer <= '0; g <= '0; c <= '0;
          oy <= '0; ox <= '0; ky <= '0; kx <= '0; icc <= '0; pch <= '0; pq <= '0;
          state <= (n_layers == 0) ? S_DONE : S_RUN;
        end
        S_RUN: if (is_pool) state <= S_POOL;
        else begin
          if (c == n_chk - 1) begin
            c <= '0; icc <= '0; kx <= '0; ky <= '0;
            if (g == n_grp - 1) begin
              g <= '0;
              if (!is_conv || (ox == ow - 1 && oy == ow - 1)) begin
                ox <= '0; oy <= '0; state <= S_WAIT;
              end else if (ox == ow - 1) begin
                ox <= '0; oy <= oy + 1'b1;
              end else ox <= ox + 1'b1;
            end else g <= g + 1'b1;
          end else begin
            c <= c + 1'b1;
            if (icc == n_icc - 1) begin
              icc <= '0;
              if (32'(kx) == 32'(cur.ksz) - 1) begin kx <= '0; ky <= ky + 1'b1; end
              else kx <= kx + 1'b1;
            end else icc <= icc + 1'b1;
          end
        end
        S_POOL: begin
          pmax <= (pq == 2'd0) ? pool_rd : pool_val;
          pq   <= pq + 1'b1;
          if (pq == 2'd3) begin
            if (ox == ow - 1) begin
              ox <= '0;
              if (oy == ow - 1) begin
                oy <= '0;
                if (pch == cur.in_dim - 1) begin pch <= '0; state <= S_WAIT; end
                else pch <= pch + 1'b1;
              end else oy <= oy + 1'b1;
            end else ox <= ox + 1'b1;
          end
        end
        S_WAIT: if (!v1 && !wb) begin
          if (32'(layer) == 32'(n_layers) - 1) state <= S_DONE;
          else begin layer <= layer + 1'b1; state <= S_RUN; end
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // max-pooling: one window element per cycle, tap pq = (qy, qx)
  assign pool_src = int'(pch) * int'(cur.img) * int'(cur.img)
                  + (2 * int'(oy) + int'(pq[1])) * int'(cur.img) + 2 * int'(ox) + int'(pq[0]);
  assign pool_dst = int'(pch) * int'(ow) * int'(ow) + int'(oy) * int'(ow) + int'(ox);
  assign pool_rd  = (pool_src < MAX_ACT) ? (src_b ? act_b[AAW'(pool_src)] : act_a[AAW'(pool_src)]) : '0;
  assign pool_val = (pq != 2'd0 && pmax > pool_rd) ? pmax : pool_rd;

  // activation buffers: host input into A, write-back into the destination
  always_ff @(posedge clk) begin
    if (x_we) act_a[x_addr] <= x_data;
    if (wb) begin
      for (int u = 0; u < N_PU; u++) begin
        automatic int ch = int'(gwb) * N_PU + u;
        automatic int o  = ch * int'(mapwb) + int'(pixwb);
        if (ch < int'(dwb.out_dim) && o < MAX_ACT) begin
          if (wb_to_b) act_b[AAW'(o)] <= narrow(acc[u], dwb.relu);
          else         act_a[AAW'(o)] <= narrow(acc[u], dwb.relu);
        end
      end
    end
    if (state == S_POOL && pq == 2'd3 && pool_dst < MAX_ACT) begin
      if (src_b) act_a[AAW'(pool_dst)] <= pool_val;
      else       act_b[AAW'(pool_dst)] <= pool_val;
    end
  end

  always_ff @(posedge clk) begin
    if (l_we) ltab[l_idx] <= l_desc;
  end

  // the result is in B after an odd number of layers
  logic res_b;
  assign res_b   = n_layers[0];
  assign rd_data = res_b ? act_b[rd_addr] : act_a[rd_addr];
  assign out_dim = (n_layers == 0) ? 12'd0 : ltab[LAW'(32'(n_layers) - 1)].out_dim;
  assign busy    = (state != S_IDLE);

endmodule
