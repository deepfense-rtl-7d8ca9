// deepfense_top: online adversarial-sample detector around a victim DNN.
//
// Execution phase of the framework, per sample:
//   1. forward propagation of the victim network gives the predicted class;
//   2. validation: N_LAT latent defenders (each a fine-tuned copy of the
//      victim up to a checkpoint layer, followed by PCA and a distance test
//      against the GMM center of the predicted class) and one input defender
//      (OMP reconstruction of the input with the predicted class's dictionary)
//      run in parallel, each giving a binary decision;
//   3. model fusion combines the decisions with the noisy-OR rule and raises
//      the alarm when the probability of an attack is at least 0.5.
// The defenders run in parallel hardware instances (the source also allows a
// sequential schedule on fewer instances; that option is not built here).
//
// Configuration: everything that the offline phase produces (weights, biases,
// layer descriptors, PCA matrices, class centers and thresholds, dictionaries
// and their thresholds, P_n weights) and the sample itself are written through
// one write port, cfg (deepfense_pkg::cfg_wr_t), standing in for the host/DMA
// that moves data from DRAM into the on-chip buffers. Decoding of cfg:
//   CFG_WEIGHT  unit (0 victim, n latent n), addr = word, lane, data[15:0]
//   CFG_BIAS    unit, addr, data[15:0]
//   CFG_LAYER   unit, lane = layer index, data = layer_desc_t
//   CFG_NLAYERS unit, data = number of layers
//   CFG_INPUT   addr, data[15:0]: DNN input element, written to every kernel
//   CFG_CENTER  unit (latent), addr = class, lane = dimension, data[15:0]
//   CFG_CTHR    unit (latent), addr = class, data = squared-L2 threshold
//   CFG_DICT    unit = class, addr = atom, lane = element, data[15:0]
//   CFG_DTHR    addr = class, data = residual-energy threshold
//   CFG_PATCH   addr = element, data[15:0]: input-defender vector element
//   CFG_PN      addr = defender (0..N_LAT-1 latent, N_LAT input), data = P_n
// Control: start (one cycle, while idle) checks the loaded sample; done pulses
// when pred, d (per-defender decisions), prob and alarm are valid; they hold
// until the next start. Latency: victim latency, then the slowest defender,
// then N_LAT + 2 cycles of fusion, plus a few cycles of hand-over.
module deepfense_top
  import deepfense_pkg::*;
#(
  parameter int N_LAT      = 1,
  parameter int N_CLASS    = 10,
  // DNN kernels
  parameter int N_PU       = 4,
  parameter int N_PE       = 8,
  parameter int FRAC       = 8,
  parameter int MAX_LAYERS = 8,
  parameter int MAX_ACT    = 16384,
  parameter int WMEM_WORDS = 13824,
  parameter int BMEM_DEPTH = 1024,
  parameter int L_DIM      = 10,
  // input defender
  parameter int N_ATOMS    = 128,
  parameter int N_VEC      = 64,
  parameter int P_OMP      = 8,
  parameter int K_SPARSE   = 8,
  parameter int OMP_FRAC   = 12,
  // fusion
  parameter int PW         = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  cfg_wr_t                     cfg,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [$clog2(N_CLASS)-1:0]  pred,
  output logic [N_LAT:0]              d,
  output logic [PW:0]                 prob,
  output logic                        alarm
);
  localparam int N_DEF = N_LAT + 1;
  localparam int CW    = $clog2(N_CLASS);

  typedef enum logic [2:0] {T_IDLE, T_VICTIM, T_DEFEND, T_FUSE, T_DONE} tstate_e;
  tstate_e state;

  // ---------------- configuration decode ----------------
  function automatic logic hit(input cfg_wr_t c, input cfg_kind_e k, input int u);
    return c.we && c.kind == k && int'(c.unit) == u;
  endfunction

  logic in_we;
  assign in_we = cfg.we && cfg.kind == CFG_INPUT && state == T_IDLE;

  // ---------------- victim ----------------
  logic v_start, v_busy, v_done;
  logic [CW-1:0] v_pred;

  victim_dnn #(.N_PU(N_PU), .N_PE(N_PE), .FRAC(FRAC), .MAX_LAYERS(MAX_LAYERS),
               .MAX_ACT(MAX_ACT), .WMEM_WORDS(WMEM_WORDS), .BMEM_DEPTH(BMEM_DEPTH),
               .N_CLASS(N_CLASS)) u_victim (
    .clk, .rst_n,
    .w_we(hit(cfg, CFG_WEIGHT, 0)), .w_addr(($clog2(WMEM_WORDS))'(cfg.addr)),
    .w_lane(($clog2(N_PU*N_PE))'(cfg.lane)), .w_data(cfg.data[15:0]),
    .b_we(hit(cfg, CFG_BIAS, 0)), .b_addr(($clog2(BMEM_DEPTH))'(cfg.addr)), .b_data(cfg.data[15:0]),
    .l_we(hit(cfg, CFG_LAYER, 0)), .l_idx(($clog2(MAX_LAYERS))'(cfg.lane)),
    .l_desc(layer_desc_t'(cfg.data[$bits(layer_desc_t)-1:0])),
    .nl_we(hit(cfg, CFG_NLAYERS, 0)), .nl_data(($clog2(MAX_LAYERS+1))'(cfg.data)),
    .x_we(in_we), .x_addr(($clog2(MAX_ACT))'(cfg.addr)), .x_data(cfg.data[15:0]),
    .start(v_start), .busy(v_busy), .done(v_done), .pred(v_pred));

  // ---------------- latent defenders ----------------
  logic            def_start;
  logic [N_DEF-1:0] def_done, def_adv, def_fin;

  for (genvar n = 0; n < N_LAT; n++) begin : g_lat
    logic busy_n;
    logic [47:0] dist_n;
    latent_defender #(.N_PU(N_PU), .N_PE(N_PE), .FRAC(FRAC), .MAX_LAYERS(MAX_LAYERS),
                      .MAX_ACT(MAX_ACT), .WMEM_WORDS(WMEM_WORDS), .BMEM_DEPTH(BMEM_DEPTH),
                      .N_CLASS(N_CLASS), .L_DIM(L_DIM)) u_lat (
      .clk, .rst_n,
      .w_we(hit(cfg, CFG_WEIGHT, n + 1)), .w_addr(($clog2(WMEM_WORDS))'(cfg.addr)),
      .w_lane(($clog2(N_PU*N_PE))'(cfg.lane)), .w_data(cfg.data[15:0]),
      .b_we(hit(cfg, CFG_BIAS, n + 1)), .b_addr(($clog2(BMEM_DEPTH))'(cfg.addr)),
      .b_data(cfg.data[15:0]),
      .l_we(hit(cfg, CFG_LAYER, n + 1)), .l_idx(($clog2(MAX_LAYERS))'(cfg.lane)),
      .l_desc(layer_desc_t'(cfg.data[$bits(layer_desc_t)-1:0])),
      .nl_we(hit(cfg, CFG_NLAYERS, n + 1)), .nl_data(($clog2(MAX_LAYERS+1))'(cfg.data)),
      .x_we(in_we), .x_addr(($clog2(MAX_ACT))'(cfg.addr)), .x_data(cfg.data[15:0]),
      .c_we(hit(cfg, CFG_CENTER, n + 1)), .c_class(CW'(cfg.addr)),
      .c_dim(($clog2(L_DIM))'(cfg.lane)), .c_data(cfg.data[15:0]),
      .t_we(hit(cfg, CFG_CTHR, n + 1)), .t_class(CW'(cfg.addr)), .t_data(cfg.data[47:0]),
      .start(def_start), .cls(v_pred), .busy(busy_n), .done(def_done[n]),
      .adv(def_adv[n]), .dist_sq(dist_n));
  end

  // ---------------- input defender ----------------
  logic        id_busy;
  logic [47:0] id_energy;
  input_defender #(.N_CLASS(N_CLASS), .N_ATOMS(N_ATOMS), .N(N_VEC), .P(P_OMP), .K(K_SPARSE),
                   .FRAC(OMP_FRAC)) u_inp (
    .clk, .rst_n,
    .dict_we(cfg.we && cfg.kind == CFG_DICT), .dict_class(CW'(cfg.unit)),
    .dict_atom(($clog2(N_ATOMS))'(cfg.addr)), .dict_idx(($clog2(N_VEC))'(cfg.lane)),
    .dict_data(cfg.data[15:0]),
    .t_we(cfg.we && cfg.kind == CFG_DTHR), .t_class(CW'(cfg.addr)), .t_data(cfg.data[47:0]),
    .x_we(cfg.we && cfg.kind == CFG_PATCH && state == T_IDLE),
    .x_addr(($clog2(N_VEC))'(cfg.addr)), .x_data(cfg.data[15:0]),
    .start(def_start), .cls(v_pred), .busy(id_busy), .done(def_done[N_LAT]),
    .adv(def_adv[N_LAT]), .energy(id_energy));

  // ---------------- fusion ----------------
  logic f_start, f_busy, f_done;
  logic [PW:0] f_prob;
  logic f_alarm;
  logic [N_DEF-1:0] d_q;

  noisy_or_fusion #(.N_DEF(N_DEF), .PW(PW)) u_fuse (
    .clk, .rst_n, .pn_we(cfg.we && cfg.kind == CFG_PN),
    .pn_idx(($clog2(N_DEF))'(cfg.addr)), .pn_data(cfg.data[PW:0]),
    .start(f_start), .d(d_q), .busy(f_busy), .done(f_done), .prob(f_prob), .alarm(f_alarm));

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; v_start <= 1'b0; def_start <= 1'b0; f_start <= 1'b0;
      def_fin <= '0; d_q <= '0; done <= 1'b0; pred <= '0; d <= '0; prob <= '0; alarm <= 1'b0;
    end else begin
      v_start <= 1'b0; def_start <= 1'b0; f_start <= 1'b0; done <= 1'b0;
      case (state)
        T_IDLE: if (start) begin v_start <= 1'b1; state <= T_VICTIM; end
        T_VICTIM: if (v_done) begin
          def_start <= 1'b1; def_fin <= '0; state <= T_DEFEND;
        end
        T_DEFEND: begin
          for (int n = 0; n < N_DEF; n++)
            if (def_done[n]) begin def_fin[n] <= 1'b1; d_q[n] <= def_adv[n]; end
          if ((def_fin | def_done) == '1) begin f_start <= 1'b1; state <= T_FUSE; end
        end
        T_FUSE: if (f_done) begin
          pred <= v_pred; d <= d_q; prob <= f_prob; alarm <= f_alarm; state <= T_DONE;
        end
        T_DONE: begin done <= 1'b1; state <= T_IDLE; end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE);
endmodule
