// latent_defender: one latent (intermediate-layer) defender.
//
// Structure as in the source's latent-defender diagram: a DNN kernel runs the
// defender network (a fine-tuned replica of the victim up to the checkpoint
// layer) with the PCA projection appended as a last dense layer without ReLU;
// a center memory holds the GMM center of each class; a distance kernel
// compares the PCA features of the sample with the center of the class the
// victim predicted. The output d = 1 marks the sample as adversarial (squared
// distance above the class threshold).
//
// Interface: the dnn configuration ports and x_* input port are those of
// dnn_kernel; c_* and t_* load centers and thresholds. start (one cycle) with
// cls, the victim's predicted class, launches the DNN; when the DNN kernel is
// done the distance kernel runs. done pulses with adv and dist_sq valid.
// Latency: the DNN kernel's latency, plus L_DIM + 3 cycles.
module latent_defender
  import deepfense_pkg::*;
#(
  parameter int N_PU       = 4,
  parameter int N_PE       = 8,
  parameter int DATA_W     = 16,
  parameter int FRAC       = 8,
  parameter int MAX_LAYERS = 8,
  parameter int MAX_ACT    = 16384,
  parameter int WMEM_WORDS = 13824,
  parameter int BMEM_DEPTH = 1024,
  parameter int N_CLASS    = 10,
  parameter int L_DIM      = 10,
  parameter int DIST_W     = 48
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            w_we,
  input  logic [$clog2(WMEM_WORDS)-1:0]   w_addr,
  input  logic [$clog2(N_PU*N_PE)-1:0]    w_lane,
  input  logic signed [DATA_W-1:0]        w_data,
  input  logic                            b_we,
  input  logic [$clog2(BMEM_DEPTH)-1:0]   b_addr,
  input  logic signed [DATA_W-1:0]        b_data,
  input  logic                            l_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]   l_idx,
  input  layer_desc_t                     l_desc,
  input  logic                            nl_we,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] nl_data,
  input  logic                            x_we,
  input  logic [$clog2(MAX_ACT)-1:0]      x_addr,
  input  logic signed [DATA_W-1:0]        x_data,
  input  logic                            c_we,
  input  logic [$clog2(N_CLASS)-1:0]      c_class,
  input  logic [$clog2(L_DIM)-1:0]        c_dim,
  input  logic signed [DATA_W-1:0]        c_data,
  input  logic                            t_we,
  input  logic [$clog2(N_CLASS)-1:0]      t_class,
  input  logic [DIST_W-1:0]               t_data,
  input  logic                            start,
  input  logic [$clog2(N_CLASS)-1:0]      cls,
  output logic                            busy,
  output logic                            done,
  output logic                            adv,
  output logic [DIST_W-1:0]               dist_sq
);
  localparam int AAW = $clog2(MAX_ACT);

  logic [$clog2(N_CLASS)-1:0] cls_q;
  logic dnn_busy, dnn_done, dist_busy;
  logic [AAW-1:0] feat_addr;
  logic signed [DATA_W-1:0] feat_data;
  logic [11:0] out_dim;
  logic [$clog2(N_CLASS)-1:0] rc;
  logic [$clog2(L_DIM)-1:0]   rd;
  logic signed [DATA_W-1:0]   rcenter;
  logic [DIST_W-1:0]          rthr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cls_q <= '0;
    else if (start && !busy) cls_q <= cls;
  end

  dnn_kernel #(.N_PU(N_PU), .N_PE(N_PE), .DATA_W(DATA_W), .FRAC(FRAC),
               .MAX_LAYERS(MAX_LAYERS), .MAX_ACT(MAX_ACT),
               .WMEM_WORDS(WMEM_WORDS), .BMEM_DEPTH(BMEM_DEPTH)) u_dnn (
    .clk, .rst_n, .w_we, .w_addr, .w_lane, .w_data, .b_we, .b_addr, .b_data,
    .l_we, .l_idx, .l_desc, .nl_we, .nl_data, .x_we, .x_addr, .x_data,
    .start(start && !busy), .busy(dnn_busy), .done(dnn_done),
    .rd_addr(feat_addr), .rd_data(feat_data), .out_dim(out_dim));

  center_mem #(.N_CLASS(N_CLASS), .L_DIM(L_DIM), .DATA_W(DATA_W), .THR_W(DIST_W)) u_centers (
    .clk, .c_we, .c_class, .c_dim, .c_data, .t_we, .t_class, .t_data,
    .rd_class(rc), .rd_dim(rd), .rd_center(rcenter), .rd_thr(rthr));

  l2_distance #(.N_CLASS(N_CLASS), .L_DIM(L_DIM), .DATA_W(DATA_W), .DIST_W(DIST_W),
                .FA_W(AAW)) u_dist (
    .clk, .rst_n, .start(dnn_done), .cls(cls_q),
    .feat_addr(feat_addr), .feat_data(feat_data),
    .c_class(rc), .c_dim(rd), .c_data(rcenter), .thr(rthr),
    .busy(dist_busy), .done(done), .dist_sq(dist_sq), .adv(adv));

  assign busy = dnn_busy | dist_busy;

  // the PCA layer must provide at least L_DIM features
  a_pca_dim: assert property (@(posedge clk) disable iff (!rst_n)
                              dnn_done |-> (32'(out_dim) >= L_DIM));
endmodule
