// victim_dnn: forward propagation of the victim (classifier) model and its
// prediction.
//
// The victim network runs on the same DNN kernel as the defenders; its last
// layer produces one score per class. An arg-max unit then scans the scores,
// one per cycle, and returns the index of the largest (the lowest index wins
// a tie; this design's choice). The predicted class is what the latent and
// input defenders validate: it selects the GMM center and the dictionary.
//
// Interface: as dnn_kernel for configuration and input; start launches the
// forward pass; done pulses with pred valid (held until the next start).
// Latency: the DNN kernel's latency plus N_CLASS + 2 cycles.
module victim_dnn
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
  parameter int N_CLASS    = 10
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
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  output logic [$clog2(N_CLASS)-1:0]      pred
);
  localparam int AAW = $clog2(MAX_ACT);
  localparam int CW  = $clog2(N_CLASS);

  logic dnn_busy, dnn_done;
  logic [AAW-1:0] rd_addr;
  logic signed [DATA_W-1:0] rd_data, best;
  logic [11:0] out_dim;
  logic scan, fin;
  logic [CW-1:0] idx, best_idx;

  dnn_kernel #(.N_PU(N_PU), .N_PE(N_PE), .DATA_W(DATA_W), .FRAC(FRAC),
               .MAX_LAYERS(MAX_LAYERS), .MAX_ACT(MAX_ACT),
               .WMEM_WORDS(WMEM_WORDS), .BMEM_DEPTH(BMEM_DEPTH)) u_dnn (
    .clk, .rst_n, .w_we, .w_addr, .w_lane, .w_data, .b_we, .b_addr, .b_data,
    .l_we, .l_idx, .l_desc, .nl_we, .nl_data, .x_we, .x_addr, .x_data,
    .start(start && !busy), .busy(dnn_busy), .done(dnn_done),
    .rd_addr(rd_addr), .rd_data(rd_data), .out_dim(out_dim));

  assign rd_addr = AAW'(idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan <= 1'b0; fin <= 1'b0; idx <= '0; best_idx <= '0; best <= '0;
      done <= 1'b0; pred <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (dnn_done) begin
        scan <= 1'b1; idx <= '0;
      end else if (scan) begin
        if (idx == '0 || rd_data > best) begin best <= rd_data; best_idx <= idx; end
        if (32'(idx) == N_CLASS - 1) begin scan <= 1'b0; fin <= 1'b1; end
        else idx <= idx + 1'b1;
      end
      if (fin) begin done <= 1'b1; pred <= best_idx; end
    end
  end

  assign busy = dnn_busy | scan | fin;

  a_class_dim: assert property (@(posedge clk) disable iff (!rst_n)
                                dnn_done |-> (32'(out_dim) >= N_CLASS));
endmodule
