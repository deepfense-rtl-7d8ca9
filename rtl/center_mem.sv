// center_mem: GMM class-center memory of a latent defender.
//
// Holds, for each of N_CLASS classes, the L_DIM-dimensional center C^i of the
// class in the PCA space, and the squared-L2 threshold that the security
// parameter was translated into for that class during profiling. The centers
// and their memory follow the source's latent-defender diagram ("class 1
// center" .. "class c center"); keeping one threshold per class is this
// design's reading of the per-center percentile profiling. Written by the host
// one element per cycle; read asynchronously (small distributed RAM) by the
// distance kernel, one element per cycle.
module center_mem #(
  parameter int N_CLASS = 10,
  parameter int L_DIM   = 10,
  parameter int DATA_W  = 16,
  parameter int THR_W   = 48
) (
  input  logic                        clk,
  input  logic                        c_we,
  input  logic [$clog2(N_CLASS)-1:0]  c_class,
  input  logic [$clog2(L_DIM)-1:0]    c_dim,
  input  logic signed [DATA_W-1:0]    c_data,
  input  logic                        t_we,
  input  logic [$clog2(N_CLASS)-1:0]  t_class,
  input  logic [THR_W-1:0]            t_data,
  input  logic [$clog2(N_CLASS)-1:0]  rd_class,
  input  logic [$clog2(L_DIM)-1:0]    rd_dim,
  output logic signed [DATA_W-1:0]    rd_center,
  output logic [THR_W-1:0]            rd_thr
);
  logic signed [DATA_W-1:0] centers [N_CLASS][L_DIM];
  logic [THR_W-1:0]         thr     [N_CLASS];

  always_ff @(posedge clk) begin
    if (c_we) centers[c_class][c_dim] <= c_data;
    if (t_we) thr[t_class] <= t_data;
  end

  assign rd_center = centers[rd_class][rd_dim];
  assign rd_thr    = thr[rd_class];
endmodule
