// l2_distance: distance-calculation kernel of a latent defender.
//
// After the DNN kernel has produced the L_DIM principal-component features of
// a sample, this kernel computes the squared Euclidean distance to the center
// of the class the victim predicted, sum_j (f_j - C_j)^2, and flags the sample
// as adversarial when the distance exceeds that class's threshold (the
// security parameter turned into an L2 radius offline). Comparing squared
// distances avoids a square root; the source compares the L2 distance with a
// threshold, which is equivalent when the threshold is stored squared.
//
// Works one dimension per cycle (this design's choice; L_DIM is small after
// PCA). It drives the feature read address and the center read address, both
// read asynchronously. Timing: start is sampled on a clock edge; L_DIM edges
// later the accumulation ends and on the next edge done is high for one cycle
// with dist_sq and adv valid (they hold until the next start). Features and
// centers share one fixed-point format, so dist_sq has twice its fraction bits.
module l2_distance #(
  parameter int N_CLASS = 10,
  parameter int L_DIM   = 10,
  parameter int DATA_W  = 16,
  parameter int DIST_W  = 48,
  parameter int FA_W    = 10
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(N_CLASS)-1:0]  cls,
  // feature read (DNN kernel result buffer)
  output logic [FA_W-1:0]             feat_addr,
  input  logic signed [DATA_W-1:0]    feat_data,
  // center memory read
  output logic [$clog2(N_CLASS)-1:0]  c_class,
  output logic [$clog2(L_DIM)-1:0]    c_dim,
  input  logic signed [DATA_W-1:0]    c_data,
  input  logic [DIST_W-1:0]           thr,
  output logic                        busy,
  output logic                        done,
  output logic [DIST_W-1:0]           dist_sq,
  output logic                        adv
);
  logic [$clog2(L_DIM)-1:0]   j;
  logic [$clog2(N_CLASS)-1:0] cls_q;
  logic [DIST_W-1:0]          acc;
  logic                       run, fin;

  logic signed [DATA_W:0]     diff;
  logic [2*DATA_W+1:0]        sq;
  assign diff = (DATA_W+1)'(feat_data) - (DATA_W+1)'(c_data);
  assign sq   = (2*DATA_W+2)'(diff * diff);

  assign feat_addr = FA_W'(j);
  assign c_class   = cls_q;
  assign c_dim     = j;
  assign busy      = run | fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j <= '0; cls_q <= '0; acc <= '0; run <= 1'b0; fin <= 1'b0;
      done <= 1'b0; dist_sq <= '0; adv <= 1'b0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; j <= '0; cls_q <= cls; acc <= '0;
      end else if (run) begin
        acc <= acc + DIST_W'(sq);
        if (32'(j) == L_DIM - 1) begin run <= 1'b0; fin <= 1'b1; end
        else j <= j + 1'b1;
      end
      if (fin) begin
        done <= 1'b1;
        dist_sq <= acc;
        adv  <= (acc > thr);
      end
    end
  end
endmodule
