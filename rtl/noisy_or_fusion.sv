// noisy_or_fusion: model fusion of the defenders' binary decisions.
//
// Each defender n reports d_n (1 = adversarial) and carries a weight
// P_n = P(a=1 | d_n=1), estimated offline as M_true / (M_false + M_true). The
// fused probability follows the source's noisy-OR rule
//     P(a=1 | d_1..d_N) = 1 - prod_n (1 - P_n)^{d_n}
// and the alarm is raised when it is at least 0.5. With every P_n = 1 this is
// the logical OR of the decisions.
//
// Implementation (this design's choice): P_n are unsigned fixed-point
// fractions with PW fraction bits and one integer bit, so 1.0 = 2^PW is
// representable. The product is formed one defender per cycle, so one
// multiplier serves any number of defenders: prod starts at 2^PW (1.0) and,
// for each flagged defender, becomes floor(prod * (2^PW - P_n) / 2^PW).
// Then prob = 2^PW - prod and alarm = (prob >= 2^(PW-1)).
// Timing: start is sampled on a clock edge; done is high N_DEF + 1 edges
// later, for one cycle, with prob and alarm valid until the next start.
module noisy_or_fusion #(
  parameter int N_DEF = 2,
  parameter int PW    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      pn_we,
  input  logic [$clog2(N_DEF)-1:0]  pn_idx,
  input  logic [PW:0]               pn_data,
  input  logic                      start,
  input  logic [N_DEF-1:0]          d,
  output logic                      busy,
  output logic                      done,
  output logic [PW:0]               prob,
  output logic                      alarm
);
  localparam int NW = (N_DEF > 1) ? $clog2(N_DEF) : 1;
  localparam logic [PW:0] ONE = (PW+1)'(1) << PW;

  logic [PW:0]      pn [N_DEF];
  logic [PW:0]      prod, factor;
  logic [N_DEF-1:0] d_q;
  logic [NW-1:0]    n;
  logic             run, fin;
  logic [2*PW+1:0]  mul;

  assign factor = ONE - pn[n];
  assign mul    = (2*PW+2)'(prod) * (2*PW+2)'(factor);

  always_ff @(posedge clk) begin
    if (pn_we) pn[pn_idx] <= pn_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= '0; d_q <= '0; n <= '0; run <= 1'b0; fin <= 1'b0;
      done <= 1'b0; prob <= '0; alarm <= 1'b0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !run && !fin) begin
        prod <= ONE; d_q <= d; n <= '0; run <= 1'b1;
      end else if (run) begin
        if (d_q[n]) prod <= (PW+1)'(mul >> PW);
        if (32'(n) == N_DEF - 1) begin run <= 1'b0; fin <= 1'b1; end
        else n <= n + 1'b1;
      end
      if (fin) begin
        done  <= 1'b1;
        prob  <= ONE - prod;
        alarm <= (ONE - prod) >= (ONE >> 1);
      end
    end
  end

  assign busy = run | fin;

  a_pn_range: assert property (@(posedge clk) disable iff (!rst_n) pn_we |-> pn_data <= ONE);
endmodule
