// seq_divider: signed sequential divider for the Gram-Schmidt step of the OMP
// kernel (projection coefficients <u_j, v> / <u_j, u_j>).
//
// Restoring radix-2 division on the magnitudes, one quotient bit per cycle,
// then the sign is applied: the quotient is truncated toward zero, like the
// SystemVerilog '/' operator. A zero divisor gives a zero quotient (a
// dependent atom then contributes nothing). The source names only the
// Gram-Schmidt technique; a bit-serial divider is this design's choice to keep
// it small. Timing: start is sampled on a clock edge; done is high for one
// cycle W + 1 edges later with quo valid (held until the next start).
module seq_divider #(
  parameter int W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] num,
  input  logic signed [W-1:0] den,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] quo
);
  logic [W-1:0]   q, d;
  logic [W:0]     r;
  logic [$clog2(W+1)-1:0] cnt;
  logic           neg, run, dz;
  logic [W:0]     r_sh;
  assign r_sh = {r[W-1:0], q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; d <= '0; r <= '0; cnt <= '0; neg <= 1'b0; run <= 1'b0; dz <= 1'b0;
      done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        q   <= num[W-1] ? W'(-num) : W'(num);
        d   <= den[W-1] ? W'(-den) : W'(den);
        dz  <= (den == '0);
        neg <= num[W-1] ^ den[W-1];
        r   <= '0;
        cnt <= '0;
        run <= 1'b1;
      end else if (run) begin
        if (cnt == ($bits(cnt))'(W)) begin
          run  <= 1'b0;
          done <= 1'b1;
          quo  <= dz ? '0 : (neg ? -$signed(q) : $signed(q));
        end else begin
          if (r_sh >= {1'b0, d}) begin
            r <= r_sh - {1'b0, d};
            q <= {q[W-2:0], 1'b1};
          end else begin
            r <= r_sh;
            q <= {q[W-2:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
  assign busy = run;
endmodule
