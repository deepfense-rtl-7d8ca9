// omp_kernel: Orthogonal Matching Pursuit core of the input defender.
//
// Sparsely reconstructs an input vector x (N elements) with K atoms of the
// dictionary of the predicted class and returns the energy of what is left,
// ||res||^2. Following the source's input-defender diagram, each of the K
// iterations (the sparsity level) runs:
//   1. dot product <res, D_j> for every atom j of the dictionary (BRAM),
//   2. support-set update: the atom with the largest |<res, D_j>| that is not
//      yet in the support set is added,
//   3. Gram-Schmidt orthogonalization of the new atom against the basis
//      u_0..u_{t-1} already built (modified Gram-Schmidt:
//      u = d; u -= (<u_j,u>/<u_j,u_j>) u_j for each j), giving u_t,
//   4. residual update res -= (<res,u_t>/<u_t,u_t>) u_t.
// The least-squares step is thus done by Gram-Schmidt as the source says, and,
// since only ||res|| decides, the sparse coefficients are never formed. The
// basis is kept unnormalised with its squared norms <u_j,u_j>, so no square
// root is needed; each projection needs one division (seq_divider).
//
// Datapath: one P-lane multiplier + adder tree (pu_dot_tree) computes every
// dot product, one chunk of P elements per cycle (tree-based reduction,
// cyclic partitioning of vectors into P lanes, as in the source). Operand
// chunks are registered in the cycle the dictionary BRAM is read, so each dot
// product of N elements takes N/P cycles plus one of pipeline drain. Vector
// updates process P elements per cycle.
//
// Number format (this design's choice): vector elements are signed DATA_W bits
// with FRAC fraction bits; dot products are kept at full precision (2*FRAC
// fraction bits, 48 bits); a projection coefficient is
// trunc((dot << FRAC) / norm) saturated to 32 bits, and an update subtracts
// floor(coef * v_i >> FRAC), saturated to DATA_W bits. energy is the raw
// ||res||^2 with 2*FRAC fraction bits.
//
// Interface: x_we/x_addr/x_data load the input vector while idle; start with
// cls (dictionary to use) runs the pursuit; done pulses with energy valid.
// The dictionary read port is brought out to connect dictionary_mem.
// Latency, with CH = N/P and DV = 64 + 3 (divider plus hand-over): iteration
// t (0-based) takes (N_ATOMS*CH + 2) [correlation] + (CH + 1) [atom fetch]
// + t*(CH + 2 + DV + CH) [Gram-Schmidt against t basis vectors] + (CH + 2)
// + 1 [norm, store] + (CH + 2 + DV + CH) [residual update]; the final energy
// takes CH + 2 and done comes 3 edges after the rest, counting the start
// edge. This is the source's estimate n(kl + k^2) operations spread over P
// lanes, plus the divisions.
module omp_kernel #(
  parameter int N_CLASS = 10,
  parameter int N_ATOMS = 128,
  parameter int N       = 64,
  parameter int P       = 8,
  parameter int K       = 8,
  parameter int DATA_W  = 16,
  parameter int FRAC    = 12,
  parameter int DOT_W   = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          x_we,
  input  logic [$clog2(N)-1:0]          x_addr,
  input  logic signed [DATA_W-1:0]      x_data,
  input  logic                          start,
  input  logic [$clog2(N_CLASS)-1:0]    cls,
  output logic                          busy,
  output logic                          done,
  output logic [DOT_W-1:0]              energy,
  // dictionary BRAM read port (one-cycle latency)
  output logic                          d_rd_en,
  output logic [$clog2(N_CLASS)-1:0]    d_rd_class,
  output logic [$clog2(N_ATOMS)-1:0]    d_rd_atom,
  output logic [$clog2(N/P)-1:0]        d_rd_chunk,
  input  logic signed [DATA_W-1:0]      d_rd_data [P]
);
  localparam int CH  = N / P;
  localparam int CHW = (CH > 1) ? $clog2(CH) : 1;
  localparam int AW  = $clog2(N_ATOMS);
  localparam int KW  = $clog2(K + 1);
  localparam int DW  = 64;

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic signed [DOT_W-1:0]  dot_t;

  // vectors
  elem_t xv  [N];
  elem_t res [N];
  elem_t wv  [N];          // atom being orthogonalised
  elem_t U   [K][N];       // orthogonal basis of the support set
  dot_t  uu  [K];          // squared norms of the basis vectors
  logic  [N_ATOMS-1:0] in_support;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_CORR, S_LOAD, S_DOT, S_DIV, S_UPD, S_STORE, S_DONE
  } state_e;
  state_e state;

  // which dot product / update is in progress
  typedef enum logic [2:0] {
    P_GS,      // <U_j, w>, then w -= c U_j
    P_NORM,    // <w, w>,   then store U_t
    P_RES,     // <res, w>, then res -= c w
    P_ENERGY   // <res, res>, final
  } phase_e;
  phase_e phase;

  logic [$clog2(N_CLASS)-1:0] cls_q;
  logic [KW-1:0]  t;            // iteration
  logic [KW-1:0]  j;            // Gram-Schmidt index
  logic [AW-1:0]  atom;         // correlation atom counter
  logic [CHW-1:0] chunk;
  logic           issuing;

  // ---------- dot-product pipeline ----------
  elem_t a1 [P], b1 [P], bsel [P];
  logic  v1, first1, last1, dict1;
  logic [AW-1:0] atom1;
  dot_t  acc, psum, dot_val;
  logic signed [DOT_W+1:0] cand_abs, best_abs;
  logic [AW-1:0] best_atom;
  logic          best_valid;
  logic          pipe_busy;

  for (genvar e = 0; e < P; e++) begin : g_bsel
    assign bsel[e] = dict1 ? d_rd_data[e] : b1[e];
  end

  pu_dot_tree #(.N(P), .IN_W(DATA_W), .ACC_W(DOT_W)) u_tree (.a(a1), .b(bsel), .sum(psum));

  dot_t full;
  assign full = (first1 ? dot_t'(0) : acc) + psum;
  assign cand_abs = full[DOT_W-1] ? -(DOT_W+2)'(full) : (DOT_W+2)'(full);

  // dictionary read address
  assign d_rd_en    = issuing && (state == S_CORR || state == S_LOAD);
  assign d_rd_class = cls_q;
  assign d_rd_atom  = (state == S_LOAD) ? best_atom : atom;
  assign d_rd_chunk = ($bits(d_rd_chunk))'(chunk);

  // ---------- divider ----------
  logic div_start, div_busy, div_done;
  logic signed [DW-1:0] div_num, div_den, div_q;
  logic signed [31:0] coef;
  seq_divider #(.W(DW)) u_div (.clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
                               .busy(div_busy), .done(div_done), .quo(div_q));

  function automatic elem_t sub_scaled(input elem_t y, input logic signed [31:0] c, input elem_t x);
    logic signed [63:0] p, r;
    p = (64'(c) * 64'(x)) >>> FRAC;
    r = 64'(y) - p;
    if (r > (64'sd1 <<< (DATA_W - 1)) - 1) r = (64'sd1 <<< (DATA_W - 1)) - 1;
    if (r < -(64'sd1 <<< (DATA_W - 1)))   r = -(64'sd1 <<< (DATA_W - 1));
    return elem_t'(r);
  endfunction

  function automatic logic signed [31:0] sat32(input logic signed [DW-1:0] v);
    if (v > 64'sd2147483647)  return 32'sh7fff_ffff;
    if (v < -64'sd2147483648) return 32'sh8000_0000;
    return 32'(v);
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= P_GS; cls_q <= '0; t <= '0; j <= '0; atom <= '0;
      chunk <= '0; issuing <= 1'b0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      dict1 <= 1'b0; atom1 <= '0; acc <= '0; dot_val <= '0; best_abs <= '0;
      best_atom <= '0; best_valid <= 1'b0; pipe_busy <= 1'b0; in_support <= '0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0; coef <= '0;
      done <= 1'b0; energy <= '0;
      for (int k = 0; k < K; k++) uu[k] <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;

      // ---- stage 1: accumulate, argmax over atoms ----
      v1 <= 1'b0;
      if (v1) begin
        acc <= full;
        if (last1) begin
          dot_val <= full;
          if (dict1 && state == S_CORR) begin
            if (!in_support[atom1] && (!best_valid || cand_abs > best_abs)) begin
              best_abs <= cand_abs; best_atom <= atom1; best_valid <= 1'b1;
            end
          end
        end
      end

      case (state)
        S_IDLE: if (start) begin
          cls_q <= cls; state <= S_INIT;
        end
        S_INIT: begin
          for (int i = 0; i < N; i++) res[i] <= xv[i];
          in_support <= '0; t <= '0;
          atom <= '0; chunk <= '0; issuing <= 1'b1; best_valid <= 1'b0;
          state <= S_CORR;
        end
        // correlation of the residual with every atom
        S_CORR: begin
          if (issuing) begin
            v1 <= 1'b1; first1 <= (chunk == 0); last1 <= (32'(chunk) == CH - 1);
            dict1 <= 1'b1; atom1 <= atom;
            for (int e = 0; e < P; e++) a1[e] <= res[32'(chunk) * P + e];
            if (32'(chunk) == CH - 1) begin
              chunk <= '0;
              if (32'(atom) == N_ATOMS - 1) issuing <= 1'b0;
              else atom <= atom + 1'b1;
            end else chunk <= chunk + 1'b1;
          end else if (!v1) begin
            // support-set update, then fetch the chosen atom
            in_support[best_atom] <= 1'b1;
            issuing <= 1'b1; chunk <= '0; state <= S_LOAD;
          end
        end
        // copy the chosen atom into w
        S_LOAD: begin
          if (issuing) begin
            if (32'(chunk) == CH - 1) issuing <= 1'b0;
            else chunk <= chunk + 1'b1;
            pipe_busy <= 1'b1;
            atom1 <= ($bits(atom1))'(chunk);   // chunk index of the read in flight
          end else pipe_busy <= 1'b0;
          if (pipe_busy) begin
            for (int e = 0; e < P; e++) wv[32'(atom1) * P + e] <= d_rd_data[e];
          end
          if (!issuing && pipe_busy) begin
            j <= '0;
            if (t == 0) phase <= P_NORM; else phase <= P_GS;
            issuing <= 1'b1; chunk <= '0; state <= S_DOT;
          end
        end
        // generic dot product of two register vectors
        S_DOT: begin
          if (issuing) begin
            v1 <= 1'b1; first1 <= (chunk == 0); last1 <= (32'(chunk) == CH - 1);
            dict1 <= 1'b0;
            for (int e = 0; e < P; e++) begin
              automatic int i = 32'(chunk) * P + e;
              case (phase)
                P_GS:     begin a1[e] <= U[j[$clog2(K)-1:0]][i];  b1[e] <= wv[i];  end
                P_NORM:   begin a1[e] <= wv[i];    b1[e] <= wv[i];  end
                P_RES:    begin a1[e] <= res[i];   b1[e] <= wv[i];  end
                default:  begin a1[e] <= res[i];   b1[e] <= res[i]; end
              endcase
            end
            if (32'(chunk) == CH - 1) issuing <= 1'b0;
            else chunk <= chunk + 1'b1;
          end else if (!v1) begin
            case (phase)
              P_NORM:   state <= S_STORE;
              P_ENERGY: begin energy <= DOT_W'(dot_val); state <= S_DONE; end
              default: begin
                div_num   <= DW'(dot_val) <<< FRAC;
                div_den   <= (phase == P_GS) ? DW'(uu[j[$clog2(K)-1:0]]) : DW'(uu[t[$clog2(K)-1:0]]);
                div_start <= 1'b1;
                state     <= S_DIV;
              end
            endcase
          end
        end
        S_DIV: if (div_done) begin
          coef <= sat32(div_q); chunk <= '0; state <= S_UPD;
        end
        // vector update, P elements per cycle
        S_UPD: begin
          for (int e = 0; e < P; e++) begin
            automatic int i = 32'(chunk) * P + e;
            if (phase == P_GS) wv[i]  <= sub_scaled(wv[i],  coef, U[j[$clog2(K)-1:0]][i]);
            else               res[i] <= sub_scaled(res[i], coef, wv[i]);
          end
          if (32'(chunk) == CH - 1) begin
            chunk <= '0; issuing <= 1'b1;
            if (phase == P_GS) begin
              if (32'(j) + 1 == 32'(t)) phase <= P_NORM;
              j <= j + 1'b1;
              state <= S_DOT;
            end else begin
              // iteration finished
              t <= t + 1'b1;
              if (32'(t) + 1 == K) begin phase <= P_ENERGY; state <= S_DOT; end
              else begin atom <= '0; best_valid <= 1'b0; state <= S_CORR; end
            end
          end else chunk <= chunk + 1'b1;
        end
        // append w to the basis with its squared norm
        S_STORE: begin
          for (int i = 0; i < N; i++) U[t[$clog2(K)-1:0]][i] <= wv[i];
          uu[t[$clog2(K)-1:0]] <= dot_val;
          phase <= P_RES; issuing <= 1'b1; chunk <= '0; state <= S_DOT;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (x_we && state == S_IDLE) xv[x_addr] <= x_data;
  end

  initial assert (N % P == 0 && K <= N_ATOMS) else $error("bad OMP configuration");
endmodule
