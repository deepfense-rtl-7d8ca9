// tb_omp_kernel: self-checking test of the OMP core with a small
// configuration (N = 16, P = 4, 12 atoms, K = 4, two classes).
// Random dictionaries are loaded into a dictionary_mem; input vectors are
// made of a few atoms plus noise. A reference pursuit written here with the
// same fixed-point rules (argmax of |<res, D_j>| over atoms not yet chosen,
// modified Gram-Schmidt with unnormalised basis, truncating division,
// floor-shifted saturating updates) gives the expected residual energy, which
// must match bit for bit. The latency is checked against the closed form in
// the module header. A vector that lies exactly in the span of the chosen
// atoms must reconstruct to a small energy.
module tb_omp_kernel;
  localparam int NC = 2, NA = 12, N = 16, P = 4, K = 4, FRAC = 12, CH = N / P;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we = 0, start = 0, busy, done;
  logic [3:0] x_addr = 0;
  logic signed [15:0] x_data = 0;
  logic cls = 0;
  logic [47:0] energy;
  logic d_rd_en, d_rd_class;
  logic [3:0] d_rd_atom;
  logic [1:0] d_rd_chunk;
  logic signed [15:0] d_rd_data [P];
  logic wr_en = 0, wr_class = 0;
  logic [3:0] wr_atom = 0, wr_idx = 0;
  logic signed [15:0] wr_data = 0;

  dictionary_mem #(.N_CLASS(NC), .N_ATOMS(NA), .N(N), .P(P)) u_dict (
    .clk, .wr_en, .wr_class, .wr_atom, .wr_idx, .wr_data,
    .rd_en(d_rd_en), .rd_class(d_rd_class), .rd_atom(d_rd_atom), .rd_chunk(d_rd_chunk),
    .rd_data(d_rd_data));

  omp_kernel #(.N_CLASS(NC), .N_ATOMS(NA), .N(N), .P(P), .K(K)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint D [NC][NA][N];
  longint X [N];

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction
  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint ref_omp(int c);
    longint res [N], w [N], U [K][N], uu [K];
    bit sel [NA];
    longint dot, best, bestabs, cf;
    for (int i = 0; i < N; i++) res[i] = X[i];
    for (int a = 0; a < NA; a++) sel[a] = 0;
    for (int t = 0; t < K; t++) begin
      best = -1; bestabs = -1;
      for (int a = 0; a < NA; a++) begin
        dot = 0;
        for (int i = 0; i < N; i++) dot += res[i] * D[c][a][i];
        if (dot < 0) dot = -dot;
        if (!sel[a] && dot > bestabs) begin bestabs = dot; best = a; end
      end
      sel[best] = 1;
      for (int i = 0; i < N; i++) w[i] = D[c][best][i];
      for (int j = 0; j < t; j++) begin
        dot = 0;
        for (int i = 0; i < N; i++) dot += U[j][i] * w[i];
        cf = (uu[j] == 0) ? 0 : sat32((dot <<< FRAC) / uu[j]);
        for (int i = 0; i < N; i++) w[i] = sat16(w[i] - ((cf * U[j][i]) >>> FRAC));
      end
      dot = 0;
      for (int i = 0; i < N; i++) dot += w[i] * w[i];
      uu[t] = dot;
      for (int i = 0; i < N; i++) U[t][i] = w[i];
      dot = 0;
      for (int i = 0; i < N; i++) dot += res[i] * w[i];
      cf = (uu[t] == 0) ? 0 : sat32((dot <<< FRAC) / uu[t]);
      for (int i = 0; i < N; i++) res[i] = sat16(res[i] - ((cf * w[i]) >>> FRAC));
    end
    dot = 0;
    for (int i = 0; i < N; i++) dot += res[i] * res[i];
    return dot;
  endfunction

  function automatic int expected_latency();
    int DV = 64 + 3, lat = 2 + 1 + CH + 2;
    for (int t = 0; t < K; t++)
      lat += (NA * CH + 2) + (CH + 1) + t * (CH + 2 + DV + CH) + (CH + 2) + 1 + (CH + 2 + DV + CH);
    return lat;
  endfunction

  initial begin
    int cyc, c;
    longint ref_e;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NC; k++)
      for (int a = 0; a < NA; a++)
        for (int i = 0; i < N; i++) begin
          D[k][a][i] = longint'($urandom_range(0, 2048)) - 1024;
          @(negedge clk); wr_en = 1; wr_class = k[0]; wr_atom = 4'(a); wr_idx = 4'(i);
          wr_data = 16'(D[k][a][i]);
        end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 6; s++) begin
      c = s % 2;
      for (int i = 0; i < N; i++) begin
        X[i] = (s == 5) ? 0 : longint'($urandom_range(0, 400)) - 200;
        X[i] += 2 * D[c][(s + 1) % NA][i] - D[c][(s + 5) % NA][i];
        @(negedge clk); x_we = 1; x_addr = 4'(i); x_data = 16'(X[i]);
      end
      @(negedge clk); x_we = 0; start = 1; cls = c[0];
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      ref_e = ref_omp(c);
      checks += 2;
      if (longint'(energy) != ref_e) begin failures++; $display("sample %0d energy %0d expected %0d", s, energy, ref_e); end
      if (cyc != expected_latency()) begin failures++; $display("latency %0d expected %0d", cyc, expected_latency()); end
      if (s == 5) begin
        // two atoms only: reconstruction residual must be tiny (< 1e-3 of the input energy)
        longint xe = 0;
        for (int i = 0; i < N; i++) xe += X[i] * X[i];
        checks++;
        if (longint'(energy) * 1000 > xe) begin failures++; $display("exact sparse input not reconstructed: %0d vs %0d", energy, xe); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
