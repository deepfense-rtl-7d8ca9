// tb_input_defender: input defender with a small OMP configuration (N = 16,
// P = 4, 12 atoms, K = 4, two classes). Residual energies are computed with a
// reference pursuit; each class threshold is then set one below or equal to
// the sample's energy, so the decision (energy > threshold) must come out
// adversarial and legitimate in turn, including the equality boundary.
module tb_input_defender;
  localparam int NC = 2, NA = 12, N = 16, P = 4, K = 4, FRAC = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dict_we = 0, dict_class = 0, t_we = 0, t_class = 0, x_we = 0, start = 0, cls = 0;
  logic [3:0] dict_atom = 0, dict_idx = 0, x_addr = 0;
  logic signed [15:0] dict_data = 0, x_data = 0;
  logic [47:0] t_data = 0, energy;
  logic busy, done, adv;

  input_defender #(.N_CLASS(NC), .N_ATOMS(NA), .N(N), .P(P), .K(K)) dut (.*);

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

  initial begin
    int c, n_adv = 0, n_ok = 0;
    longint ref_e;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NC; k++)
      for (int a = 0; a < NA; a++)
        for (int i = 0; i < N; i++) begin
          D[k][a][i] = longint'($urandom_range(0, 2048)) - 1024;
          @(negedge clk); dict_we = 1; dict_class = k[0]; dict_atom = 4'(a); dict_idx = 4'(i);
          dict_data = 16'(D[k][a][i]);
        end
    @(negedge clk); dict_we = 0;
    for (int s = 0; s < 6; s++) begin
      c = (s / 2) % 2;
      for (int i = 0; i < N; i++) begin
        X[i] = longint'($urandom_range(0, 800)) - 400 + D[c][s % NA][i];
        @(negedge clk); x_we = 1; x_addr = 4'(i); x_data = 16'(X[i]);
      end
      ref_e = ref_omp(c);
      @(negedge clk); x_we = 0; t_we = 1; t_class = c[0]; t_data = 48'((s % 2) ? ref_e : ref_e - 1);
      @(negedge clk); t_we = 0; start = 1; cls = c[0];
      @(negedge clk); start = 0; cls = ~c[0];
      while (!done) @(negedge clk);
      checks += 2;
      if (longint'(energy) != ref_e) begin failures++; $display("energy %0d expected %0d", energy, ref_e); end
      if (adv != !(s % 2)) begin failures++; $display("adv %0d at sample %0d", adv, s); end
      if (adv) n_adv++; else n_ok++;
    end
    checks++;
    if (n_adv == 0 || n_ok == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
