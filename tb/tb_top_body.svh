// Shared body of the deepfense_top testbenches. The including module defines
// the localparams N_LAT, NC, N_PU, N_PE, FRAC, LD, NA, NV, PO, KS, IN_DIM, HID,
// N_SAMPLES and instantiates deepfense_top as dut, connected to clk, rst_n,
// cfg, start, busy, done, pred, d, prob, alarm.
//
// Every DNN (victim = unit 0, latent n = unit n) is IN_DIM -> HID (ReLU) ->
// NC scores (victim) or LD PCA features (latent, no ReLU), loaded through the
// configuration port from hashed parameters. The reference recomputes the
// victim's class, each latent defender's squared distance, the input
// defender's residual energy, and the noisy-OR result. Thresholds are set
// before each sample one below or at the reference value, chosen at random,
// so every decision combination is exercised and must match exactly.
// Mechanisms counted: latent defender flags / passes, input defender flags /
// passes, alarm raised / quiet, a flag that the noisy-OR weighting keeps
// below the alarm level, and (with more than two samples) at least two
// different predicted classes; each must occur.

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic start, busy, done, alarm;
  logic [$clog2(NC)-1:0] pred;
  logic [N_LAT:0] d;
  logic [16:0] prob;

  longint DICT [NC][NA][NV];
  longint X [NV];
  longint PN [N_LAT+1];

  int n_lat_flag = 0, n_lat_pass = 0, n_in_flag = 0, n_in_pass = 0;
  int n_alarm = 0, n_quiet = 0, n_suppressed = 0;
  logic [NC-1:0] classes_seen = '0;

  task automatic wr(cfg_kind_e k, int unit, int addr, int lane, longint data);
    @(negedge clk);
    cfg.we = 1; cfg.kind = k; cfg.unit = 4'(unit); cfg.addr = 20'(addr);
    cfg.lane = 8'(lane); cfg.data = 64'(data);
    @(negedge clk);
    cfg.we = 0;
  endtask

  // unit u: IN_DIM -> HID -> out
  task automatic load_dnn(int u, int outd, bit last_relu);
    int dims [3];
    int wa = 0, ba = 0, C, G;
    layer_desc_t ld;
    dims = '{IN_DIM, HID, outd};
    for (int l = 0; l < 2; l++) begin
      C = (dims[l] + N_PE - 1) / N_PE;
      G = (dims[l+1] + N_PU - 1) / N_PU;
      for (int o = 0; o < dims[l+1]; o++) begin
        for (int i = 0; i < dims[l]; i++)
          wr(CFG_WEIGHT, u, wa + (o / N_PU) * C + i / N_PE, (o % N_PU) * N_PE + i % N_PE,
             longint'(val(u + 1, l, o, i, 48)));
        wr(CFG_BIAS, u, ba + o, 0, longint'(val(u + 1, l + 100, o, 0, 16)));
      end
      ld = '{in_dim: 12'(dims[l]), out_dim: 12'(dims[l+1]),
             relu: (l == 0) ? 1'b1 : last_relu, w_base: 16'(wa), b_base: 12'(ba), ltype: LT_DENSE, img: 6'd0, ksz: 3'd0};
      wr(CFG_LAYER, u, 0, l, longint'(ld));
      wa += G * C; ba += dims[l+1];
    end
    wr(CFG_NLAYERS, u, 0, 0, 2);
  endtask

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
    longint res [NV], w [NV], U [KS][NV], uu [KS];
    bit sel [NA];
    longint dt, best, bestabs, cf;
    for (int i = 0; i < NV; i++) res[i] = X[i];
    for (int a = 0; a < NA; a++) sel[a] = 0;
    for (int t = 0; t < KS; t++) begin
      best = -1; bestabs = -1;
      for (int a = 0; a < NA; a++) begin
        dt = 0;
        for (int i = 0; i < NV; i++) dt += res[i] * DICT[c][a][i];
        if (dt < 0) dt = -dt;
        if (!sel[a] && dt > bestabs) begin bestabs = dt; best = a; end
      end
      sel[best] = 1;
      for (int i = 0; i < NV; i++) w[i] = DICT[c][best][i];
      for (int j = 0; j < t; j++) begin
        dt = 0;
        for (int i = 0; i < NV; i++) dt += U[j][i] * w[i];
        cf = (uu[j] == 0) ? 0 : sat32((dt <<< 12) / uu[j]);
        for (int i = 0; i < NV; i++) w[i] = sat16(w[i] - ((cf * U[j][i]) >>> 12));
      end
      dt = 0;
      for (int i = 0; i < NV; i++) dt += w[i] * w[i];
      uu[t] = dt;
      for (int i = 0; i < NV; i++) U[t][i] = w[i];
      dt = 0;
      for (int i = 0; i < NV; i++) dt += res[i] * w[i];
      cf = (uu[t] == 0) ? 0 : sat32((dt <<< 12) / uu[t]);
      for (int i = 0; i < NV; i++) res[i] = sat16(res[i] - ((cf * w[i]) >>> 12));
    end
    dt = 0;
    for (int i = 0; i < NV; i++) dt += res[i] * res[i];
    return dt;
  endfunction

  initial begin : stimulus
    shortint x [], y [];
    int vdims [] = '{IN_DIM, HID, NC};
    int ldims [] = '{IN_DIM, HID, LD};
    bit vrelu [] = '{1'b1, 1'b0};
    int cls_ref;
    longint dsq, e, prod, p;
    logic [N_LAT:0] d_ref;
    cfg = '0; start = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // victim and latent defenders
    load_dnn(0, NC, 1'b0);
    for (int n = 1; n <= N_LAT; n++) begin
      load_dnn(n, LD, 1'b0);
      for (int c = 0; c < NC; c++)
        for (int j = 0; j < LD; j++)
          wr(CFG_CENTER, n, c, j, longint'(val(n + 50, 7, c, j, 3000)));
    end
    // dictionaries
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < NA; a++)
        for (int i = 0; i < NV; i++) begin
          DICT[c][a][i] = longint'(val(99, c, a, i, 1024));
          wr(CFG_DICT, c, a, i, DICT[c][a][i]);
        end
    // noisy-OR weights: first latent strong, others and the input defender weak
    for (int n = 0; n <= N_LAT; n++) begin
      PN[n] = (n == 0) ? 64'd58982 : 64'd26214;     // 0.9 and 0.4
      wr(CFG_PN, 0, n, 0, PN[n]);
    end

    x = new[IN_DIM];
    for (int s = 0; s < N_SAMPLES; s++) begin
      for (int i = 0; i < IN_DIM; i++) begin
        x[i] = val(1000 + s, 0, 0, i, 255);
        wr(CFG_INPUT, 0, i, 0, longint'(x[i]));
      end
      // reference victim
      forward(1, 2, vdims, vrelu, FRAC, 48, 16, x, y);
      cls_ref = 0;
      for (int c = 1; c < NC; c++) if (y[c] > y[cls_ref]) cls_ref = c;
      // input-defender vector: an atom of the predicted class plus noise
      for (int i = 0; i < NV; i++) begin
        X[i] = DICT[cls_ref][s % NA][i] + longint'(val(2000 + s, 0, 0, i, 300));
        wr(CFG_PATCH, 0, i, 0, X[i]);
      end
      // latent references and thresholds
      for (int n = 1; n <= N_LAT; n++) begin
        forward(n + 1, 2, ldims, vrelu, FRAC, 48, 16, x, y);
        dsq = 0;
        for (int j = 0; j < LD; j++) dsq += (longint'(y[j]) - longint'(val(n + 50, 7, cls_ref, j, 3000))) ** 2;
        d_ref[n-1] = 1'($urandom);
        wr(CFG_CTHR, n, cls_ref, 0, d_ref[n-1] ? dsq - 1 : dsq);
      end
      e = ref_omp(cls_ref);
      d_ref[N_LAT] = 1'($urandom);
      wr(CFG_DTHR, 0, cls_ref, 0, d_ref[N_LAT] ? e - 1 : e);
      prod = 65536;
      for (int n = 0; n <= N_LAT; n++) if (d_ref[n]) prod = (prod * (65536 - PN[n])) >> 16;
      p = 65536 - prod;
      // run
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks += 4;
      if (int'(pred) != cls_ref) begin failures++; $display("sample %0d: pred %0d expected %0d", s, pred, cls_ref); end
      if (d != d_ref) begin failures++; $display("sample %0d: d %b expected %b", s, d, d_ref); end
      if (longint'(prob) != p) begin failures++; $display("sample %0d: prob %0d expected %0d", s, prob, p); end
      if (alarm != (p >= 32768)) begin failures++; $display("sample %0d: alarm %0d", s, alarm); end
      for (int n = 0; n < N_LAT; n++) if (d[n]) n_lat_flag++; else n_lat_pass++;
      if (d[N_LAT]) n_in_flag++; else n_in_pass++;
      if (alarm) n_alarm++; else n_quiet++;
      classes_seen[pred] = 1'b1;
      if (d != '0 && !alarm) n_suppressed++;
      $display("sample %0d: class %0d decisions %b prob %0d alarm %0d", s, pred, d, prob, alarm);
    end
    $display("latent flag %0d pass %0d, input flag %0d pass %0d, alarm %0d quiet %0d, suppressed %0d",
             n_lat_flag, n_lat_pass, n_in_flag, n_in_pass, n_alarm, n_quiet, n_suppressed);
    checks += 8;
    if ($countones(classes_seen) < 2 && N_SAMPLES > 2) failures++;
    if (n_lat_flag == 0) failures++;
    if (n_lat_pass == 0) failures++;
    if (n_in_flag == 0) failures++;
    if (n_in_pass == 0) failures++;
    if (n_alarm == 0) failures++;
    if (n_quiet == 0) failures++;
    if (n_suppressed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
