// tb_l2_distance: drives the distance kernel from feature and center tables
// held here, for random samples and classes, and checks the squared distance,
// the threshold decision (thresholds set just below, at, and above the true
// distance) and the latency (done rises L_DIM + 1 edges after the edge that samples start).
module tb_l2_distance;
  localparam int NC = 10, LD = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, adv;
  logic [3:0] cls = 0, c_class, c_dim;
  logic [9:0] feat_addr;
  logic signed [15:0] feat_data, c_data;
  logic [47:0] thr, dist_sq;

  shortint feat [LD];
  shortint cen  [NC][LD];
  longint  thr_tab [NC];
  assign feat_data = (feat_addr < LD) ? feat[feat_addr] : 16'sd0;
  assign c_data    = cen[c_class][c_dim];
  assign thr       = 48'(thr_tab[c_class]);

  l2_distance #(.N_CLASS(NC), .L_DIM(LD)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, k, adv_seen = 0, ok_seen = 0;
    longint ref_d;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      k = $urandom_range(0, NC - 1);
      for (int d = 0; d < LD; d++) begin
        feat[d] = shortint'($urandom);
        cen[k][d] = shortint'($urandom);
      end
      if (t == 0) begin feat[0] = 16'sh7fff; cen[k][0] = -16'sh8000; end
      ref_d = 0;
      for (int d = 0; d < LD; d++) ref_d += (longint'(feat[d]) - longint'(cen[k][d])) ** 2;
      thr_tab[k] = ref_d + (t % 3) - 1;      // below, equal, above
      @(negedge clk); start = 1; cls = 4'(k);
      @(negedge clk); start = 0; cls = 4'($urandom); cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc != LD + 2) begin failures++; $display("latency %0d", cyc); end
      if (longint'(dist_sq) != ref_d) begin failures++; $display("dist %0d expected %0d", dist_sq, ref_d); end
      if (adv != (ref_d > thr_tab[k])) begin failures++; $display("adv %0d", adv); end
      if (adv) adv_seen++; else ok_seen++;
    end
    checks++;
    if (adv_seen == 0 || ok_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
