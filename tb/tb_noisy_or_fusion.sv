// tb_noisy_or_fusion: fuses random decision vectors of four defenders with
// random P_n and checks prob and alarm against an integer model of
// 1 - prod (1 - P_n)^{d_n} (same floor rounding), the corner cases (no
// flags: prob 0; P_n = 1: logical OR; a single P_n of exactly 0.5 sits on the
// alarm boundary) and the latency of N_DEF + 1 edges.
module tb_noisy_or_fusion;
  localparam int ND = 4, PW = 16;
  localparam longint ONE = 1 << PW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pn_we = 0, start = 0, busy, done, alarm;
  logic [1:0] pn_idx = 0;
  logic [PW:0] pn_data = 0, prob;
  logic [ND-1:0] d = 0;
  noisy_or_fusion #(.N_DEF(ND), .PW(PW)) dut (.*);

  longint pn [ND];
  int n_alarm = 0, n_quiet = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_pn(int n, longint v);
    pn[n] = v;
    @(negedge clk); pn_we = 1; pn_idx = 2'(n); pn_data = (PW+1)'(v);
    @(negedge clk); pn_we = 0;
  endtask

  task automatic fuse(logic [ND-1:0] dv);
    int cyc;
    longint prod = ONE, p;
    for (int n = 0; n < ND; n++) if (dv[n]) prod = (prod * (ONE - pn[n])) >> PW;
    p = ONE - prod;
    @(negedge clk); start = 1; d = dv;
    @(negedge clk); start = 0; d = '0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 3;
    if (longint'(prob) != p) begin failures++; $display("prob %0d expected %0d (d=%b)", prob, p, dv); end
    if (alarm != (p >= ONE / 2)) begin failures++; $display("alarm %0d", alarm); end
    if (cyc != ND + 2) begin failures++; $display("latency %0d", cyc); end
    if (alarm) n_alarm++; else n_quiet++;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      for (int n = 0; n < ND; n++) set_pn(n, longint'($urandom_range(0, 65536)));
      fuse(4'($urandom));
    end
    for (int n = 0; n < ND; n++) set_pn(n, longint'($urandom_range(0, 65536)));
    fuse('0);
    for (int n = 0; n < ND; n++) set_pn(n, ONE);
    for (int v = 0; v < 16; v++) fuse(4'(v));
    set_pn(2, ONE / 2);
    fuse(4'b0100);
    set_pn(2, ONE / 2 - 1);
    fuse(4'b0100);
    checks++;
    if (n_alarm == 0 || n_quiet == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
