// tb_seq_divider: random signed divisions (both signs, small and large
// magnitudes, zero divisor) against the '/' operator, plus the latency of
// W + 1 edges from start to done.
module tb_seq_divider;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic signed [63:0] num = 0, den = 0, quo;
  seq_divider #(.W(64)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    longint e;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      num = {$urandom, $urandom} >>> $urandom_range(1, 50);
      den = {$urandom, $urandom} >>> $urandom_range(1, 62);
      if (t % 3 == 0) num = -num;
      if (t % 5 == 0) den = -den;
      if (t == 7) den = 0;
      start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      e = (den == 0) ? 0 : num / den;
      checks += 2;
      if (quo != e) begin failures++; $display("%0d / %0d = %0d expected %0d", num, den, quo, e); end
      if (cyc != 64 + 2) begin failures++; $display("latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
