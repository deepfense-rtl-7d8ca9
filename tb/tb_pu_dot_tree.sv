// tb_pu_dot_tree: self-checking test of the processing-unit adder tree.
// Drives random signed operands (and the extreme values) into an 8-lane and a
// 5-lane (non power of two) tree and compares the sum with a sequential
// reference dot product.
module tb_pu_dot_tree;
  int checks = 0, failures = 0;
  logic signed [15:0] a8 [8], b8 [8];
  logic signed [15:0] a5 [5], b5 [5];
  logic signed [39:0] s8, s5;

  pu_dot_tree #(.N(8), .IN_W(16), .ACC_W(40)) dut8 (.a(a8), .b(b8), .sum(s8));
  pu_dot_tree #(.N(5), .IN_W(16), .ACC_W(40)) dut5 (.a(a5), .b(b5), .sum(s5));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint r8, r5;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < 8; i++) begin
        a8[i] = (t == 0) ? -16'sd32768 : 16'($urandom);
        b8[i] = (t == 0) ? -16'sd32768 : 16'($urandom);
      end
      for (int i = 0; i < 5; i++) begin
        a5[i] = (t == 1) ? 16'sd32767 : 16'($urandom);
        b5[i] = (t == 1) ? -16'sd32768 : 16'($urandom);
      end
      #1;
      r8 = 0; r5 = 0;
      for (int i = 0; i < 8; i++) r8 += longint'(a8[i]) * longint'(b8[i]);
      for (int i = 0; i < 5; i++) r5 += longint'(a5[i]) * longint'(b5[i]);
      checks += 2;
      if (longint'(s8) != r8) begin failures++; $display("8-lane mismatch %0d vs %0d", s8, r8); end
      if (longint'(s5) != r5) begin failures++; $display("5-lane mismatch %0d vs %0d", s5, r5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
