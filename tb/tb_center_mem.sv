// tb_center_mem: writes random centers and thresholds for every class and
// dimension, then reads each back and compares with a copy kept here; a
// second pass overwrites one class and checks the others are untouched.
module tb_center_mem;
  localparam int NC = 10, LD = 10;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic c_we = 0, t_we = 0;
  logic [3:0] c_class = 0, t_class = 0, rd_class = 0, rd_dim = 0, c_dim = 0;
  logic signed [15:0] c_data = 0, rd_center;
  logic [47:0] t_data = 0, rd_thr;
  center_mem #(.N_CLASS(NC), .L_DIM(LD)) dut (.*);

  shortint cen [NC][LD];
  longint  thr [NC];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < NC; k++) begin
      for (int d = 0; d < LD; d++) begin
        rd_class = 4'(k); rd_dim = 4'(d); #1;
        checks++;
        if (rd_center != cen[k][d]) begin failures++; $display("center[%0d][%0d]=%0d", k, d, rd_center); end
      end
      checks++;
      if (rd_thr != 48'(thr[k])) begin failures++; $display("thr[%0d]=%0d", k, rd_thr); end
    end
  endtask

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < NC; k++) begin
        if (pass == 1 && k != 3) continue;
        for (int d = 0; d < LD; d++) begin
          cen[k][d] = shortint'($urandom);
          @(negedge clk); c_we = 1; c_class = 4'(k); c_dim = 4'(d); c_data = cen[k][d];
        end
        thr[k] = longint'({$urandom, $urandom}) & 64'hffff_ffff_ffff;
        @(negedge clk); c_we = 0; t_we = 1; t_class = 4'(k); t_data = 48'(thr[k]);
        @(negedge clk); t_we = 0;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
