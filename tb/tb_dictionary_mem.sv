// tb_dictionary_mem: fills a small dictionary memory (3 classes, 5 atoms,
// N = 16, P = 4) element by element and reads back every chunk, checking the
// one-cycle read latency and the element-to-lane mapping.
module tb_dictionary_mem;
  localparam int NC = 3, NA = 5, N = 16, P = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_class = 0, rd_class = 0;
  logic [2:0] wr_atom = 0, rd_atom = 0;
  logic [3:0] wr_idx = 0;
  logic [1:0] rd_chunk = 0;
  logic signed [15:0] wr_data = 0;
  logic signed [15:0] rd_data [P];
  dictionary_mem #(.N_CLASS(NC), .N_ATOMS(NA), .N(N), .P(P)) dut (.*);

  shortint D [NC][NA][N];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < NA; a++)
        for (int i = 0; i < N; i++) begin
          D[c][a][i] = shortint'($urandom);
          @(negedge clk); wr_en = 1; wr_class = 2'(c); wr_atom = 3'(a); wr_idx = 4'(i); wr_data = D[c][a][i];
        end
    @(negedge clk); wr_en = 0;
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < NA; a++)
        for (int k = 0; k < N / P; k++) begin
          rd_en = 1; rd_class = 2'(c); rd_atom = 3'(a); rd_chunk = 2'(k);
          @(negedge clk); rd_en = 0; rd_class = 2'($urandom); rd_atom = 3'($urandom % NA);
          for (int e = 0; e < P; e++) begin
            checks++;
            if (rd_data[e] != D[c][a][k * P + e]) begin
              failures++; $display("D[%0d][%0d][%0d] = %0d", c, a, k * P + e, rd_data[e]);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
