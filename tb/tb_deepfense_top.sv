// tb_deepfense_top: end-to-end test of the detector at reduced size: two
// latent defenders, 24-input networks with 12 hidden neurons, a 16-element
// input-defender vector with 12 atoms per class and sparsity 4. See
// tb_top_body.svh for what is checked and counted.
module tb_deepfense_top;
  import deepfense_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_LAT = 2, NC = 10, N_PU = 4, N_PE = 8, FRAC = 8, LD = 10;
  localparam int NA = 12, NV = 16, PO = 4, KS = 4, IN_DIM = 24, HID = 12, N_SAMPLES = 16;

  deepfense_top #(.N_LAT(N_LAT), .N_CLASS(NC), .MAX_ACT(64), .WMEM_WORDS(64), .BMEM_DEPTH(64),
                  .L_DIM(LD), .N_ATOMS(NA), .N_VEC(NV), .P_OMP(PO), .K_SPARSE(KS)) dut (
    .clk, .rst_n, .cfg, .start, .busy, .done, .pred, .d, .prob, .alarm);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_top_body.svh"
endmodule
