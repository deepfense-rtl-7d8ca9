// tb_deepfense_full: the detector with every parameter at its default (one
// latent defender, 800 -> 500 -> 10 dense networks with N_PU = 4, N_PE = 8,
// a 10-dimensional PCA space, 128-atom dictionaries of 64-element vectors,
// sparsity 8), taken through loading of all parameters and four complete
// sample checks. See tb_top_body.svh for what is checked.
module tb_deepfense_full;
  import deepfense_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_LAT = 1, NC = 10, N_PU = 4, N_PE = 8, FRAC = 8, LD = 10;
  localparam int NA = 128, NV = 64, PO = 8, KS = 8, IN_DIM = 800, HID = 500, N_SAMPLES = 4;

  deepfense_top dut (.clk, .rst_n, .cfg, .start, .busy, .done, .pred, .d, .prob, .alarm);

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_top_body.svh"
endmodule
