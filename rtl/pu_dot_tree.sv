// pu_dot_tree: one processing unit (PU) of the DNN and OMP kernels.
//
// N parallel multipliers (the processing elements, one DSP multiply each)
// feed a balanced adder tree that reduces the N products to one partial dot
// product. The source calls for parallel MAC units and for a tree-based
// reduction of the partial results of the parallel processes; the structure
// of the tree (binary, zero-padded to a power of two) and the widths are this
// design's choice. Purely combinational: the caller registers operands and
// accumulates the result, so one partial sum is produced every cycle.
//
// Ports: a[i], b[i] are signed IN_W-bit operands, sum is their signed
// ACC_W-bit dot product (no rounding, full precision as long as ACC_W is wide
// enough for 2*IN_W + log2(N) bits).
module pu_dot_tree #(
  parameter int N     = 8,
  parameter int IN_W  = 16,
  parameter int ACC_W = 40
) (
  input  logic signed [IN_W-1:0]  a   [N],
  input  logic signed [IN_W-1:0]  b   [N],
  output logic signed [ACC_W-1:0] sum
);
  localparam int LV = (N > 1) ? $clog2(N) : 1;
  localparam int NP = 1 << LV;

  // level l of the tree is its own array, g_lvl[l].node, with NP >> l nodes
  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic signed [ACC_W-1:0] node [NP >> l];
    for (genvar i = 0; i < (NP >> l); i++) begin : g_node
      if (l == 0) begin : g_leaf
        if (i < N) begin : g_mul
          assign node[i] = ACC_W'(a[i]) * ACC_W'(b[i]);
        end else begin : g_pad
          assign node[i] = '0;
        end
      end else begin : g_add
        assign node[i] = g_lvl[l-1].node[2*i] + g_lvl[l-1].node[2*i+1];
      end
    end
  end
  assign sum = g_lvl[LV].node[0];
endmodule
