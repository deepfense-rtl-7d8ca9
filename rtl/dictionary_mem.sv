// dictionary_mem: dictionary BRAM of the input defender.
//
// Holds one learned dictionary D^i per class i, each of N_ATOMS unit-norm
// columns (atoms) of N elements (an 8x8 pixel patch gives N = 64, the
// source's example). Words are P elements wide so the OMP kernel reads one
// chunk of P elements of an atom per cycle, matching its P-lane dot-product
// tree (cyclic partitioning of each atom across P lanes). The read is
// synchronous (one-cycle latency, as a block RAM). The host writes one element
// per cycle. Layout: word ((class*N_ATOMS + atom)*N/P + chunk), lane e holds
// element chunk*P + e of the atom.
module dictionary_mem #(
  parameter int N_CLASS = 10,
  parameter int N_ATOMS = 128,
  parameter int N       = 64,
  parameter int P       = 8,
  parameter int DATA_W  = 16
) (
  input  logic                           clk,
  input  logic                           wr_en,
  input  logic [$clog2(N_CLASS)-1:0]     wr_class,
  input  logic [$clog2(N_ATOMS)-1:0]     wr_atom,
  input  logic [$clog2(N)-1:0]           wr_idx,
  input  logic signed [DATA_W-1:0]       wr_data,
  input  logic                           rd_en,
  input  logic [$clog2(N_CLASS)-1:0]     rd_class,
  input  logic [$clog2(N_ATOMS)-1:0]     rd_atom,
  input  logic [$clog2(N/P)-1:0]         rd_chunk,
  output logic signed [DATA_W-1:0]       rd_data [P]
);
  localparam int CH    = N / P;
  localparam int DEPTH = N_CLASS * N_ATOMS * CH;
  localparam int AW    = $clog2(DEPTH);

  logic signed [DATA_W-1:0] mem [DEPTH][P];

  logic [AW-1:0] wa, ra;
  assign wa = AW'((32'(wr_class) * N_ATOMS + 32'(wr_atom)) * CH + 32'(wr_idx) / P);
  assign ra = AW'((32'(rd_class) * N_ATOMS + 32'(rd_atom)) * CH + 32'(rd_chunk));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa][32'(wr_idx) % P] <= wr_data;
    if (rd_en) rd_data <= mem[ra];
  end

  initial assert (N % P == 0) else $error("N must be a multiple of P");
endmodule
