// input_defender: input-space defender built on sparse reconstruction.
//
// The OMP kernel reconstructs the input vector x with K atoms of the
// dictionary learned for the class the victim predicted; a sample the victim
// labels as class i should be represented well by D^i. The residual energy
// ||res||^2 is compared with a per-class threshold ("Threshold value" in the
// source's diagram): adv = 1 when it is larger. The source states the test as
// the PSNR of the reconstruction falling below a profiled threshold; with
// PSNR = 10 log10(MAX^2 * N / ||res||^2) that is the same as ||res||^2 rising
// above N * MAX^2 / 10^(thr/10), which is what is stored here, so no logarithm
// is needed in hardware.
//
// Interface: dict_* writes dictionary elements, t_* per-class thresholds,
// x_* the input vector (while idle). start with cls runs one check; done
// pulses with adv and energy valid. Latency: that of omp_kernel plus 1 cycle.
module input_defender #(
  parameter int N_CLASS = 10,
  parameter int N_ATOMS = 128,
  parameter int N       = 64,
  parameter int P       = 8,
  parameter int K       = 8,
  parameter int DATA_W  = 16,
  parameter int FRAC    = 12,
  parameter int DOT_W   = 48
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        dict_we,
  input  logic [$clog2(N_CLASS)-1:0]  dict_class,
  input  logic [$clog2(N_ATOMS)-1:0]  dict_atom,
  input  logic [$clog2(N)-1:0]        dict_idx,
  input  logic signed [DATA_W-1:0]    dict_data,
  input  logic                        t_we,
  input  logic [$clog2(N_CLASS)-1:0]  t_class,
  input  logic [DOT_W-1:0]            t_data,
  input  logic                        x_we,
  input  logic [$clog2(N)-1:0]        x_addr,
  input  logic signed [DATA_W-1:0]    x_data,
  input  logic                        start,
  input  logic [$clog2(N_CLASS)-1:0]  cls,
  output logic                        busy,
  output logic                        done,
  output logic                        adv,
  output logic [DOT_W-1:0]            energy
);
  logic                        d_rd_en;
  logic [$clog2(N_CLASS)-1:0]  d_rd_class;
  logic [$clog2(N_ATOMS)-1:0]  d_rd_atom;
  logic [$clog2(N/P)-1:0]      d_rd_chunk;
  logic signed [DATA_W-1:0]    d_rd_data [P];
  logic                        omp_busy, omp_done;
  logic [DOT_W-1:0]            omp_energy;
  logic [DOT_W-1:0]            thr [N_CLASS];
  logic [$clog2(N_CLASS)-1:0]  cls_q;

  dictionary_mem #(.N_CLASS(N_CLASS), .N_ATOMS(N_ATOMS), .N(N), .P(P), .DATA_W(DATA_W)) u_dict (
    .clk, .wr_en(dict_we), .wr_class(dict_class), .wr_atom(dict_atom), .wr_idx(dict_idx),
    .wr_data(dict_data), .rd_en(d_rd_en), .rd_class(d_rd_class), .rd_atom(d_rd_atom),
    .rd_chunk(d_rd_chunk), .rd_data(d_rd_data));

  omp_kernel #(.N_CLASS(N_CLASS), .N_ATOMS(N_ATOMS), .N(N), .P(P), .K(K), .DATA_W(DATA_W),
               .FRAC(FRAC), .DOT_W(DOT_W)) u_omp (
    .clk, .rst_n, .x_we, .x_addr, .x_data, .start(start && !busy), .cls,
    .busy(omp_busy), .done(omp_done), .energy(omp_energy),
    .d_rd_en, .d_rd_class, .d_rd_atom, .d_rd_chunk, .d_rd_data);

  always_ff @(posedge clk) begin
    if (t_we) thr[t_class] <= t_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cls_q <= '0; done <= 1'b0; adv <= 1'b0; energy <= '0;
    end else begin
      done <= omp_done;
      if (start && !busy) cls_q <= cls;
      if (omp_done) begin
        energy <= omp_energy;
        adv    <= (omp_energy > thr[cls_q]);
      end
    end
  end

  assign busy = omp_busy | done;
endmodule
