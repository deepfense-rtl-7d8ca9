// deepfense_pkg: types and helpers shared by the defender datapaths.
//
// Holds the layer descriptor that programs the DNN kernel, the kinds of
// configuration write accepted by the top, and the saturating fixed-point
// narrowing used wherever a wide accumulator is written back to a 16-bit
// vector element. All numbers are two's-complement fixed point; the
// fraction widths are parameters of the modules that use them. The fixed-point
// number format is a choice of this design: the source describes the kernels
// but gives no word lengths.
package deepfense_pkg;

  // Layer types of the DNN kernel.
  typedef enum logic [1:0] {
    LT_DENSE = 2'd0,      // fully connected (also the PCA projection)
    LT_CONV  = 2'd1,      // square convolution, stride 1, no padding
    LT_POOL  = 2'd2       // 2x2 max-pooling, stride 2
  } layer_type_e;

  // One layer of the DNN kernel. For LT_DENSE in_dim/out_dim are vector
  // lengths; for LT_CONV and LT_POOL they are channel counts, img is the
  // width (= height) of the input feature map and ksz the kernel width.
  // Feature maps are stored channel-major: element (ch, y, x) at
  // ch*img*img + y*img + x, so a dense layer after them sees the usual
  // flattening.
  typedef struct packed {
    layer_type_e ltype;    // layer type
    logic [5:0]  img;      // input map width (conv / pool)
    logic [2:0]  ksz;      // kernel width (conv)
    logic [11:0] in_dim;   // number of input activations
    logic [11:0] out_dim;  // number of output neurons
    logic        relu;     // apply ReLU to the outputs
    logic [15:0] w_base;   // first weight word of this layer
    logic [11:0] b_base;   // first bias entry of this layer
  } layer_desc_t;

  // Configuration writes accepted by deepfense_top (host / DMA side).
  typedef enum logic [3:0] {
    CFG_WEIGHT  = 4'd0,   // weight lane of a DNN kernel
    CFG_BIAS    = 4'd1,   // bias of a DNN kernel
    CFG_LAYER   = 4'd2,   // layer descriptor of a DNN kernel
    CFG_NLAYERS = 4'd3,   // number of layers of a DNN kernel
    CFG_INPUT   = 4'd4,   // input activation, broadcast to every DNN kernel
    CFG_CENTER  = 4'd5,   // GMM center element of a latent defender
    CFG_CTHR    = 4'd6,   // per-class L2 threshold of a latent defender
    CFG_DICT    = 4'd7,   // dictionary element of the input defender
    CFG_DTHR    = 4'd8,   // per-class residual threshold of the input defender
    CFG_PATCH   = 4'd9,   // element of the input defender's input vector
    CFG_PN      = 4'd10   // noisy-OR weight P_n of one defender
  } cfg_kind_e;

  typedef struct packed {
    logic        we;
    cfg_kind_e   kind;
    logic [3:0]  unit;    // 0 = victim, 1..N_LAT = latent defenders
    logic [19:0] addr;    // word / element / class address
    logic [7:0]  lane;    // lane within a wide word, or dimension index
    logic [63:0] data;
  } cfg_wr_t;

  // Arithmetic shift right by FRAC then saturate to OUT_W bits.
  function automatic logic signed [63:0] sat_shift(input logic signed [63:0] v,
                                                   input int frac, input int out_w);
    logic signed [63:0] s, mx, mn;
    s  = v >>> frac;
    mx = (64'sd1 <<< (out_w - 1)) - 64'sd1;
    mn = -(64'sd1 <<< (out_w - 1));
    if (s > mx) return mx;
    if (s < mn) return mn;
    return s;
  endfunction

endpackage
