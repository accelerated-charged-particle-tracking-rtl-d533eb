// gnn_pkg: number format, layer sizes and weight address map shared by the
// interaction-network segment classifier.
//
// Every activation, weight and bias is a signed fixed-point number of
// FX_W = 16 bits with FX_I = 6 integer bits (sign included), i.e. the
// <16,6> format at which the design was evaluated; FX_F = 10 fractional bits.
// Products are kept at full precision in the accumulators; a layer result is
// floored to FX_F fractional bits and saturated to FX_W bits (the rounding
// and overflow modes are this design's choice).
//
// The layer sizes follow the model: node features (r, phi, z) = 3, edge
// features (dr, dphi, dz, dR) = 4, every hidden layer 8 wide, one output
// score per edge.  Weights of all layers live in one flat address space that
// is written through the weight-load port of the top; each layer owns the
// range [base, base + N_OUT*N_IN + N_OUT): first the weights w[o][i] at
// base + o*N_IN + i, then the biases b[o] at base + N_OUT*N_IN + o.
package gnn_pkg;

  localparam int FX_W = 16;
  localparam int FX_I = 6;
  localparam int FX_F = FX_W - FX_I;

  typedef logic signed [FX_W-1:0] fx_t;

  // FX_ONE and WORDS_TOTAL are for users of the package (testbenches,
  // weight loaders); the RTL itself does not need them.
  localparam fx_t FX_ONE = fx_t'(1 << FX_F);
  localparam fx_t FX_MAX = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(FX_W-1){1'b0}}});

  // Feature and hidden sizes
  localparam int NODE_F = 3;   // r, phi, z
  localparam int EDGE_F = 4;   // dr, dphi, dz, dR
  localparam int HID    = 8;   // all hidden layers

  // Activation selector of a dense layer
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_SIGMOID = 2'd2} act_e;

  // Weight-load bus
  localparam int WADDR_W = 12;
  typedef struct packed {
    logic               en;
    logic [WADDR_W-1:0] addr;
    fx_t                data;
  } wload_t;

  // Number of words (weights + biases) of one layer
  function automatic int layer_words(int n_in, int n_out);
    return n_out * n_in + n_out;
  endfunction

  // Layer order in the address map:
  //  0 enc_v1 (3->8)   1 enc_v2 (8->8)   phi_1^v
  //  2 enc_e1 (4->8)   3 enc_e2 (8->8)   phi_1^e
  //  4 edg_1  (24->8)  5 edg_2  (8->8)   phi_2^e
  //  6 nod_1  (16->8)  7 nod_2  (8->8)   phi_2^v
  //  8 dec_1  (8->8)   9 dec_2  (8->8)  10 dec_3 (8->8)  11 dec_4 (8->1)  phi_3
  localparam int NLAYERS = 12;
  localparam int L_NIN  [NLAYERS] = '{NODE_F, HID, EDGE_F, HID, 3*HID, HID, 2*HID, HID, HID, HID, HID, HID};
  localparam int L_NOUT [NLAYERS] = '{HID,    HID, HID,    HID, HID,   HID, HID,   HID, HID, HID, HID, 1};

  function automatic int layer_base(int l);
    int b = 0;
    for (int k = 0; k < l; k++) b += layer_words(L_NIN[k], L_NOUT[k]);
    return b;
  endfunction

  localparam int WORDS_TOTAL = layer_base(NLAYERS);

  // Saturate a wide integer, in units of 2^-FX_F, to fx_t.
  function automatic fx_t sat_fx(input logic signed [63:0] v);
    if (v > 64'(signed'(FX_MAX)))      return FX_MAX;
    else if (v < 64'(signed'(FX_MIN))) return FX_MIN;
    else                               return fx_t'(v);
  endfunction

  function automatic fx_t relu_fx(input fx_t x);
    return x[FX_W-1] ? '0 : x;
  endfunction

endpackage
