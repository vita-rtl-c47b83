// vita_pkg: constants, types and arithmetic helpers shared by the ViTA accelerator.
//
// The defaults are the ViT-B/16 configuration the accelerator is sized for: a 256x256 image
// cut into 16x16 patches gives N = 256 tokens of D = 768 int8 features, with 12 heads of
// Dh = 64 and an MLP hidden width of 3072. The PE array is k1 x k2 = 16 x 6 for PE blocks 1-3
// and k3 x k4 = 8 x 4 for PE blocks 4-5, which satisfies D/(k1.k2) = N/(k3.k4) = 8.
//
// The rounding/saturating requantisation helper (int32 accumulator -> int8) is this design's
// own choice: the source only states that weights and activations are int8.
package vita_pkg;

  // ViT-B/16 model dimensions
  localparam int unsigned N_DEF  = 256;   // sequence length (tokens)
  localparam int unsigned D_DEF  = 768;   // latent dimension
  localparam int unsigned H_DEF  = 12;    // heads
  localparam int unsigned DH_DEF = 64;    // per-head dimension
  localparam int unsigned M_DEF  = 3072;  // MLP hidden dimension

  // PE array configuration
  localparam int unsigned K1_DEF = 16;
  localparam int unsigned K2_DEF = 6;
  localparam int unsigned K3_DEF = 8;
  localparam int unsigned K4_DEF = 4;

  // Off-chip weight stream: bytes per word
  localparam int unsigned WBYTES_DEF = 8;

  typedef logic signed [7:0]  int8_t;
  typedef logic signed [15:0] int16_t;
  typedef logic signed [31:0] acc_t;

  // Weight fetch request kinds
  typedef enum logic [1:0] {
    WK_QKV    = 2'd0,  // columns of W^Q, W^K, W^V for one head column -> primary buffers
    WK_CONCAT = 2'd1,  // three columns of W^msa -> secondary buffer
    WK_MLP    = 2'd2   // three columns of W1 -> primary, three rows of W2 -> secondary
  } wkind_e;

  // Round-half-up arithmetic shift right and saturate to int8.
  function automatic int8_t requant8(input logic signed [39:0] v, input logic [4:0] sh);
    logic signed [39:0] r;
    if (sh == 0) r = v;
    else         r = (v + (40'sd1 <<< (sh - 1))) >>> sh;
    if (r > 40'sd127)       return 8'sd127;
    else if (r < -40'sd128) return -8'sd128;
    else                    return r[7:0];
  endfunction

  // Saturating int8 addition.
  function automatic int8_t sat_add8(input int8_t a, input int8_t b);
    logic signed [8:0] s;
    s = 9'(a) + 9'(b);
    if (s > 9'sd127)       return 8'sd127;
    else if (s < -9'sd128) return -8'sd128;
    else                   return s[7:0];
  endfunction

endpackage
