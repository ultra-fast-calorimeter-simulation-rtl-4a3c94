// calo_pkg: formats and arithmetic shared by the calorimeter-shower decoder.
//
// Every number in the decoder is a signed two's-complement fixed-point value
// written here as <W,I>: W bits in total, I of them integer bits (sign
// included), so F = W - I fractional bits. The formats below are the per-layer
// settings listed for the FPGA decoder (data <16,6>, hidden weights <6,2>, and
// so on). Every narrowing conversion rounds to nearest with ties to even
// ("convergent" rounding) and saturates at the ends of the target range; the
// helper fx_cast() does exactly that on values held in 64-bit containers.
//
// Also here: the decoder's layer sizes and the identifiers of the layers on the
// shared parameter-load bus. The calorimeter geometry (five layers of
// 8/160/190/5/5 voxels, 374 outputs, 30 latent values plus one condition) is
// taken from the described model; the four hidden widths are this design's own
// choice, since only their ordering (increasing towards the output) is known.
package calo_pkg;

  // ---------------------------------------------------------------- formats
  // data / activations: <16,6>
  localparam int DATA_W = 16;
  localparam int DATA_F = 10;
  // hidden dense layers: weight <6,2>, bias <8,3>, product <18,8>, accum <20,8>
  localparam int HW_W = 6,  HW_F = 4;
  localparam int HB_W = 8,  HB_F = 5;
  localparam int HM_W = 18, HM_F = 10;
  localparam int HA_W = 20, HA_F = 12;
  // dense feeding the layer-energy softmax: weight <8,3>, bias <10,3>,
  // product <20,8>, accum <28,12>
  localparam int LW_W = 8,  LW_F = 5;
  localparam int LB_W = 10, LB_F = 7;
  localparam int LM_W = 20, LM_F = 12;
  localparam int LA_W = 28, LA_F = 16;
  // dense feeding the energy-response sigmoid: weight <16,6>, bias <16,6>,
  // accum and result <42,22>; the product is kept at full precision
  localparam int RW_W = 16, RW_F = 10;
  localparam int RB_W = 16, RB_F = 10;
  localparam int RA_W = 42, RA_F = 20;
  // batch normalisation (folded): scale and bias <20,8>, product <18,8>
  localparam int BN_W = 20, BN_F = 12;
  localparam int BM_W = 18, BM_F = 10;
  // leaky ReLU slope <12,6>
  localparam int SL_W = 12, SL_F = 6;
  // softmax / sigmoid tables <18,8>, softmax sum <20,8>
  localparam int TAB_W = 18, TAB_F = 10;
  localparam int SUM_W = 20, SUM_F = 12;
  localparam int TABLE_SIZE = 1024;
  localparam int TABLE_AW   = 10;

  typedef logic signed [DATA_W-1:0] data_t;

  // ---------------------------------------------------------------- sizes
  localparam int N_LATENT = 30;               // latent dimension d_z
  localparam int N_COND   = 1;                // x_con
  localparam int N_DEC_IN = N_LATENT + N_COND;
  localparam int N_H1     = 32;               // hidden widths (assumed)
  localparam int N_H2     = 48;
  localparam int N_H3     = 64;
  localparam int N_H4     = 100;
  localparam int N_X      = 374;              // output vector x-tilde
  localparam int N_CALO   = 5;                // calorimeter layers
  localparam int N_BRANCH = 7;                // 5 voxel + response + layer ratios
  // branch lengths in output order: voxels of layers 0..4, r, l_0..l_4
  localparam int BR_LEN [N_BRANCH] = '{8, 160, 190, 5, 5, 1, 5};

  // ---------------------------------------------------------------- load bus
  localparam int CFG_ROW_W = 9;    // row: input index of a weight (N_IN = bias)
  localparam int CFG_COL_W = 9;    // column: output neuron / channel
  localparam int CFG_DAT_W = 42;   // raw fixed-point word, right aligned
  localparam int CFG_ID_W  = 4;

  typedef struct packed {
    logic                 we;
    logic [CFG_ID_W-1:0]  id;
    logic [CFG_ROW_W-1:0] row;
    logic [CFG_COL_W-1:0] col;
    logic [CFG_DAT_W-1:0] data;
  } cfg_t;

  // layer identifiers on the load bus
  localparam logic [CFG_ID_W-1:0] ID_DENSE1 = 4'd0;
  localparam logic [CFG_ID_W-1:0] ID_DENSE2 = 4'd1;
  localparam logic [CFG_ID_W-1:0] ID_DENSE3 = 4'd2;
  localparam logic [CFG_ID_W-1:0] ID_DENSE4 = 4'd3;
  localparam logic [CFG_ID_W-1:0] ID_DENSE5 = 4'd4;
  localparam logic [CFG_ID_W-1:0] ID_BN1    = 4'd5;   // BN1..BN4 = 5..8
  localparam logic [CFG_ID_W-1:0] ID_BR0    = 4'd9;   // branches 0..6 = 9..15

  // ---------------------------------------------------------------- helpers
  // Convert value v with fi fractional bits to a wo-bit word with fo
  // fractional bits: round to nearest, ties to even, then saturate.
  function automatic logic signed [63:0] fx_cast(input logic signed [63:0] v,
                                                 input int fi, input int wo,
                                                 input int fo);
    logic signed [63:0] q, rem, half, maxv, minv;
    int s;
    s = fi - fo;
    if (s > 0) begin
      q    = v >>> s;
      rem  = v - (q <<< s);
      half = 64'sd1 <<< (s - 1);
      if (rem > half || (rem == half && q[0])) q = q + 64'sd1;
    end else begin
      q = v <<< (-s);
    end
    maxv = (64'sd1 <<< (wo - 1)) - 64'sd1;
    minv = -(64'sd1 <<< (wo - 1));
    if (q > maxv)      q = maxv;
    else if (q < minv) q = minv;
    return q;
  endfunction

  // Sign-extend the low w bits of a word to 64 bits.
  function automatic logic signed [63:0] sx(input logic [63:0] v, input int w);
    logic [63:0] m;
    m = 64'd1 << (w - 1);
    return $signed(((v & ((m << 1) - 64'd1)) ^ m) - m);
  endfunction

endpackage
