// pointnet_pkg -- shared constants, types and fixed-point helpers of the
// PointNet feature-extraction core.
//
// Number format: DATA_W-bit two's complement fixed point with FRAC_W fraction
// bits. The default 32/15 is the "2n-bit word, n-bit integer part, (n-1)-bit
// fraction part" format with n = 16; the remaining bit is the sign. The same
// formula gives the reduced-width variants (n = 8..14) by changing DATA_W and
// FRAC_W together.
//
// Arithmetic rule used by every datapath (a choice of this design): products
// are formed at full precision, sums are exact, and a result is brought back
// to the word format by an arithmetic right shift of FRAC_W bits (truncation
// towards minus infinity) followed by saturation to the DATA_W range.
//
// Parameter loading: the parameter stream is decoded into a param_wr_t write
// (target, kind, row, column, data) that every layer module snoops; a module
// stores the word only when `target` equals its own index.
package pointnet_pkg;

  localparam int DATA_W = 32;
  localparam int FRAC_W = 15;

  // Widths of the five MLP layers (3 -> 64 -> 64 -> 64 -> 128 -> 1024).
  localparam int D0 = 3;
  localparam int D1 = 64;
  localparam int D2 = 64;
  localparam int D3 = 64;
  localparam int D4 = 128;
  localparam int D5 = 1024;

  // Unrolling factors of the FC modules (per layer) and BN-ReLU / MaxPool.
  localparam int B_FC1 = 1;
  localparam int B_FC2 = 16;
  localparam int B_FC3 = 16;
  localparam int B_FC4 = 32;
  localparam int B_FC5 = 128;
  localparam int B_BN1 = 1;
  localparam int B_BN2 = 1;
  localparam int B_BN3 = 1;
  localparam int B_BN4 = 1;
  localparam int B_BN5 = 2;
  localparam int B_MAX = 2;

  // Parameter targets, in the order the parameter stream carries them.
  typedef enum logic [3:0] {
    T_FC1 = 4'd0, T_BN1 = 4'd1,
    T_FC2 = 4'd2, T_BN2 = 4'd3,
    T_FC3 = 4'd4, T_BN3 = 4'd5,
    T_FC4 = 4'd6, T_BN4 = 4'd7,
    T_FC5 = 4'd8, T_BN5 = 4'd9
  } target_e;

  localparam int NUM_TARGETS = 10;

  // Kind of parameter inside a target.
  //   FC:      K_W (weight, row = output i, col = input j), K_B (bias, row = i)
  //   BN-ReLU: K_MU (mean), K_S (scale w/sqrt(var+eps)), K_BETA (bias)
  localparam logic [1:0] K_W    = 2'd0;
  localparam logic [1:0] K_B    = 2'd1;
  localparam logic [1:0] K_MU   = 2'd0;
  localparam logic [1:0] K_S    = 2'd1;
  localparam logic [1:0] K_BETA = 2'd2;

  typedef struct packed {
    logic              we;
    target_e           target;
    logic [1:0]        kind;
    logic [10:0]       row;
    logic [10:0]       col;
    logic [31:0]       data;
  } param_wr_t;

  // Acknowledgement word returned after weight initialization (nonzero).
  localparam logic [31:0] INIT_ACK = 32'h0000_0001;

  // Operating modes.
  typedef enum logic {
    MODE_INIT    = 1'b0,
    MODE_EXTRACT = 1'b1
  } mode_e;

  // Saturate a wide signed value to W bits.
  function automatic logic signed [63:0] sat_to(input logic signed [127:0] v, input int w);
    logic signed [127:0] hi, lo;
    hi = (128'sd1 <<< (w - 1)) - 128'sd1;
    lo = -(128'sd1 <<< (w - 1));
    if (v > hi) return hi[63:0];
    if (v < lo) return lo[63:0];
    return v[63:0];
  endfunction

endpackage
