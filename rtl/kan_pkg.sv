// kan_pkg: types, constants and arithmetic helpers shared by the KAN trainer.
//
// The trainer learns a two-layer Kolmogorov-Arnold network with piecewise-
// linear functions entirely in integer arithmetic. Every division of the
// textbook algorithm is replaced by a power-of-two shift: node spacing is
// 2^D, the damping factors are 2^-MU, and the window of the error monitor is
// 2^8 records long. The default configuration is the Det3 demonstrator:
// 9 inputs (a 3x3 matrix), 6 inner blocks with 3 nodes per function and one
// outer block with 21 nodes per function. The layer sizes, the 256-entry
// error window and the 14 + 2 + 1 cycle schedule follow the published design;
// the word widths, node spacings, damping shifts and the initial parameter
// distribution are choices of this implementation.
package kan_pkg;

  // ---- network shape (Det3 configuration) ----
  localparam int N_IN  = 9;   // inputs: entries of a 3x3 matrix
  localparam int N_HID = 6;   // blocks of the inner layer
  localparam int N_OUT = 1;   // blocks of the outer layer
  localparam int P_IN  = 3;   // nodes per inner function
  localparam int P_OUT = 21;  // nodes per outer function

  // ---- integer scaling ----
  localparam int XW      = 8;   // width of an unsigned input (matrix entry)
  localparam int D_IN    = 7;   // inner node spacing 2^7: inputs 0..255 cover 2 segments
  localparam int D_OUT   = 10;  // outer node spacing 2^10: hidden range 0..20480
  localparam int MU_IN   = 0;   // inner damping 2^-0 (after the SBP scale)
  localparam int MU_OUT  = 3;   // outer damping 2^-3 (about 1/(m*n) with m*n = 6)
  localparam int SBP     = 8;   // extra 2^-8 scale of the back-propagated residual
  localparam int TSHIFT  = 10;  // target = determinant >>> 10
  localparam int ERR_DEPTH = 256;

  // hidden (outer-layer input) domain: [0, (P_OUT-1)*2^D_OUT]
  localparam int HID_MIN = 0;
  localparam int HID_MAX = (P_OUT - 1) << D_OUT;

  // initial parameters: inner functions start near HID_MAX/2 spread over
  // the N_IN addends, outer functions start near zero
  localparam int INIT_IN_BASE   = (HID_MAX / 2) / N_IN;
  localparam int INIT_IN_SPREAD = 8;   // +-2^8
  localparam int INIT_OUT_BASE  = 0;
  localparam int INIT_OUT_SPREAD = 6;  // +-2^6

  typedef logic signed [31:0] val_t;   // parameters, sums, residuals
  typedef logic signed [63:0] wide_t;  // products before scaling

  // One strobe per cycle of the 17-cycle record schedule.
  typedef struct packed {
    logic clr;      // reset per-record state
    logic gen;      // data generation 1: draw matrix
    logic det;      // data generation 2: determinant
    logic l1_fn;    // cycle 1: inner functions
    logic l1_sum;   // cycle 2: inner sums
    logic l2_fn;    // cycle 3: outer functions
    logic l2_sum;   // cycle 4: outer sum
    logic res_out;  // cycle 5: z* - z
    logic res_in;   // cycle 6: y* - y = J^T (z* - z)
    logic l2_uhi;   // cycle 7: outer mu r f
    logic l2_ulo;   // cycle 8: outer mu r (1-f)
    logic l1_uhi;   // cycle 9: inner mu r f
    logic l1_ulo;   // cycle 10: inner mu r (1-f)
    logic l2_ahi;   // cycle 11: outer G[k+1] += ...
    logic l2_alo;   // cycle 12: outer G[k]   += ...
    logic l1_ahi;   // cycle 13: inner G[k+1] += ...
    logic l1_alo;   // cycle 14: inner G[k]   += ...
  } phase_t;

  localparam int REC_CYCLES   = 17;
  localparam int TRAIN_CYCLES = 14;

  // Divide by 2^s rounding to nearest (ties towards +inf). s = 0 passes v.
  function automatic wide_t shr_round(input wide_t v, input int s);
    wide_t half;
    if (s <= 0) return v;
    half = wide_t'(64'sd1) <<< (s - 1);
    return (v + half) >>> s;
  endfunction

  // Fixed pseudo-random initial value of parameter (i, j, k): a 32-bit
  // integer hash of the indices and a seed, reduced to [-2^sp, 2^sp).
  function automatic val_t init_param(input int seed, input int i, input int j,
                                      input int k, input int base, input int sp);
    logic [31:0] h;
    h = 32'(seed) * 32'h9E3779B1 ^ 32'(i) * 32'h85EBCA77 ^
        32'(j) * 32'hC2B2AE3D ^ 32'(k) * 32'h27D4EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return val_t'(base) + val_t'(h & ((32'd1 << (sp + 1)) - 1)) - val_t'(32'd1 << sp);
  endfunction

endpackage
