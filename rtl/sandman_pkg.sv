// sandman_pkg: sizes, fixed-point formats, complex types, operation codes
// and arithmetic helpers shared by the SANDMAN jammer-mitigating MU-MIMO
// receiver.
//
// System size (from the design description): 32 basestation antennas, 8 user
// equipments, blocks of 64 symbols made of 16 pilot and 48 data symbols,
// t_max = 10 algorithm iterations.
//
// Register widths follow the processing-element drawing: H register 12b,
// Y storage 28b per complex entry, E storage 30b, T storage 42b, a 21b x 18b
// multiplier with a 39b product and a 22b accumulator. The widths are taken
// per real component pair (E = 15b real + 15b imaginary, and so on); H is
// taken as 12b per component. The position of the binary point is not
// published: every value here carries FRAC = 7 fraction bits, which is this
// design's own choice, and every store into a narrower register saturates.
package sandman_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int M_ANT = 32;            // BS antennas (rows of the PE array)
  localparam int K_UE  = 8;             // UEs (columns of the PE array)
  localparam int T_PIL = 16;            // pilot symbols per block
  localparam int D_DAT = 48;            // data symbols per block
  localparam int N_SYM = T_PIL + D_DAT; // 64 symbols per block
  localparam int T_MAX = 10;            // algorithm iterations
  localparam int SLICE = 8;             // PE slice edge (8x8)
  localparam int N_SLICE = M_ANT / SLICE;
  localparam int NSLOT = N_SYM / K_UE;  // 8 columns of Y/E held per PE
  localparam int NTSLOT = D_DAT / K_UE; // 6 columns of Q held per PE (T array)

  // ---------------------------------------------------------- fixed point
  localparam int FRAC   = 7;   // fraction bits of all array values
  localparam int H_FRAC = 7;   // fraction bits of the channel estimate H
  localparam int U_FRAC = 15;  // fraction bits of the unit-norm jammer direction u
  localparam int H_W    = 12;  // channel estimate, per component
  localparam int Y_W    = 14;  // receive samples, per component
  localparam int E_W    = 15;  // residual E, per component
  localparam int T_W    = 21;  // temporary Q, per component
  localparam int MA_W   = 21;  // multiplier operand A
  localparam int MB_W   = 18;  // multiplier operand B
  localparam int PROD_W = MA_W + MB_W; // 39b product
  localparam int ACC_W  = 22;  // accumulator
  localparam int S_W    = 10;  // symbol estimate per component (S FF array 8x960b = 8 x 48 x 20b)
  localparam int ST_W   = 8;   // pilot symbol per component (ST FF array 16x128b = 16 x 8 x 16b)
  localparam int LLR_W  = 5;   // LLR width (960b = 48 symbols x 4 LLRs x 5b)
  localparam int RS_W   = ACC_W + 3;   // row sum of 8 PEs
  localparam int CS_W   = ACC_W + 5;   // column sum of 32 PEs
  localparam int J_W    = 24;  // PE+ storage of j~, per component
  localparam int EN_W   = 2 * J_W + 6; // |j~|^2 summed over 32 PE+ (54b)
  localparam int MANT_W = 17;  // inverse square root mantissa
  localparam int TAU_W  = 16;  // step size 2*tau, unsigned
  localparam int TAU_F  = 12;  // fraction bits of 2*tau
  localparam int ZSHIFT = 5;   // z = E^H x is scaled by 2^-5 (sum over 32 antennas)
  localparam int JSHIFT = 6;   // j~ = E z is scaled by 2^-6 (sum over 64 symbols)
  localparam int CHEST_SHIFT = 4; // division by T = 16

  // box size 1/sqrt(2) in FRAC format, and the 16-QAM inner/outer threshold
  // sqrt(2)/3 (half-way between 1/(3 sqrt 2) and 1/sqrt 2)
  localparam int BOX    = 91;  // round(128 / sqrt(2))
  localparam int QAM_TH = 60;  // round(128 * sqrt(2) / 3)
  localparam int LLR_SHIFT = 3;

  // --------------------------------------------------------------- types
  typedef struct packed { logic signed [ACC_W-1:0] re, im; } cacc_t;
  typedef struct packed { logic signed [H_W-1:0]   re, im; } ch_t;
  typedef struct packed { logic signed [Y_W-1:0]   re, im; } cy_t;
  typedef struct packed { logic signed [E_W-1:0]   re, im; } ce_t;
  typedef struct packed { logic signed [T_W-1:0]   re, im; } ct_t;
  typedef struct packed { logic signed [MB_W-1:0]  re, im; } cb_t;
  typedef struct packed { logic signed [S_W-1:0]   re, im; } cs_t;
  typedef struct packed { logic signed [ST_W-1:0]  re, im; } cst_t;
  typedef struct packed { logic signed [RS_W-1:0]  re, im; } crs_t;
  typedef struct packed { logic signed [CS_W-1:0]  re, im; } ccs_t;
  typedef struct packed { logic signed [J_W-1:0]   re, im; } cj_t;

  // Array-wide operation: all PEs execute the same operation on the same
  // index every cycle (the controller issues one word per cycle).
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_CHEST   = 4'd1,  // acc += Y(m,t) conj(S_T(k,t)),        idx = t
    OP_CHEST_WB= 4'd2,  // H = acc / T
    OP_ERR     = 4'd3,  // step 1: E(m,n) = Y(m,n) - sum_k H(m,k) S(k,n), idx = n
    OP_PZ      = 4'd4,  // step 2: z(n) = sum_m conj(E(m,n)) x(m),      idx = slot
    OP_PJ      = 4'd5,  // step 3: acc += E(m,n) z(n),                  idx = slot
    OP_PJ_WB   = 4'd6,  // step 3: j~(m) = row sum of acc
    OP_NRM_E   = 4'd7,  // step 4: ||j~||^2, inverse square root
    OP_NRM_U   = 4'd8,  // step 4: u = j~ / ||j~||
    OP_CH      = 4'd9,  // step 5: c^H(n) = sum_m conj(u(m)) E(m,n),    idx = slot
    OP_Q       = 4'd10, // step 6: Q(m,n) = E(m,n) - u(m) c^H(n),       idx = slot
    OP_GRAD    = 4'd11, // steps 7+8: -grad(k,n) = sum_m conj(H(m,k)) Q(m,n), step, prox; idx = data n
    OP_LLR     = 4'd12  // soft outputs,                                idx = data n
  } op_e;

  typedef struct packed {
    op_e        op;
    logic [5:0] idx;
  } ctrl_t;

  // ------------------------------------------------------------ helpers
  // Saturate a wide signed value to w bits (result sign-extended to 64b).
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

  // Complex product (a * b) scaled back by 2^-sh and saturated to ACC_W
  // (sh = FRAC, H_FRAC when one operand is H, U_FRAC when one is u). Operand a is MA_W wide,
  // operand b MB_W wide; either may be conjugated.
  function automatic cacc_t cmul(input logic signed [MA_W-1:0] ar, input logic signed [MA_W-1:0] ai,
                                 input logic signed [MB_W-1:0] br, input logic signed [MB_W-1:0] bi,
                                 input logic conj_a, input logic conj_b,
                                 input int sh = FRAC);
    logic signed [PROD_W:0] xr, xi, yr, yi;  // operands sign-extended to the product width
    logic signed [PROD_W:0] pr, pi;
    cacc_t r;
    xr = (PROD_W+1)'(ar);
    xi = conj_a ? -(PROD_W+1)'(ai) : (PROD_W+1)'(ai);
    yr = (PROD_W+1)'(br);
    yi = conj_b ? -(PROD_W+1)'(bi) : (PROD_W+1)'(bi);
    pr = xr * yr - xi * yi;
    pi = xr * yi + xi * yr;
    r.re = ACC_W'(sat(64'(pr >>> sh), ACC_W));
    r.im = ACC_W'(sat(64'(pi >>> sh), ACC_W));
    return r;
  endfunction

endpackage
