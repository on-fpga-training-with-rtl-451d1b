// Shared types, sizes and arithmetic helpers of the low-precision tensor-train
// training accelerator.
//
// Number formats follow the paper: TT factors are 4-bit signed integers,
// activations 8-bit and gradients 16-bit. The processing elements carry every
// activation or gradient in a 16-bit word; in forward mode only its 8 least
// significant bits are used. All scaling factors are powers of two, so a result
// is brought back to its own scale by an arithmetic right shift, then rounded
// and saturated to 8 bits (forward) or 16 bits (backward). The 32-bit
// accumulator, the round-half-up rule and the 256-bit DRAM beat (16 elements of
// 16 bits) are this design's choices.
package tt_pkg;
  localparam int ACT_W   = 16;          // activation / gradient word
  localparam int FWD_W   = 8;           // bits used in forward propagation
  localparam int G_W     = 4;           // TT factor
  localparam int ACC_W   = 32;          // accumulator
  localparam int C_LANES = 16;          // parallelism along index c (and I_d in PE3)
  localparam int P_LANES = 8;           // parallelism along a (PE1) or d (PE2)
  localparam int BEAT_W  = C_LANES * ACT_W;  // one DRAM beat: 16 elements
  localparam int SHIFT_W = 5;
  localparam int ADDR_W  = 32;          // DRAM beat address

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [G_W-1:0]   g_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [BEAT_W-1:0]       beat_t;

  // One strided transfer between DRAM and a buffer: buffer word w, beat p lives
  // at DRAM beat address base + w*wstride + p*pstride.
  typedef struct packed {
    logic [ADDR_W-1:0] base;
    logic [15:0]       words;
    logic [ADDR_W-1:0] wstride;
    logic [3:0]        beats;
    logic [ADDR_W-1:0] pstride;
  } xfer_t;

  // Operand as seen by a multiplier: the low byte, sign-extended, in forward mode.
  function automatic act_t operand(input act_t x, input logic fwd);
    return fwd ? act_t'({{(ACT_W-FWD_W){x[FWD_W-1]}}, x[FWD_W-1:0]}) : x;
  endfunction

  // Shift right by sh with round-half-up, then saturate to 8 (fwd) or 16 bits.
  function automatic act_t requant(input logic signed [47:0] v,
                                   input logic [SHIFT_W-1:0] sh, input logic fwd);
    logic signed [47:0] r;
    logic signed [47:0] hi, lo;
    r  = (sh == '0) ? v : ((v + (48'sd1 <<< (sh - 1))) >>> sh);
    hi = fwd ? 48'sd127 : 48'sd32767;
    lo = fwd ? -48'sd128 : -48'sd32768;
    if (r > hi)      return act_t'(hi);
    else if (r < lo) return act_t'(lo);
    else             return act_t'(r);
  endfunction

  // PE1 command: Z'(a,d) = sum_{b,c} Z(a,b,c) G(b,d,c), A = 8*a_tiles rows.
  // Z is row-major in DRAM (bc16 = B*C/16 beats per row); G word of (b,d,cc)
  // is at BRAM word g_base + (b*D + d)*c16 + cc; Z' row a, d-group g at
  // out_base + a*(D/16) + g.
  typedef struct packed {
    logic [ADDR_W-1:0]  z_base;
    logic [ADDR_W-1:0]  out_base;
    logic [15:0]        a_tiles;
    logic [15:0]        b_n;
    logic [15:0]        c16;
    logic [15:0]        d_n;      // multiple of 16
    logic [15:0]        g_base;
    logic               fwd;
    logic [SHIFT_W-1:0] shift;
  } pe1_cmd_t;

  // PE2 command: Z'(a,d,c) = sum_b Z(a,b,c) G(b,d), D = 8*d8.
  // Z beat (a,b,cc) at z_base + (a*B + b)*c16 + cc; G(b, 8g..8g+7) at BRAM half
  // word g_base8 + b*d8 + g; Z' beat (a,d,cc) at out_base + (a*D + d)*c16 + cc.
  typedef struct packed {
    logic [ADDR_W-1:0]  z_base;
    logic [ADDR_W-1:0]  out_base;
    logic [15:0]        a_n;
    logic [15:0]        b_n;
    logic [15:0]        c16;
    logic [15:0]        d8;
    logic [16:0]        g_base8;
    logic               fwd;
    logic [SHIFT_W-1:0] shift;
  } pe2_cmd_t;

  localparam int MAX_D = 4;   // TT cores per layer handled by PE3 addressing
  // PE3 command: dW(j1,i1,...,jd,id) = X(i) * dY(j). Dimensions are listed
  // first core first and padded in front with 1 when a layer has fewer cores;
  // idim[MAX_D-1] counts 16-element chunks of I_d.
  typedef struct packed {
    logic [ADDR_W-1:0]              x_base;
    logic [ADDR_W-1:0]              dy_base;
    logic [ADDR_W-1:0]              w_base;
    logic [MAX_D-1:0][15:0]         jdim;
    logic [MAX_D-1:0][15:0]         idim;
    logic                           accumulate;
    logic [SHIFT_W-1:0]             shift;
  } pe3_cmd_t;
endpackage
