// Automatic scale selection for one stream of PE results.
//
// All scaling factors are powers of two, so a variable's scale is the shift
// applied when its values are produced. The monitor adds up the absolute values
// of the LANES results presented with in_valid and counts them. On eval it
// compares the mean absolute value with the window [LO_NUM/LO_DEN,
// HI_NUM/HI_DEN] of full scale (2^7 in forward mode, 2^15 in backward mode):
// above the window it increments `shift` (halving later values), below it
// decrements it, and it clears the sums for the next window. init loads
// init_shift and clears the sums. The window [0.1, 0.3] is the paper's; the
// one-step adjustment and the full-scale reference are this design's choices.
// Timing: shift changes the clock after eval; too_big/too_small are the
// comparison of that eval, held until the next one.
module scale_monitor
  import tt_pkg::*;
#(
  parameter int LANES  = P_LANES,
  parameter int LO_NUM = 1,
  parameter int LO_DEN = 10,
  parameter int HI_NUM = 3,
  parameter int HI_DEN = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init,
  input  logic [SHIFT_W-1:0] init_shift,
  input  logic               fwd,
  input  logic               in_valid,
  input  act_t               in_data [LANES],
  input  logic               eval,
  output logic [SHIFT_W-1:0] shift,
  output logic               too_big,
  output logic               too_small
);
  logic [47:0] sum_abs, cnt;
  logic [47:0] add_abs;
  logic [63:0] full_cnt, lhs_lo, rhs_lo, lhs_hi, rhs_hi;
  logic        is_big, is_small;

  always_comb begin
    add_abs = '0;
    for (int i = 0; i < LANES; i++)
      add_abs += (in_data[i] < 0) ? -48'(in_data[i]) : 48'(in_data[i]);
  end

  // mean = sum/cnt ; compare sum*DEN with NUM*cnt*fullscale without dividing
  always_comb begin
    full_cnt = 64'(cnt) << (fwd ? FWD_W - 1 : ACT_W - 1);
    lhs_lo = 64'(sum_abs) * 64'(LO_DEN);
    rhs_lo = full_cnt * 64'(LO_NUM);
    lhs_hi = 64'(sum_abs) * 64'(HI_DEN);
    rhs_hi = full_cnt * 64'(HI_NUM);
    is_big   = (cnt != 0) && (lhs_hi > rhs_hi);
    is_small = (cnt != 0) && (lhs_lo < rhs_lo);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_abs <= '0; cnt <= '0; shift <= '0; too_big <= 1'b0; too_small <= 1'b0;
    end else if (init) begin
      sum_abs <= '0; cnt <= '0; shift <= init_shift; too_big <= 1'b0; too_small <= 1'b0;
    end else if (eval) begin
      too_big   <= is_big;
      too_small <= is_small;
      if (is_big && shift != '1)        shift <= shift + 1'b1;
      else if (is_small && shift != '0) shift <= shift - 1'b1;
      sum_abs <= '0;
      cnt     <= '0;
    end else if (in_valid) begin
      sum_abs <= sum_abs + add_abs;
      cnt     <= cnt + 48'(LANES);
    end
  end
endmodule
