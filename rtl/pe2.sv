// PE2: single-index tensor contraction  Z'(a,d,c) = sum_b Z(a,b,c) * G(b,d).
//
// 128 MACC cells are arranged as D_LANES = 8 output columns (index d) by
// C_LANES = 16 lanes (index c), the paper's parallel factors. Each cycle with
// en high the engine presents one operand row Z(a,b,c0..c0+15) and eight
// factors G(b,d0..d0+7); every operand element feeds the 8 cells of its lane.
// The cells accumulate over b; clr marks the first b and last the final one.
// Two clocks after the last step out_valid pulses and out[d][c] holds each cell's
// sum, shifted by `shift`, rounded and saturated (8 bits in forward mode).
// The requantisation rule is this design's choice.
module pe2
  import tt_pkg::*;
#(
  parameter int D_LANES = P_LANES,
  parameter int CL      = C_LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               en,
  input  logic               last,
  input  logic               fwd,
  input  logic [SHIFT_W-1:0] shift,
  input  act_t               z [CL],
  input  g_t                 g [D_LANES],
  output logic               out_valid,
  output act_t               out [D_LANES][CL]
);
  acc_t acc [D_LANES][CL];
  logic last_q;

  for (genvar d = 0; d < D_LANES; d++) begin : g_col
    for (genvar c = 0; c < CL; c++) begin : g_lane
      macc u_macc (
        .clk, .rst_n, .clr, .en,
        .a(operand(z[c], fwd)), .g(g[d]), .acc(acc[d][c])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= 1'b0;
    else        last_q <= en & last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int d = 0; d < D_LANES; d++)
        for (int c = 0; c < CL; c++) out[d][c] <= '0;
    end else begin
      out_valid <= last_q;
      if (last_q)
        for (int d = 0; d < D_LANES; d++)
          for (int c = 0; c < CL; c++)
            out[d][c] <= requant(48'(acc[d][c]), shift, fwd);
    end
  end
endmodule
