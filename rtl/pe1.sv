// PE1: two-index tensor contraction  Z'(a,d) = sum_{b,c} Z(a,b,c) * G(b,d,c).
//
// 128 MACC cells are arranged as A_LANES = 8 rows (index a) by C_LANES = 16
// lanes (index c), the paper's parallel factors. Each cycle with en high the
// engine presents one operand element Z(a,b,c) per cell and one factor
// G(b,d,c) per lane; a factor is shared by the 8 rows of its lane. The cells
// accumulate over all (b, c-chunk) steps of one output column d; clr marks the
// first step and last the final one. Two clocks after the last step out_valid
// pulses and out[a] holds the sum over the 16 lanes of row a, shifted by
// `shift`, rounded and saturated (8 bits in forward mode, where operands are
// their sign-extended low byte). A new contraction may start the cycle after
// last. The reduction of the lanes at emission time and the requantisation
// rule are this design's choices.
module pe1
  import tt_pkg::*;
#(
  parameter int A_LANES = P_LANES,
  parameter int CL      = C_LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               en,
  input  logic               last,
  input  logic               fwd,
  input  logic [SHIFT_W-1:0] shift,
  input  act_t               z [A_LANES][CL],
  input  g_t                 g [CL],
  output logic               out_valid,
  output act_t               out [A_LANES]
);
  acc_t acc [A_LANES][CL];
  logic last_q;

  for (genvar a = 0; a < A_LANES; a++) begin : g_row
    for (genvar c = 0; c < CL; c++) begin : g_lane
      macc u_macc (
        .clk, .rst_n, .clr, .en,
        .a(operand(z[a][c], fwd)), .g(g[c]), .acc(acc[a][c])
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
      for (int a = 0; a < A_LANES; a++) out[a] <= '0;
    end else begin
      out_valid <= last_q;
      if (last_q) begin
        for (int a = 0; a < A_LANES; a++) begin
          logic signed [47:0] s;
          s = '0;
          for (int c = 0; c < CL; c++) s += 48'(acc[a][c]);
          out[a] <= requant(s, shift, fwd);
        end
      end
    end
  end
endmodule
