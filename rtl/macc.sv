// MACC: one multiply-and-accumulate cell of PE1 and PE2.
//
// Multiplies a 16-bit activation or gradient by a 4-bit TT factor and adds the
// product into a 32-bit accumulator. With clr and en both high the product
// starts a new sum; clr alone clears. Registered output: acc shows the sum one
// clock after the operands. The 16 x 4 bit operand widths follow the paper; the
// accumulator width and the clear behaviour are this design's choices.
module macc
  import tt_pkg::*;
#(
  parameter int A_W   = ACT_W,
  parameter int G_W_P = G_W,
  parameter int ACC_WP = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic signed [A_W-1:0]    a,
  input  logic signed [G_W_P-1:0]  g,
  output logic signed [ACC_WP-1:0] acc
);
  logic signed [A_W+G_W_P-1:0] prod;
  assign prod = a * g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= en ? ACC_WP'(prod) : '0;
    else if (en)  acc <= acc + ACC_WP'(prod);
  end
endmodule
