// Model-parameter memory: all 4-bit TT factors of the network, kept on chip.
//
// DEPTH words of WORD_LANES packed 4-bit factors (64 bits by default). The
// processor writes whole words through the write port after each parameter
// update. Read port 1 serves PE1 with one word (16 factors) per clock; read
// port 2 serves PE2 with one aligned half word (8 factors) per clock, addressed
// in half words. Both reads are registered: data appears one clock after the
// address. Keeping every factor on chip follows the paper; the depth, word
// width and port arrangement are this design's choices.
module param_bram
  import tt_pkg::*;
#(
  parameter int DEPTH      = 2048,
  parameter int WORD_LANES = C_LANES,
  localparam int AW = $clog2(DEPTH),
  localparam int WW = WORD_LANES * G_W
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [WW-1:0]   wr_data,
  input  logic [AW-1:0]   rd1_addr,
  output logic [WW-1:0]   rd1_data,
  input  logic [AW:0]     rd2_addr,
  output logic [WW/2-1:0] rd2_data
);
  logic [WW-1:0] mem [DEPTH];
  logic [WW-1:0] rd2_word;
  logic          rd2_hi;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd1_data <= mem[rd1_addr];
    rd2_word <= mem[rd2_addr[AW:1]];
    rd2_hi   <= rd2_addr[0];
  end

  assign rd2_data = rd2_hi ? rd2_word[WW-1:WW/2] : rd2_word[WW/2-1:0];
endmodule
