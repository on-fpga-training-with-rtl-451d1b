// Behavioural model of one DRAM port pair for the testbenches (not part of the
// design): WORDS beats of 256 bits, reads returned in order after LAT clocks,
// and, when STALL is set, ready withdrawn on random cycles. The testbench
// preloads mem through the bd_* port and inspects it directly; rd_stalls and wr_stalls count the cycles
// on which a request waited.
module dram_model
  import tt_pkg::*;
#(
  parameter int WORDS = 4096,
  parameter int LAT   = 3,
  parameter bit STALL = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_ready,
  output logic              rd_valid,
  output beat_t             rd_data,
  input  logic              wr_req,
  input  logic [ADDR_W-1:0] wr_addr,
  input  beat_t             wr_data,
  output logic              wr_ready,
  input  logic              bd_we,      // testbench backdoor write
  input  logic [ADDR_W-1:0] bd_addr,
  input  beat_t             bd_data,
  output int                rd_stalls,
  output int                wr_stalls
);
  beat_t mem [WORDS];
  logic  vpipe [LAT];
  beat_t dpipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ready <= 1'b1; wr_ready <= 1'b1; rd_stalls <= 0; wr_stalls <= 0;
      for (int i = 0; i < LAT; i++) begin vpipe[i] <= 1'b0; dpipe[i] <= '0; end
    end else begin
      rd_ready <= STALL ? (($urandom % 4) != 0) : 1'b1;
      wr_ready <= STALL ? (($urandom % 4) != 0) : 1'b1;
      if (rd_req && !rd_ready) rd_stalls <= rd_stalls + 1;
      if (wr_req && !wr_ready) wr_stalls <= wr_stalls + 1;
      vpipe[0] <= rd_req && rd_ready;
      dpipe[0] <= (rd_req && rd_ready) ? mem[rd_addr % WORDS] : '0;
      for (int i = 1; i < LAT; i++) begin vpipe[i] <= vpipe[i-1]; dpipe[i] <= dpipe[i-1]; end
      if (wr_req && wr_ready) mem[wr_addr % WORDS] <= wr_data;
      else if (bd_we)         mem[bd_addr % WORDS] <= bd_data;
    end
  end
  assign rd_valid = vpipe[LAT-1];
  assign rd_data  = dpipe[LAT-1];
endmodule
