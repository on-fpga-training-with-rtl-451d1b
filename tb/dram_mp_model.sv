// Behavioural model of a DRAM shared by NP port pairs, for the end-to-end
// testbench (not part of the design). WORDS beats of 256 bits; each port's
// reads return in order after LAT clocks; ready is withdrawn on random cycles.
// Port 0 has priority when two ports write the same beat in one clock. The
// testbench preloads through bd_* and inspects mem directly; stalls counts
// cycles on which some request waited.
module dram_mp_model
  import tt_pkg::*;
#(
  parameter int NP    = 3,
  parameter int WORDS = 16384,
  parameter int LAT   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NP-1:0]             rd_req,
  input  logic [NP-1:0][ADDR_W-1:0] rd_addr,
  output logic [NP-1:0]             rd_ready,
  output logic [NP-1:0]             rd_valid,
  output beat_t [NP-1:0]            rd_data,
  input  logic [NP-1:0]             wr_req,
  input  logic [NP-1:0][ADDR_W-1:0] wr_addr,
  input  beat_t [NP-1:0]            wr_data,
  output logic [NP-1:0]             wr_ready,
  input  logic                      bd_we,
  input  logic [ADDR_W-1:0]         bd_addr,
  input  beat_t                     bd_data,
  output int                        stalls
);
  beat_t mem [WORDS];
  logic  vpipe [NP][LAT];
  beat_t dpipe [NP][LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ready <= '1; wr_ready <= '1; stalls <= 0;
      for (int p = 0; p < NP; p++)
        for (int i = 0; i < LAT; i++) begin vpipe[p][i] <= 1'b0; dpipe[p][i] <= '0; end
    end else begin
      int st;
      st = 0;
      for (int p = NP - 1; p >= 0; p--) begin
        rd_ready[p] <= ($urandom % 4) != 0;
        wr_ready[p] <= ($urandom % 4) != 0;
        if ((rd_req[p] && !rd_ready[p]) || (wr_req[p] && !wr_ready[p])) st++;
        vpipe[p][0] <= rd_req[p] && rd_ready[p];
        dpipe[p][0] <= (rd_req[p] && rd_ready[p]) ? mem[rd_addr[p] % WORDS] : '0;
        for (int i = 1; i < LAT; i++) begin vpipe[p][i] <= vpipe[p][i-1]; dpipe[p][i] <= dpipe[p][i-1]; end
        if (wr_req[p] && wr_ready[p]) mem[wr_addr[p] % WORDS] <= wr_data[p];
      end
      stalls <= stalls + st;
      if (bd_we) mem[bd_addr % WORDS] <= bd_data;
    end
  end
  always_comb
    for (int p = 0; p < NP; p++) begin
      rd_valid[p] = vpipe[p][LAT-1];
      rd_data[p]  = dpipe[p][LAT-1];
    end
endmodule
