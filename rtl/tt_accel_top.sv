// Tensor-train training accelerator: programmable-logic part.
//
// Holds every TT factor of the network on chip (param_bram) and runs the
// tensor contractions of forward and backward propagation on three engines:
//   PE1 column (pe1_engine)  Z'(a,d)   = sum_{b,c} Z(a,b,c) G(b,d,c)
//   PE2 column (pe2_engine)  Z'(a,d,c) = sum_b     Z(a,b,c) G(b,d)
//   PE3        (pe3)         dW(j,i)   = X(i) dY(j)   (backward only)
// Activations, gradients and samples live in DRAM; each engine has its own DRAM
// read port and write port (index 0 = PE1, 1 = PE2, 2 = PE3), 256-bit beats,
// request/ready handshakes and in-order read data. The processor (outside this
// module) writes factors through the pw_* port after each update, issues one
// command per contraction on the pe*_start/pe*_cmd ports and waits for done.
// A scale monitor watches each engine's results and tracks a power-of-two
// output shift that keeps the mean magnitude in [0.1, 0.3] of full scale; with
// auto_scale[k] set, engine k uses the monitor's shift instead of cmd.shift.
// The split into three engines, the BRAM-held factors and the DRAM-held
// activations follow the paper; the port arrangement and the command format are
// this design's choices.
module tt_accel_top
  import tt_pkg::*;
#(
  parameter int BRAM_DEPTH  = 2048,
  parameter int IN_DEPTH1   = 64,    // PE1 input buffer words (8 rows x 16 lanes each)
  parameter int IN_DEPTH2   = 256,   // PE2 input buffer words (16 lanes each)
  parameter int CACHE_DEPTH = 512,
  localparam int GAW = $clog2(BRAM_DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // factor write port (processor)
  input  logic                      pw_en,
  input  logic [GAW-1:0]            pw_addr,
  input  logic [C_LANES*G_W-1:0]    pw_data,
  // commands
  input  logic                      pe1_start,
  input  pe1_cmd_t                  pe1_cmd,
  output logic                      pe1_busy,
  output logic                      pe1_done,
  input  logic                      pe2_start,
  input  pe2_cmd_t                  pe2_cmd,
  output logic                      pe2_busy,
  output logic                      pe2_done,
  input  logic                      pe3_start,
  input  pe3_cmd_t                  pe3_cmd,
  output logic                      pe3_busy,
  output logic                      pe3_done,
  // scale monitors (0 = PE1, 1 = PE2, 2 = PE3)
  input  logic [2:0]                sm_init,
  input  logic [2:0][SHIFT_W-1:0]   sm_init_shift,
  input  logic [2:0]                sm_fwd,
  input  logic [2:0]                sm_eval,
  input  logic [2:0]                auto_scale,
  output logic [2:0][SHIFT_W-1:0]   sm_shift,
  output logic [2:0]                sm_too_big,
  output logic [2:0]                sm_too_small,
  // DRAM ports
  output logic [2:0]                dram_rd_req,
  output logic [2:0][ADDR_W-1:0]    dram_rd_addr,
  input  logic [2:0]                dram_rd_ready,
  input  logic [2:0]                dram_rd_valid,
  input  beat_t [2:0]               dram_rd_data,
  output logic [2:0]                dram_wr_req,
  output logic [2:0][ADDR_W-1:0]    dram_wr_addr,
  output beat_t [2:0]               dram_wr_data,
  input  logic [2:0]                dram_wr_ready
);
  logic [GAW-1:0] g1_addr;
  logic [GAW:0]   g2_addr;
  logic [C_LANES*G_W-1:0] g1_data;
  logic [P_LANES*G_W-1:0] g2_data;

  param_bram #(.DEPTH(BRAM_DEPTH)) u_bram (
    .clk, .wr_en(pw_en), .wr_addr(pw_addr), .wr_data(pw_data),
    .rd1_addr(g1_addr), .rd1_data(g1_data), .rd2_addr(g2_addr), .rd2_data(g2_data)
  );

  pe1_cmd_t c1;
  pe2_cmd_t c2;
  pe3_cmd_t c3;
  always_comb begin
    c1 = pe1_cmd; if (auto_scale[0]) c1.shift = sm_shift[0];
    c2 = pe2_cmd; if (auto_scale[1]) c2.shift = sm_shift[1];
    c3 = pe3_cmd; if (auto_scale[2]) c3.shift = sm_shift[2];
  end

  logic r1_valid, r2_valid, r3_valid;
  act_t r1 [P_LANES];
  act_t r2 [P_LANES][C_LANES];
  act_t r2_flat [P_LANES*C_LANES];
  act_t r3 [C_LANES];

  pe1_engine #(.IN_DEPTH(IN_DEPTH1), .G_AW(GAW)) u_pe1 (
    .clk, .rst_n, .start(pe1_start), .cmd(c1), .busy(pe1_busy), .done(pe1_done),
    .g_addr(g1_addr), .g_data(g1_data),
    .rd_req(dram_rd_req[0]), .rd_addr(dram_rd_addr[0]), .rd_ready(dram_rd_ready[0]),
    .rd_valid(dram_rd_valid[0]), .rd_data(dram_rd_data[0]),
    .wr_req(dram_wr_req[0]), .wr_addr(dram_wr_addr[0]), .wr_data(dram_wr_data[0]),
    .wr_ready(dram_wr_ready[0]), .res_valid(r1_valid), .res(r1)
  );

  pe2_engine #(.IN_DEPTH(IN_DEPTH2), .G_AW(GAW)) u_pe2 (
    .clk, .rst_n, .start(pe2_start), .cmd(c2), .busy(pe2_busy), .done(pe2_done),
    .g_addr(g2_addr), .g_data(g2_data),
    .rd_req(dram_rd_req[1]), .rd_addr(dram_rd_addr[1]), .rd_ready(dram_rd_ready[1]),
    .rd_valid(dram_rd_valid[1]), .rd_data(dram_rd_data[1]),
    .wr_req(dram_wr_req[1]), .wr_addr(dram_wr_addr[1]), .wr_data(dram_wr_data[1]),
    .wr_ready(dram_wr_ready[1]), .res_valid(r2_valid), .res(r2)
  );

  pe3 #(.CACHE_DEPTH(CACHE_DEPTH)) u_pe3 (
    .clk, .rst_n, .start(pe3_start), .cmd(c3), .busy(pe3_busy), .done(pe3_done),
    .rd_req(dram_rd_req[2]), .rd_addr(dram_rd_addr[2]), .rd_ready(dram_rd_ready[2]),
    .rd_valid(dram_rd_valid[2]), .rd_data(dram_rd_data[2]),
    .wr_req(dram_wr_req[2]), .wr_addr(dram_wr_addr[2]), .wr_data(dram_wr_data[2]),
    .wr_ready(dram_wr_ready[2]), .res_valid(r3_valid), .res(r3)
  );

  always_comb
    for (int k = 0; k < P_LANES; k++)
      for (int l = 0; l < C_LANES; l++) r2_flat[k*C_LANES + l] = r2[k][l];

  scale_monitor #(.LANES(P_LANES)) u_sm1 (
    .clk, .rst_n, .init(sm_init[0]), .init_shift(sm_init_shift[0]), .fwd(sm_fwd[0]),
    .in_valid(r1_valid), .in_data(r1), .eval(sm_eval[0]), .shift(sm_shift[0]),
    .too_big(sm_too_big[0]), .too_small(sm_too_small[0])
  );
  scale_monitor #(.LANES(P_LANES*C_LANES)) u_sm2 (
    .clk, .rst_n, .init(sm_init[1]), .init_shift(sm_init_shift[1]), .fwd(sm_fwd[1]),
    .in_valid(r2_valid), .in_data(r2_flat), .eval(sm_eval[1]), .shift(sm_shift[1]),
    .too_big(sm_too_big[1]), .too_small(sm_too_small[1])
  );
  scale_monitor #(.LANES(C_LANES)) u_sm3 (
    .clk, .rst_n, .init(sm_init[2]), .init_shift(sm_init_shift[2]), .fwd(sm_fwd[2]),
    .in_valid(r3_valid), .in_data(r3), .eval(sm_eval[2]), .shift(sm_shift[2]),
    .too_big(sm_too_big[2]), .too_small(sm_too_small[2])
  );
endmodule
