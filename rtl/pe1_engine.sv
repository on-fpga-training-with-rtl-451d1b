// PE1 column: load & store unit, input and output ping-pong buffers, PE1 and
// the loop sequencer for  Z'(a,d) = sum_{b,c} Z(a,b,c) G(b,d,c).
//
// Operation. On start the command (tt_pkg::pe1_cmd_t) is latched. The load
// side fetches one 8-row slice of Z per a-tile (rows a..a+7, all b and c) into
// a bank of the input buffer, 8 DRAM beats per buffer word, and fetches the
// next tile while the current one is computed. The compute side streams the
// slice once per output column d: each clock one buffer word (8 rows x 16 c
// lanes) and one BRAM word of 16 factors G(b,d,c..c+15) go into PE1, which
// shares each factor across the 8 rows. After every 16 columns the 8 x 16
// results are packed into one output word (one beat per row), written to the
// output ping-pong buffer and stored to DRAM while the next 16 columns compute.
// Results are also presented on res_valid/res for the scale monitor.
// Constraints: D is a multiple of 16 (the paper enforces the last dimension of
// every tensor to be a multiple of 16), rows come in tiles of 8 (zero padding),
// B*C/16 <= IN_DEPTH. done pulses one clock when the last result is stored.
// Loop order, tiling and buffer sizes are this design's choices.
module pe1_engine
  import tt_pkg::*;
#(
  parameter int IN_DEPTH = 64,
  parameter int G_AW     = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe1_cmd_t          cmd,
  output logic              busy,
  output logic              done,
  // parameter memory
  output logic [G_AW-1:0]   g_addr,
  input  logic [C_LANES*G_W-1:0] g_data,
  // DRAM
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ready,
  input  logic              rd_valid,
  input  beat_t             rd_data,
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output beat_t             wr_data,
  input  logic              wr_ready,
  // result tap
  output logic              res_valid,
  output act_t              res [P_LANES]
);
  localparam int IAW = $clog2(IN_DEPTH);
  localparam int WW  = P_LANES * BEAT_W;

  pe1_cmd_t c;
  logic [15:0] bc16, d16;

  // ---------------- load & store, buffers ----------------
  logic ld_start, ld_busy, st_start, st_busy;
  xfer_t ld_cmd, st_cmd;
  logic ib_wr_en, ib_wr_commit, ib_wr_free, ib_rd_full, ib_rd_release;
  logic [IAW-1:0] ib_wr_addr, ib_rd_addr;
  logic [WW-1:0] ib_wr_data, ib_rd_data;
  logic ob_wr_free, ob_rd_full, ob_rd_release, ob_fire;
  logic [0:0] ob_rd_addr;
  logic [WW-1:0] ob_rd_data, stage;

  load_store #(.LD_P(P_LANES), .ST_P(P_LANES), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(1)) u_ls (
    .clk, .rst_n,
    .ld_start, .ld_cmd, .ld_busy, .st_start, .st_cmd, .st_busy,
    .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready,
    .ib_wr_en, .ib_wr_addr, .ib_wr_data, .ib_wr_commit, .ib_wr_free,
    .ob_rd_addr, .ob_rd_data, .ob_rd_full, .ob_rd_release
  );

  pingpong_buffer #(.WIDTH(WW), .DEPTH(IN_DEPTH)) u_ib (
    .clk, .rst_n,
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .wr_commit(ib_wr_commit),
    .wr_free(ib_wr_free), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data), .rd_full(ib_rd_full),
    .rd_release(ib_rd_release)
  );

  pingpong_buffer #(.WIDTH(WW), .DEPTH(1)) u_ob (
    .clk, .rst_n,
    .wr_en(ob_fire), .wr_addr(1'b0), .wr_data(stage), .wr_commit(ob_fire),
    .wr_free(ob_wr_free), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data), .rd_full(ob_rd_full),
    .rd_release(ob_rd_release)
  );

  // ---------------- load issue ----------------
  logic [15:0] ld_t;
  logic        running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_start <= 1'b0; ld_t <= '0; ld_cmd <= '0;
    end else begin
      ld_start <= 1'b0;
      if (start) ld_t <= '0;
      else if (running && !ld_busy && !ld_start && ld_t < c.a_tiles) begin
        ld_start       <= 1'b1;
        ld_t           <= ld_t + 1;
        ld_cmd.base    <= c.z_base + ADDR_W'(ld_t) * ADDR_W'(P_LANES) * ADDR_W'(bc16);
        ld_cmd.words   <= bc16;
        ld_cmd.wstride <= 1;
        ld_cmd.beats   <= 4'(P_LANES);
        ld_cmd.pstride <= ADDR_W'(bc16);
      end
    end
  end

  // ---------------- compute sequencer ----------------
  typedef enum logic [2:0] {C_IDLE, C_WAITIN, C_ISSUE, C_DRAIN, C_FIN, C_DONE} cstate_t;
  cstate_t cs;
  logic [15:0] t, d, b, cc, w;
  logic [15:0] grp_t, grp_g;     // tile and d-group being produced
  logic pending, grp_ready;
  logic s0_valid, s0_first, s0_last, s1_valid, s1_first, s1_last;
  logic at_grp_start, stall;
  logic [3:0] col;

  assign at_grp_start = (d[3:0] == 0) && (b == 0) && (cc == 0);
  assign stall        = at_grp_start && pending;
  assign s0_valid     = (cs == C_ISSUE) && !stall;
  assign s0_first     = (b == 0) && (cc == 0);
  assign s0_last      = (b == c.b_n - 1) && (cc == c.c16 - 1);
  assign ib_rd_addr   = IAW'(w);
  assign g_addr       = G_AW'(c.g_base + (b * c.d_n + d) * c.c16 + cc);
  assign ib_rd_release = (cs == C_FIN);
  assign busy         = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; c <= '0; bc16 <= '0; d16 <= '0; running <= 1'b0; done <= 1'b0;
      t <= '0; d <= '0; b <= '0; cc <= '0; w <= '0; grp_t <= '0; grp_g <= '0;
      pending <= 1'b0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0;
    end else begin
      done     <= 1'b0;
      s1_valid <= s0_valid;
      s1_first <= s0_first & s0_valid;
      s1_last  <= s0_last;
      if (ob_fire) pending <= 1'b0;
      unique case (cs)
        C_IDLE: if (start) begin
          c <= cmd; bc16 <= cmd.b_n * cmd.c16; d16 <= cmd.d_n >> 4;
          running <= 1'b1; t <= '0;
          cs <= (cmd.a_tiles == 0) ? C_DONE : C_WAITIN;
        end
        C_WAITIN: if (ib_rd_full) begin
          d <= '0; b <= '0; cc <= '0; w <= '0;
          cs <= C_ISSUE;
        end
        C_ISSUE: if (!stall) begin
          if (at_grp_start) begin grp_t <= t; grp_g <= d >> 4; end
          if (cc == c.c16 - 1) begin
            cc <= '0;
            if (b == c.b_n - 1) begin
              b <= '0; w <= '0;
              if (d[3:0] == 4'hf) pending <= 1'b1;
              if (d == c.d_n - 1) cs <= C_DRAIN;
              d <= d + 1;
            end else begin
              b <= b + 1; w <= w + 1;
            end
          end else begin
            cc <= cc + 1; w <= w + 1;
          end
        end
        C_DRAIN: cs <= C_FIN;
        C_FIN: begin
          t  <= t + 1;
          cs <= (t == c.a_tiles - 1) ? C_DONE : C_WAITIN;
        end
        C_DONE: if (!pending && !grp_ready && !st_busy && !ob_rd_full) begin
          running <= 1'b0; done <= 1'b1; cs <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // ---------------- PE1 and result packing ----------------
  act_t z_in [P_LANES][C_LANES];
  g_t   g_in [C_LANES];
  logic out_valid;
  act_t out [P_LANES];
  always_comb begin
    for (int r = 0; r < P_LANES; r++)
      for (int l = 0; l < C_LANES; l++)
        z_in[r][l] = act_t'(ib_rd_data[(r*C_LANES + l)*ACT_W +: ACT_W]);
    for (int l = 0; l < C_LANES; l++) g_in[l] = g_t'(g_data[l*G_W +: G_W]);
  end

  pe1 u_pe1 (
    .clk, .rst_n, .clr(s1_first), .en(s1_valid), .last(s1_last),
    .fwd(c.fwd), .shift(c.shift), .z(z_in), .g(g_in), .out_valid, .out
  );

  assign res_valid = out_valid;
  assign res       = out;

  // output word: beat r = row a+r, element col = column d0+col
  assign ob_fire  = grp_ready && !st_busy && ob_wr_free;
  assign st_start = ob_fire;
  always_comb begin
    st_cmd.base    = c.out_base + ADDR_W'(grp_t) * ADDR_W'(P_LANES) * ADDR_W'(d16) + ADDR_W'(grp_g);
    st_cmd.words   = 1;
    st_cmd.wstride = '0;
    st_cmd.beats   = 4'(P_LANES);
    st_cmd.pstride = ADDR_W'(d16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; grp_ready <= 1'b0; stage <= '0;
    end else begin
      if (ob_fire) grp_ready <= 1'b0;
      if (out_valid) begin
        for (int r = 0; r < P_LANES; r++) stage[(r*C_LANES + int'(col))*ACT_W +: ACT_W] <= out[r];
        col <= col + 1;
        if (col == 4'hf) grp_ready <= 1'b1;
      end
    end
  end
endmodule
