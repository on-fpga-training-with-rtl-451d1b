// PE2 column: load & store unit, input and output ping-pong buffers, PE2 and
// the loop sequencer for  Z'(a,d,c) = sum_b Z(a,b,c) G(b,d).
//
// Operation. On start the command (tt_pkg::pe2_cmd_t) is latched. For every
// slice (one a, one 16-wide c-chunk) the load side fetches the B operand rows
// Z(a,b,c..c+15), one DRAM beat per buffer word, into a bank of the input
// buffer; the next slice is fetched while the current one is computed. The
// compute side runs the slice once per group of 8 output columns: each clock one
// buffer row and 8 factors G(b,d..d+7) from the parameter memory go into PE2,
// which feeds every operand element to 8 multipliers. When b wraps, the 8 x 16
// results form one output word (beat k = column d+k) that goes through the
// output ping-pong buffer to DRAM at  out_base + (a*D + d + k)*c16 + cc,
// while the next group computes. Results are also shown on res_valid/res.
// Constraints: D padded to a multiple of 8, B <= IN_DEPTH. done pulses one
// clock when the last result is stored. Loop order and buffer sizes are this
// design's choices.
module pe2_engine
  import tt_pkg::*;
#(
  parameter int IN_DEPTH = 64,
  parameter int G_AW     = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe2_cmd_t          cmd,
  output logic              busy,
  output logic              done,
  // parameter memory (half-word port, 8 factors)
  output logic [G_AW:0]     g_addr,
  input  logic [P_LANES*G_W-1:0] g_data,
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
  output act_t              res [P_LANES][C_LANES]
);
  localparam int IAW = $clog2(IN_DEPTH);
  localparam int OW  = P_LANES * BEAT_W;

  pe2_cmd_t c;
  logic [15:0] d_n;
  logic [31:0] n_slices;

  logic ld_start, ld_busy, st_start, st_busy;
  xfer_t ld_cmd, st_cmd;
  logic ib_wr_en, ib_wr_commit, ib_wr_free, ib_rd_full, ib_rd_release;
  logic [IAW-1:0] ib_wr_addr, ib_rd_addr;
  beat_t ib_wr_data, ib_rd_data;
  logic ob_wr_free, ob_rd_full, ob_rd_release, ob_fire;
  logic [0:0] ob_rd_addr;
  logic [OW-1:0] ob_rd_data, stage;

  load_store #(.LD_P(1), .ST_P(P_LANES), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(1)) u_ls (
    .clk, .rst_n,
    .ld_start, .ld_cmd, .ld_busy, .st_start, .st_cmd, .st_busy,
    .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready,
    .ib_wr_en, .ib_wr_addr, .ib_wr_data, .ib_wr_commit, .ib_wr_free,
    .ob_rd_addr, .ob_rd_data, .ob_rd_full, .ob_rd_release
  );

  pingpong_buffer #(.WIDTH(BEAT_W), .DEPTH(IN_DEPTH)) u_ib (
    .clk, .rst_n,
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .wr_commit(ib_wr_commit),
    .wr_free(ib_wr_free), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data), .rd_full(ib_rd_full),
    .rd_release(ib_rd_release)
  );

  pingpong_buffer #(.WIDTH(OW), .DEPTH(1)) u_ob (
    .clk, .rst_n,
    .wr_en(ob_fire), .wr_addr(1'b0), .wr_data(stage), .wr_commit(ob_fire),
    .wr_free(ob_wr_free), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data), .rd_full(ob_rd_full),
    .rd_release(ob_rd_release)
  );

  // ---------------- load issue: slices in (a, cc) order ----------------
  logic [15:0] la, lcc;
  logic [31:0] ls;
  logic        running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_start <= 1'b0; la <= '0; lcc <= '0; ls <= '0; ld_cmd <= '0;
    end else begin
      ld_start <= 1'b0;
      if (start) begin la <= '0; lcc <= '0; ls <= '0; end
      else if (running && !ld_busy && !ld_start && ls < n_slices) begin
        ld_start       <= 1'b1;
        ls             <= ls + 1;
        ld_cmd.base    <= c.z_base + (ADDR_W'(la) * ADDR_W'(c.b_n)) * ADDR_W'(c.c16) + ADDR_W'(lcc);
        ld_cmd.words   <= c.b_n;
        ld_cmd.wstride <= ADDR_W'(c.c16);
        ld_cmd.beats   <= 4'd1;
        ld_cmd.pstride <= '0;
        if (lcc == c.c16 - 1) begin lcc <= '0; la <= la + 1; end
        else lcc <= lcc + 1;
      end
    end
  end

  // ---------------- compute sequencer ----------------
  typedef enum logic [2:0] {C_IDLE, C_WAITIN, C_ISSUE, C_DRAIN, C_FIN, C_DONE} cstate_t;
  cstate_t cs;
  logic [15:0] a, cc, dg, b;
  logic [31:0] s;
  logic [15:0] grp_a, grp_cc, grp_dg;
  logic pending, grp_ready, stall;
  logic s0_valid, s0_first, s0_last, s1_valid, s1_first, s1_last;

  assign stall     = (b == 0) && pending;
  assign s0_valid  = (cs == C_ISSUE) && !stall;
  assign s0_first  = (b == 0);
  assign s0_last   = (b == c.b_n - 1);
  assign ib_rd_addr = IAW'(b);
  assign g_addr    = (G_AW+1)'(c.g_base8 + 17'(b * c.d8) + 17'(dg));
  assign ib_rd_release = (cs == C_FIN);
  assign busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; c <= '0; d_n <= '0; n_slices <= '0; running <= 1'b0; done <= 1'b0;
      a <= '0; cc <= '0; dg <= '0; b <= '0; s <= '0;
      grp_a <= '0; grp_cc <= '0; grp_dg <= '0; pending <= 1'b0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0;
    end else begin
      done     <= 1'b0;
      s1_valid <= s0_valid;
      s1_first <= s0_first & s0_valid;
      s1_last  <= s0_last;
      if (ob_fire) pending <= 1'b0;
      unique case (cs)
        C_IDLE: if (start) begin
          c <= cmd; d_n <= cmd.d8 << 3; n_slices <= cmd.a_n * cmd.c16;
          running <= 1'b1; a <= '0; cc <= '0; s <= '0;
          cs <= (cmd.a_n == 0 || cmd.c16 == 0 || cmd.d8 == 0) ? C_DONE : C_WAITIN;
        end
        C_WAITIN: if (ib_rd_full) begin dg <= '0; b <= '0; cs <= C_ISSUE; end
        C_ISSUE: if (!stall) begin
          if (b == 0) begin grp_a <= a; grp_cc <= cc; grp_dg <= dg; end
          if (b == c.b_n - 1) begin
            b <= '0;
            pending <= 1'b1;
            if (dg == c.d8 - 1) cs <= C_DRAIN;
            dg <= dg + 1;
          end else b <= b + 1;
        end
        C_DRAIN: cs <= C_FIN;
        C_FIN: begin
          s <= s + 1;
          if (cc == c.c16 - 1) begin cc <= '0; a <= a + 1; end
          else cc <= cc + 1;
          cs <= (s == n_slices - 1) ? C_DONE : C_WAITIN;
        end
        C_DONE: if (!pending && !grp_ready && !st_busy && !ob_rd_full) begin
          running <= 1'b0; done <= 1'b1; cs <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // ---------------- PE2 and result packing ----------------
  act_t z_in [C_LANES];
  g_t   g_in [P_LANES];
  logic out_valid;
  act_t out [P_LANES][C_LANES];
  always_comb begin
    for (int l = 0; l < C_LANES; l++) z_in[l] = act_t'(ib_rd_data[l*ACT_W +: ACT_W]);
    for (int k = 0; k < P_LANES; k++) g_in[k] = g_t'(g_data[k*G_W +: G_W]);
  end

  pe2 u_pe2 (
    .clk, .rst_n, .clr(s1_first), .en(s1_valid), .last(s1_last),
    .fwd(c.fwd), .shift(c.shift), .z(z_in), .g(g_in), .out_valid, .out
  );

  assign res_valid = out_valid;
  assign res       = out;

  assign ob_fire  = grp_ready && !st_busy && ob_wr_free;
  assign st_start = ob_fire;
  always_comb begin
    st_cmd.base    = c.out_base
                   + (ADDR_W'(grp_a) * ADDR_W'(d_n) + ADDR_W'(grp_dg) * ADDR_W'(P_LANES)) * ADDR_W'(c.c16)
                   + ADDR_W'(grp_cc);
    st_cmd.words   = 1;
    st_cmd.wstride = '0;
    st_cmd.beats   = 4'(P_LANES);
    st_cmd.pstride = ADDR_W'(c.c16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_ready <= 1'b0; stage <= '0;
    end else begin
      if (ob_fire) grp_ready <= 1'b0;
      if (out_valid) begin
        for (int k = 0; k < P_LANES; k++)
          for (int l = 0; l < C_LANES; l++)
            stage[(k*C_LANES + l)*ACT_W +: ACT_W] <= out[k][l];
        grp_ready <= 1'b1;
      end
    end
  end
endmodule
