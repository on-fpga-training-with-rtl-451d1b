// End-to-end testbench of tt_accel_top at its default parameters: one training
// step of a tensorized fully connected layer W (128 x 128) held as two TT cores,
// G1(J1=8, I1=8, R1=16) and G2(R1=16, J2=16, I2=16), with all activations and
// gradients in a shared behavioural DRAM that stalls at random.
//   1. PE1, forward (8-bit):  Z1(i1,r1,j2) = sum_i2 X(i1,i2) G2(r1,j2,i2)
//   2. PE2, forward (8-bit):  Y(j1,j2)     = sum_{i1,r1} Z1(i1,r1,j2) G1(j1,i1,r1)
//   3. PE3, backward, two samples, the second accumulated:
//                             dW(j1,i1,j2,i2) += X(i1,i2) dY(j1,j2)
//   4. PE1, backward, shift taken from the scale monitor (auto scale):
//                             Z11(j1,i1,r1) = sum_{j2,i2} dW(j1,i1,j2,i2) G2(r1,j2,i2)
// Every result in DRAM is compared with a software model. The scale monitor
// is evaluated after steps 1 and 4 and its new shift is checked against the
// software mean. Each mechanism must occur at least once: DRAM stalls, loading
// overlapping computing, forward mode, backward mode, accumulation in PE3,
// auto-scale shift use and a scale adjustment.
module tb_tt_accel_top;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int I1 = 8, I2 = 16, R1 = 16, J1 = 8, J2 = 16;
  localparam int SH1 = 3, SH2 = 4, SH3 = 6, SH4 = 10;

  logic clk = 0, rst_n = 0;
  logic pw_en = 0; logic [10:0] pw_addr = 0; logic [63:0] pw_data = 0;
  logic pe1_start = 0, pe2_start = 0, pe3_start = 0;
  pe1_cmd_t pe1_cmd = '0; pe2_cmd_t pe2_cmd = '0; pe3_cmd_t pe3_cmd = '0;
  logic pe1_busy, pe1_done, pe2_busy, pe2_done, pe3_busy, pe3_done;
  logic [2:0] sm_init = 0, sm_fwd = 0, sm_eval = 0, auto_scale = 0;
  logic [2:0][SHIFT_W-1:0] sm_init_shift = '0, sm_shift;
  logic [2:0] sm_too_big, sm_too_small;
  logic [2:0] dram_rd_req, dram_rd_ready, dram_rd_valid, dram_wr_req, dram_wr_ready;
  logic [2:0][ADDR_W-1:0] dram_rd_addr, dram_wr_addr;
  beat_t [2:0] dram_rd_data, dram_wr_data;
  logic bd_we = 0; logic [ADDR_W-1:0] bd_addr = 0; beat_t bd_data = '0;
  int stalls;

  int checks = 0, failures = 0;
  int n_overlap = 0, n_fwd = 0, n_bwd = 0, n_acc = 0, n_auto = 0, n_adjust = 0;

  tt_accel_top u_top (.*);
  dram_mp_model u_dram (.clk, .rst_n, .rd_req(dram_rd_req), .rd_addr(dram_rd_addr),
    .rd_ready(dram_rd_ready), .rd_valid(dram_rd_valid), .rd_data(dram_rd_data),
    .wr_req(dram_wr_req), .wr_addr(dram_wr_addr), .wr_data(dram_wr_data), .wr_ready(dram_wr_ready),
    .bd_we, .bd_addr, .bd_data, .stalls);
  always #5 clk = ~clk;
  always @(posedge clk) if (u_top.u_pe1.s1_valid && u_top.u_pe1.ld_busy) n_overlap++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int g1 [J1][I1][R1];
  int g2 [R1][J2][I2];
  int x  [2][I1][I2];
  int dy [2][J1][J2];
  int z1 [I1][R1][J2];
  int y  [J1][J2];
  int dw [J1][I1][J2][I2];

  function automatic int lane(input int addr, input int l);
    return int'($signed(u_dram.mem[addr][l*16 +: 16]));
  endfunction

  task automatic bd(input int addr, input beat_t v);
    @(negedge clk); bd_we = 1; bd_addr = addr; bd_data = v;
    @(negedge clk); bd_we = 0;
  endtask

  task automatic pw(input int addr, input logic [63:0] v);
    @(negedge clk); pw_en = 1; pw_addr = 11'(addr); pw_data = v;
    @(negedge clk); pw_en = 0;
  endtask

  // eval monitor k and compare its move with the software mean
  task automatic eval_check(input int k, input longint sum, input longint n, input bit f);
    int prev, want;
    longint fs;
    prev = int'(sm_shift[k]);
    fs = f ? 128 : 32768;
    want = prev;
    if (sum * 10 > 3 * n * fs) want = prev + 1;
    else if (sum * 10 < n * fs && prev > 0) want = prev - 1;
    @(negedge clk); sm_eval[k] = 1; @(negedge clk); sm_eval[k] = 0;
    checks++;
    if (int'(sm_shift[k]) != want) begin failures++; $display("monitor %0d shift %0d want %0d", k, sm_shift[k], want); end
    if (want != prev) n_adjust++;
  endtask

  initial begin
    longint s, sabs, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- factors ----------------
    for (int r = 0; r < R1; r++) for (int j = 0; j < J2; j++) begin
      logic [63:0] wd;
      for (int i = 0; i < I2; i++) begin g2[r][j][i] = rnd_s(4); wd[i*4 +: 4] = 4'(g2[r][j][i]); end
      pw(r*J2 + j, wd);                          // G2 word (r1, j2), lanes i2
    end
    for (int b = 0; b < I1*R1; b += 2) begin      // G1 half word b = i1*R1 + r1, lanes j1
      logic [63:0] wd;
      for (int h = 0; h < 2; h++) for (int j = 0; j < J1; j++) begin
        g1[j][(b+h)/R1][(b+h)%R1] = rnd_s(4);
        wd[h*32 + j*4 +: 4] = 4'(g1[j][(b+h)/R1][(b+h)%R1]);
      end
      pw(256 + b/2, wd);
    end
    // ---------------- samples and output gradients ----------------
    for (int smp = 0; smp < 2; smp++) begin
      for (int i = 0; i < I1; i++) begin
        beat_t bt;
        for (int l = 0; l < I2; l++) begin x[smp][i][l] = rnd_s(8); bt[l*16 +: 16] = 16'(x[smp][i][l]); end
        bd(smp*10 + i, bt);
      end
      for (int j = 0; j < J1; j++) begin
        beat_t bt;
        for (int l = 0; l < J2; l++) begin dy[smp][j][l] = rnd_s(12); bt[l*16 +: 16] = 16'(dy[smp][j][l]); end
        bd(400 + smp*10 + j, bt);
      end
    end

    // ---------------- 1. PE1 forward ----------------
    @(negedge clk); sm_init = 3'b001; sm_init_shift[0] = 5'(SH1); sm_fwd = 3'b011; @(negedge clk); sm_init = 0;
    pe1_cmd.z_base = 0; pe1_cmd.out_base = 100; pe1_cmd.a_tiles = 1; pe1_cmd.b_n = 1; pe1_cmd.c16 = 1;
    pe1_cmd.d_n = 16'(R1*J2); pe1_cmd.g_base = 0; pe1_cmd.fwd = 1; pe1_cmd.shift = 5'(SH1);
    pe1_start = 1; @(negedge clk); pe1_start = 0;
    while (!pe1_done) @(negedge clk);
    n_fwd++;
    sabs = 0; n = 0;
    for (int i = 0; i < I1; i++) for (int r = 0; r < R1; r++) for (int j = 0; j < J2; j++) begin
      s = 0;
      for (int l = 0; l < I2; l++) s += longint'(x[0][i][l]) * g2[r][j][l];
      z1[i][r][j] = ref_rq(s, SH1, 1'b1);
      sabs += (z1[i][r][j] < 0) ? -z1[i][r][j] : z1[i][r][j]; n++;
      checks++;
      if (lane(100 + i*R1 + r, j) != z1[i][r][j]) begin
        failures++; if (failures < 8) $display("Z1(%0d,%0d,%0d) got %0d want %0d", i, r, j, lane(100 + i*R1 + r, j), z1[i][r][j]);
      end
    end
    eval_check(0, sabs, n, 1'b1);

    // ---------------- 2. PE2 forward ----------------
    pe2_cmd.z_base = 100; pe2_cmd.out_base = 300; pe2_cmd.a_n = 1; pe2_cmd.b_n = 16'(I1*R1);
    pe2_cmd.c16 = 1; pe2_cmd.d8 = 1; pe2_cmd.g_base8 = 17'd512; pe2_cmd.fwd = 1; pe2_cmd.shift = 5'(SH2);
    pe2_start = 1; @(negedge clk); pe2_start = 0;
    while (!pe2_done) @(negedge clk);
    n_fwd++;
    for (int j = 0; j < J1; j++) for (int l = 0; l < J2; l++) begin
      s = 0;
      for (int i = 0; i < I1; i++) for (int r = 0; r < R1; r++) s += longint'(z1[i][r][l]) * g1[j][i][r];
      y[j][l] = ref_rq(s, SH2, 1'b1);
      checks++;
      if (lane(300 + j, l) != y[j][l]) begin
        failures++; if (failures < 8) $display("Y(%0d,%0d) got %0d want %0d", j, l, lane(300 + j, l), y[j][l]);
      end
    end

    // ---------------- 3. PE3 outer products, two samples ----------------
    for (int smp = 0; smp < 2; smp++) begin
      pe3_cmd.x_base = smp*10; pe3_cmd.dy_base = 400 + smp*10; pe3_cmd.w_base = 1000;
      pe3_cmd.jdim = {16'(J2), 16'(J1), 16'd1, 16'd1};
      pe3_cmd.idim = {16'd1, 16'(I1), 16'd1, 16'd1};
      pe3_cmd.accumulate = (smp == 1); pe3_cmd.shift = 5'(SH3);
      pe3_start = 1; @(negedge clk); pe3_start = 0;
      while (!pe3_done) @(negedge clk);
      if (smp == 1) n_acc++;
      n_bwd++;
      for (int j = 0; j < J1; j++) for (int i = 0; i < I1; i++) for (int k = 0; k < J2; k++) for (int l = 0; l < I2; l++) begin
        int p;
        p = ref_rq(longint'(x[smp][i][l]) * dy[smp][j][k], SH3, 1'b0);
        dw[j][i][k][l] = ref_rq(longint'(p) + ((smp == 1) ? dw[j][i][k][l] : 0), 0, 1'b0);
      end
    end
    for (int j = 0; j < J1; j++) for (int i = 0; i < I1; i++) for (int k = 0; k < J2; k++) for (int l = 0; l < I2; l++) begin
      checks++;
      if (lane(1000 + (j*I1 + i)*J2 + k, l) != dw[j][i][k][l]) begin
        failures++; if (failures < 8) $display("dW(%0d,%0d,%0d,%0d) got %0d want %0d", j, i, k, l, lane(1000 + (j*I1 + i)*J2 + k, l), dw[j][i][k][l]);
      end
    end

    // ---------------- 4. PE1 backward with the monitor's shift ----------------
    @(negedge clk); sm_init = 3'b001; sm_init_shift[0] = 5'(SH4); sm_fwd = 3'b000; auto_scale = 3'b001;
    @(negedge clk); sm_init = 0;
    pe1_cmd.z_base = 1000; pe1_cmd.out_base = 3000; pe1_cmd.a_tiles = 16'(J1*I1/8); pe1_cmd.b_n = 1;
    pe1_cmd.c16 = 16'(J2*I2/16); pe1_cmd.d_n = 16'(R1); pe1_cmd.g_base = 0; pe1_cmd.fwd = 0; pe1_cmd.shift = 5'd0;
    pe1_start = 1; @(negedge clk); pe1_start = 0;
    while (!pe1_done) @(negedge clk);
    auto_scale = 0;
    n_auto++; n_bwd++;
    sabs = 0; n = 0;
    for (int a = 0; a < J1*I1; a++) for (int r = 0; r < R1; r++) begin
      int e;
      s = 0;
      for (int k = 0; k < J2; k++) for (int l = 0; l < I2; l++) s += longint'(dw[a/I1][a%I1][k][l]) * g2[r][k][l];
      e = ref_rq(s, SH4, 1'b0);
      sabs += (e < 0) ? -e : e; n++;
      checks++;
      if (lane(3000 + a, r) != e) begin
        failures++; if (failures < 8) $display("Z11(%0d,%0d) got %0d want %0d", a, r, lane(3000 + a, r), e);
      end
    end
    eval_check(0, sabs, n, 1'b0);

    // ---------------- mechanisms ----------------
    $display("stalls=%0d overlap=%0d fwd=%0d bwd=%0d acc=%0d auto=%0d adjust=%0d",
             stalls, n_overlap, n_fwd, n_bwd, n_acc, n_auto, n_adjust);
    checks++; if (stalls == 0)    begin failures++; $display("no DRAM stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("loading never overlapped computing"); end
    checks++; if (n_fwd == 0)     begin failures++; $display("no forward op"); end
    checks++; if (n_bwd == 0)     begin failures++; $display("no backward op"); end
    checks++; if (n_acc == 0)     begin failures++; $display("no accumulation"); end
    checks++; if (n_auto == 0)    begin failures++; $display("no auto-scale op"); end
    checks++; if (n_adjust == 0)  begin failures++; $display("no scale adjustment"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
