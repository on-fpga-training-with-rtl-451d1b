// Testbench for pe1_engine: Z'(a,d) = sum_{b,c} Z(a,b,c) G(b,d,c) with random
// operands in DRAM (behavioural model with random stalls) and random factors in
// a parameter memory. Runs a backward-mode and a forward-mode command and
// compares every result word in DRAM with a software contraction. Also checks
// the rate: the PE must be busy for exactly A/8 * D * B * C/16 clocks (128
// MACs per clock), and loading of the next slice must overlap computing.
module tb_pe1_engine;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int WORDS = 8192;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pe1_cmd_t cmd = '0;
  logic [10:0] g_addr;
  logic [63:0] g_data;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  beat_t rd_data, wr_data;
  logic res_valid;
  act_t res [P_LANES];
  logic pw_en = 0; logic [10:0] pw_addr = 0; logic [63:0] pw_data = 0;
  logic bd_we = 0; logic [ADDR_W-1:0] bd_addr = 0; beat_t bd_data = '0;
  int rd_stalls, wr_stalls;
  int checks = 0, failures = 0;
  int mac_cycles = 0, overlap = 0;

  pe1_engine dut (.*);
  param_bram u_bram (.clk, .wr_en(pw_en), .wr_addr(pw_addr), .wr_data(pw_data),
    .rd1_addr(g_addr), .rd1_data(g_data), .rd2_addr('0), .rd2_data());
  dram_model #(.WORDS(WORDS)) u_dram (.clk, .rst_n, .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready, .bd_we, .bd_addr, .bd_data, .rd_stalls, .wr_stalls);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (dut.s1_valid) mac_cycles++;
    if (dut.s1_valid && dut.ld_busy) overlap++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int zmem [int];   // element index -> value, Z(a,b,c) at (a*B + b)*C + c
  int gmem [int];   // (b*D + d)*C + c

  task automatic run(input int at, input int bn, input int c16, input int dn, input bit f, input int sh);
    int A, C;
    A = at * 8; C = c16 * 16;
    zmem.delete(); gmem.delete();
    for (int a = 0; a < A; a++) for (int b = 0; b < bn; b++) for (int cc = 0; cc < c16; cc++) begin
      beat_t bt;
      for (int l = 0; l < 16; l++) begin
        int v;
        v = f ? rnd_s(8) : rnd_s(16);
        if (f && ($urandom % 2)) v = v + 256 * rnd_s(8);   // junk in the high byte
        zmem[(a*bn + b)*C + cc*16 + l] = v;
        bt[l*16 +: 16] = 16'(v);
      end
      @(negedge clk); bd_we = 1; bd_addr = 100 + (a*bn + b)*c16 + cc; bd_data = bt;
    end
    @(negedge clk); bd_we = 0;
    for (int b = 0; b < bn; b++) for (int d = 0; d < dn; d++) for (int cc = 0; cc < c16; cc++) begin
      logic [63:0] wd;
      for (int l = 0; l < 16; l++) begin
        int v;
        v = rnd_s(4);
        gmem[(b*dn + d)*C + cc*16 + l] = v;
        wd[l*4 +: 4] = 4'(v);
      end
      @(negedge clk); pw_en = 1; pw_addr = 11'(5 + (b*dn + d)*c16 + cc); pw_data = wd;
    end
    @(negedge clk); pw_en = 0;
    cmd.z_base = 100; cmd.out_base = 5000; cmd.a_tiles = 16'(at); cmd.b_n = 16'(bn);
    cmd.c16 = 16'(c16); cmd.d_n = 16'(dn); cmd.g_base = 5; cmd.fwd = f; cmd.shift = 5'(sh);
    mac_cycles = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (mac_cycles != at * dn * bn * c16) begin
      failures++; $display("MAC clocks %0d, want %0d", mac_cycles, at * dn * bn * c16);
    end
    for (int a = 0; a < A; a++) for (int d = 0; d < dn; d++) begin
      longint s;
      int e;
      beat_t bt;
      s = 0;
      for (int b = 0; b < bn; b++) for (int c = 0; c < C; c++)
        s += ref_opnd(zmem[(a*bn + b)*C + c], f) * longint'(gmem[(b*dn + d)*C + c]);
      e = ref_rq(s, sh, f);
      bt = u_dram.mem[5000 + a*(dn/16) + d/16];
      checks++;
      if (int'($signed(bt[(d%16)*16 +: 16])) != e) begin
        failures++;
        if (failures < 8) $display("Z'(%0d,%0d) got %0d want %0d", a, d, $signed(bt[(d%16)*16 +: 16]), e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 2, 2, 32, 1'b0, 6);
    run(2, 1, 3, 16, 1'b1, 3);
    checks++;
    if (overlap == 0) begin failures++; $display("loading never overlapped computing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
