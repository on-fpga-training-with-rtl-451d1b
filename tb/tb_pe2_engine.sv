// Testbench for pe2_engine: Z'(a,d,c) = sum_b Z(a,b,c) G(b,d) with random
// operands in DRAM (behavioural model with random stalls) and random factors in
// a parameter memory. Runs a backward-mode and a forward-mode command and
// compares every result beat in DRAM with a software contraction. Also checks
// the rate: the PE must be busy for exactly A * C/16 * D/8 * B clocks (128 MACs
// per clock), and loading of the next slice must overlap computing.
module tb_pe2_engine;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int WORDS = 8192;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pe2_cmd_t cmd = '0;
  logic [11:0] g_addr;
  logic [31:0] g_data;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  beat_t rd_data, wr_data;
  logic res_valid;
  act_t res [P_LANES][C_LANES];
  logic pw_en = 0; logic [10:0] pw_addr = 0; logic [63:0] pw_data = 0;
  logic bd_we = 0; logic [ADDR_W-1:0] bd_addr = 0; beat_t bd_data = '0;
  int rd_stalls, wr_stalls;
  int checks = 0, failures = 0;
  int mac_cycles = 0, overlap = 0;

  pe2_engine dut (.*);
  param_bram u_bram (.clk, .wr_en(pw_en), .wr_addr(pw_addr), .wr_data(pw_data),
    .rd1_addr('0), .rd1_data(), .rd2_addr(g_addr), .rd2_data(g_data));
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

  int zmem [int];   // Z(a,b,c) at (a*B + b)*C + c
  int gmem [int];   // G(b,d) at b*D + d

  task automatic run(input int an, input int bn, input int c16, input int d8, input bit f, input int sh);
    int C, D;
    C = c16 * 16; D = d8 * 8;
    zmem.delete(); gmem.delete();
    for (int a = 0; a < an; a++) for (int b = 0; b < bn; b++) for (int cc = 0; cc < c16; cc++) begin
      beat_t bt;
      for (int l = 0; l < 16; l++) begin
        int v;
        v = f ? rnd_s(8) : rnd_s(16);
        if (f && ($urandom % 2)) v = v + 256 * rnd_s(8);
        zmem[(a*bn + b)*C + cc*16 + l] = v;
        bt[l*16 +: 16] = 16'(v);
      end
      @(negedge clk); bd_we = 1; bd_addr = 200 + (a*bn + b)*c16 + cc; bd_data = bt;
    end
    @(negedge clk); bd_we = 0;
    // factors: G(b, 8g..8g+7) in half word 6 + b*d8 + g (base word 3)
    for (int b = 0; b < bn; b++) for (int g = 0; g < d8; g++)
      for (int k = 0; k < 8; k++) gmem[b*D + g*8 + k] = rnd_s(4);
    for (int hw = 0; hw < bn*d8; hw += 2) begin
      logic [63:0] wd;
      for (int h = 0; h < 2; h++) for (int k = 0; k < 8; k++) begin
        int idx;
        idx = hw + h;     // half word index = b*d8 + g
        wd[h*32 + k*4 +: 4] = (idx < bn*d8) ? 4'(gmem[(idx / d8)*D + (idx % d8)*8 + k]) : 4'(0);
      end
      @(negedge clk); pw_en = 1; pw_addr = 11'(3 + hw/2); pw_data = wd;
    end
    @(negedge clk); pw_en = 0;
    cmd.z_base = 200; cmd.out_base = 4000; cmd.a_n = 16'(an); cmd.b_n = 16'(bn);
    cmd.c16 = 16'(c16); cmd.d8 = 16'(d8); cmd.g_base8 = 17'd6; cmd.fwd = f; cmd.shift = 5'(sh);
    mac_cycles = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (mac_cycles != an * c16 * d8 * bn) begin
      failures++; $display("MAC clocks %0d, want %0d", mac_cycles, an * c16 * d8 * bn);
    end
    for (int a = 0; a < an; a++) for (int d = 0; d < D; d++) for (int c = 0; c < C; c++) begin
      longint s;
      int e;
      beat_t bt;
      s = 0;
      for (int b = 0; b < bn; b++)
        s += ref_opnd(zmem[(a*bn + b)*C + c], f) * longint'(gmem[b*D + d]);
      e = ref_rq(s, sh, f);
      bt = u_dram.mem[4000 + (a*D + d)*c16 + c/16];
      checks++;
      if (int'($signed(bt[(c%16)*16 +: 16])) != e) begin
        failures++;
        if (failures < 8) $display("Z'(%0d,%0d,%0d) got %0d want %0d", a, d, c, $signed(bt[(c%16)*16 +: 16]), e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(2, 3, 2, 2, 1'b0, 4);
    run(3, 1, 1, 3, 1'b1, 2);
    checks++;
    if (overlap == 0) begin failures++; $display("loading never overlapped computing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
