// Testbench for pe2: random operand rows and factor groups, contractions of
// random length (1..6 steps), forward and backward modes, random shifts; each
// of the 8 x 16 results is compared with a software contraction, and the
// emission latency is checked.
module tb_pe2;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 8, C = 16;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, last = 0, fwd = 0;
  logic [SHIFT_W-1:0] shift = 0;
  act_t z [C];
  g_t   g [D];
  logic out_valid;
  act_t out [D][C];
  int checks = 0, failures = 0;
  longint sum [D][C];
  int exp_q [$];
  int cyc = 0, last_cyc = -10, n_out = 0;

  pe2 dut (.clk, .rst_n, .clr, .en, .last, .fwd, .shift, .z, .g, .out_valid, .out);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - last_cyc != 1) begin failures++; $display("pe2 latency %0d", cyc - last_cyc); end
    for (int d = 0; d < D; d++) for (int c = 0; c < C; c++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out[d][c]) != e) begin
        failures++;
        if (failures < 8) $display("pe2 d%0d c%0d got %0d want %0d", d, c, out[d][c], e);
      end
    end
    n_out++;
  end

  initial begin
    for (int c = 0; c < C; c++) z[c] = '0;
    for (int d = 0; d < D; d++) g[d] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 200; op++) begin
      int steps, sh;
      bit f;
      steps = 1 + $urandom % 6;
      f  = $urandom % 2;
      sh = f ? $urandom % 5 : $urandom % 8;
      for (int d = 0; d < D; d++) for (int c = 0; c < C; c++) sum[d][c] = 0;
      for (int s = 0; s < steps; s++) begin
        @(negedge clk);
        clr = (s == 0); en = 1; last = (s == steps - 1); fwd = f; shift = SHIFT_W'(sh);
        for (int d = 0; d < D; d++) g[d] = 4'(rnd_s(4));
        for (int c = 0; c < C; c++) z[c] = 16'(rnd_s(16));
        for (int d = 0; d < D; d++) for (int c = 0; c < C; c++)
          sum[d][c] += ref_opnd(int'(z[c]), f) * longint'(g[d]);
        if (last) begin
          for (int d = 0; d < D; d++) for (int c = 0; c < C; c++) exp_q.push_back(ref_rq(sum[d][c], sh, f));
          last_cyc = cyc + 1;
        end
      end
      @(negedge clk); en = 0; clr = 0; last = 0;
      @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != 200) begin failures++; $display("pe2 emitted %0d of 200", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
