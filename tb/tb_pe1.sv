// Testbench for pe1: random operand slices and factors, contractions of random
// length (1..6 steps) with back-to-back starts, forward and backward modes and
// random shifts; every emitted row is compared with a software contraction.
// Also checks the latency: out_valid is high in the clock after the one that
// follows the edge sampling the last step.
module tb_pe1;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int A = 8, C = 16;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, last = 0, fwd = 0;
  logic [SHIFT_W-1:0] shift = 0;
  act_t z [A][C];
  g_t   g [C];
  logic out_valid;
  act_t out [A];
  int checks = 0, failures = 0;
  longint sum [A];
  int exp_q [$];
  int cyc = 0, last_cyc = -10, n_out = 0;

  pe1 dut (.clk, .rst_n, .clr, .en, .last, .fwd, .shift, .z, .g, .out_valid, .out);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - last_cyc != 1) begin failures++; $display("pe1 latency %0d", cyc - last_cyc); end
    for (int a = 0; a < A; a++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out[a]) != e) begin
        failures++;
        if (failures < 8) $display("pe1 row %0d got %0d want %0d", a, out[a], e);
      end
    end
    n_out++;
  end

  initial begin
    for (int a = 0; a < A; a++) for (int c = 0; c < C; c++) z[a][c] = '0;
    for (int c = 0; c < C; c++) g[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 200; op++) begin
      int steps;
      bit f;
      int sh;
      steps = 1 + $urandom % 6;
      f  = $urandom % 2;
      sh = f ? $urandom % 6 : $urandom % 12;
      for (int a = 0; a < A; a++) sum[a] = 0;
      for (int s = 0; s < steps; s++) begin
        @(negedge clk);
        clr = (s == 0); en = 1; last = (s == steps - 1); fwd = f; shift = SHIFT_W'(sh);
        for (int c = 0; c < C; c++) g[c] = 4'(rnd_s(4));
        for (int a = 0; a < A; a++) for (int c = 0; c < C; c++) begin
          z[a][c] = 16'(rnd_s(16));
          sum[a] += ref_opnd(int'(z[a][c]), f) * longint'(g[c]);
        end
        if (last) begin
          for (int a = 0; a < A; a++) exp_q.push_back(ref_rq(sum[a], sh, f));
          last_cyc = cyc + 1;
        end
      end
      // hold fwd/shift until the emission of this op
      if ($urandom % 3 == 0 || op == 199) begin
        @(negedge clk); en = 0; clr = 0; last = 0;
        repeat (3) @(negedge clk);
      end else begin
        // next op starts immediately; the shift/fwd of the next op must not
        // disturb this one's emission, so keep them for 2 idle cycles
        @(negedge clk); en = 0; clr = 0; last = 0;
        @(negedge clk);
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != 200) begin failures++; $display("pe1 emitted %0d of 200", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
