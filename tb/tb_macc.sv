// Testbench for macc: random 16-bit x 4-bit products accumulated, cleared and
// held, checked against a software sum every clock.
module tb_macc;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [15:0] a = 0;
  logic signed [3:0]  g = 0;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint model = 0;

  macc dut (.clk, .rst_n, .clr, .en, .a, .g, .acc);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      clr = ($urandom % 10) == 0;
      en  = ($urandom % 5) != 0;
      a   = 16'(rnd_s(16));
      g   = 4'(rnd_s(4));
      if (clr) model = en ? longint'(a) * longint'(g) : 0;
      else if (en) model = model + longint'(a) * longint'(g);
      model = longint'(int'(model));     // 32-bit wrap
      @(posedge clk); #1;
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 5) $display("macc mismatch step %0d: got %0d want %0d", i, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
