// Testbench for param_bram: random words written, then both read ports swept
// with random addresses; port 1 must return the whole word and port 2 the
// addressed half one clock after the address.
module tb_param_bram;
  localparam int DEPTH = 2048;
  logic clk = 0;
  logic wr_en = 0;
  logic [10:0] wr_addr = 0, rd1_addr = 0;
  logic [11:0] rd2_addr = 0;
  logic [63:0] wr_data = 0, rd1_data;
  logic [31:0] rd2_data;
  logic [63:0] model [DEPTH];
  int checks = 0, failures = 0;

  param_bram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      model[i] = {$urandom, $urandom};
      wr_en = 1; wr_addr = 11'(i); wr_data = model[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      int a1, a2;
      a1 = $urandom % DEPTH; a2 = $urandom % (2*DEPTH);
      rd1_addr = 11'(a1); rd2_addr = 12'(a2);
      // a write to another word in the same cycle must not disturb the reads
      wr_en = ($urandom % 4 == 0);
      wr_addr = 11'((a1 + 1 + $urandom % 100) % DEPTH);
      if (wr_addr == 11'(a2/2)) wr_en = 0;
      wr_data = {$urandom, $urandom};
      @(negedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      wr_en = 0;
      checks += 2;
      if (rd1_data !== model[a1]) begin failures++; if (failures < 5) $display("rd1 %0d", a1); end
      if (rd2_data !== ((a2 % 2) ? model[a2/2][63:32] : model[a2/2][31:0])) begin
        failures++; if (failures < 5) $display("rd2 %0d", a2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
