// Testbench for pingpong_buffer: a producer fills banks with random words at
// random pace and a consumer drains them at random pace; every word read must
// be the word written for that bank, in bank order, and the free/full flags
// must block a third fill while both banks are full.
module tb_pingpong_buffer;
  localparam int W = 64, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_commit = 0, wr_free, rd_full, rd_release = 0;
  logic [2:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] banks [$];    // expected words, DEPTH per bank
  int both_full = 0;

  pingpong_buffer #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && !wr_free && rd_full && banks.size() == 2*DEPTH) both_full++;

  initial begin : producer
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      @(negedge clk);
      while (!wr_free) @(negedge clk);
      for (int i = 0; i < DEPTH; i++) begin
        logic [W-1:0] v;
        v = {$urandom, $urandom};
        wr_en = 1; wr_addr = 3'(i); wr_data = v;
        banks.push_back(v);
        @(negedge clk);
        wr_en = 0;
        if ($urandom % 2) @(negedge clk);
      end
      wr_commit = 1;
      @(negedge clk);
      wr_commit = 0;
    end
  end

  initial begin : consumer
    repeat (3) @(posedge clk);
    for (int b = 0; b < 40; b++) begin
      @(negedge clk);
      while (!rd_full) @(negedge clk);
      if (b < 20) repeat (30) @(negedge clk);    // slow consumer first: producer must wait
      for (int i = 0; i < DEPTH; i++) begin
        logic [W-1:0] e;
        rd_addr = 3'(DEPTH - 1 - i);
        @(negedge clk);
        e = banks[DEPTH - 1 - i];
        checks++;
        if (rd_data !== e) begin
          failures++;
          if (failures < 5) $display("bank %0d word %0d got %h want %h", b, DEPTH-1-i, rd_data, e);
        end
      end
      for (int i = 0; i < DEPTH; i++) void'(banks.pop_front());
      rd_release = 1;
      @(negedge clk);
      rd_release = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (both_full == 0) begin failures++; $display("both banks never full"); end
    checks++;
    if (rd_full || !wr_free) begin failures++; $display("flags wrong at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
