// Testbench for pe3: outer product dW(j1,i1,...,jd,id) = X(i) * dY(j) with a
// behavioural DRAM that stalls at random. A first command writes the products;
// a second one, with accumulate set and a new X, adds to them. Every beat of
// the interleaved result is compared with a software model; the number of
// beats written must equal (prod J) * (prod I)/16 per command.
module tb_pe3;
  import tt_pkg::*;
  import tb_ref_pkg::*;
  localparam int WORDS = 8192;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pe3_cmd_t cmd = '0;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  beat_t rd_data, wr_data;
  logic res_valid;
  act_t res [C_LANES];
  logic bd_we = 0; logic [ADDR_W-1:0] bd_addr = 0; beat_t bd_data = '0;
  int rd_stalls, wr_stalls;
  int checks = 0, failures = 0, n_wr = 0;

  pe3 dut (.*);
  dram_model #(.WORDS(WORDS)) u_dram (.clk, .rst_n, .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready, .bd_we, .bd_addr, .bd_data, .rd_stalls, .wr_stalls);
  always #5 clk = ~clk;
  always @(posedge clk) if (wr_req && wr_ready) n_wr++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // dims, first core first: J = (1,2,3,16), I = (1,3,2,16) (last as 1 chunk)
  int J [4] = '{1, 2, 3, 16};
  int I [4] = '{1, 3, 2, 1};
  int nj, ni;
  int dy [int];
  int x [int];
  int model [int];   // beat address*16 + lane

  task automatic load_x(input int base);
    for (int ib = 0; ib < ni; ib++) begin
      beat_t bt;
      for (int l = 0; l < 16; l++) begin x[ib*16 + l] = rnd_s(8); bt[l*16 +: 16] = 16'(x[ib*16 + l]); end
      @(negedge clk); bd_we = 1; bd_addr = base + ib; bd_data = bt;
    end
    @(negedge clk); bd_we = 0;
  endtask

  task automatic run(input bit acc, input int sh);
    int n0;
    for (int k = 0; k < 4; k++) begin cmd.jdim[k] = 16'(J[k]); cmd.idim[k] = 16'(I[k]); end
    cmd.x_base = 100; cmd.dy_base = 50; cmd.w_base = 1000; cmd.accumulate = acc; cmd.shift = 5'(sh);
    n0 = n_wr;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (n_wr - n0 != nj * ni) begin failures++; $display("beats written %0d want %0d", n_wr - n0, nj*ni); end
    // model: interleaved digit order j1,i1,j2,i2,j3,i3,j4,ic
    for (int jl = 0; jl < nj; jl++) for (int ib = 0; ib < ni; ib++) begin
      int j [4]; int i [4]; int addr; int r;
      r = jl; for (int k = 3; k >= 0; k--) begin j[k] = r % J[k]; r = r / J[k]; end
      r = ib; for (int k = 3; k >= 0; k--) begin i[k] = r % I[k]; r = r / I[k]; end
      addr = 0;
      for (int k = 0; k < 4; k++) begin addr = addr * J[k] + j[k]; addr = addr * I[k] + i[k]; end
      for (int l = 0; l < 16; l++) begin
        int p, prev;
        p = ref_rq(longint'(x[ib*16 + l]) * longint'(dy[jl]), sh, 1'b0);
        prev = acc ? model[addr*16 + l] : 0;
        model[addr*16 + l] = ref_rq(longint'(p + prev), 0, 1'b0);
        checks++;
        if (int'($signed(u_dram.mem[1000 + addr][l*16 +: 16])) != model[addr*16 + l]) begin
          failures++;
          if (failures < 8) $display("dW beat %0d lane %0d got %0d want %0d", addr, l,
                                     $signed(u_dram.mem[1000 + addr][l*16 +: 16]), model[addr*16 + l]);
        end
      end
    end
  endtask

  initial begin
    nj = 1; ni = 1;
    for (int k = 0; k < 4; k++) begin nj *= J[k]; ni *= I[k]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < nj/16; b++) begin
      beat_t bt;
      for (int l = 0; l < 16; l++) begin dy[b*16 + l] = rnd_s(16); bt[l*16 +: 16] = 16'(dy[b*16 + l]); end
      @(negedge clk); bd_we = 1; bd_addr = 50 + b; bd_data = bt;
    end
    @(negedge clk); bd_we = 0;
    load_x(100);
    run(1'b0, 3);
    load_x(100);
    run(1'b1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
