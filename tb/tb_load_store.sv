// Testbench for load_store with a behavioural DRAM that stalls at random.
// Load: random strided commands (words, beats per word, two strides) fill an
// input ping-pong buffer; every assembled word is read back and compared with
// the DRAM contents at base + w*wstride + p*pstride. Store: words written into
// an output ping-pong buffer are stored by random strided commands and the DRAM
// is compared afterwards. Read and write stalls must both occur.
module tb_load_store;
  import tt_pkg::*;
  localparam int P = 4, DEP = 16, WORDS = 4096;
  logic clk = 0, rst_n = 0;
  logic ld_start = 0, st_start = 0, ld_busy, st_busy;
  xfer_t ld_cmd = '0, st_cmd = '0;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  beat_t rd_data, wr_data;
  logic ib_wr_en, ib_wr_commit, ib_wr_free, ib_rd_full, ib_rd_release = 0;
  logic [3:0] ib_wr_addr, ib_rd_addr = 0;
  logic [P*BEAT_W-1:0] ib_wr_data, ib_rd_data;
  logic ob_wr_en = 0, ob_wr_commit = 0, ob_wr_free, ob_rd_full, ob_rd_release;
  logic [1:0] ob_wr_addr = 0, ob_rd_addr;
  logic [P*BEAT_W-1:0] ob_wr_data = '0, ob_rd_data;
  logic bd_we = 0; logic [ADDR_W-1:0] bd_addr = 0; beat_t bd_data = '0;
  int rd_stalls, wr_stalls;
  int checks = 0, failures = 0;
  beat_t ref_mem [WORDS];

  load_store #(.LD_P(P), .ST_P(P), .IN_DEPTH(DEP), .OUT_DEPTH(4)) dut (.*);
  pingpong_buffer #(.WIDTH(P*BEAT_W), .DEPTH(DEP)) u_ib (.clk, .rst_n,
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .wr_commit(ib_wr_commit),
    .wr_free(ib_wr_free), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data), .rd_full(ib_rd_full),
    .rd_release(ib_rd_release));
  pingpong_buffer #(.WIDTH(P*BEAT_W), .DEPTH(4)) u_ob (.clk, .rst_n,
    .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data), .wr_commit(ob_wr_commit),
    .wr_free(ob_wr_free), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data), .rd_full(ob_rd_full),
    .rd_release(ob_rd_release));
  dram_model #(.WORDS(WORDS)) u_dram (.clk, .rst_n, .rd_req, .rd_addr, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready, .bd_we, .bd_addr, .bd_data, .rd_stalls, .wr_stalls);
  always #5 clk = ~clk;

  function automatic beat_t rnd_beat();
    beat_t b;
    for (int i = 0; i < BEAT_W/32; i++) b[i*32 +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      ref_mem[i] = rnd_beat();
      bd_we = 1; bd_addr = i; bd_data = ref_mem[i];
    end
    @(negedge clk); bd_we = 0;
    // ---- loads ----
    for (int k = 0; k < 20; k++) begin
      xfer_t cmd;
      cmd.base = $urandom % 1024; cmd.words = 16'(1 + $urandom % DEP);
      cmd.beats = 4'(1 + $urandom % P); cmd.wstride = 1 + $urandom % 8; cmd.pstride = $urandom % 64;
      ld_cmd = cmd; ld_start = 1; @(negedge clk); ld_start = 0;
      while (!ib_rd_full) @(negedge clk);
      for (int w = 0; w < int'(cmd.words); w++) begin
        ib_rd_addr = 4'(w); @(negedge clk);
        for (int p = 0; p < int'(cmd.beats); p++) begin
          checks++;
          if (ib_rd_data[p*BEAT_W +: BEAT_W] !== ref_mem[cmd.base + w*cmd.wstride + p*cmd.pstride]) begin
            failures++; if (failures < 5) $display("load %0d word %0d beat %0d wrong", k, w, p);
          end
        end
      end
      ib_rd_release = 1; @(negedge clk); ib_rd_release = 0;
      while (ld_busy) @(negedge clk);
    end
    // ---- stores ----
    for (int k = 0; k < 20; k++) begin
      xfer_t cmd;
      logic [P*BEAT_W-1:0] wd [4];
      cmd.base = 2048 + $urandom % 1024; cmd.words = 16'(1 + $urandom % 4);
      cmd.beats = 4'(1 + $urandom % P); cmd.wstride = 1 + $urandom % 8; cmd.pstride = 8 + $urandom % 16;
      while (!ob_wr_free) @(negedge clk);
      for (int w = 0; w < 4; w++) begin
        for (int p = 0; p < P; p++) wd[w][p*BEAT_W +: BEAT_W] = rnd_beat();
        ob_wr_en = 1; ob_wr_addr = 2'(w); ob_wr_data = wd[w]; @(negedge clk);
      end
      ob_wr_en = 0; ob_wr_commit = 1; @(negedge clk); ob_wr_commit = 0;
      st_cmd = cmd; st_start = 1; @(negedge clk); st_start = 0;
      @(negedge clk);
      while (st_busy) @(negedge clk);
      for (int w = 0; w < int'(cmd.words); w++)
        for (int p = 0; p < int'(cmd.beats); p++) begin
          checks++;
          if (u_dram.mem[cmd.base + w*cmd.wstride + p*cmd.pstride] !== wd[w][p*BEAT_W +: BEAT_W]) begin
            // a later beat of this command may have overwritten an earlier one
            bit overwritten;
            overwritten = 0;
            for (int w2 = 0; w2 < int'(cmd.words); w2++)
              for (int p2 = 0; p2 < int'(cmd.beats); p2++)
                if ((w2*int'(cmd.beats) + p2 > w*int'(cmd.beats) + p) &&
                    (w2*cmd.wstride + p2*cmd.pstride == w*cmd.wstride + p*cmd.pstride)) overwritten = 1;
            if (!overwritten) begin failures++; if (failures < 5) $display("store %0d word %0d beat %0d wrong", k, w, p); end
          end
        end
    end
    checks++;
    if (rd_stalls == 0 || wr_stalls == 0) begin failures++; $display("no stalls seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
