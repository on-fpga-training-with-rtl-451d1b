// Testbench for scale_monitor: windows of random results whose mean magnitude
// is drawn below, inside and above [0.1, 0.3] of full scale, in forward and
// backward mode; after each eval the shift must have moved down, stayed or
// moved up as a software mean says, and the saturation at shift 0 is checked.
module tb_scale_monitor;
  import tt_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, init = 0, fwd = 0, in_valid = 0, eval = 0;
  logic [SHIFT_W-1:0] init_shift = 0, shift;
  act_t in_data [L];
  logic too_big, too_small;
  int checks = 0, failures = 0;
  int n_up = 0, n_down = 0, n_hold = 0;

  scale_monitor #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < L; i++) in_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1; init_shift = 5'd8; @(negedge clk); init = 0;
    for (int w = 0; w < 300; w++) begin
      int fs, maxmag, n, beats;
      longint sum;
      int exp_shift;
      bit f;
      f = $urandom % 2;
      fwd = f;
      fs = f ? 128 : 32768;
      // choose a magnitude range so the mean lands anywhere in [0, 0.6] FS
      maxmag = 1 + ($urandom % (fs * 6 / 5));
      if (maxmag >= fs) maxmag = fs - 1;
      sum = 0; n = 0;
      beats = 1 + $urandom % 20;
      for (int b = 0; b < beats; b++) begin
        for (int i = 0; i < L; i++) begin
          int v;
          v = $urandom % (maxmag + 1);
          if ($urandom % 2) v = -v;
          in_data[i] = act_t'(v);
          sum += (v < 0) ? -v : v;
          n++;
        end
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        if ($urandom % 2) @(negedge clk);
      end
      exp_shift = int'(shift);
      if (sum * 10 > longint'(3) * n * fs)      begin if (exp_shift < 31) exp_shift++; n_up++; end
      else if (sum * 10 < longint'(n) * fs)     begin if (exp_shift > 0) exp_shift--; n_down++; end
      else n_hold++;
      eval = 1;
      @(negedge clk);
      eval = 0;
      checks++;
      if (int'(shift) != exp_shift) begin
        failures++;
        if (failures < 5) $display("window %0d: shift %0d want %0d (sum %0d n %0d fs %0d)", w, shift, exp_shift, sum, n, fs);
      end
    end
    checks++;
    if (n_up == 0 || n_down == 0 || n_hold == 0) begin failures++; $display("up %0d down %0d hold %0d", n_up, n_down, n_hold); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
