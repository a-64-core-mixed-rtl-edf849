// tb_pcm_crossbar: 8x8 behavioural array.  Read: random conductances are
// preloaded, random SL potentials and select lines are applied, and every
// row current is compared with the unit-cell equation (V- adds, V+
// subtracts, SEL1/SEL2 on diagonal (n - m) mod N).  Programming: on one
// diagonal, a RESET pulse must give 0, a SET pulse with trailing edge a
// value in the SET range, and square pulses of rising current decreasing
// conductances; devices off the diagonal must not change.
module tb_pcm_crossbar;
  import hermes_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, rd_en = 0, rd_neg = 0;
  sl_t sl_p [N], sl_n [N];
  logic [N-1:0] sel1 = 0, sel2 = 0;
  logic [7:0] prog_i [2][N];
  logic signed [31:0] i_row [N];
  logic i_valid, i_neg;
  int checks = 0, failures = 0;

  pcm_crossbar #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int sv(input sl_t s);
    return s == SL_VNEG ? 1 : s == SL_VPOS ? -1 : 0;
  endfunction

  // drive one pulse on SL+ of column n: 'len' cycles at 'amp', then 'trail'
  // cycles of linear ramp down
  task automatic pulse(input int n, input int amp, input int len, input int trail);
    for (int t = 0; t < len; t++) begin prog_i[0][n] = 8'(amp); @(posedge clk); #1; end
    for (int t = 0; t < trail; t++) begin prog_i[0][n] = 8'(amp - (amp * (t + 1)) / (trail + 1)); @(posedge clk); #1; end
    prog_i[0][n] = 0; @(posedge clk); #1; @(posedge clk); #1;
  endtask

  initial begin
    for (int p = 0; p < 2; p++) for (int n = 0; n < N; n++) begin prog_i[p][n] = 0; sl_p[n] = SL_HIZ; sl_n[n] = SL_HIZ; end
    #22 rst_n = 1; @(posedge clk); #1;
    for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
      for (int m = 0; m < N; m++) for (int n = 0; n < N; n++) dut.g[p][d][m][n] = 8'($urandom_range(0, 200));
    for (int k = 0; k < 100; k++) begin
      int exp_i [N];
      for (int n = 0; n < N; n++) begin sl_p[n] = sl_t'($urandom_range(0, 2)); sl_n[n] = sl_t'($urandom_range(0, 2)); end
      sel1 = N'($urandom); sel2 = N'($urandom);
      if (k % 4 == 0) begin sel1 = '1; sel2 = '1; end
      rd_en = 1; rd_neg = k[0];
      for (int m = 0; m < N; m++) begin
        exp_i[m] = 0;
        for (int n = 0; n < N; n++) begin
          int d;
          d = (n - m + N) % N;
          if (sel1[d]) exp_i[m] += sv(sl_p[n]) * dut.g[0][0][m][n] + sv(sl_n[n]) * dut.g[1][0][m][n];
          if (sel2[d]) exp_i[m] += sv(sl_p[n]) * dut.g[0][1][m][n] + sv(sl_n[n]) * dut.g[1][1][m][n];
        end
      end
      @(posedge clk); #1;
      rd_en = 0;
      checks++;
      if (!i_valid || i_neg != k[0]) begin failures++; $display("FAIL valid/neg"); end
      for (int m = 0; m < N; m++) begin
        checks++;
        if (i_row[m] != exp_i[m]) begin failures++; $display("FAIL row %0d got %0d exp %0d", m, i_row[m], exp_i[m]); end
      end
    end
    // programming on diagonal 3, device 1: column 5 -> row 2
    for (int n = 0; n < N; n++) begin sl_p[n] = SL_HIZ; sl_n[n] = SL_HIZ; end
    sel1 = N'(1) << 3; sel2 = 0; @(posedge clk); #1;
    begin
      int g_other, g_set, g_prev;
      g_other = dut.g[0][0][3][5];
      pulse(5, 224, 125, 0);
      checks++; if (dut.g[0][0][2][5] != 0) begin failures++; $display("FAIL reset -> %0d", dut.g[0][0][2][5]); end
      pulse(5, 40, 200, 50);
      g_set = dut.g[0][0][2][5];
      checks++; if (g_set < 70 || g_set > 130) begin failures++; $display("FAIL set -> %0d", g_set); end
      g_prev = 255;
      for (int a = 60; a <= 200; a += 35) begin
        pulse(5, 224, 125, 0);
        pulse(5, 40, 200, 50);
        pulse(5, a, 125, 0);
        checks++;
        if (dut.g[0][0][2][5] > g_prev + 2 || dut.g[0][0][2][5] > g_set) begin
          failures++; $display("FAIL prog amp %0d -> %0d (prev %0d)", a, dut.g[0][0][2][5], g_prev);
        end
        g_prev = dut.g[0][0][2][5];
      end
      checks++; if (g_prev > g_set / 3) begin failures++; $display("FAIL no decrease %0d", g_prev); end
      checks++; if (dut.g[0][0][3][5] != g_other) begin failures++; $display("FAIL off-diagonal device changed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
