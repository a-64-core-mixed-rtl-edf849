// tb_input_modulator: small modulator (N=6, TPWM=8, PRECHARGE=4,
// VERIFY_W=8).  Every cycle of every operation is compared with a model of
// the published switch settings: 1-phase, 4-phase (phase order, neg_phase),
// and verify reads of both polarities (precharge, pulse).  Also checks the
// start-to-done latency and the number of integrating cycles.
module tb_input_modulator;
  import hermes_pkg::*;
  localparam int N = 6, TPWM = 8, PRE = 4, VW = 8;
  logic clk = 0, rst_n = 0, start = 0, verify_pol = 0;
  mod_mode_t mode;
  logic signed [7:0] x [N];
  sl_t sl_p [N], sl_n [N];
  logic integrate, neg_phase, busy, done;
  int checks = 0, failures = 0;

  input_modulator #(.N(N), .TPWM(TPWM), .VERIFY_W(VW), .PRECHARGE(PRE)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input mod_mode_t md, input logic vp);
    int len, t, nint;
    logic signed [7:0] xv [N];
    len = (md == MOD_1PH) ? TPWM : (md == MOD_4PH) ? 4 * TPWM : PRE + VW;
    for (int i = 0; i < N; i++) xv[i] = x[i];
    mode = md; verify_pol = vp; start = 1; @(posedge clk); #1 start = 0;
    nint = 0;
    for (t = 0; t < len; t++) begin
      for (int i = 0; i < N; i++) begin
        sl_t ep, en;
        int mag, ph, tin;
        logic on, intg;
        mag = xv[i] < 0 ? -xv[i] : xv[i];
        ph = (md == MOD_4PH) ? t / TPWM : 0;
        tin = (md == MOD_4PH) ? t % TPWM : t;
        on = tin < mag;
        ep = SL_HIZ; en = SL_HIZ;
        intg = (md != MOD_VERIFY) || t >= PRE;
        if (md == MOD_1PH && on) begin
          ep = xv[i] > 0 ? SL_VNEG : SL_VPOS; en = xv[i] > 0 ? SL_VPOS : SL_VNEG;
        end
        if (md == MOD_4PH && on) begin
          if (ph == 0 && xv[i] > 0) ep = SL_VNEG;
          if (ph == 1 && xv[i] > 0) en = SL_VNEG;
          if (ph == 2 && xv[i] < 0) ep = SL_VNEG;
          if (ph == 3 && xv[i] < 0) en = SL_VNEG;
        end
        if (md == MOD_VERIFY && intg) begin
          if (vp) en = SL_VNEG; else ep = SL_VNEG;
        end
        checks++;
        if (sl_p[i] != ep || sl_n[i] != en || integrate != intg ||
            neg_phase != (md == MOD_4PH && (ph == 1 || ph == 2))) begin
          failures++;
          $display("FAIL md=%0d t=%0d i=%0d x=%0d sl %0d/%0d exp %0d/%0d", md, t, i, xv[i], sl_p[i], sl_n[i], ep, en);
        end
      end
      if (integrate) nint++;
      checks++; if (done) begin failures++; $display("FAIL early done"); end
      @(posedge clk); #1;
    end
    checks++; if (!done || busy) begin failures++; $display("FAIL done timing md=%0d", md); end
    checks++; if (nint != ((md == MOD_VERIFY) ? VW : len)) begin failures++; $display("FAIL integrate cycles %0d", nint); end
    @(posedge clk); #1;
    checks++; if (integrate || done) begin failures++; $display("FAIL idle"); end
  endtask

  initial begin
    mode = MOD_1PH;
    for (int i = 0; i < N; i++) x[i] = 0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int k = 0; k < 12; k++) begin
      for (int i = 0; i < N; i++) x[i] = 8'($urandom_range(0, 2 * TPWM) - TPWM);
      x[0] = TPWM; x[1] = -TPWM; x[2] = 0;
      run(mod_mode_t'(k % 3), k[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
