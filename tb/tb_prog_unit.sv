// tb_prog_unit: 32-line unit (4 IDACs of 8 SLs).  For RESET, SET and
// iterative pulses on random diagonals and cell masks it records every SL's
// current waveform and checks: only SLs of the chosen polarity whose cell on
// the diagonal is enabled get a pulse; each gets exactly one pulse of the
// programmed width and amplitude (per-cell amplitude for iterative pulses,
// a falling trailing edge for SET); at most one SL per IDAC is driven at a
// time; the command takes 8 x (width + 1) cycles.
module tb_prog_unit;
  import hermes_pkg::*;
  localparam int N = 32, K = 8;
  logic clk = 0, rst_n = 0, start = 0, pol = 0, dev = 0;
  cfg_t cfg;
  pulse_t ptype;
  logic [4:0] diag = 0;
  logic [N-1:0] en_row = 0;
  logic [7:0] amp_row [N];
  logic [7:0] prog_i [2][N];
  logic [1:0] sel_dev;
  logic busy, done;
  int checks = 0, failures = 0;

  prog_unit #(.N(N), .SL_PER_IDAC(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input int off, input int d);
    cfg = '{we: 1'b1, addr: A_PROG + 16'(off), data: 16'(d)}; @(posedge clk); #1 cfg = '0;
  endtask

  task automatic run(input pulse_t pt, input int w, input int amp, input int trail);
    int len [2][N], pk [2][N], npulse [2][N], falls [2][N];
    int prev [2][N];
    int cyc;
    logic [7:0] ampc [N];
    for (int p = 0; p < 2; p++) for (int n = 0; n < N; n++) begin
      len[p][n] = 0; pk[p][n] = 0; npulse[p][n] = 0; falls[p][n] = 0; prev[p][n] = 0;
    end
    for (int m = 0; m < N; m++) begin amp_row[m] = 8'($urandom_range(40, 224)); ampc[m] = amp_row[m]; end
    en_row = N'({$urandom, $urandom}); diag = 5'($urandom); pol = $urandom_range(0, 1); dev = $urandom_range(0, 1);
    ptype = pt; start = 1; @(posedge clk); #1 start = 0;
    cyc = 0;
    while (busy) begin
      int on_per_idac [N / K];
      for (int i = 0; i < N / K; i++) on_per_idac[i] = 0;
      checks++;
      if (sel_dev != (dev ? 2'b10 : 2'b01)) begin failures++; $display("FAIL sel_dev"); end
      for (int p = 0; p < 2; p++) for (int n = 0; n < N; n++) begin
        int a;
        a = prog_i[p][n];
        if (a != 0) begin
          len[p][n]++; on_per_idac[n / K]++;
          if (a > pk[p][n]) pk[p][n] = a;
          if (prev[p][n] == 0) npulse[p][n]++;
          if (prev[p][n] != 0 && a < prev[p][n]) falls[p][n]++;
        end
        prev[p][n] = a;
      end
      for (int i = 0; i < N / K; i++) begin
        checks++; if (on_per_idac[i] > 1) begin failures++; $display("FAIL IDAC %0d drives %0d SLs", i, on_per_idac[i]); end
      end
      cyc++;
      @(posedge clk); #1;
    end
    checks++; if (cyc != K * (w + 1)) begin failures++; $display("FAIL duration %0d exp %0d", cyc, K * (w + 1)); end
    for (int p = 0; p < 2; p++) for (int n = 0; n < N; n++) begin
      int m;
      logic want;
      m = (n - int'(diag) + N) % N;
      want = (p == int'(pol)) && en_row[m];
      checks++;
      if (!want) begin
        if (npulse[p][n] != 0) begin failures++; $display("FAIL stray pulse p%0d n%0d", p, n); end
      end else if (npulse[p][n] != 1 || len[p][n] != w ||
                   pk[p][n] != ((pt == PULSE_PROG) ? int'(ampc[m]) : amp) ||
                   (pt == PULSE_SET && falls[p][n] < trail / 2) || (pt != PULSE_SET && falls[p][n] != 0)) begin
        failures++;
        $display("FAIL pt=%0d p%0d n%0d pulses %0d len %0d peak %0d falls %0d", pt, p, n, npulse[p][n], len[p][n], pk[p][n], falls[p][n]);
      end
    end
  endtask

  initial begin
    cfg = '0; ptype = PULSE_RESET;
    for (int m = 0; m < N; m++) amp_row[m] = 0;
    #22 rst_n = 1; @(posedge clk); #1;
    // defaults: RESET 125 cycles at 224, SET 250 cycles at 40 with 50-cycle edge
    run(PULSE_RESET, 125, 224, 0);
    run(PULSE_SET, 250, 40, 50);
    run(PULSE_PROG, 125, 0, 0);
    wr(P_RESET_W, 20); wr(P_RESET_AMP, 200); wr(P_SET_W, 30); wr(P_SET_TRAIL, 10);
    wr(P_SET_AMP, 60); wr(P_PROG_W, 12);
    for (int k = 0; k < 6; k++) begin
      run(PULSE_RESET, 20, 200, 0);
      run(PULSE_SET, 30, 60, 10);
      run(PULSE_PROG, 12, 0, 0);
    end
    checks++; if (sel_dev != 0) begin failures++; $display("FAIL sel_dev idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
