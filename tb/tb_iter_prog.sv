// tb_iter_prog: the sequencer on 16 rows against a small device model kept
// in the testbench (each cell: 2 polarities x 2 devices; RESET gives 0,
// SET gives a per-device SET conductance of 60..100 counts, an iterative
// pulse of code a gives gset*(224-a)/184 plus -1..+1 noise).  Pulse
// commands and verify reads complete after a few cycles.
//   * one-device programming of random targets up to 50: every cell must end
//     within the 5-count margin, the unused device and polarity at 0;
//   * two-device programming of targets up to 150: cells above the larger
//     SET value need both devices and must converge as well; a cell above
//     g1 + g2 is given up;
//   * the iteration count never exceeds 30.
module tb_iter_prog;
  import hermes_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic signed [7:0] target [N];
  logic pg_start, pg_pol, pg_dev, pg_done = 0, rd_start, rd_pol, rd_done = 0, busy, done;
  pulse_t pg_type;
  logic [N-1:0] pg_en;
  logic [7:0] pg_amp [N];
  logic [1:0] rd_dev;
  logic [11:0] cnt [N];
  logic [5:0] iterations;
  logic [4:0] n_conv;
  int checks = 0, failures = 0;
  int g [2][2][N], gset [2][2][N];
  int n_pulses = 0, n_reads = 0;

  iter_prog #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // device model: commands and reads
  always @(posedge clk) begin
    pg_done <= 0; rd_done <= 0;
    if (pg_start) begin
      n_pulses++;
      for (int m = 0; m < N; m++) if (pg_en[m]) begin
        int v;
        case (pg_type)
          PULSE_RESET: v = 0;
          PULSE_SET:   v = gset[pg_pol][pg_dev][m];
          default: begin
            v = gset[pg_pol][pg_dev][m] * (224 - int'(pg_amp[m])) / 184 + $urandom_range(0, 2) - 1;
            if (v < 0) v = 0;
          end
        endcase
        g[pg_pol][pg_dev][m] = v;
      end
      repeat (3) @(posedge clk);
      pg_done <= 1;
    end
    if (rd_start) begin
      n_reads++;
      for (int m = 0; m < N; m++)
        cnt[m] <= 12'((rd_dev[0] ? g[rd_pol][0][m] : 0) + (rd_dev[1] ? g[rd_pol][1][m] : 0));
      repeat (2) @(posedge clk);
      rd_done <= 1;
    end
  end

  task automatic prog_diag(input int maxt, input logic tdp_mode);
    int tg [N];
    for (int m = 0; m < N; m++) begin
      for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++) begin
        gset[p][d][m] = $urandom_range(60, 100); g[p][d][m] = $urandom_range(0, 100);
      end
      tg[m] = $urandom_range(0, 2 * maxt) - maxt;
      if (m == 0) tg[m] = 0;
      target[m] = 8'(tg[m]);
    end
    if (tdp_mode) begin
      gset[0][0][1] = 55; gset[0][1][1] = 57;
      tg[1] = 120;                                     // cannot fit in 55 + 57
      tg[2] = -(gset[1][0][2] > gset[1][1][2] ? gset[1][0][2] : gset[1][1][2]) - 20;  // needs both
      target[1] = 8'(tg[1]); target[2] = 8'(tg[2]);
    end
    cfg = '{we: 1, addr: A_PROG + 16'(P_TDP), data: 16'(tdp_mode)}; @(posedge clk); #1 cfg = '0;
    start = 1; @(posedge clk); #1 start = 0;
    wait (done); @(posedge clk); #1;
    checks++; if (iterations > 30) begin failures++; $display("FAIL iterations %0d", iterations); end
    for (int m = 0; m < N; m++) begin
      int p, gm, other;
      p = tg[m] < 0;
      gm = g[p][0][m] + g[p][1][m];
      other = g[!p][0][m] + g[!p][1][m];
      checks++;
      if (tdp_mode && m == 1) begin
        if (gm != gset[0][0][1] + gset[0][1][1]) begin failures++; $display("FAIL unfit cell changed"); end
      end else if (gm - (tg[m] < 0 ? -tg[m] : tg[m]) >= 5 || (tg[m] < 0 ? -tg[m] : tg[m]) - gm >= 5 || other != 0) begin
        failures++; $display("FAIL tdp=%0d m=%0d target %0d got %0d other %0d", tdp_mode, m, tg[m], gm, other);
      end
      if (!tdp_mode && tg[m] != 0) begin
        checks++; if (g[p][1][m] != 0) begin failures++; $display("FAIL ODP used device 2"); end
      end
    end
    if (tdp_mode) begin
      checks++; if (g[1][0][2] == 0 || g[1][1][2] == 0) begin failures++; $display("FAIL TDP did not use both devices"); end
    end
    $display("tdp=%0d iterations=%0d converged=%0d", tdp_mode, iterations, n_conv);
  endtask

  initial begin
    cfg = '0;
    for (int m = 0; m < N; m++) begin target[m] = 0; cnt[m] = 0; end
    #22 rst_n = 1; @(posedge clk); #1;
    for (int k = 0; k < 4; k++) prog_diag(50, 0);
    for (int k = 0; k < 4; k++) prog_diag(120, 1);
    checks++; if (n_pulses == 0 || n_reads == 0) begin failures++; $display("FAIL no activity"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
