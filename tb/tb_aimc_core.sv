// tb_aimc_core: one core at N=16, TPWM=8, VERIFY_W=16, PRECHARGE=4,
// CHARGE_PER_COUNT=16 (so a verify read returns a device's conductance).
//   * MVM: random conductances are preloaded into the crossbar, random INT8
//     inputs written; for 1-phase and 4-phase the testbench integrates the
//     row currents cycle by cycle with its own model of the modulation,
//     truncates to counts, forms P - N and scales by 1/8; every INT8
//     result is compared.  Results are also routed to TX port 1, behind a
//     preamble.
//   * latency: 4-phase takes exactly 3*TPWM cycles more than 1-phase.
//   * back-to-back MVMs: the second command is accepted while the LDPU still
//     drains the first vector.
//   * programming: the targets of diagonal 3 are written and the program
//     command is issued; afterwards every cell on the diagonal must hold its
//     target within the 5-count margin (read from the crossbar), and an MVM
//     must read them back.
module tb_aimc_core;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 16, TP = 8, VW = 16, PC = 4, CPC = 16;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  link_t tx [6];
  link_t rx [7];
  logic out_valid, out_last, mvm_done, prog_done, busy;
  logic signed [7:0] out_data;
  logic [31:0] stalls;
  logic [15:0] drops;
  logic [5:0] piter;
  logic [4:0] pconv;
  int checks = 0, failures = 0, cyc = 0;
  int exp_q [$];
  int tx_bytes [$];
  logic signed [7:0] xv [N];

  aimc_core #(.N(N), .TPWM(TP), .VERIFY_W(VW), .PRECHARGE(PC), .CHARGE_PER_COUNT(CPC)) dut (
    .clk, .rst_n, .cfg, .tx, .rx, .out_valid, .out_data, .out_last, .mvm_done, .prog_done,
    .busy, .ldpu_stall_cycles(stalls), .link_drops(drops), .prog_iterations(piter),
    .prog_converged(pconv));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (out_data != 8'(e)) begin failures++; $display("FAIL y got %0d exp %0d", out_data, e); end
    end
    if (tx[1].valid) tx_bytes.push_back(tx[1].sop ? 1000 + int'(tx[1].data) : int'($signed(tx[1].data)));
  end

  task automatic wr(input logic [15:0] a, input int d);
    cfg = '{we: 1'b1, addr: a, data: 16'(d)}; @(posedge clk); #1 cfg = '0;
  endtask

  function automatic int gcell(input int p, input int m, input int n);
    return int'(dut.u_xbar.g[p][0][m][n]) + int'(dut.u_xbar.g[p][1][m][n]);
  endfunction

  // expected outputs for the current conductances and inputs
  task automatic predict(input logic fourph);
    for (int m = 0; m < N; m++) begin
      longint qp, qn;
      int y;
      qp = 0; qn = 0;
      for (int ph = 0; ph < (fourph ? 4 : 1); ph++)
        for (int t = 0; t < TP; t++) begin
          longint cur;
          cur = 0;
          for (int n = 0; n < N; n++) begin
            int mag;
            mag = xv[n] < 0 ? -xv[n] : xv[n];
            if (t < mag) begin
              if (!fourph) cur += (xv[n] > 0 ? 1 : -1) * (gcell(0, m, n) - gcell(1, m, n));
              else begin
                if (ph == 0 && xv[n] > 0) cur += gcell(0, m, n);
                if (ph == 1 && xv[n] > 0) cur += gcell(1, m, n);
                if (ph == 2 && xv[n] < 0) cur += gcell(0, m, n);
                if (ph == 3 && xv[n] < 0) cur += gcell(1, m, n);
              end
            end
          end
          if (fourph) begin if (ph == 1 || ph == 2) qn += cur; else qp += cur; end
          else if (cur >= 0) qp += cur; else qn -= cur;
        end
      y = int'(qp / CPC) - int'(qn / CPC);
      exp_q.push_back(f2i_ref(r2h(real'(y) / 8.0)));
    end
  endtask

  task automatic mvm(input logic fourph, output int lat);
    int t0;
    for (int n = 0; n < N; n++) begin xv[n] = 8'($urandom_range(0, 2 * TP) - TP); wr(A_INPUT + 16'(n), xv[n]); end
    predict(fourph);
    t0 = cyc;
    wr(A_CMD, {fourph, 1'b1});
    while (!mvm_done) @(posedge clk);
    lat = cyc - t0;
    #1;
  endtask

  initial begin
    int l1, l4;
    cfg = '0;
    for (int k = 0; k < 7; k++) rx[k] = '0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
      for (int m = 0; m < N; m++) for (int n = 0; n < N; n++) dut.u_xbar.g[p][d][m][n] = 8'($urandom_range(0, 40));
    for (int c = 0; c < N; c++) wr(A_SCALE + 16'(c), 16'h3000);   // 1/8
    wr(A_LINK + 16'(L_TX_PRE), 'hA5); wr(A_LINK + 16'(L_TX_ROUTE + 1), 1);
    mvm(0, l1);
    wait (exp_q.size() == 0); repeat (4) @(posedge clk); #1;
    mvm(1, l4);
    wait (exp_q.size() == 0); repeat (4) @(posedge clk); #1;
    checks++;
    if (l4 - l1 != 3 * TP) begin failures++; $display("FAIL latency 1ph %0d 4ph %0d", l1, l4); end
    $display("latency: 1-phase %0d, 4-phase %0d cycles", l1, l4);
    // link output: preamble + N bytes per vector, equal to the outputs
    checks++;
    if (tx_bytes.size() != 2 * (N + 1) || tx_bytes[0] != 1000 + 'hA5 || tx_bytes[N + 1] != 1000 + 'hA5) begin
      failures++; $display("FAIL tx stream %0d bytes", tx_bytes.size());
    end
    // back to back: the second MVM starts while the first one drains
    begin
      int la, lb;
      mvm(0, la);
      mvm(1, lb);
      wait (exp_q.size() == 0); repeat (4) @(posedge clk); #1;
    end
    // programming diagonal 3
    for (int m = 0; m < N; m++) wr(A_TARGET + 16'(m), (m % 5 == 0) ? 0 : $urandom_range(0, 120) - 60);
    wr(A_CMD, 16'h0308);
    while (!prog_done) @(posedge clk);
    #1;
    $display("programming: %0d iterations, %0d cells converged", piter, pconv);
    for (int m = 0; m < N; m++) begin
      int n, tg, gp, gn, gm;
      n = (m + 3) % N;
      tg = int'($signed(dut.tgt[m]));
      gp = gcell(0, m, n); gn = gcell(1, m, n);
      gm = tg < 0 ? gn : gp;
      checks++;
      if ((tg < 0 ? -tg : tg) - gm >= 5 || gm - (tg < 0 ? -tg : tg) >= 5 || (tg < 0 ? gp : gn) != 0) begin
        failures++; $display("FAIL row %0d target %0d got +%0d -%0d", m, tg, gp, gn);
      end
    end
    checks++; if (piter > 30) begin failures++; $display("FAIL iterations"); end
    // MVM after programming uses the programmed cells
    begin int l; mvm(0, l); wait (exp_q.size() == 0); repeat (4) @(posedge clk); #1; end
    checks++; if (busy) begin failures++; $display("FAIL busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
