// tb_hermes_chip_full: the chip at its real size (8 x 8 cores of 256 x 256,
// TPWM = 128, 512-cycle verify, CHARGE_PER_COUNT = 512), every parameter
// at its default.  Conductances of cores 0 and 1 are preloaded; core 1
// computes a 256-element MVM in 1-phase mode and sends it over its
// horizontal link to core 0, which computes its own MVM in 4-phase mode and
// adds the received vector.  All 512 INT8 results are compared with a
// testbench model of modulation, ADC counting (including the 4095-count
// ceiling) and the FP16 post-processing; the MVM latencies are checked
// against TPWM and 4 x TPWM.
module tb_hermes_chip_full;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 256, TP = 128, CPC = 512, NC = 64;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [6:0] cfg_sel;
  logic in_valid = 0, in_sop = 0, in_full;
  logic [7:0] in_data = 0;
  logic              core_out_valid [NC];
  logic signed [7:0] core_out_data  [NC];
  logic              core_out_last  [NC];
  logic              core_mvm_done  [NC];
  logic              core_prog_done [NC];
  logic              core_busy      [NC];
  logic [31:0]       core_stalls    [NC];
  logic [15:0]       core_link_drops[NC];
  logic [5:0]        core_prog_iter [NC];
  logic [8:0]        core_prog_conv [NC];
  logic              gdpu_out_valid [8];
  logic signed [7:0] gdpu_out_data  [8];
  logic [5:0]        gdpu_out_idx   [8];

  hermes_chip dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  logic [7:0] gw [2][2][2][N][N];      // [core][pol][dev][row][col]
  logic signed [7:0] xv [2][N];
  int ylast [2][N];
  int expq [2][$];
  int t_start [2], t_done [2];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) begin
      if (core_out_valid[i]) begin
        int e;
        checks++;
        if (expq[i].size() == 0) begin failures++; $display("FAIL core %0d unexpected output", i); end
        else begin
          e = expq[i].pop_front();
          if (core_out_data[i] != 8'(e)) begin failures++; $display("FAIL core %0d got %0d exp %0d", i, core_out_data[i], e); end
        end
      end
      if (core_mvm_done[i]) t_done[i] = cyc;
    end
  end

  task automatic wr(input int sel, input int a, input int d);
    cfg = '{we: 1'b1, addr: 16'(a), data: 16'(d)}; cfg_sel = 7'(sel); @(posedge clk); #1 cfg = '0;
  endtask

  function automatic int gcell(input int i, input int p, input int m, input int n);
    return int'(gw[i][p][0][m][n]) + int'(gw[i][p][1][m][n]);
  endfunction

  task automatic model(input int i, input logic fourph);
    for (int m = 0; m < N; m++) begin
      longint qp, qn, cp, cn;
      qp = 0; qn = 0;
      for (int ph = 0; ph < (fourph ? 4 : 1); ph++)
        for (int t = 0; t < TP; t++) begin
          longint cur;
          cur = 0;
          for (int n = 0; n < N; n++) begin
            int x, mag;
            x = xv[i][n];
            mag = x < 0 ? -x : x;
            if (t < mag) begin
              if (!fourph) cur += (x > 0 ? 1 : -1) * (gcell(i, 0, m, n) - gcell(i, 1, m, n));
              else begin
                if (ph == 0 && x > 0) cur += gcell(i, 0, m, n);
                if (ph == 1 && x > 0) cur += gcell(i, 1, m, n);
                if (ph == 2 && x < 0) cur += gcell(i, 0, m, n);
                if (ph == 3 && x < 0) cur += gcell(i, 1, m, n);
              end
            end
          end
          if (fourph) begin if (ph == 1 || ph == 2) qn += cur; else qp += cur; end
          else if (cur >= 0) qp += cur; else qn -= cur;
        end
      cp = qp / CPC; cn = qn / CPC;
      if (cp > 4095) cp = 4095;
      if (cn > 4095) cn = 4095;
      ylast[i][m] = int'(cp) - int'(cn);
    end
  endtask

  initial begin
    int l0, l1;
    cfg = '0; cfg_sel = 0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 2; i++) for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
      for (int m = 0; m < N; m++) for (int n = 0; n < N; n++) gw[i][p][d][m][n] = 8'($urandom_range(0, 60));
    for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
      for (int m = 0; m < N; m++) for (int n = 0; n < N; n++) begin
        dut.g_core[0].u_core.u_xbar.g[p][d][m][n] = gw[0][p][d][m][n];
        dut.g_core[1].u_core.u_xbar.g[p][d][m][n] = gw[1][p][d][m][n];
      end
    for (int i = 0; i < 2; i++) begin
      for (int n = 0; n < N; n++) begin
        xv[i][n] = 8'($urandom_range(0, 255));
        wr(i, A_INPUT + n, xv[i][n]);
      end
      for (int c = 0; c < N; c++) wr(i, A_SCALE + c, 16'h2400);   // 1/64
    end
    wr(0, A_ACTCTL + 1, 'b100); wr(0, A_LINK + L_LDPU_PRE, 'h31); wr(0, A_LINK + L_LDPU_EN, 1 << 3);
    wr(1, A_LINK + L_TX_PRE, 'h31); wr(1, A_LINK + L_TX_ROUTE + 3, 1);
    model(0, 1); model(1, 0);
    for (int m = 0; m < N; m++) begin
      int r;
      r = f2i_ref(r2h(real'(ylast[1][m]) / 64.0));
      expq[1].push_back(r);
      expq[0].push_back(f2i_ref(fma_ref(fp16_from_int(16'(r)), FP16_ONE, r2h(real'(ylast[0][m]) / 64.0))));
    end
    t_start[0] = cyc; wr(0, A_CMD, 'b11);
    t_start[1] = cyc; wr(1, A_CMD, 'b01);
    while (expq[0].size() != 0 || expq[1].size() != 0) @(posedge clk);
    repeat (10) @(posedge clk); #1;
    l0 = t_done[0] - t_start[0]; l1 = t_done[1] - t_start[1];
    $display("MVM latency: core 0 (4-phase) %0d cycles, core 1 (1-phase) %0d cycles", l0, l1);
    checks++; if (l1 < TP || l1 > TP + 12) begin failures++; $display("FAIL 1-phase latency"); end
    checks++; if (l0 - l1 != 3 * TP) begin failures++; $display("FAIL 4-phase latency"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
