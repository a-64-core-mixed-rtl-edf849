// tb_hermes_chip: the whole chip at 4 x 4 cores and 4 GDPU slices, with
// small cores (N=16, TPWM=8, VERIFY_W=16, PRECHARGE=4, CHARGE_PER_COUNT=16).
// Conductances are preloaded into the crossbars used; every core output is
// compared with a testbench model (row currents integrated cycle by cycle,
// counts, P - N, scale 1/8, plus the link byte where the LDPU adds one).
// Scenarios, each counted as a mechanism that must happen:
//   combine  core 1 sends its result over a horizontal link to core 0,
//            whose LDPU adds it to its own result (partial-sum combining);
//   stall    core 0 starts first, so its LDPU waits for the link data;
//   4-phase  core 0 runs in 4-phase mode, core 1 in 1-phase mode;
//   hop      core 2 sends down to core 6, which forwards the packet
//            unchanged to core 10, which adds it to its result;
//   gdpu     core 4 (the row above the GDPUs) computes 16 gate values (4 LSTM elements) and sends
//            them to GDPU slice 0; the h outputs are checked over two
//            timesteps (cell state kept between them);
//   inbuf    a packet written into the input buffer is taken by core 13
//            and added to its result;
//   program  core 11 programs diagonal 2 with the iterative procedure;
//   drop     two packets for the LDPU of core 14 arrive in the same cycle
//            and one is dropped (counted by the link controller).
module tb_hermes_chip;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int R = 4, C = 4, N = 16, TP = 8, CPC = 16, NC = R * C;
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
  logic [4:0]        core_prog_conv [NC];
  logic              gdpu_out_valid [C];
  logic signed [7:0] gdpu_out_data  [C];
  logic [5:0]        gdpu_out_idx   [C];

  hermes_chip #(.ROWS(R), .COLS(C), .N(N), .TPWM(TP), .VERIFY_W(16), .PRECHARGE(4),
                .CHARGE_PER_COUNT(CPC)) dut (.*);

  int checks = 0, failures = 0;
  int n_combine = 0, n_stall = 0, n_4ph = 0, n_1ph = 0, n_hop = 0, n_gdpu = 0, n_inbuf = 0,
      n_prog = 0, n_drop = 0;
  logic [7:0] gw [NC][2][2][N][N];
  logic preload = 0;
  int expq [NC][$];
  int gexp [$];
  logic signed [7:0] xv [NC][N];
  int ylast [NC][N];           // last INT8 results per core (for the link model)
  real thr [17];
  fp16_t sl [18], of [18], cstate [4];

  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // crossbar preload, one generate branch per core
  for (genvar i = 0; i < NC; i++) begin : g_pre
    always @(posedge preload)
      for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
        for (int m = 0; m < N; m++) for (int n = 0; n < N; n++)
          dut.g_core[i].u_core.u_xbar.g[p][d][m][n] = gw[i][p][d][m][n];
  end

  // output monitors
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NC; i++) if (core_out_valid[i]) begin
      int e;
      checks++;
      if (expq[i].size() == 0) begin failures++; $display("FAIL core %0d unexpected output", i); end
      else begin
        e = expq[i].pop_front();
        if (core_out_data[i] != 8'(e)) begin failures++; $display("FAIL core %0d got %0d exp %0d", i, core_out_data[i], e); end
      end
    end
    if (gdpu_out_valid[0]) begin
      int e;
      checks++; n_gdpu++;
      e = gexp.pop_front();
      if (gdpu_out_data[0] != 8'(e)) begin failures++; $display("FAIL gdpu got %0d exp %0d", gdpu_out_data[0], e); end
    end
    if (dut.tx[6][1].valid) n_hop++;
  end

  task automatic wr(input int sel, input int a, input int d);
    cfg = '{we: 1'b1, addr: 16'(a), data: 16'(d)}; cfg_sel = 7'(sel); @(posedge clk); #1 cfg = '0;
  endtask

  function automatic int gcell(input int i, input int p, input int m, input int n);
    return int'(gw[i][p][0][m][n]) + int'(gw[i][p][1][m][n]);
  endfunction

  // INT8 results y of core i for its inputs (model of modulation and ADC)
  task automatic model(input int i, input logic fourph);
    for (int m = 0; m < N; m++) begin
      longint qp, qn;
      int y;
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
      y = int'(qp / CPC) - int'(qn / CPC);
      ylast[i][m] = y;
    end
  endtask

  // expected outputs: f2i(y/8 [+ rx byte])
  task automatic expect_out(input int i, input logic with_rx, input int rxb [N]);
    for (int m = 0; m < N; m++) begin
      fp16_t a;
      a = r2h(real'(ylast[i][m]) / 8.0);
      if (with_rx) a = fma_ref(fp16_from_int(16'(rxb[m])), FP16_ONE, a);
      expq[i].push_back(f2i_ref(a));
    end
  endtask

  function automatic int out8(input int i, input int m);
    return f2i_ref(r2h(real'(ylast[i][m]) / 8.0));
  endfunction

  task automatic load_x(input int i);
    for (int n = 0; n < N; n++) begin
      xv[i][n] = 8'($urandom_range(0, 2 * TP) - TP);
      wr(i, A_INPUT + n, xv[i][n]);
    end
  endtask

  task automatic setup_core(input int i, input int rx_port, input int pre);
    for (int c = 0; c < N; c++) wr(i, A_SCALE + c, 16'h3000);  // 1/8
    if (rx_port >= 0) begin
      wr(i, A_ACTCTL + 1, 'b100);
      wr(i, A_LINK + L_LDPU_PRE, pre);
      wr(i, A_LINK + L_LDPU_EN, 1 << rx_port);
    end
  endtask

  function automatic fp16_t lut(input fp16_t x);
    int b = 0;
    for (int i = 0; i < 17; i++) if (h2r(x) >= thr[i]) b++;
    return fma_ref(sl[b], x, of[b]);
  endfunction

  task automatic wait_quiet();
    int busy_any;
    do begin
      @(posedge clk); #1;
      busy_any = 0;
      for (int i = 0; i < NC; i++) if (core_busy[i] || expq[i].size() != 0) busy_any = 1;
    end while (busy_any);
    repeat (20) @(posedge clk); #1;
  endtask

  initial begin
    int rxb [N];
    cfg = '0; cfg_sel = 0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < NC; i++) for (int p = 0; p < 2; p++) for (int d = 0; d < 2; d++)
      for (int m = 0; m < N; m++) for (int n = 0; n < N; n++) gw[i][p][d][m][n] = 8'($urandom_range(0, 40));
    preload = 1; @(posedge clk); #1;

    // ---- combine + stall + 4-phase: core 1 -> TX3 -> core 0 RX3 ----
    setup_core(0, 3, 'h31);
    setup_core(1, -1, 0);
    wr(1, A_LINK + L_TX_PRE, 'h31); wr(1, A_LINK + L_TX_ROUTE + 3, 1);
    load_x(0); load_x(1);
    model(0, 1); model(1, 0);
    for (int m = 0; m < N; m++) rxb[m] = out8(1, m);
    expect_out(0, 1, rxb); expect_out(1, 0, rxb);
    wr(0, A_CMD, 'b11); n_4ph++;
    repeat (60) @(posedge clk); #1;
    wr(1, A_CMD, 'b01); n_1ph++;
    wait_quiet();
    n_combine++;
    if (core_stalls[0] != 0) n_stall++;

    // ---- hop: core 2 -> core 6 (hop) -> core 10 ----
    setup_core(2, -1, 0);
    wr(2, A_LINK + L_TX_PRE, 'h52); wr(2, A_LINK + L_TX_ROUTE + 1, 1);
    wr(6, A_LINK + L_HOP_PRE, 'h52); wr(6, A_LINK + L_HOP_EN, 1 << 0); wr(6, A_LINK + L_TX_ROUTE + 1, 2 + 0);
    setup_core(10, 0, 'h52);
    load_x(2); load_x(10);
    model(2, 0); model(10, 0);
    for (int m = 0; m < N; m++) rxb[m] = out8(2, m);
    expect_out(2, 0, rxb); expect_out(10, 1, rxb);
    wr(10, A_CMD, 1); wr(2, A_CMD, 1); n_1ph += 2;
    wait_quiet();

    // ---- GDPU: core 4 (row 2) -> TX1 -> GDPU slice 0, two timesteps ----
    for (int i = 0; i < 17; i++) begin thr[i] = -4.0 + 0.5 * i; wr(NC, A_GDPU + G_THR + i, r2h(thr[i])); end
    for (int b = 0; b < 18; b++) begin
      real s;
      if (b == 0)       begin sl[b] = 0; of[b] = r2h(-1.0); end
      else if (b == 17) begin sl[b] = 0; of[b] = r2h(1.0); end
      else begin
        s = ($tanh(thr[b]) - $tanh(thr[b-1])) / 0.5;
        sl[b] = r2h(s); of[b] = r2h($tanh(thr[b-1]) - s * thr[b-1]);
      end
      wr(NC, A_GDPU + G_SLOPE + b, sl[b]); wr(NC, A_GDPU + G_OFF + b, of[b]);
    end
    for (int g = 0; g < 4; g++) wr(NC, A_GDPU + G_IN_SCALE + g, r2h(g == 1 ? 1.0 / 16 : 1.0 / 32));
    wr(NC, A_GDPU + G_OUT_SCALE, r2h(100.0)); wr(NC, A_GDPU + G_NELEM, 4); wr(NC, A_GDPU + G_PRE, 'h77);
    setup_core(4, -1, 0);
    wr(4, A_LINK + L_TX_PRE, 'h77); wr(4, A_LINK + L_TX_ROUTE + 1, 1);
    for (int e = 0; e < 4; e++) cstate[e] = 0;
    for (int ts = 0; ts < 2; ts++) begin
      load_x(4); model(4, 0); expect_out(4, 0, rxb);
      for (int e = 0; e < 4; e++) begin
        fp16_t gv [4];
        fp16_t ia, hh;
        for (int g = 0; g < 4; g++) begin
          fp16_t t;
          t = fma_ref(fp16_from_int(16'(out8(4, 4 * e + g))), r2h(g == 1 ? 1.0 / 16 : 1.0 / 32), 16'h0000);
          t = lut(t);
          gv[g] = (g == 1) ? t : fma_ref(t, FP16_HALF, FP16_HALF);
        end
        ia = fma_ref(gv[0], gv[1], 16'h0000);
        cstate[e] = fma_ref(gv[2], cstate[e], ia);
        hh = fma_ref(lut(cstate[e]), gv[3], 16'h0000);
        gexp.push_back(f2i_ref(fma_ref(hh, r2h(100.0), 16'h0000)));
      end
      wr(4, A_CMD, 1); n_1ph++;
      wait_quiet();
    end
    checks++; if (gexp.size() != 0) begin failures++; $display("FAIL gdpu outputs missing"); end

    // ---- input buffer -> core 13 (RX 6) ----
    setup_core(13, 6, 'h99);
    in_valid = 1; in_sop = 1; in_data = 8'h99; @(posedge clk); #1;
    for (int m = 0; m < N; m++) begin
      rxb[m] = $urandom_range(0, 100) - 50;
      in_sop = 0; in_data = 8'(rxb[m]); @(posedge clk); #1;
    end
    in_valid = 0;
    load_x(13); model(13, 0); expect_out(13, 1, rxb);
    wr(13, A_CMD, 1); n_1ph++;
    wait_quiet();
    n_inbuf++;

    // ---- link collision at core 14: RX 3 (from core 15) and RX 6 ----
    wr(14, A_LINK + L_LDPU_PRE, 'h44); wr(14, A_LINK + L_LDPU_EN, (1 << 3) | (1 << 6));
    wr(15, A_LINK + L_TX_PRE, 'h44); wr(15, A_LINK + L_TX_ROUTE + 3, 1);
    setup_core(15, -1, 0);
    load_x(15); model(15, 0); expect_out(15, 0, rxb);
    wr(15, A_CMD, 1); n_1ph++;
    while (!core_out_valid[15]) @(posedge clk);
    #1;
    in_valid = 1; in_sop = 1; in_data = 8'h44; @(posedge clk); #1;
    for (int m = 0; m < 8; m++) begin in_sop = 0; in_data = 8'(m); @(posedge clk); #1; end
    in_valid = 0;
    wait_quiet();
    if (core_link_drops[14] != 0) n_drop++;

    // ---- programming: core 11, diagonal 2 ----
    for (int m = 0; m < N; m++) wr(11, A_TARGET + m, (m % 4 == 0) ? 0 : $urandom_range(0, 100) - 50);
    wr(11, A_CMD, 16'h0208);
    while (!core_prog_done[11]) @(posedge clk);
    #1;
    for (int m = 0; m < N; m++) begin
      int n, tg, gp, gn, gm;
      n = (m + 2) % N;
      tg = int'($signed(dut.g_core[11].u_core.tgt[m]));
      gp = int'(dut.g_core[11].u_core.u_xbar.g[0][0][m][n]) + int'(dut.g_core[11].u_core.u_xbar.g[0][1][m][n]);
      gn = int'(dut.g_core[11].u_core.u_xbar.g[1][0][m][n]) + int'(dut.g_core[11].u_core.u_xbar.g[1][1][m][n]);
      gm = tg < 0 ? gn : gp;
      checks++;
      if ((tg < 0 ? -tg : tg) - gm >= 5 || gm - (tg < 0 ? -tg : tg) >= 5 || (tg < 0 ? gp : gn) != 0) begin
        failures++; $display("FAIL program row %0d target %0d got +%0d -%0d", m, tg, gp, gn);
      end
    end
    n_prog++;

    $display("mechanisms: combine=%0d stall=%0d(cycles %0d) 1ph=%0d 4ph=%0d hop=%0d gdpu=%0d inbuf=%0d drop=%0d program=%0d(iter %0d)",
             n_combine, n_stall, core_stalls[0], n_1ph, n_4ph, n_hop, n_gdpu, n_inbuf, n_drop, n_prog, core_prog_iter[11]);
    checks++; if (n_combine == 0) begin failures++; $display("FAIL no combine"); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no stall"); end
    checks++; if (n_1ph == 0 || n_4ph == 0) begin failures++; $display("FAIL modes"); end
    checks++; if (n_hop == 0)     begin failures++; $display("FAIL no hop"); end
    checks++; if (n_gdpu == 0)    begin failures++; $display("FAIL no gdpu output"); end
    checks++; if (n_inbuf == 0)   begin failures++; $display("FAIL no input buffer"); end
    checks++; if (n_drop == 0)    begin failures++; $display("FAIL no drop"); end
    checks++; if (n_prog == 0)    begin failures++; $display("FAIL no programming"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
