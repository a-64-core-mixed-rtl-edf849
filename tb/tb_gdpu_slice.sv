// tb_gdpu_slice: runs three LSTM timesteps of 6 elements through the slice.
// The tanh LUT holds secant segments on [-4, 4].  Each output is compared
// with an FP16 reference built from the same operation order (exact match),
// and with a real-number LSTM cell (within 6 output LSBs, the LUT error).
// Also checks one output per four input cycles, that a foreign preamble is
// ignored, and that the cell-state clear command works.
module tb_gdpu_slice;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int NE = 6;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  link_t rx;
  logic out_valid;
  logic signed [7:0] out_data;
  logic [5:0] out_idx;
  int checks = 0, failures = 0, outs = 0, last_out_t = -1, cyc = 0;
  real thr [17];
  fp16_t sl [18], of [18];
  fp16_t insc [4], inof [4];
  fp16_t cref [NE];
  real creal [NE];
  int exp_q [$], expr_q [$], idx_q [$];

  gdpu_slice #(.NELEM(64)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input int off, input logic [15:0] d);
    cfg = '{we: 1'b1, addr: A_GDPU + 16'(off), data: d}; @(posedge clk); #1 cfg = '0;
  endtask

  function automatic fp16_t lut(input fp16_t x);
    int b = 0;
    for (int i = 0; i < 17; i++) if (h2r(x) >= thr[i]) b++;
    return fma_ref(sl[b], x, of[b]);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, er, ei;
    e = exp_q.pop_front(); er = expr_q.pop_front(); ei = idx_q.pop_front();
    checks++;
    if (out_data != 8'(e) || out_idx != 6'(ei)) begin
      failures++; $display("FAIL out %0d idx %0d exp %0d idx %0d", out_data, out_idx, e, ei);
    end
    checks++;
    if (int'(out_data) - er > 6 || er - int'(out_data) > 6) begin
      failures++; $display("FAIL out %0d vs real LSTM %0d", out_data, er);
    end
    if (last_out_t >= 0 && outs % NE != 0) begin
      checks++;
      if (cyc - last_out_t != 4) begin failures++; $display("FAIL output spacing %0d", cyc - last_out_t); end
    end
    last_out_t = cyc; outs++;
  end

  task automatic step(input logic [7:0] p);
    rx = '{sop: 1, valid: 1, data: p}; @(posedge clk); #1;
    for (int e = 0; e < NE; e++) begin
      fp16_t gv [4];
      real gr [4];
      fp16_t ia, hh, t;
      real ci, hr;
      for (int g = 0; g < 4; g++) begin
        logic signed [7:0] d;
        d = 8'($urandom_range(0, 255));
        rx = '{sop: 0, valid: 1, data: d}; @(posedge clk); #1;
        if (p == 8'hC3) begin
          t = fma_ref(fp16_from_int(16'(d)), insc[g], inof[g]);
          t = lut(t);
          gv[g] = (g == 1) ? fma_ref(t, FP16_ONE, 16'h0000) : fma_ref(t, FP16_HALF, FP16_HALF);
          gr[g] = (g == 1) ? $tanh(h2r(insc[g]) * d + h2r(inof[g]))
                           : 1.0 / (1.0 + $exp(-(2.0 * (h2r(insc[g]) * d + h2r(inof[g])))));
        end
      end
      if (p == 8'hC3) begin
        ia = fma_ref(gv[0], gv[1], 16'h0000);
        cref[e] = fma_ref(gv[2], cref[e], ia);
        hh = fma_ref(lut(cref[e]), gv[3], 16'h0000);
        exp_q.push_back(f2i_ref(fma_ref(hh, r2h(100.0), 16'h0000)));
        creal[e] = gr[2] * creal[e] + gr[0] * gr[1];
        hr = $tanh(creal[e]) * gr[3] * 100.0;
        expr_q.push_back(hr >= 0 ? int'(hr + 0.5) : -int'(-hr + 0.5));
        idx_q.push_back(e);
      end
    end
    rx = '0;
  endtask

  initial begin
    cfg = '0; rx = '0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 17; i++) begin thr[i] = -4.0 + 0.5 * i; wr(G_THR + i, r2h(thr[i])); end
    for (int b = 0; b < 18; b++) begin
      real s;
      if (b == 0)       begin sl[b] = 0; of[b] = r2h(-1.0); end
      else if (b == 17) begin sl[b] = 0; of[b] = r2h(1.0); end
      else begin
        s = ($tanh(thr[b]) - $tanh(thr[b-1])) / 0.5;
        sl[b] = r2h(s); of[b] = r2h($tanh(thr[b-1]) - s * thr[b-1]);
      end
      wr(G_SLOPE + b, sl[b]); wr(G_OFF + b, of[b]);
    end
    // sigmoid gates take x/2: input scale 1/64 for I,F,O; 1/32 for A
    for (int g = 0; g < 4; g++) begin
      insc[g] = r2h(g == 1 ? 1.0 / 32 : 1.0 / 64); inof[g] = r2h(g == 2 ? 0.25 : 0.0);
      wr(G_IN_SCALE + g, insc[g]); wr(G_IN_OFF + g, inof[g]);
    end
    wr(G_OUT_SCALE, r2h(100.0)); wr(G_OUT_OFF, 0);
    wr(G_NELEM, NE); wr(G_PRE, 'hC3);
    for (int e = 0; e < NE; e++) begin cref[e] = 0; creal[e] = 0.0; end
    step(8'hC3); step(8'hC3);
    step(8'h11);                     // foreign preamble: no output
    step(8'hC3);
    repeat (20) @(posedge clk); #1;
    // clear the cell state; the next step starts from c = 0 again
    wr(G_CMD, 1);
    for (int e = 0; e < NE; e++) begin cref[e] = 0; creal[e] = 0.0; end
    step(8'hC3);
    repeat (20) @(posedge clk); #1;
    checks++;
    if (exp_q.size() != 0 || outs != 4 * NE) begin failures++; $display("FAIL outputs %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
