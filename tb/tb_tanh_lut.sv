// tb_tanh_lut: loads 17 thresholds from -4 to 4 in steps of 0.5 with secant
// segments of tanh, then checks for random inputs that the bin index is the
// number of thresholds reached, that slope/offset come from that bin, and
// that slope*x + offset is within 0.03 of tanh(x).
module tb_tanh_lut;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  fp16_t x, slope, offset;
  logic [4:0] bin;
  int checks = 0, failures = 0;
  real thr [17];
  fp16_t sl [18], of [18];

  tanh_lut dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input int off, input logic [15:0] d);
    cfg = '{we: 1'b1, addr: A_GDPU + 16'(off), data: d}; @(posedge clk); #1 cfg = '0;
  endtask

  initial begin
    cfg = '0; x = 0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 17; i++) begin thr[i] = -4.0 + 0.5 * i; wr(G_THR + i, r2h(thr[i])); end
    for (int b = 0; b < 18; b++) begin
      real lo, hi, s;
      if (b == 0)       begin sl[b] = 0; of[b] = r2h(-1.0); end
      else if (b == 17) begin sl[b] = 0; of[b] = r2h(1.0); end
      else begin
        lo = thr[b-1]; hi = thr[b];
        s = ($tanh(hi) - $tanh(lo)) / (hi - lo);
        sl[b] = r2h(s); of[b] = r2h($tanh(lo) - s * lo);
      end
      wr(G_SLOPE + b, sl[b]); wr(G_OFF + b, of[b]);
    end
    for (int k = 0; k < 400; k++) begin
      real xr, y;
      int eb;
      xr = (real'($urandom_range(0, 12000)) - 6000.0) / 1000.0;
      if (k < 17) xr = thr[k];           // exactly on each threshold
      x = r2h(xr); #1;
      eb = 0;
      for (int i = 0; i < 17; i++) if (h2r(x) >= thr[i]) eb++;
      checks++;
      if (bin != 5'(eb) || slope != sl[eb] || offset != of[eb]) begin
        failures++; $display("FAIL x=%f bin %0d exp %0d", h2r(x), bin, eb);
      end
      y = h2r(fma_ref(slope, x, offset));
      checks++;
      if (y - $tanh(h2r(x)) > 0.03 || $tanh(h2r(x)) - y > 0.03) begin
        failures++; $display("FAIL x=%f y=%f", h2r(x), y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
