// tb_cco_adc: random current sequences in 1-phase and 4-phase mode, gain
// trim, clear and saturation at 4095, compared with charge/CHARGE_PER_COUNT.
module tb_cco_adc;
  import hermes_pkg::*;
  localparam int CPC = 64;
  logic clk = 0, rst_n = 0, clear = 0, integrate = 0, neg_phase = 0, four_phase = 0;
  cfg_t cfg;
  logic signed [31:0] i_row = 0;
  logic [11:0] cnt_p, cnt_n;
  int checks = 0, failures = 0;

  cco_adc #(.ROW(5), .CHARGE_PER_COUNT(CPC)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int trim, input logic fp, input int amp, input int len);
    longint qp, qn, ep, en;
    clear = 1; @(posedge clk); #1 clear = 0;
    qp = 0; qn = 0; four_phase = fp;
    for (int t = 0; t < len; t++) begin
      longint q;
      i_row = $urandom_range(0, 2 * amp) - amp;
      neg_phase = $urandom_range(0, 1);
      integrate = ($urandom_range(0, 7) != 0);
      q = longint'(i_row) * trim;
      if (integrate) begin
        if (fp) begin if (neg_phase) qn += (q < 0 ? -q : q); else qp += (q < 0 ? -q : q); end
        else if (q >= 0) qp += q; else qn -= q;
      end
      @(posedge clk); #1;
    end
    integrate = 0;
    ep = qp / (128 * CPC); en = qn / (128 * CPC);
    if (ep > 4095) ep = 4095;
    if (en > 4095) en = 4095;
    checks++;
    if (cnt_p != 12'(ep) || cnt_n != 12'(en)) begin
      failures++; $display("FAIL trim %0d fp %0d got %0d/%0d exp %0d/%0d", trim, fp, cnt_p, cnt_n, ep, en);
    end
  endtask

  initial begin
    cfg = '0;
    #22 rst_n = 1; @(posedge clk); #1;
    for (int k = 0; k < 40; k++) run(128, k[0], 3000, 100);
    cfg = '{we: 1, addr: A_TRIM + 16'd5, data: 16'd150}; @(posedge clk); #1 cfg = '0;
    cfg = '{we: 1, addr: A_TRIM + 16'd6, data: 16'd10}; @(posedge clk); #1 cfg = '0;  // other row
    for (int k = 0; k < 20; k++) run(150, k[0], 3000, 100);
    run(150, 0, 100000, 400);        // saturation
    checks++; if (cnt_p != 4095 && cnt_n != 4095) begin failures++; $display("FAIL no saturation"); end
    clear = 1; @(posedge clk); #1 clear = 0;
    checks++; if (cnt_p != 0 || cnt_n != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
