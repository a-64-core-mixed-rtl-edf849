// tb_adc_reg_array: captures two sets of ADC counts and checks every entry,
// the one-entry-per-cycle transfer (wr_count) and xfer_done timing (N cycles).
module tb_adc_reg_array;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, capture = 0, xfer_done;
  logic [11:0] adc_p [N], adc_n [N];
  logic [3:0] wr_count;
  logic [2:0] rd_idx = 0;
  logic [11:0] rd_p, rd_n;
  int checks = 0, failures = 0;

  adc_reg_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < N; i++) begin adc_p[i] = 0; adc_n[i] = 0; end
    #22 rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      int cyc;
      for (int i = 0; i < N; i++) begin adc_p[i] = 12'($urandom); adc_n[i] = 12'($urandom); end
      @(posedge clk); #1 capture = 1; @(posedge clk); #1 capture = 0;
      cyc = 0;
      while (!xfer_done) begin
        checks++; if (int'(wr_count) != cyc) begin failures++; $display("FAIL wr_count %0d at %0d", wr_count, cyc); end
        @(posedge clk); #1 cyc++;
      end
      checks++; if (cyc != N) begin failures++; $display("FAIL transfer took %0d", cyc); end
      for (int i = 0; i < N; i++) begin
        rd_idx = 3'(i); #1;
        checks++;
        if (rd_p !== adc_p[i] || rd_n !== adc_n[i]) begin failures++; $display("FAIL entry %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
