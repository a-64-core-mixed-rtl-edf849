// tb_diag_decoder: random diagonal/device selections and the 'all' mode on
// a 16-line decoder; checks one-hot output on the right lines one cycle
// later.
module tb_diag_decoder;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, all = 0;
  logic [3:0] diag = 0;
  logic [1:0] dev_en = 0;
  logic [N-1:0] sel1, sel2;
  int checks = 0, failures = 0;

  diag_decoder #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    #22 rst_n = 1; @(posedge clk); #1;
    checks++; if (sel1 != 0 || sel2 != 0) begin failures++; $display("FAIL reset"); end
    for (int k = 0; k < 200; k++) begin
      logic [N-1:0] e1, e2;
      all = ($urandom_range(0, 9) == 0); diag = 4'($urandom); dev_en = 2'($urandom);
      e1 = all ? '1 : (dev_en[0] ? N'(1) << diag : '0);
      e2 = all ? '1 : (dev_en[1] ? N'(1) << diag : '0);
      @(posedge clk); #1;
      checks++;
      if (sel1 != e1 || sel2 != e2) begin failures++; $display("FAIL diag %0d dev %0d", diag, dev_en); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
