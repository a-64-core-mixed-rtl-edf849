// tb_adc_convert_scale: checks y = N*fa2 + (P*fa1 + fb) against a real-number
// FP16 reference for random counts and coefficients, and the 2-cycle latency.
module tb_adc_convert_scale;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, out_valid;
  logic [1:0] in_idx;
  logic [11:0] in_p, in_n;
  logic [15:0] in_tag, out_tag;
  fp16_t out_y;
  int checks = 0, failures = 0;
  fp16_t fa1 [2*N], fb [2*N], fa2 [2*N];

  adc_convert_scale #(.N(N), .SIDE(1), .TAG_W(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    cfg = '{we: 1'b1, addr: a, data: d}; @(posedge clk); #1 cfg = '0;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_idx = 0; in_p = 0; in_n = 0; in_tag = 0;
    #22 rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < 2*N; r++) begin
      fa1[r] = r2h(0.5 + 0.1 * r); fb[r] = r2h(-3.25 + r); fa2[r] = r2h(-0.75 - 0.05 * r);
      wr(A_FA1 + 16'(r), fa1[r]); wr(A_FB + 16'(r), fb[r]); wr(A_FA2 + 16'(r), fa2[r]);
    end
    for (int k = 0; k < 200; k++) begin
      int row; logic [15:0] exp_y;
      row = 2 * (k % N) + 1;           // this unit serves odd rows
      in_valid = 1; in_idx = 2'(k % N); in_tag = 16'(k);
      in_p = 12'($urandom % 4096); in_n = 12'($urandom % 4096);
      if (k % 7 == 0) begin in_p = 12'd4095; in_n = 0; end
      exp_y = fma_ref(r2h(real'(in_n)), fa2[row], fma_ref(r2h(real'(in_p)), fa1[row], fb[row]));
      @(posedge clk); #1 in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_y !== exp_y || out_tag !== 16'(k)) begin
        failures++;
        $display("FAIL k=%0d p=%0d n=%0d got %h exp %h v=%b", k, in_p, in_n, out_y, exp_y, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
