// tb_ldpu: two vectors through the LDPU with default calibration (y = P - N,
// scale 1).  Vector 1 without link input: checks values, channel order and
// one output per cycle.  Vector 2 adds link bytes that arrive late, which
// must stall the issue stage; checks y + rx and that stalls were counted.
module tb_ldpu;
  import hermes_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, capture = 0;
  cfg_t cfg;
  logic [11:0] adc_p [N], adc_n [N];
  logic xfer_done, idle, rx_valid = 0, out_valid, out_last;
  logic [7:0] rx_data = 0;
  logic signed [7:0] out_data;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;
  int exp_q [$];
  int first_t, last_t, cyc = 0;

  ldpu #(.N(N), .RXBUF(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    e = exp_q.pop_front();
    checks++;
    if (out_data !== 8'(e)) begin failures++; $display("FAIL got %0d exp %0d", out_data, e); end
    if (out_last) last_t = cyc;
  end

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    cfg = '{we: 1'b1, addr: a, data: d}; @(posedge clk); #1 cfg = '0;
  endtask

  initial begin
    cfg = '0;
    for (int i = 0; i < N; i++) begin adc_p[i] = 0; adc_n[i] = 0; end
    #22 rst_n = 1; @(posedge clk); #1;
    // vector 1
    for (int i = 0; i < N; i++) begin
      adc_p[i] = 12'(100 + 10 * i); adc_n[i] = 12'(150 + 3 * i);
      exp_q.push_back((100 + 10 * i) - (150 + 3 * i) > 127 ? 127 : (100 + 10 * i) - (150 + 3 * i));
    end
    capture = 1; first_t = cyc; @(posedge clk); #1 capture = 0;
    wait (idle); @(posedge clk); #1;
    checks++;
    if (last_t - first_t > N + 8) begin failures++; $display("FAIL throughput: %0d cycles", last_t - first_t); end
    // vector 2 with link input arriving slowly
    wr(A_ACTCTL + 16'd1, 16'b100);
    for (int i = 0; i < N; i++) begin
      adc_p[i] = 12'(20 + i); adc_n[i] = 12'(10);
      exp_q.push_back(20 + i - 10 + (i - 8));
    end
    capture = 1; @(posedge clk); #1 capture = 0;
    for (int i = 0; i < N; i++) begin
      repeat (3) @(posedge clk);
      #1 rx_valid = 1; rx_data = 8'(i - 8); @(posedge clk); #1 rx_valid = 0;
    end
    wait (idle); @(posedge clk); #1;
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs %0d", exp_q.size()); end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
