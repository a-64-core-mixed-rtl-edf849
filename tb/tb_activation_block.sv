// tb_activation_block: random values, per-channel scale/offset, link bytes
// and ReLU settings; compares with a real-number FP16 reference and checks
// the 3-cycle latency.
module tb_activation_block;
  import hermes_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_last, out_valid, out_last, rx_en;
  fp16_t in_v;
  logic [2:0] in_ch;
  logic signed [7:0] in_rx, out_data;
  int checks = 0, failures = 0;
  fp16_t sc [N], of [N], s0;

  activation_block #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    cfg = '{we: 1'b1, addr: a, data: d}; @(posedge clk); #1 cfg = '0;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_v = 0; in_ch = 0; in_rx = 0; in_last = 0;
    #22 rst_n = 1;
    @(posedge clk); #1;
    for (int c = 0; c < N; c++) begin
      sc[c] = r2h(0.01 * (c + 1)); of[c] = r2h(-2.0 + 0.5 * c);
      wr(A_SCALE + 16'(c), sc[c]); wr(A_OFFSET + 16'(c), of[c]);
    end
    s0 = r2h(0.75); wr(A_ACTCTL, s0);
    for (int mode = 0; mode < 4; mode++) begin
      wr(A_ACTCTL + 16'd1, 16'({1'b1, mode[1:0]}));
      checks++; if (!rx_en) failures++;
      for (int k = 0; k < 100; k++) begin
        real a, b; int e;
        in_valid = 1; in_ch = 3'($urandom % N); in_rx = 8'($urandom);
        in_v = r2h((real'($urandom % 20000) - 10000.0) / 3.0); in_last = (k == 99);
        a = h2r(fma_ref(in_v, sc[in_ch], of[in_ch]));
        if (mode[0] && a < 0) a = 0;
        b = h2r(fma_ref(r2h(real'(in_rx)), s0, r2h(a)));
        if (mode[1] && b < 0) b = 0;
        e = f2i_ref(r2h(b));
        @(posedge clk); #1 in_valid = 0;
        @(posedge clk); @(posedge clk); #1;
        checks++;
        if (!out_valid || out_data !== 8'(e) || out_last !== (k == 99)) begin
          failures++; $display("FAIL mode=%0d k=%0d got %0d exp %0d", mode, k, out_data, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
