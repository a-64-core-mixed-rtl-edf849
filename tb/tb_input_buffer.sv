// tb_input_buffer: 8-entry buffer.  Random bursts of packets are pushed
// while the link drains one byte per cycle; checks byte order, the
// start-of-packet flags, the one-cycle latency, and that the link is idle
// when the buffer is empty.  (The buffer drains at the rate it can be
// written, so it only fills when the chip stalls it; 'full' stays low.)
module tb_input_buffer;
  import hermes_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sop = 0, full;
  logic [7:0] in_data = 0;
  link_t tx;
  int checks = 0, failures = 0, n_full = 0, n_in = 0, n_out = 0;
  logic [8:0] q [$];

  input_buffer #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (tx.valid) begin
      logic [8:0] e;
      e = q.pop_front(); n_out++;
      checks++;
      if ({tx.sop, tx.data} != e) begin failures++; $display("FAIL got %0d/%h exp %0d/%h", tx.sop, tx.data, e[8], e[7:0]); end
    end
    if (in_valid && !full) begin q.push_back({in_sop, in_data}); n_in++; end
    if (in_valid && full) n_full++;
  end

  initial begin
    #22 rst_n = 1; @(posedge clk); #1;
    checks++; if (tx.valid || full) begin failures++; $display("FAIL reset"); end
    // random bursts of bytes and packets
    for (int k = 0; k < 300; k++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      in_sop = ($urandom_range(0, 7) == 0);
      in_data = 8'($urandom);
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (D + 4) @(posedge clk); #1;
    checks++; if (q.size() != 0 || tx.valid) begin failures++; $display("FAIL left %0d", q.size()); end
    checks++; if (n_full != 0) begin failures++; $display("FAIL full"); end
    checks++; if (n_out != n_in) begin failures++; $display("FAIL in %0d out %0d", n_in, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
