// tb_link_controller: TX preamble insertion and routing of the LDPU stream
// with payload selection, RX delivery to the LDPU with preamble and port
// checks and payload selection, hopping of a packet from an RX port to a TX
// port, and rejection of a packet with a foreign preamble.
module tb_link_controller;
  import hermes_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic ldpu_valid = 0, ldpu_last = 0, to_ldpu_valid;
  logic [7:0] ldpu_data = 0, to_ldpu_data;
  link_t tx [6];
  link_t rx [7];
  logic [15:0] rx_drop;
  int checks = 0, failures = 0;
  link_t txlog [$];
  link_t hoplog [$];
  int ldpulog [$];

  link_controller #(.NTX(6), .NRX(7)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) begin
    if (tx[0].valid) txlog.push_back(tx[0]);
    if (tx[4].valid) hoplog.push_back(tx[4]);
    if (to_ldpu_valid) ldpulog.push_back(int'(to_ldpu_data));
  end

  task automatic wr(input int off, input int d);
    cfg = '{we: 1'b1, addr: A_LINK + 16'(off), data: 16'(d)}; @(posedge clk); #1 cfg = '0;
  endtask
  task automatic send(input int k, input int pre, input int n, input int base);
    rx[k] = '{sop: 1, valid: 1, data: 8'(pre)}; @(posedge clk); #1;
    for (int i = 0; i < n; i++) begin
      rx[k] = '{sop: 0, valid: 1, data: 8'(base + i)}; @(posedge clk); #1;
    end
    rx[k] = '0;
  endtask

  initial begin
    cfg = '0; for (int k = 0; k < 7; k++) rx[k] = '0;
    #22 rst_n = 1; @(posedge clk); #1;
    wr(L_TX_PRE, 'h5A); wr(L_TX_ROUTE + 0, 1); wr(L_TX_START, 2); wr(L_TX_LEN, 3);
    wr(L_LDPU_PRE, 'h33); wr(L_LDPU_EN, 'b0000100); wr(L_RX_START, 1); wr(L_RX_LEN, 2);
    wr(L_HOP_PRE, 'h77); wr(L_HOP_EN, 'b0001000); wr(L_TX_ROUTE + 4, 2 + 3);
    // LDPU stream of 8 bytes with a gap: bytes 2..4 must be sent after 0x5A
    for (int i = 0; i < 8; i++) begin
      ldpu_valid = 1; ldpu_data = 8'(10 + i); ldpu_last = (i == 7); @(posedge clk); #1;
      if (i == 3) begin ldpu_valid = 0; @(posedge clk); #1; end
    end
    ldpu_valid = 0; ldpu_last = 0;
    repeat (4) @(posedge clk); #1;
    checks++;
    if (txlog.size() != 4 || !txlog[0].sop || txlog[0].data != 8'h5A || txlog[1].data != 12 ||
        txlog[2].data != 13 || txlog[3].data != 14 || txlog[1].sop) begin
      failures++; $display("FAIL tx stream size %0d", txlog.size());
    end
    // RX on port 2 with the LDPU preamble: payload bytes 1..2 delivered
    send(2, 'h33, 5, 40);
    // RX on port 1 (not enabled) and port 2 with another preamble: ignored
    send(1, 'h33, 3, 90);
    send(2, 'h34, 3, 90);
    // hop: port 3 with the hop preamble appears on TX 4 (preamble included)
    send(3, 'h77, 3, 60);
    send(3, 'h78, 3, 70);
    repeat (4) @(posedge clk); #1;
    checks++;
    if (ldpulog.size() != 2 || ldpulog[0] != 41 || ldpulog[1] != 42) begin
      failures++; $display("FAIL ldpu rx size %0d", ldpulog.size());
    end
    checks++;
    if (hoplog.size() != 4 || !hoplog[0].sop || hoplog[0].data != 8'h77 || hoplog[3].data != 62) begin
      failures++; $display("FAIL hop size %0d", hoplog.size());
    end
    // collision: two enabled ports with LDPU data in the same cycle
    wr(L_LDPU_EN, 'b0000110); wr(L_RX_START, 0); wr(L_RX_LEN, 8);
    fork send(1, 'h33, 2, 1); send(2, 'h33, 2, 5); join
    repeat (2) @(posedge clk); #1;
    checks++; if (rx_drop != 2) begin failures++; $display("FAIL drops %0d", rx_drop); end
    checks++; if (ldpulog.size() != 4 || ldpulog[2] != 1) begin failures++; $display("FAIL priority"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
