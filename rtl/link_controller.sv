// link_controller: core-to-core link controller (transmitter and receiver).
//
// A link is eight parallel one-bit channels carrying one INT8 value per
// clock, plus valid and start-of-packet wires.  A packet is one preamble
// byte (sop = 1) followed by payload bytes; payload may have gaps.
//  A  TX preamble insertion: the LDPU output stream gets the programmed
//     preamble put in front of it (the stream is delayed by one cycle).
//  B  TX routing registers: each TX port sends either the local LDPU stream,
//     a stream forwarded ("hopped") from one RX port, or nothing.
//  C  preamble registers: the preamble accepted for the local LDPU and the
//     preamble that is forwarded.
//  D  LDPU preamble check: payload of an RX packet whose preamble matches,
//     on a port enabled for it, is delivered to the LDPU.
//  E  hopping preamble check: an RX packet whose preamble matches the hop
//     preamble, on an enabled port, is made available to the TX mux (one
//     cycle later, preamble included).
// Payload selection on both sides: only bytes start..start+len-1 of a
// packet's payload are sent (TX) or taken (RX).  The A..E partition and the
// payload selection follow the published design; the packet format (one
// preamble byte, sop/valid wires), the register layout and the rule that
// the lowest-numbered port wins when two RX ports feed the LDPU in the same
// cycle are this implementation's choices.
//
// Interface: LDPU stream in (ldpu_valid/data/last), LDPU receive stream out
// (to_ldpu_valid/data), tx[NTX] and rx[NRX] link ports, cfg writes at
// A_LINK + the L_* offsets of hermes_pkg.  rx_drop counts LDPU bytes lost to
// a port collision.
module link_controller
  import hermes_pkg::*;
#(
  parameter int NTX = 6,
  parameter int NRX = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        ldpu_valid,
  input  logic [7:0]  ldpu_data,
  input  logic        ldpu_last,
  output logic        to_ldpu_valid,
  output logic [7:0]  to_ldpu_data,
  output link_t       tx [NTX],
  input  link_t       rx [NRX],
  output logic [15:0] rx_drop
);
  // ---- C and B: registers ----
  logic [7:0]     tx_pre, ldpu_pre, hop_pre;
  logic [NRX-1:0] ldpu_en, hop_en;
  logic [3:0]     tx_route [NTX];
  logic [8:0]     tx_start, tx_len, rx_start, rx_len;

  wire cfg_hit = cfg.we && cfg.addr[15:8] == A_LINK[15:8];
  wire [7:0] off = cfg.addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_pre   <= '0;
      ldpu_pre <= '0;
      hop_pre  <= '0;
      ldpu_en  <= '0;
      hop_en   <= '0;
      for (int t = 0; t < NTX; t++) tx_route[t] <= '0;
      tx_start <= '0;
      tx_len   <= 9'd256;
      rx_start <= '0;
      rx_len   <= 9'd256;
    end else if (cfg_hit) begin
      case (int'(off))
        L_TX_PRE:   tx_pre   <= cfg.data[7:0];
        L_LDPU_PRE: ldpu_pre <= cfg.data[7:0];
        L_LDPU_EN:  ldpu_en  <= cfg.data[NRX-1:0];
        L_HOP_PRE:  hop_pre  <= cfg.data[7:0];
        L_HOP_EN:   hop_en   <= cfg.data[NRX-1:0];
        L_TX_START: tx_start <= cfg.data[8:0];
        L_TX_LEN:   tx_len   <= cfg.data[8:0];
        L_RX_START: rx_start <= cfg.data[8:0];
        L_RX_LEN:   rx_len   <= cfg.data[8:0];
        default: ;
      endcase
      for (int t = 0; t < NTX; t++)
        if (int'(off) == L_TX_ROUTE + t) tx_route[t] <= cfg.data[3:0];
    end
  end

  // ---- A: TX preamble insertion with payload selection ----
  logic [8:0] tx_idx;
  logic       tx_inpkt;
  logic       d_valid;
  logic [7:0] d_data;
  link_t      ldpu_tx;
  wire        tx_sel = ldpu_valid && tx_idx >= tx_start && tx_idx < tx_start + tx_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_idx   <= '0;
      tx_inpkt <= 1'b0;
      d_valid  <= 1'b0;
      d_data   <= '0;
      ldpu_tx  <= '0;
    end else begin
      ldpu_tx <= '0;
      if (tx_sel && !tx_inpkt) begin
        ldpu_tx <= '{sop: 1'b1, valid: 1'b1, data: tx_pre};
      end else if (d_valid) begin
        ldpu_tx <= '{sop: 1'b0, valid: 1'b1, data: d_data};
      end
      d_valid <= tx_sel;
      if (tx_sel) begin
        d_data   <= ldpu_data;
        tx_inpkt <= 1'b1;
      end
      if (ldpu_valid) tx_idx <= ldpu_last ? 9'd0 : tx_idx + 1'b1;
      if (ldpu_valid && ldpu_last) tx_inpkt <= 1'b0;
    end
  end

  // ---- D and E: RX preamble checks ----
  logic [7:0] cur_pre [NRX];
  logic [8:0] rx_idx  [NRX];
  link_t      hop     [NRX];
  logic       hop_ok  [NRX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NRX; k++) begin
        cur_pre[k] <= '0;
        rx_idx[k]  <= '0;
        hop[k]     <= '0;
        hop_ok[k]  <= 1'b0;
      end
    end else begin
      for (int k = 0; k < NRX; k++) begin
        logic ok;
        ok = rx[k].sop ? (rx[k].data == hop_pre && hop_en[k]) : hop_ok[k];
        hop[k] <= (rx[k].valid && ok) ? rx[k] : '0;
        if (rx[k].valid) begin
          if (rx[k].sop) begin
            cur_pre[k] <= rx[k].data;
            rx_idx[k]  <= '0;
            hop_ok[k]  <= ok;
          end else begin
            rx_idx[k]  <= rx_idx[k] + 1'b1;
          end
        end
      end
    end
  end

  // D: one RX byte per cycle to the LDPU, lowest port first
  always_comb begin
    to_ldpu_valid = 1'b0;
    to_ldpu_data  = '0;
    for (int k = NRX - 1; k >= 0; k--) begin
      if (rx[k].valid && !rx[k].sop && ldpu_en[k] && cur_pre[k] == ldpu_pre &&
          rx_idx[k] >= rx_start && rx_idx[k] < rx_start + rx_len) begin
        to_ldpu_valid = 1'b1;
        to_ldpu_data  = rx[k].data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_drop <= '0;
    else begin
      int n;
      n = 0;
      for (int k = 0; k < NRX; k++)
        if (rx[k].valid && !rx[k].sop && ldpu_en[k] && cur_pre[k] == ldpu_pre &&
            rx_idx[k] >= rx_start && rx_idx[k] < rx_start + rx_len) n++;
      if (n > 1) rx_drop <= rx_drop + 16'(n - 1);
    end
  end

  // ---- B: TX multiplexer ----
  always_comb begin
    for (int t = 0; t < NTX; t++) begin
      tx[t] = '0;
      if (tx_route[t] == 4'd1) tx[t] = ldpu_tx;
      else
        for (int k = 0; k < NRX; k++)
          if (int'(tx_route[t]) == k + 2) tx[t] = hop[k];
    end
  end
endmodule
