// input_buffer: chip input buffer feeding off-chip data into the link fabric.
//
// Bytes written from off-chip (with a start-of-packet flag marking each
// packet's preamble byte) are queued in a DEPTH-entry FIFO and sent out on
// one link, one byte per cycle whenever the FIFO holds data.  The link is
// broadcast to the input-buffer RX port of every core; the cores' preamble
// checks decide who takes the packet.  The original only shows the block in
// the chip floorplan; the FIFO, its depth and the broadcast are this
// implementation's choices.
//
// Interface: in_valid/in_sop/in_data with 'full' back-pressure; tx link out,
// registered (one cycle from the FIFO head).
module input_buffer
  import hermes_pkg::*;
#(
  parameter int DEPTH = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sop,
  input  logic [7:0] in_data,
  output logic       full,
  output link_t      tx
);
  localparam int AW = $clog2(DEPTH);
  logic [8:0]  mem [DEPTH];
  logic [AW:0] cnt;
  logic [AW-1:0] wp, rp;

  wire push = in_valid && !full;
  wire pop  = cnt != '0;
  assign full = int'(cnt) == DEPTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      wp  <= '0;
      rp  <= '0;
      tx  <= '0;
    end else begin
      if (push) begin
        mem[wp] <= {in_sop, in_data};
        wp      <= wp + 1'b1;
      end
      tx <= '0;
      if (pop) begin
        tx <= '{sop: mem[rp][8], valid: 1'b1, data: mem[rp][7:0]};
        rp <= rp + 1'b1;
      end
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
