// diag_decoder: diagonal selection decoder of the PCM crossbar.
//
// The select gates of the unit cells are wired along diagonals: cell (m, n)
// belongs to diagonal d = (n - m) mod N, so one diagonal holds exactly one
// cell per row and per column.  SEL1 lines gate the devices 1 of both
// polarities, SEL2 lines the devices 2.  For programming and verify reads
// one diagonal is enabled, with device 1, device 2 or both; for an MVM
// ('all') every line is enabled.  Diagonal wiring and the SEL1/SEL2 split
// follow the published design; the registered outputs are this
// implementation's choice.
//
// Interface: all / diag / dev_en in, sel1[N] / sel2[N] out one cycle later.
module diag_decoder #(
  parameter int N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 all,
  input  logic [$clog2(N)-1:0] diag,
  input  logic [1:0]           dev_en,   // bit0: device 1, bit1: device 2
  output logic [N-1:0]         sel1,
  output logic [N-1:0]         sel2
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel1 <= '0;
      sel2 <= '0;
    end else if (all) begin
      sel1 <= '1;
      sel2 <= '1;
    end else begin
      sel1 <= dev_en[0] ? (N'(1) << diag) : '0;
      sel2 <= dev_en[1] ? (N'(1) << diag) : '0;
    end
  end
endmodule
