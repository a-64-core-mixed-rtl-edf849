// adc_reg_array: ADC register array of one side of the LDPU.
//
// After an MVM the counts of the N ADCs on one side of the crossbar are
// moved into this register array over a shared 24-bit bus ({P, N} counts),
// one ADC per clock cycle.  Once a value is in the array the ADC is free for
// the next MVM, and the convert-and-scale unit reads the array at its own
// pace, so conversion and the next analog MVM overlap.  The shared bus is
// driven by tri-state buffers in the chip; here it is modelled as a
// multiplexer selected by the transfer counter (same function, no Z state).
//
// Interface: a one-cycle 'capture' starts the transfer; wr_count tells how
// many entries already hold new data (the reader may read entry k as soon
// as k < wr_count); xfer_done is high from the end of the transfer until the
// next capture.  Read is combinational: rd_idx -> rd_p/rd_n.  A transfer
// takes N cycles.
module adc_reg_array #(
  parameter int N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 capture,
  input  logic [11:0]          adc_p [N],
  input  logic [11:0]          adc_n [N],
  output logic [$clog2(N):0]   wr_count,
  output logic                 xfer_done,
  input  logic [$clog2(N)-1:0] rd_idx,
  output logic [11:0]          rd_p,
  output logic [11:0]          rd_n
);
  logic [23:0] regs [N];
  logic        busy;
  logic [23:0] bus;

  // the 24-bit result bus: the addressed ADC drives it
  always_comb bus = {adc_p[wr_count[$clog2(N)-1:0]], adc_n[wr_count[$clog2(N)-1:0]]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      wr_count <= '0;
      for (int i = 0; i < N; i++) regs[i] <= '0;
    end else if (capture) begin
      busy     <= 1'b1;
      wr_count <= '0;
    end else if (busy) begin
      regs[wr_count[$clog2(N)-1:0]] <= bus;
      wr_count <= wr_count + 1'b1;
      if (int'(wr_count) == N - 1) busy <= 1'b0;
    end
  end

  assign xfer_done = !busy && !capture;
  assign rd_p = regs[rd_idx][23:12];
  assign rd_n = regs[rd_idx][11:0];
endmodule
