// tanh_lut: piecewise-linear hyperbolic-tangent look-up of the GDPU.
//
// A bank of 17 FP16 comparators locates the input x among 17 ascending
// thresholds, i.e. in one of 18 bins, and the bin's slope and offset are
// read from the table; the GDPU then evaluates slope*x + offset in an FP16
// FMA.  Bin b holds inputs with thr[b-1] <= x < thr[b] (bin 0 below thr[0],
// bin 17 at or above thr[16]).  17 comparators and 18 bins follow the
// published design; the threshold values and the table contents are
// registers written through cfg (A_GDPU + G_THR/G_SLOPE/G_OFF) and are not
// given by the original, so the user computes them (for example secant
// segments of tanh).  Reset: all zero.
//
// Timing: combinational, x to bin/slope/offset.
module tanh_lut
  import hermes_pkg::*;
#(
  parameter int NBIN = 18
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  fp16_t                   x,
  output logic [$clog2(NBIN)-1:0] bin,
  output fp16_t                   slope,
  output fp16_t                   offset
);
  fp16_t thr [NBIN-1];
  fp16_t slp [NBIN];
  fp16_t ofs [NBIN];

  wire       hit = cfg.we && cfg.addr[15:8] == A_GDPU[15:8];
  wire [7:0] off = cfg.addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBIN - 1; i++) thr[i] <= '0;
      for (int i = 0; i < NBIN; i++) begin
        slp[i] <= '0;
        ofs[i] <= '0;
      end
    end else if (hit) begin
      for (int i = 0; i < NBIN - 1; i++) if (int'(off) == G_THR + i) thr[i] <= cfg.data;
      for (int i = 0; i < NBIN; i++) begin
        if (int'(off) == G_SLOPE + i) slp[i] <= cfg.data;
        if (int'(off) == G_OFF + i)   ofs[i] <= cfg.data;
      end
    end
  end

  // comparator bank: count the thresholds that x has reached
  always_comb begin
    bin = '0;
    for (int i = 0; i < NBIN - 1; i++)
      if (!fp16_lt(x, thr[i])) bin = bin + 1'b1;
  end
  assign slope  = slp[bin];
  assign offset = ofs[bin];
endmodule
