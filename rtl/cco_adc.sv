// cco_adc: behavioural model of one time-based current ADC.
//
// BEHAVIOURAL MODEL of an analog part, for simulation only.
//
// The real ADC holds its bit line at a fixed voltage, feeds the bit-line
// current through a trimmable current mirror into a current-controlled
// oscillator, and counts the oscillator's edges in two 12-bit ripple
// counters: one for positive and one for negative current.  The model adds
// the charge of each integrating cycle (current x gain trim / 128) to the
// positive or negative accumulator and reports
//     count = min(charge / CHARGE_PER_COUNT, 4095).
// In 1-phase mode the sign of the current picks the counter; in 4-phase
// mode the modulator's neg_phase flag does.  With CHARGE_PER_COUNT = 512 a
// verify read (512-cycle pulse on one device) returns the device's
// conductance in counts, which is how conductances are quoted.  The
// saturation at 4095 stands for the ADC's limited linear current range.
// Gain trim register: A_TRIM + ROW, 8 bits, 128 = unity (reset value).
// The read-voltage offset-correction DAC of the real ADC is not modelled.
//
// Interface: 'clear' zeroes the counters; while 'integrate' is high the
// current i_row is accumulated; cnt_p/cnt_n are valid one cycle after the
// last integrating cycle.
module cco_adc
  import hermes_pkg::*;
#(
  parameter int ROW              = 0,
  parameter int CHARGE_PER_COUNT = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic               clear,
  input  logic               integrate,
  input  logic               neg_phase,
  input  logic               four_phase,
  input  logic signed [31:0] i_row,
  output logic [11:0]        cnt_p,
  output logic [11:0]        cnt_n
);
  logic [7:0]  trim;
  longint      qp, qn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trim <= 8'd128;
    else if (cfg.we && cfg.addr == A_TRIM + 16'(ROW)) trim <= cfg.data[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qp <= 0;
      qn <= 0;
    end else if (clear) begin
      qp <= 0;
      qn <= 0;
    end else if (integrate) begin
      longint q;
      q = longint'(i_row) * longint'(trim);
      if (four_phase) begin
        if (q < 0) q = -q;
        if (neg_phase) qn <= qn + q;
        else           qp <= qp + q;
      end else if (q >= 0) qp <= qp + q;
      else                 qn <= qn - q;
    end
  end

  function automatic logic [11:0] to_count(input longint charge);
    longint c;
    c = charge / (128 * CHARGE_PER_COUNT);
    return (c > 4095) ? 12'd4095 : 12'(c);
  endfunction

  assign cnt_p = to_count(qp);
  assign cnt_n = to_count(qn);
endmodule
