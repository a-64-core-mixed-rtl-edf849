// input_modulator: pulse-width-modulated input driver of the crossbar.
//
// Each of the N inputs is a signed INT8 value applied as a read pulse whose
// length is |x| clock cycles (1 ns per LSB at 1 GHz) on the source lines of
// its column.  Each SL is tied to V+ (subtracts current), V- (adds current)
// or left floating.
//   1-phase (MOD_1PH), one period of TPWM cycles:
//     x > 0: SL+ at V-, SL- at V+      x < 0: SL+ at V+, SL- at V-
//   4-phase (MOD_4PH), four periods, only V- is used:
//     phase 0: x > 0 on SL+   phase 1: x > 0 on SL-
//     phase 2: x < 0 on SL+   phase 3: x < 0 on SL-
//     In phases 1 and 2 the product is negative, so neg_phase tells the ADC
//     to count into its negative counter.
//   verify (MOD_VERIFY): a precharge of PRECHARGE idle cycles, then a long
//     pulse of VERIFY_W cycles on the SLs of one polarity of every column;
//     the diagonal decoder decides which devices conduct.
// The phase order and the switch settings follow the published modulation
// diagrams; the 512-cycle verify pulse and 256-cycle precharge follow the
// published programming procedure.  TPWM = 128 (the largest |x| of an INT8)
// is this implementation's reading of "8 bit (1 ns/LSB)".
//
// Interface: 'start' with mode/verify_pol samples x; 'integrate' is high in
// the cycles the ADCs must integrate; 'done' pulses one cycle after the
// last pulse cycle.  Latency: TPWM+1 (1-phase), 4*TPWM+1 (4-phase),
// PRECHARGE+VERIFY_W+1 (verify) cycles from start to done.
module input_modulator
  import hermes_pkg::*;
#(
  parameter int N         = 256,
  parameter int TPWM      = 128,
  parameter int VERIFY_W  = 512,
  parameter int PRECHARGE = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  mod_mode_t        mode,
  input  logic             verify_pol,   // 0: SL+, 1: SL-
  input  logic signed [7:0] x [N],
  output sl_t              sl_p [N],
  output sl_t              sl_n [N],
  output logic             integrate,
  output logic             neg_phase,
  output logic             busy,
  output logic             done
);
  localparam int TW = $clog2(PRECHARGE + VERIFY_W + 4 * TPWM + 1);

  mod_mode_t         md;
  logic              vpol;
  logic [TW-1:0]     t;        // cycle within the whole operation
  logic signed [7:0] xs [N];
  logic [TW-1:0]     last_t;

  always_comb begin
    case (md)
      MOD_1PH:    last_t = TW'(TPWM - 1);
      MOD_4PH:    last_t = TW'(4 * TPWM - 1);
      default:    last_t = TW'(PRECHARGE + VERIFY_W - 1);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      md   <= MOD_1PH;
      vpol <= 1'b0;
      for (int i = 0; i < N; i++) xs[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        t    <= '0;
        md   <= mode;
        vpol <= verify_pol;
        xs   <= x;
      end else if (busy) begin
        t <= t + 1'b1;
        if (t == last_t) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // phase and position within the phase
  wire [1:0]    ph   = (md == MOD_4PH) ? 2'(t / TW'(TPWM)) : 2'd0;
  wire [TW-1:0] tin  = (md == MOD_4PH) ? t % TW'(TPWM) : t;

  always_comb begin
    integrate = busy && (md != MOD_VERIFY || t >= TW'(PRECHARGE));
    neg_phase = busy && md == MOD_4PH && (ph == 2'd1 || ph == 2'd2);
    for (int i = 0; i < N; i++) begin
      logic       pos, neg;
      logic [7:0] mag;
      logic       on;
      pos = xs[i] > 0;
      neg = xs[i] < 0;
      mag = neg ? 8'(-xs[i]) : 8'(xs[i]);
      on  = busy && (32'(tin) < 32'(mag));
      sl_p[i] = SL_HIZ;
      sl_n[i] = SL_HIZ;
      case (md)
        MOD_1PH: if (on) begin
          sl_p[i] = pos ? SL_VNEG : SL_VPOS;
          sl_n[i] = pos ? SL_VPOS : SL_VNEG;
        end
        MOD_4PH: if (on) begin
          if (ph == 2'd0 && pos) sl_p[i] = SL_VNEG;
          if (ph == 2'd1 && pos) sl_n[i] = SL_VNEG;
          if (ph == 2'd2 && neg) sl_p[i] = SL_VNEG;
          if (ph == 2'd3 && neg) sl_n[i] = SL_VNEG;
        end
        default: if (integrate) begin
          if (vpol) sl_n[i] = SL_VNEG;
          else      sl_p[i] = SL_VNEG;
        end
      endcase
    end
  end
endmodule
