// prog_unit: programming FSM and the 32 current-DAC write heads of a core.
//
// One command programs the devices of one polarity and one device index
// (1 or 2) on one diagonal.  Each of the N/8 IDACs serves 8 consecutive
// source lines of the selected polarity; since only one diagonal is enabled,
// all IDACs can drive at once without two pulses sharing a bit line.  The
// FSM runs 8 programming cycles; in cycle k, IDAC i drives SL 8*i + k.  The
// diagonal connects column n to the cell of row (n - diag) mod N, whose
// enable and amplitude come from en_row / amp_row.  Pulse shapes:
//   PULSE_RESET  square, RESET amplitude, RESET width
//   PULSE_SET    SET amplitude, SET width, the last SET_TRAIL cycles a
//                falling ramp (trailing edge)
//   PULSE_PROG   square, per-cell amplitude amp_row, PROG width
// followed by one idle cycle.  32 IDACs, 8 SLs each, 8 cycles per diagonal,
// and the default widths and amplitudes (125 ns / 700 uA RESET, 250 ns with
// 50 ns trailing edge / 125 uA SET, 125 ns iterative pulses) follow the
// published design; the 8-bit amplitude code with 3.125 uA LSB (800 uA
// full scale) is this implementation's choice.
//
// Interface: start with ptype/pol/dev/diag samples the command; while busy,
// sel_dev tells the diagonal decoder which device line to enable; done
// pulses at the end.  Registers A_PROG + P_RESET_AMP .. P_PROG_W.
module prog_unit
  import hermes_pkg::*;
#(
  parameter int N           = 256,
  parameter int SL_PER_IDAC = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  pulse_t               ptype,
  input  logic                 pol,      // 0: positive SLs, 1: negative SLs
  input  logic                 dev,      // 0: device 1, 1: device 2
  input  logic [$clog2(N)-1:0] diag,
  input  logic [N-1:0]         en_row,
  input  logic [7:0]           amp_row [N],
  output logic [7:0]           prog_i [2][N],
  output logic [1:0]           sel_dev,
  output logic                 busy,
  output logic                 done
);
  localparam int N_IDAC = N / SL_PER_IDAC;

  logic [7:0] reset_amp, set_amp;
  logic [8:0] reset_w, set_w, set_trail, prog_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reset_amp <= 8'd224;
      reset_w   <= 9'd125;
      set_amp   <= 8'd40;
      set_w     <= 9'd250;
      set_trail <= 9'd50;
      prog_w    <= 9'd125;
    end else if (cfg.we && cfg.addr[15:8] == A_PROG[15:8]) begin
      case (int'(cfg.addr[7:0]))
        P_RESET_AMP: reset_amp <= cfg.data[7:0];
        P_RESET_W:   reset_w   <= cfg.data[8:0];
        P_SET_AMP:   set_amp   <= cfg.data[7:0];
        P_SET_W:     set_w     <= cfg.data[8:0];
        P_SET_TRAIL: set_trail <= cfg.data[8:0];
        P_PROG_W:    prog_w    <= cfg.data[8:0];
        default: ;
      endcase
    end
  end

  pulse_t               c_type;
  logic                 c_pol, c_dev;
  logic [$clog2(N)-1:0] c_diag;
  logic [N-1:0]         c_en;
  logic [7:0]           c_amp [N];
  logic [$clog2(SL_PER_IDAC)-1:0] k;     // programming cycle
  logic [8:0]           t;               // time within the pulse

  wire [8:0] width = (c_type == PULSE_RESET) ? reset_w :
                     (c_type == PULSE_SET)   ? set_w : prog_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      k      <= '0;
      t      <= '0;
      c_type <= PULSE_RESET;
      c_pol  <= 1'b0;
      c_dev  <= 1'b0;
      c_diag <= '0;
      c_en   <= '0;
      for (int i = 0; i < N; i++) c_amp[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        k      <= '0;
        t      <= '0;
        c_type <= ptype;
        c_pol  <= pol;
        c_dev  <= dev;
        c_diag <= diag;
        c_en   <= en_row;
        c_amp  <= amp_row;
      end else if (busy) begin
        if (t == width) begin          // idle cycle after the pulse
          t <= '0;
          if (int'(k) == SL_PER_IDAC - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          k <= k + 1'b1;
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

  // the IDAC outputs and their SL steering
  logic [7:0] idac [N_IDAC];
  always_comb begin
    for (int i = 0; i < N_IDAC; i++) begin
      int n, m;
      logic [7:0] a;
      n = i * SL_PER_IDAC + int'(k);
      m = (n - int'(c_diag) + N) % N;
      a = '0;
      if (busy && t < width && c_en[m]) begin
        case (c_type)
          PULSE_RESET: a = reset_amp;
          PULSE_SET:
            if (t < set_w - set_trail) a = set_amp;
            else a = 8'((32'(set_amp) * 32'(set_w - t)) / (32'(set_trail) + 1) + 1);
          default: a = c_amp[m];
        endcase
      end
      idac[i] = a;
    end
    for (int p = 0; p < 2; p++)
      for (int n = 0; n < N; n++)
        prog_i[p][n] = (busy && 1'(p) == c_pol && (n % SL_PER_IDAC) == int'(k))
                       ? idac[n / SL_PER_IDAC] : 8'd0;
  end

  assign sel_dev = busy ? (c_dev ? 2'b10 : 2'b01) : 2'b00;
endmodule
