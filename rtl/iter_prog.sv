// iter_prog: program-and-verify sequencer for one diagonal of unit cells.
//
// Writes the signed target conductances target[m] (ADC counts) into the N
// cells of diagonal 'diag' (row m, column (m + diag) mod N):
//   1. RESET all four devices of every cell.
//   2. SET the devices of the weight's polarity: device 1 (one-device
//      programming, ODP) or devices 1 and 2 (two-device programming, TDP).
//   3. TDP only: read both SET conductances g1, g2; with gmax/gmin their
//      maximum/minimum and G = |target|:
//        gmin + gmax < G : the weight cannot fit, no further updates;
//        gmax < G        : iterate on the gmin device, leave gmax at SET;
//        otherwise       : iterate on the gmax device, RESET the gmin one.
//      ODP always iterates on device 1.
//   4. Iterate at most MAX_ITER times: read the cell conductance of its
//      polarity (both devices); a cell whose |G - read| < MARGIN is done;
//      the others get a square pulse whose current is updated in
//      proportion to the error, amp <- amp - GAIN * (G - read) (more
//      current leaves less conductance), limited to the 125..700 uA codes.
// Steps 1-4, the TDP decision, the 5-count margin and the 30-iteration
// limit follow the published programming procedure; performing the loop in
// on-chip logic, the first amplitude, the gain and the order of commands
// are this implementation's choices.
//
// Interface: start with diag and target[] (held by the caller); the
// sequencer issues pulse commands to prog_unit (pg_*) and verify reads
// (rd_*; the read result is cnt[], the positive ADC counts of every row);
// done pulses at the end; iterations and n_conv report the outcome.
// Registers A_PROG + P_INIT_AMP .. P_TDP.
module iter_prog
  import hermes_pkg::*;
#(
  parameter int N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 start,
  input  logic signed [7:0]    target [N],
  // to prog_unit
  output logic                 pg_start,
  output pulse_t               pg_type,
  output logic                 pg_pol,
  output logic                 pg_dev,
  output logic [N-1:0]         pg_en,
  output logic [7:0]           pg_amp [N],
  input  logic                 pg_done,
  // verify reads
  output logic                 rd_start,
  output logic                 rd_pol,
  output logic [1:0]           rd_dev,
  input  logic                 rd_done,
  input  logic [11:0]          cnt [N],
  // status
  output logic                 busy,
  output logic                 done,
  output logic [5:0]           iterations,
  output logic [$clog2(N):0]   n_conv
);
  localparam int A_LO = 40, A_HI = 224;   // 125 uA .. 700 uA

  logic [7:0] init_amp, gain, margin;
  logic [5:0] max_iter;
  logic       tdp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_amp <= 8'd40;
      gain     <= 8'd2;
      margin   <= 8'd5;
      max_iter <= 6'd30;
      tdp      <= 1'b0;
    end else if (cfg.we && cfg.addr[15:8] == A_PROG[15:8]) begin
      case (int'(cfg.addr[7:0]))
        P_INIT_AMP: init_amp <= cfg.data[7:0];
        P_GAIN:     gain     <= cfg.data[7:0];
        P_MARGIN:   margin   <= cfg.data[7:0];
        P_MAX_ITER: max_iter <= cfg.data[5:0];
        P_TDP:      tdp      <= cfg.data[0];
        default: ;
      endcase
    end
  end

  typedef enum logic [3:0] {S_IDLE, S_RESET, S_SET, S_TREAD, S_TSEL, S_TRST,
                            S_VREAD, S_CHECK, S_PROG, S_DONE} state_t;
  state_t     st;
  logic [1:0] c;          // sub-step: {pol, dev} of the current command/read
  logic       waiting;

  logic [N-1:0] conv;     // cell needs no further pulses
  logic [N-1:0] pdev;     // device that receives the iterative pulses (0: dev 1)
  logic [N-1:0] rst_oth;  // TDP: RESET the other device
  logic [7:0]   amp  [N];
  logic [11:0]  gs   [2][N];   // TDP SET reads
  logic [11:0]  gr   [N];      // latest cell read

  function automatic logic cell_pol(input logic signed [7:0] v);
    return v < 0;
  endfunction
  function automatic int mag(input logic signed [7:0] v);
    return v < 0 ? -int'(v) : int'(v);
  endfunction

  // enable mask of the command for sub-step c in the current state
  logic [N-1:0] en_c;
  always_comb begin
    for (int m = 0; m < N; m++) begin
      logic pm;
      pm = cell_pol(target[m]) == c[1];
      case (st)
        S_RESET: en_c[m] = 1'b1;
        S_SET:   en_c[m] = pm && target[m] != 0 && (c[0] == 1'b0 || tdp);
        S_TRST:  en_c[m] = pm && rst_oth[m] && (pdev[m] != c[0]);
        S_PROG:  en_c[m] = pm && !conv[m] && (pdev[m] == c[0]);
        default: en_c[m] = 1'b0;
      endcase
    end
  end

  wire is_cmd  = st == S_RESET || st == S_SET || st == S_TRST || st == S_PROG;
  wire is_read = st == S_TREAD || st == S_VREAD;
  wire last_c  = (st == S_VREAD) ? c == 2'b10 : c == 2'b11;

  always_comb begin
    pg_type = (st == S_SET) ? PULSE_SET : (st == S_PROG) ? PULSE_PROG : PULSE_RESET;
    pg_pol  = c[1];
    pg_dev  = c[0];
    pg_en   = en_c;
    pg_amp  = amp;
    rd_pol  = c[1];
    rd_dev  = (st == S_TREAD) ? (c[0] ? 2'b10 : 2'b01) : 2'b11;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      c          <= '0;
      waiting    <= 1'b0;
      pg_start   <= 1'b0;
      rd_start   <= 1'b0;
      done       <= 1'b0;
      iterations <= '0;
      conv       <= '0;
      pdev       <= '0;
      rst_oth    <= '0;
      for (int m = 0; m < N; m++) begin
        amp[m]   <= '0;
        gs[0][m] <= '0;
        gs[1][m] <= '0;
        gr[m]    <= '0;
      end
    end else begin
      pg_start <= 1'b0;
      rd_start <= 1'b0;
      done     <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st         <= S_RESET;
          c          <= '0;
          waiting    <= 1'b0;
          iterations <= '0;
          for (int m = 0; m < N; m++) begin
            conv[m]    <= target[m] == 0;
            pdev[m]    <= 1'b0;
            rst_oth[m] <= 1'b0;
            amp[m]     <= init_amp;
          end
        end
        S_TSEL: begin
          for (int m = 0; m < N; m++) begin
            int g1, g2, gmax, gmin, gt;
            g1 = int'(gs[0][m]);
            g2 = int'(gs[1][m]);
            gmax = g1 > g2 ? g1 : g2;
            gmin = g1 > g2 ? g2 : g1;
            gt = mag(target[m]);
            if (target[m] != 0) begin
              if (gmin + gmax < gt) begin
                conv[m] <= 1'b1;                     // cannot fit
              end else if (gmax < gt) begin
                pdev[m] <= (g1 > g2) ? 1'b1 : 1'b0;  // program gmin
              end else begin
                pdev[m]    <= (g1 > g2) ? 1'b0 : 1'b1; // program gmax
                rst_oth[m] <= 1'b1;
              end
            end
          end
          st <= S_TRST;
          c  <= '0;
        end
        S_CHECK: begin
          logic all_conv;
          all_conv = 1'b1;
          for (int m = 0; m < N; m++) begin
            int err, a;
            err = mag(target[m]) - int'(gr[m]);
            if (!conv[m]) begin
              if (err < int'(margin) && err > -int'(margin)) conv[m] <= 1'b1;
              else begin
                all_conv = 1'b0;
                a = int'(amp[m]) - int'(gain) * err;
                if (a < A_LO) a = A_LO;
                if (a > A_HI) a = A_HI;
                amp[m] <= 8'(a);
              end
            end
          end
          if (all_conv || iterations == max_iter) st <= S_DONE;
          else begin
            iterations <= iterations + 1'b1;
            st <= S_PROG;
            c  <= '0;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: begin
          // command and read sub-steps
          if (waiting) begin
            if ((is_cmd && pg_done) || (is_read && rd_done)) begin
              waiting <= 1'b0;
              if (is_read)
                for (int m = 0; m < N; m++)
                  if (cell_pol(target[m]) == c[1]) begin
                    if (st == S_TREAD) gs[c[0]][m] <= cnt[m];
                    else gr[m] <= cnt[m];
                  end
              c <= (st == S_VREAD) ? c + 2'd2 : c + 2'd1;
              if (last_c) begin
                c <= '0;
                case (st)
                  S_RESET: st <= S_SET;
                  S_SET:   st <= tdp ? S_TREAD : S_VREAD;
                  S_TREAD: st <= S_TSEL;
                  S_TRST:  st <= S_VREAD;
                  S_VREAD: st <= S_CHECK;
                  default: st <= S_VREAD;  // S_PROG
                endcase
              end
            end
          end else if (is_cmd && en_c == '0) begin
            // nothing to do for this {pol, dev}: skip the command
            c <= c + 2'd1;
            if (last_c) begin
              c <= '0;
              case (st)
                S_RESET: st <= S_SET;
                S_SET:   st <= tdp ? S_TREAD : S_VREAD;
                S_TRST:  st <= S_VREAD;
                default: st <= S_VREAD;
              endcase
            end
          end else begin
            waiting  <= 1'b1;
            pg_start <= is_cmd;
            rd_start <= is_read;
          end
        end
      endcase
    end
  end

  assign busy = st != S_IDLE;
  always_comb begin
    n_conv = '0;
    for (int m = 0; m < N; m++)
      if (target[m] != 0 && conv[m]) n_conv = n_conv + 1'b1;
  end
endmodule
