// aimc_core: one analog in-memory compute core.
//
// Holds a 256x256 weight matrix in PCM unit cells and computes y = W x for
// a 256-element INT8 input vector x.  Data path of an MVM:
//   input registers -> input modulator (PWM pulses on the source lines) ->
//   crossbar (one current per row) -> 256 ADCs (2 x 12-bit counts per row) ->
//   LDPU (register arrays, convert-and-scale, activation, link input) ->
//   link controller (to neighbouring cores, a GDPU, or the core output).
// Programming path: iterative program-and-verify sequencer -> programming
// FSM and IDACs -> diagonal decoder -> crossbar; verify reads use the input
// modulator and ADCs.
//
// Operation (command register A_CMD):
//   bit 0        start an MVM, bits 2:1 its mode (0: 1-phase, 1: 4-phase)
//   bit 3        program one diagonal, bits 15:8 the diagonal; the targets
//                are the registers A_TARGET + row
// An MVM runs: clear ADCs (1 cycle), modulation (TPWM or 4*TPWM cycles),
// drain (2 cycles), hand-over to the LDPU.  The hand-over waits until the
// LDPU has finished the previous vector, and a new MVM waits until the ADC
// results have been copied into the LDPU, so the analog MVM of one vector
// overlaps the digital processing of the previous one.  mvm_done pulses at
// hand-over; the INT8 results then leave the LDPU at one per cycle.
// Which block is the paper's and which choice is this implementation's is
// stated in each sub-block; the command register, address map and the
// sequencing above are this implementation's.
//
// Interface: cfg writes (already selected for this core), six TX and seven
// RX links (six neighbours plus the chip input buffer), the LDPU output
// stream, status counters.
module aimc_core
  import hermes_pkg::*;
#(
  parameter int N    = 256,
  parameter int TPWM = 128,
  parameter int VERIFY_W  = 512,
  parameter int PRECHARGE = 256,
  parameter int CHARGE_PER_COUNT = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  output link_t             tx [6],
  input  link_t             rx [7],
  output logic              out_valid,
  output logic signed [7:0] out_data,
  output logic              out_last,
  output logic              mvm_done,
  output logic              prog_done,
  output logic              busy,
  output logic [31:0]       ldpu_stall_cycles,
  output logic [15:0]       link_drops,
  output logic [5:0]        prog_iterations,
  output logic [$clog2(N):0] prog_converged
);
  localparam int NW = $clog2(N);

  // ---------------- registers ----------------
  logic signed [7:0] xin [N];
  logic signed [7:0] tgt [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        xin[i] <= '0;
        tgt[i] <= '0;
      end
    end else if (cfg.we) begin
      if (cfg.addr[15:8] == A_INPUT[15:8] && int'(cfg.addr[7:0]) < N)  xin[cfg.addr[NW-1:0]] <= cfg.data[7:0];
      if (cfg.addr[15:8] == A_TARGET[15:8] && int'(cfg.addr[7:0]) < N) tgt[cfg.addr[NW-1:0]] <= cfg.data[7:0];
    end
  end
  wire cmd_we = cfg.we && cfg.addr == A_CMD;

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {Q_IDLE, Q_WAITX, Q_CLEAR, Q_RUN, Q_DRAIN, Q_WAITL, Q_CAP} seq_t;
  seq_t       q;
  logic       req_mvm, req_rd, mvm_4ph;
  logic       q_is_verify;
  logic [1:0] drain;
  logic       ldpu_xfer_done, ldpu_idle;
  logic       mod_start, mod_busy, mod_done, integ, negph;
  mod_mode_t  mod_mode;
  logic       adc_clear, capture;
  logic       rd_start, rd_pol, rd_done;
  logic [1:0] rd_dev;
  logic       prog_start;
  logic [NW-1:0] prog_diag;
  logic       ip_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q           <= Q_IDLE;
      req_mvm     <= 1'b0;
      req_rd      <= 1'b0;
      mvm_4ph     <= 1'b0;
      q_is_verify <= 1'b0;
      drain       <= '0;
      mvm_done    <= 1'b0;
      rd_done     <= 1'b0;
      prog_start  <= 1'b0;
      prog_diag   <= '0;
    end else begin
      mvm_done   <= 1'b0;
      rd_done    <= 1'b0;
      prog_start <= 1'b0;
      if (cmd_we && cfg.data[0]) begin
        req_mvm <= 1'b1;
        mvm_4ph <= cfg.data[1];
      end
      if (rd_start) req_rd <= 1'b1;
      if (cmd_we && cfg.data[3] && !ip_busy) begin
        prog_start <= 1'b1;
        prog_diag  <= cfg.data[8 +: NW];
      end
      case (q)
        Q_IDLE:
          if (req_rd) begin
            req_rd      <= 1'b0;
            q_is_verify <= 1'b1;
            q           <= Q_CLEAR;
          end else if (req_mvm && !ip_busy) begin
            q_is_verify <= 1'b0;
            req_mvm     <= 1'b0;
            q           <= Q_WAITX;
          end
        Q_WAITX: if (ldpu_xfer_done) q <= Q_CLEAR;
        Q_CLEAR: q <= Q_RUN;
        Q_RUN:   if (mod_done) begin
          q     <= Q_DRAIN;
          drain <= '0;
        end
        Q_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd1) begin
            if (q_is_verify) begin
              rd_done <= 1'b1;
              q       <= Q_IDLE;
            end else q <= Q_WAITL;
          end
        end
        Q_WAITL: if (ldpu_idle) q <= Q_CAP;
        Q_CAP: begin
          mvm_done <= 1'b1;
          q        <= Q_IDLE;
        end
        default: q <= Q_IDLE;
      endcase
    end
  end

  assign adc_clear = q == Q_CLEAR;
  assign mod_start = q == Q_CLEAR;
  assign capture   = q == Q_CAP;
  assign mod_mode  = q_is_verify ? MOD_VERIFY : (mvm_4ph ? MOD_4PH : MOD_1PH);
  logic         pg_busy;
  assign busy      = q != Q_IDLE || req_mvm || ip_busy || !ldpu_idle || mod_busy || pg_busy;

  // ---------------- analog front end ----------------
  sl_t          sl_p [N];
  sl_t          sl_n [N];
  logic [N-1:0] sel1, sel2;
  logic [7:0]   prog_i [2][N];
  logic signed [31:0] i_row [N];
  logic         i_valid, i_neg;
  logic [11:0]  cnt_p [N];
  logic [11:0]  cnt_n [N];
  logic [1:0]   pg_sel_dev;
  logic         verify_pol_r;
  logic [1:0]   verify_dev_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      verify_pol_r <= 1'b0;
      verify_dev_r <= 2'b00;
    end else if (rd_start) begin
      verify_pol_r <= rd_pol;
      verify_dev_r <= rd_dev;
    end else if (rd_done) begin
      verify_dev_r <= 2'b00;
    end
  end

  input_modulator #(.N(N), .TPWM(TPWM), .VERIFY_W(VERIFY_W), .PRECHARGE(PRECHARGE)) u_mod (
    .clk, .rst_n, .start(mod_start), .mode(mod_mode), .verify_pol(verify_pol_r),
    .x(xin), .sl_p, .sl_n, .integrate(integ), .neg_phase(negph),
    .busy(mod_busy), .done(mod_done)
  );

  diag_decoder #(.N(N)) u_diag (
    .clk, .rst_n, .all(!ip_busy), .diag(prog_diag),
    .dev_en(pg_sel_dev | verify_dev_r), .sel1, .sel2
  );

  pcm_crossbar #(.N(N)) u_xbar (
    .clk, .rst_n, .sl_p, .sl_n, .sel1, .sel2, .rd_en(integ), .rd_neg(negph),
    .prog_i, .i_row, .i_valid, .i_neg
  );

  for (genvar m = 0; m < N; m++) begin : g_adc
    cco_adc #(.ROW(m), .CHARGE_PER_COUNT(CHARGE_PER_COUNT)) u_adc (
      .clk, .rst_n, .cfg, .clear(adc_clear), .integrate(i_valid), .neg_phase(i_neg),
      .four_phase(mvm_4ph && !q_is_verify), .i_row(i_row[m]),
      .cnt_p(cnt_p[m]), .cnt_n(cnt_n[m])
    );
  end

  // ---------------- programming ----------------
  logic         pg_start, pg_pol, pg_dev, pg_done;
  pulse_t       pg_type;
  logic [N-1:0] pg_en;
  logic [7:0]   pg_amp [N];

  iter_prog #(.N(N)) u_iter (
    .clk, .rst_n, .cfg, .start(prog_start), .target(tgt),
    .pg_start, .pg_type, .pg_pol, .pg_dev, .pg_en, .pg_amp, .pg_done,
    .rd_start, .rd_pol, .rd_dev, .rd_done, .cnt(cnt_p),
    .busy(ip_busy), .done(prog_done), .iterations(prog_iterations), .n_conv(prog_converged)
  );

  prog_unit #(.N(N)) u_prog (
    .clk, .rst_n, .cfg, .start(pg_start), .ptype(pg_type), .pol(pg_pol), .dev(pg_dev),
    .diag(prog_diag), .en_row(pg_en), .amp_row(pg_amp),
    .prog_i, .sel_dev(pg_sel_dev), .busy(pg_busy), .done(pg_done)
  );

  // ---------------- digital back end ----------------
  logic       rxl_valid;
  logic [7:0] rxl_data;

  ldpu #(.N(N)) u_ldpu (
    .clk, .rst_n, .cfg, .capture, .adc_p(cnt_p), .adc_n(cnt_n),
    .xfer_done(ldpu_xfer_done), .idle(ldpu_idle),
    .rx_valid(rxl_valid), .rx_data(rxl_data),
    .out_valid, .out_data, .out_last, .stall_cycles(ldpu_stall_cycles)
  );

  link_controller #(.NTX(6), .NRX(7)) u_link (
    .clk, .rst_n, .cfg,
    .ldpu_valid(out_valid), .ldpu_data(out_data), .ldpu_last(out_last),
    .to_ldpu_valid(rxl_valid), .to_ldpu_data(rxl_data),
    .tx, .rx, .rx_drop(link_drops)
  );
endmodule
