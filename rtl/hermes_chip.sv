// hermes_chip: top level of the 64-core analog in-memory compute chip.
//
// 8 x 8 AIMC cores, each storing a 256x256 weight matrix in PCM, and a row
// of 8 GDPU slices (LSTM element processors) placed between core rows 4 and
// 5.  Weights stay in place; only INT8 activation vectors move, over
// 8-bit-wide core-to-core links.  Link fabric (rows and columns counted
// from 1 as in the floorplan):
//   * vertical: every core sends to and receives from the cores directly
//     above and below it;
//   * horizontal: rows are paired (1-2, 3-4, 5-6, 7-8); core (r, c) sends to
//     the cores at columns c-1 and c-2 of its own row and of the paired row,
//     and so receives from columns c+1 and c+2;
//   * core (4, c) also drives GDPU slice c, on the same wire as its link to
//     core (5, c);
//   * the input buffer broadcasts off-chip packets to every core.
// This gives each core at most six link partners in each direction.  The
// pattern is the one shown for cores (3,5) and (4,5) in the published link
// diagram, applied to every core; the published chip has 418 physical links,
// this regular pattern has 336 (see the README).
//
// Interface: a configuration write port that selects one core (cfg_sel
// 0..63 = row*8 + column, 0-based) or one GDPU slice (64..71); the input
// buffer's off-chip byte port; every core's LDPU output stream and the GDPU
// outputs (these go off-chip, where the layer-to-layer transfer happens);
// status per core.  VERIFY_W, PRECHARGE and CHARGE_PER_COUNT set the verify
// read (512-cycle pulse after a 256-cycle precharge) and the ADC model's
// charge per count; they are parameters only so that simulations can
// shorten programming.
module hermes_chip
  import hermes_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8,
  parameter int N    = 256,
  parameter int TPWM = 128,
  parameter int VERIFY_W  = 512,
  parameter int PRECHARGE = 256,
  parameter int CHARGE_PER_COUNT = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic [6:0]        cfg_sel,
  input  logic              in_valid,
  input  logic              in_sop,
  input  logic [7:0]        in_data,
  output logic              in_full,
  output logic              core_out_valid [ROWS*COLS],
  output logic signed [7:0] core_out_data  [ROWS*COLS],
  output logic              core_out_last  [ROWS*COLS],
  output logic              core_mvm_done  [ROWS*COLS],
  output logic              core_prog_done [ROWS*COLS],
  output logic              core_busy      [ROWS*COLS],
  output logic [31:0]       core_stalls    [ROWS*COLS],
  output logic [15:0]       core_link_drops[ROWS*COLS],
  output logic [5:0]        core_prog_iter [ROWS*COLS],
  output logic [$clog2(N):0] core_prog_conv [ROWS*COLS],
  output logic              gdpu_out_valid [COLS],
  output logic signed [7:0] gdpu_out_data  [COLS],
  output logic [5:0]        gdpu_out_idx   [COLS]
);
  localparam int NC = ROWS * COLS;
  localparam int GROW = ROWS / 2 - 1;   // 0-based row of the cores above the GDPUs

  link_t tx [NC][6];
  link_t rx [NC][7];
  link_t ib_tx;

  input_buffer u_inbuf (
    .clk, .rst_n, .in_valid, .in_sop, .in_data, .full(in_full), .tx(ib_tx)
  );

  function automatic int idx(input int r, input int c);
    return r * COLS + c;
  endfunction

  // link fabric: RX port k of core (r, c) is TX port k of its source core
  //   0 from above (its TX 1), 1 from below (its TX 0),
  //   2 from (r, c+2), 3 from (r, c+1), 4 from (p, c+2), 5 from (p, c+1),
  //   6 input buffer; p = the paired row
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int p;
        p = r ^ 1;
        for (int k = 0; k < 7; k++) rx[idx(r, c)][k] = '0;
        if (r > 0)        rx[idx(r, c)][0] = tx[idx(r-1, c)][1];
        if (r < ROWS - 1) rx[idx(r, c)][1] = tx[idx(r+1, c)][0];
        if (c + 2 < COLS) rx[idx(r, c)][2] = tx[idx(r, c+2)][2];
        if (c + 1 < COLS) rx[idx(r, c)][3] = tx[idx(r, c+1)][3];
        if (p < ROWS && c + 2 < COLS) rx[idx(r, c)][4] = tx[idx(p, c+2)][4];
        if (p < ROWS && c + 1 < COLS) rx[idx(r, c)][5] = tx[idx(p, c+1)][5];
        rx[idx(r, c)][6] = ib_tx;
      end
  end

  for (genvar i = 0; i < NC; i++) begin : g_core
    cfg_t ccfg;
    always_comb begin
      ccfg    = cfg;
      ccfg.we = cfg.we && int'(cfg_sel) == i;
    end
    aimc_core #(.N(N), .TPWM(TPWM), .VERIFY_W(VERIFY_W), .PRECHARGE(PRECHARGE),
                .CHARGE_PER_COUNT(CHARGE_PER_COUNT)) u_core (
      .clk, .rst_n, .cfg(ccfg), .tx(tx[i]), .rx(rx[i]),
      .out_valid(core_out_valid[i]), .out_data(core_out_data[i]), .out_last(core_out_last[i]),
      .mvm_done(core_mvm_done[i]), .prog_done(core_prog_done[i]), .busy(core_busy[i]),
      .ldpu_stall_cycles(core_stalls[i]), .link_drops(core_link_drops[i]),
      .prog_iterations(core_prog_iter[i]), .prog_converged(core_prog_conv[i])
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_gdpu
    cfg_t gcfg;
    always_comb begin
      gcfg    = cfg;
      gcfg.we = cfg.we && int'(cfg_sel) == NC + c;
    end
    gdpu_slice u_gdpu (
      .clk, .rst_n, .cfg(gcfg), .rx(tx[idx(GROW, c)][1]),
      .out_valid(gdpu_out_valid[c]), .out_data(gdpu_out_data[c]), .out_idx(gdpu_out_idx[c])
    );
  end
endmodule
