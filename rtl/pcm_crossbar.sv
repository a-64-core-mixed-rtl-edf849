// pcm_crossbar: behavioural model of the 256x256 array of 8T4R PCM unit cells.
//
// BEHAVIOURAL MODEL of an analog part, for simulation only: the real array
// is PCM devices and access transistors, not logic.
//
// Every unit cell (row m, column n) holds four devices: g1+, g2+ on bit line
// BL+ and g1-, g2- on BL-, so its conductance is (g1+ + g2+) - (g1- + g2-).
// Device 1 of each polarity is gated by the diagonal select line SEL1[d],
// device 2 by SEL2[d], with d = (n - m) mod N.  Conductances are integers in
// ADC-count units.
//
// Read: each column's SL+ and SL- is at V- (adds current), V+ (subtracts)
// or floating.  In every cycle with rd_en the model sums, for every row,
// the currents of the conducting devices and presents them one cycle later
// on i_row (with i_valid and the delayed neg_phase tag), i.e. the charge of
// one cycle in conductance units.
//
// Programming: prog_i holds the current code of the IDAC driving each SL
// (LSB = 3.125 uA).  The model watches each SL's pulse and, when it ends,
// updates the device that the enabled diagonal connects to that SL:
//   * a pulse that ended in a falling ramp (SET with trailing edge) sets the
//     device to its own SET conductance gset;
//   * a square pulse of peak code I sets it to
//     gset * (I_RESET - I) / (I_RESET - I_MIN), limited to [0, gset], plus a
//     small pseudo-random programming noise of -2..+2 counts (0 after a
//     full RESET).
// gset is a fixed pseudo-random value per device between GSET_LO and
// GSET_HI.  This device response is a model choice; the original design
// only states that higher programming currents reset the device further.
//
// The conductances g[pol][dev][row][col] may be preloaded by a testbench.
// The conductance array has no reset, like the non-volatile devices it
// models; it must be programmed or preloaded before it is read.
module pcm_crossbar
  import hermes_pkg::*;
#(
  parameter int N       = 256,
  parameter int I_RESET = 224,   // 700 uA
  parameter int I_MIN   = 40,    // 125 uA
  parameter int GSET_LO = 70,
  parameter int GSET_HI = 130
) (
  input  logic              clk,
  input  logic              rst_n,
  input  sl_t               sl_p [N],
  input  sl_t               sl_n [N],
  input  logic [N-1:0]      sel1,
  input  logic [N-1:0]      sel2,
  input  logic              rd_en,
  input  logic              rd_neg,
  input  logic [7:0]        prog_i [2][N],   // [0]: SL+, [1]: SL-
  output logic signed [31:0] i_row [N],
  output logic              i_valid,
  output logic              i_neg
);
  logic [7:0] g [2][2][N][N];   // [pol][dev][row][col]

  // per-device SET conductance, a fixed hash of its position
  function automatic int gset(input int pol, input int dev, input int m, input int n);
    longint h;
    h = longint'(m * 7919 + n * 104729 + pol * 31337 + dev * 7177) % 65521;
    h = (h * 2654435) % 65521;
    return GSET_LO + int'(h % longint'(GSET_HI - GSET_LO + 1));
  endfunction

  // ---------------- read ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_valid <= 1'b0;
      i_neg   <= 1'b0;
      for (int m = 0; m < N; m++) i_row[m] <= '0;
    end else begin
      i_valid <= rd_en;
      i_neg   <= rd_neg;
      if (rd_en) begin
        for (int m = 0; m < N; m++) begin
          int acc;
          acc = 0;
          for (int n = 0; n < N; n++) begin
            int d, sp, sn;
            sp = (sl_p[n] == SL_VNEG) ? 1 : (sl_p[n] == SL_VPOS) ? -1 : 0;
            sn = (sl_n[n] == SL_VNEG) ? 1 : (sl_n[n] == SL_VPOS) ? -1 : 0;
            if (sp != 0 || sn != 0) begin
              d = (n - m + N) % N;
              if (sel1[d]) acc += sp * int'(g[0][0][m][n]) + sn * int'(g[1][0][m][n]);
              if (sel2[d]) acc += sp * int'(g[0][1][m][n]) + sn * int'(g[1][1][m][n]);
            end
          end
          i_row[m] <= acc;
        end
      end
    end
  end

  // ---------------- programming ----------------
  logic [7:0] prev [2][N];
  logic [7:0] peak [2][N];
  logic       ramp [2][N];
  logic [15:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hACE1;
      for (int p = 0; p < 2; p++)
        for (int n = 0; n < N; n++) begin
          prev[p][n] <= '0;
          peak[p][n] <= '0;
          ramp[p][n] <= 1'b0;
        end
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      for (int p = 0; p < 2; p++)
        for (int n = 0; n < N; n++) begin
          logic [7:0] cur;
          cur = prog_i[p][n];
          prev[p][n] <= cur;
          if (cur != 0) begin
            if (cur > peak[p][n]) peak[p][n] <= cur;
            // falling but still on: a trailing edge
            if (cur < prev[p][n]) ramp[p][n] <= 1'b1;
          end else if (prev[p][n] != 0) begin
            // end of pulse: update the device(s) the enabled diagonal selects
            for (int d = 0; d < N; d++) begin
              int m;
              m = (n - d + N) % N;
              for (int dv = 0; dv < 2; dv++) begin
                if ((dv == 0) ? sel1[d] : sel2[d]) begin
                  int gs, gv, pk;
                  gs = gset(p, dv, m, n);
                  pk = int'(peak[p][n]);
                  if (ramp[p][n]) gv = gs;
                  else if (pk >= I_RESET) gv = 0;
                  else begin
                    gv = pk <= I_MIN ? gs : gs * (I_RESET - pk) / (I_RESET - I_MIN);
                    gv = gv + int'({29'd0, lfsr[2:0]} % 32'd5) - 2;
                    if (gv < 0) gv = 0;
                    if (gv > gs) gv = gs;
                  end
                  g[p][dv][m][n] <= 8'(gv);
                end
              end
            end
            peak[p][n] <= '0;
            ramp[p][n] <= 1'b0;
          end
        end
    end
  end
endmodule
