// ldpu: local digital processing unit of one AIMC core.
//
// Post-processes the 256 ADC results of an MVM into 256 INT8 activations:
//   1. capture: the left (rows 0,2,4,..; odd BLs) and right (rows 1,3,..;
//      even BLs) ADC register arrays copy the ADC counts, 128 cycles.
//   2. each side's convert-and-scale unit is fed every second cycle, the two
//      sides interleaved, so one result per cycle enters the activation
//      block through a multiplexer; output channel j comes from row j.
//   3. the activation block scales, applies ReLU, adds the INT8 partial sum
//      received on the link (when enabled), and converts to INT8.
// The link bytes arrive independently of the local MVM, so they wait in an
// RX buffer (RXBUF bytes deep).  When link combining is enabled, channel j
// is issued only when its link byte is present: the issue stage stalls
// otherwise (stall_cycles counts such cycles).  Everything after the issue
// stage is a fixed 5-cycle pipeline, so throughput is one output per cycle.
// The two-sided arrangement, the one-per-two-cycles rate of each
// convert-and-scale unit and the multiplexer follow the published design;
// the RX buffer and the stall rule are this implementation's choice.
//
// Interface: capture pulse with the 256 ADC count pairs; 'idle' high when no
// result is pending (a new capture may be issued); out_valid/out_data/
// out_last stream to the link transmitter; rx_valid/rx_data from the link
// receiver.  cfg writes reach the calibration and activation registers.
// The assertion below is disabled during reset; lint tools then report rst_n
// as used both asynchronously and synchronously, which is intended.
module ldpu
  import hermes_pkg::*;
#(
  parameter int N     = 256,
  parameter int RXBUF = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              capture,
  input  logic [11:0]       adc_p [N],
  input  logic [11:0]       adc_n [N],
  output logic              xfer_done,
  output logic              idle,
  input  logic              rx_valid,
  input  logic [7:0]        rx_data,
  output logic              out_valid,
  output logic signed [7:0] out_data,
  output logic              out_last,
  output logic [31:0]       stall_cycles
);
  localparam int H  = N / 2;
  localparam int HW = $clog2(H);
  localparam int CW = $clog2(N);
  localparam int TAG_W = 8 + CW + 1;   // {rx byte, channel, last}

  logic [11:0] side_p [2][H];
  logic [11:0] side_n [2][H];
  logic [HW:0] wr_cnt [2];
  logic        xd [2];
  logic [11:0] rd_p [2];
  logic [11:0] rd_n [2];

  // issue state
  logic          active;
  logic [CW:0]   ch;          // next channel to issue
  logic          rx_en;

  // RX buffer
  logic [7:0]           rxq [RXBUF];
  logic [$clog2(RXBUF):0] rx_cnt;
  logic [$clog2(RXBUF)-1:0] rx_wp, rx_rp;

  always_comb begin
    for (int i = 0; i < H; i++) begin
      side_p[0][i] = adc_p[2*i];
      side_n[0][i] = adc_n[2*i];
      side_p[1][i] = adc_p[2*i+1];
      side_n[1][i] = adc_n[2*i+1];
    end
  end

  for (genvar s = 0; s < 2; s++) begin : g_side
    adc_reg_array #(.N(H)) u_regs (
      .clk, .rst_n, .capture,
      .adc_p(side_p[s]), .adc_n(side_n[s]),
      .wr_count(wr_cnt[s]), .xfer_done(xd[s]),
      .rd_idx(ch[HW:1]), .rd_p(rd_p[s]), .rd_n(rd_n[s])
    );
  end
  assign xfer_done = xd[0] && xd[1];

  wire       side     = ch[0];
  wire       entry_ok = int'(ch[CW:1]) < int'(wr_cnt[side]) || xd[side];
  wire       rx_ok    = !rx_en || (rx_cnt != '0);
  wire       issue    = active && entry_ok && rx_ok;
  wire [7:0] rx_byte  = rx_en ? rxq[rx_rp] : 8'd0;
  wire       last     = int'(ch) == N - 1;

  logic             cv [2];
  fp16_t            cy [2];
  logic [TAG_W-1:0] ctag [2];

  for (genvar s = 0; s < 2; s++) begin : g_conv
    adc_convert_scale #(.N(H), .SIDE(s), .TAG_W(TAG_W)) u_conv (
      .clk, .rst_n, .cfg,
      .in_valid(issue && side == 1'(s)),
      .in_idx(ch[HW:1]), .in_p(rd_p[s]), .in_n(rd_n[s]),
      .in_tag({rx_byte, ch[CW-1:0], last}),
      .out_valid(cv[s]), .out_y(cy[s]), .out_tag(ctag[s])
    );
  end

  // the two convert-and-scale outputs never collide (opposite issue slots)
  wire              m_valid = cv[0] || cv[1];
  wire [TAG_W-1:0]  m_tag   = cv[1] ? ctag[1] : ctag[0];
  wire fp16_t       m_y     = cv[1] ? cy[1] : cy[0];

  activation_block #(.N(N)) u_act (
    .clk, .rst_n, .cfg,
    .in_valid(m_valid), .in_v(m_y), .in_ch(m_tag[CW:1]),
    .in_rx($signed(m_tag[TAG_W-1 -: 8])), .in_last(m_tag[0]),
    .out_valid, .out_data, .out_last, .rx_en
  );

  // issue sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      ch           <= '0;
      stall_cycles <= '0;
    end else if (capture) begin
      active <= 1'b1;
      ch     <= '0;
    end else if (active) begin
      if (issue) begin
        ch <= ch + 1'b1;
        if (last) active <= 1'b0;
      end else if (!rx_ok) begin
        stall_cycles <= stall_cycles + 1;
      end
    end
  end

  // pipeline occupancy for 'idle'
  logic [3:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 4'(issue) - 4'(out_valid);
  end
  assign idle = !active && inflight == '0 && !capture;

  // RX buffer
  wire rx_pop  = issue && rx_en;
  wire rx_push = rx_valid && (int'(rx_cnt) < RXBUF || rx_pop);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_cnt <= '0;
      rx_wp  <= '0;
      rx_rp  <= '0;
    end else begin
      if (rx_push) begin
        rxq[rx_wp] <= rx_data;
        rx_wp      <= rx_wp + 1'b1;
      end
      if (rx_pop) rx_rp <= rx_rp + 1'b1;
      rx_cnt <= rx_cnt + ($clog2(RXBUF)+1)'(rx_push) - ($clog2(RXBUF)+1)'(rx_pop);
    end
  end

  // a result may be taken only once its channel has been transferred
  assert property (@(posedge clk) disable iff (!rst_n) issue |-> entry_ok);
endmodule
