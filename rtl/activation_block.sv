// activation_block: the LDPU's activation function block.
//
// Per output channel c (0..255) it computes, in FP16:
//     a = v * scale[c] + offset[c]            affine scaling per channel
//     a = relu1 ? max(a, 0) : a               optional ReLU
//     b = i2f(rx) * scale0 + a                add the scaled INT8 link input
//     b = relu2 ? max(b, 0) : b               optional second ReLU
//     out = f2i(b)                            INT8 for the link transmitter
// so the activation can be applied before or after the partial sum from a
// neighbouring core is added.  This sequence of two FMAs, two ReLU/max units
// and the scale/offset/scale0 registers follows the published diagram.  When
// the link input is not used the caller passes rx = 0.
//
// Interface: in_valid with value v, channel index, link byte rx and a 'last'
// flag; out_valid/out_data/out_last three cycles later (fully pipelined, one
// result per cycle).  Registers via cfg: A_SCALE+c, A_OFFSET+c,
// A_ACTCTL+0 = scale0, A_ACTCTL+1 = {rx_en, relu2, relu1}.  Reset: scale 1,
// offset 0, scale0 1, ReLUs off, rx_en off.
module activation_block
  import hermes_pkg::*;
#(
  parameter int N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 in_valid,
  input  fp16_t                in_v,
  input  logic [$clog2(N)-1:0] in_ch,
  input  logic signed [7:0]    in_rx,
  input  logic                 in_last,
  output logic                 out_valid,
  output logic signed [7:0]    out_data,
  output logic                 out_last,
  output logic                 rx_en      // link input is to be combined
);
  fp16_t scale  [N];
  fp16_t offset [N];
  fp16_t scale0;
  logic  relu1, relu2;

  logic  s1_valid, s2_valid, s1_last, s2_last;
  fp16_t s1_a, s2_b;
  logic signed [7:0] s1_rx;

  wire [$clog2(N)-1:0] widx = cfg.addr[$clog2(N)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        scale[i]  <= FP16_ONE;
        offset[i] <= FP16_ZERO;
      end
      scale0 <= FP16_ONE;
      relu1  <= 1'b0;
      relu2  <= 1'b0;
      rx_en  <= 1'b0;
    end else if (cfg.we) begin
      if (cfg.addr[15:8] == A_SCALE[15:8])  scale[widx]  <= cfg.data;
      if (cfg.addr[15:8] == A_OFFSET[15:8]) offset[widx] <= cfg.data;
      if (cfg.addr == A_ACTCTL)             scale0 <= cfg.data;
      if (cfg.addr == A_ACTCTL + 16'd1)     {rx_en, relu2, relu1} <= cfg.data[2:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s2_valid  <= 1'b0;
      out_valid <= 1'b0;
      s1_last   <= 1'b0;
      s2_last   <= 1'b0;
      out_last  <= 1'b0;
      s1_a      <= '0;
      s2_b      <= '0;
      s1_rx     <= '0;
      out_data  <= '0;
    end else begin
      fp16_t a, b;
      a = fp16_fma(in_v, scale[in_ch], offset[in_ch]);
      if (relu1) a = fp16_relu(a);
      s1_valid <= in_valid;
      s1_last  <= in_valid && in_last;
      if (in_valid) begin
        s1_a  <= a;
        s1_rx <= in_rx;
      end
      b = fp16_fma(fp16_from_int(16'(s1_rx)), scale0, s1_a);
      if (relu2) b = fp16_relu(b);
      s2_valid <= s1_valid;
      s2_last  <= s1_last;
      if (s1_valid) s2_b <= b;
      out_valid <= s2_valid;
      out_last  <= s2_last;
      if (s2_valid) out_data <= fp16_to_int8(s2_b);
    end
  end
endmodule
