// gdpu_slice: one global digital processing unit slice (LSTM element processor).
//
// The fourth-row core above the slice sends it the aggregated LSTM gate
// pre-activations over a link, one INT8 value per cycle, interleaved per
// element as I, A, F, O (t = 0, 1, 2, 3).  One element processor handles
// all of them serially, in FP16:
//   g     = i2f(x) * input_scale[t] + input_offset[t]
//   u     = tanh_LUT(g)                 (bin slope/offset, FMA)
//   gate  = u * scale[t] + offset[t]    scale = [0.5, 1.0, 0.5, 0.5],
//                                       offset = [0.5, 0.0, 0.5, 0.5]
// so I, F and O become sigmoids through sigmoid(x) = 1/2 + tanh(x/2)/2 (the
// x/2 is part of input_scale) and A is a tanh.  Then
//   ia    = i * a                        (multiplier 1)
//   c     = f * c_old + ia               (FMA, cell-state memory, 64 entries)
//   h     = tanh_LUT(c) * o              (second LUT + FMA, multiplier 2)
//   out   = f2i(h * output_scale + output_offset)
// One INT8 output per four input cycles, up to 64 elements.  The data path
// (i2f, three FMAs, two LUTs, two multipliers, output FMA, f2i, cell-state
// memory, the printed scale/offset constants) follows the published design.
// The pipeline staging, the link preamble filter and the register map are
// this implementation's choices.
//
// Interface: rx link input; out_valid/out_data/out_idx; cfg at A_GDPU + G_*.
// Latency from the O input to the output: 8 cycles.  The LUTs' bin index
// outputs are not needed here and stay unused.
module gdpu_slice
  import hermes_pkg::*;
#(
  parameter int NELEM = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  link_t             rx,
  output logic              out_valid,
  output logic signed [7:0] out_data,
  output logic [5:0]        out_idx
);
  localparam fp16_t GSCALE [4] = '{16'h3800, 16'h3C00, 16'h3800, 16'h3800};
  localparam fp16_t GOFF   [4] = '{16'h3800, 16'h0000, 16'h3800, 16'h3800};

  fp16_t in_scale [4];
  fp16_t in_off   [4];
  fp16_t out_scale, out_off;
  logic [6:0] n_elem;
  logic [7:0] pre;
  fp16_t cmem [NELEM];

  wire       hit = cfg.we && cfg.addr[15:8] == A_GDPU[15:8];
  wire [7:0] off = cfg.addr[7:0];
  wire       clr = hit && int'(off) == G_CMD && cfg.data[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 4; g++) begin
        in_scale[g] <= FP16_ONE;
        in_off[g]   <= FP16_ZERO;
      end
      out_scale <= FP16_ONE;
      out_off   <= FP16_ZERO;
      n_elem    <= 7'd64;
      pre       <= '0;
    end else if (hit) begin
      for (int g = 0; g < 4; g++) begin
        if (int'(off) == G_IN_SCALE + g) in_scale[g] <= cfg.data;
        if (int'(off) == G_IN_OFF + g)   in_off[g]   <= cfg.data;
      end
      if (int'(off) == G_OUT_SCALE) out_scale <= cfg.data;
      if (int'(off) == G_OUT_OFF)   out_off   <= cfg.data;
      if (int'(off) == G_NELEM)     n_elem    <= cfg.data[6:0];
      if (int'(off) == G_PRE)       pre       <= cfg.data[7:0];
    end
  end

  // ---- link input: accept packets with our preamble ----
  logic       accept;
  logic [1:0] gate;
  logic [5:0] elem;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accept <= 1'b0;
      gate   <= '0;
      elem   <= '0;
    end else if (rx.valid && rx.sop) begin
      accept <= rx.data == pre;
      gate   <= '0;
      elem   <= '0;
    end else if (rx.valid && accept) begin
      gate <= gate + 1'b1;
      if (gate == 2'd3) elem <= (7'(elem) + 7'd1 == n_elem) ? 6'd0 : elem + 1'b1;
    end
  end
  wire in_v = rx.valid && !rx.sop && accept;

  // ---- gate pipeline: S1 input FMA, S2 LUT, S3 interpolation, S4 gate FMA
  logic       v1, v2, v3, v4;
  logic [1:0] g1, g2, g3, g4;
  logic [5:0] e1, e2, e3, e4;
  fp16_t      x1, x2, x3, x4, sl2, of2;
  fp16_t      lut_slope, lut_off;
  logic [4:0] lut_bin;

  tanh_lut u_lut1 (.clk, .rst_n, .cfg, .x(x1), .bin(lut_bin), .slope(lut_slope), .offset(lut_off));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
      {g1, g2, g3, g4} <= '0;
      {e1, e2, e3, e4} <= '0;
      {x1, x2, x3, x4, sl2, of2} <= '0;
    end else begin
      v1 <= in_v;
      g1 <= gate;
      e1 <= elem;
      x1 <= fp16_fma(fp16_from_int(16'($signed(rx.data))), in_scale[gate], in_off[gate]);
      v2 <= v1; g2 <= g1; e2 <= e1; x2 <= x1; sl2 <= lut_slope; of2 <= lut_off;
      v3 <= v2; g3 <= g2; e3 <= e2; x3 <= fp16_fma(sl2, x2, of2);
      v4 <= v3; g4 <= g3; e4 <= e3; x4 <= fp16_fma(x3, GSCALE[g3], GOFF[g3]);
    end
  end

  // ---- cell update: S5 ----
  fp16_t i_r, ia_r, c_r, o_r;
  logic  v5;
  logic [5:0] e5;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {i_r, ia_r, c_r, o_r} <= '0;
      v5 <= 1'b0;
      e5 <= '0;
    end else begin
      v5 <= 1'b0;
      if (v4) begin
        case (g4)
          2'd0: i_r  <= x4;
          2'd1: ia_r <= fp16_mul(i_r, x4);
          2'd2: c_r  <= fp16_fma(x4, cmem[e4], ia_r);
          2'd3: begin
            o_r <= x4;
            v5  <= 1'b1;
            e5  <= e4;
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NELEM; i++) cmem[i] <= FP16_ZERO;
    end else if (clr) begin
      for (int i = 0; i < NELEM; i++) cmem[i] <= FP16_ZERO;
    end else if (v4 && g4 == 2'd2) begin
      cmem[e4] <= fp16_fma(x4, cmem[e4], ia_r);
    end
  end

  // ---- hidden state: S6 LUT, S7 interpolation, S8 multiply, S9 output FMA + f2i
  fp16_t lut2_slope, lut2_off, sl6, of6, c6, o6, t7, o7, h8;
  logic [4:0] lut2_bin;
  logic v6, v7, v8;
  logic [5:0] e6, e7, e8;

  tanh_lut u_lut2 (.clk, .rst_n, .cfg, .x(c_r), .bin(lut2_bin), .slope(lut2_slope), .offset(lut2_off));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v6, v7, v8, out_valid} <= '0;
      {e6, e7, e8, out_idx} <= '0;
      {sl6, of6, c6, o6, t7, o7, h8} <= '0;
      out_data <= '0;
    end else begin
      v6 <= v5; e6 <= e5; sl6 <= lut2_slope; of6 <= lut2_off; c6 <= c_r; o6 <= o_r;
      v7 <= v6; e7 <= e6; t7 <= fp16_fma(sl6, c6, of6); o7 <= o6;
      v8 <= v7; e8 <= e7; h8 <= fp16_mul(t7, o7);
      out_valid <= v8;
      out_idx   <= e8;
      if (v8) out_data <= fp16_to_int8(fp16_fma(h8, out_scale, out_off));
    end
  end
endmodule
