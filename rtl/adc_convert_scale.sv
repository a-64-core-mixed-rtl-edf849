// adc_convert_scale: ADC convert-and-scale unit of the LDPU (one per side).
//
// Takes the two 12-bit unsigned counts of one ADC (positive and negative
// current), converts both to FP16 (i2f) and removes the ADC's gain and
// offset error with two FP16 fused multiply-adds:
//     t = P * fa1 + fb          (stage 1)
//     y = N * fa2 + t           (stage 2)
// fa1, fb and fa2 are per-ADC calibration registers held here (one set per
// ADC row that this side serves).  Two FMAs, two i2f units and the three
// coefficients follow the published block diagram; which count feeds which
// FMA, and that the negative count is subtracted through a negative fa2, are
// choices of this implementation (the diagram does not print them).
//
// Interface: in_valid/in_idx/in_p/in_n with an opaque sideband tag; the
// result appears two cycles later on out_valid/out_y/out_tag.  Coefficients
// are written through cfg: address A_FA1/A_FB/A_FA2 + row, accepted only
// for rows whose parity equals SIDE (SIDE 0 = odd BLs = rows 0,2,4..).
// Reset values: fa1 = 1.0, fb = 0, fa2 = -1.0, i.e. y = P - N.
module adc_convert_scale
  import hermes_pkg::*;
#(
  parameter int N     = 128,  // ADCs served by this unit
  parameter int SIDE  = 0,    // 0: rows 0,2,4,...; 1: rows 1,3,5,...
  parameter int TAG_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 in_valid,
  input  logic [$clog2(N)-1:0] in_idx,
  input  logic [11:0]          in_p,
  input  logic [11:0]          in_n,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output fp16_t                out_y,
  output logic [TAG_W-1:0]     out_tag
);
  fp16_t fa1 [N];
  fp16_t fb  [N];
  fp16_t fa2 [N];

  logic                 s1_valid;
  fp16_t                s1_t, s1_nf, s1_fa2;
  logic [TAG_W-1:0]     s1_tag;

  wire [15:0] row_off = cfg.addr - {cfg.addr[15:8], 8'h00};
  wire        mine    = (row_off[0] == 1'(SIDE)) && (int'(row_off[7:1]) < N);
  wire [$clog2(N)-1:0] widx = row_off[$clog2(N):1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        fa1[i] <= FP16_ONE;
        fb[i]  <= FP16_ZERO;
        fa2[i] <= {1'b1, FP16_ONE[14:0]};
      end
    end else if (cfg.we && mine) begin
      case (cfg.addr[15:8])
        A_FA1[15:8]: fa1[widx] <= cfg.data;
        A_FB[15:8]:  fb[widx]  <= cfg.data;
        A_FA2[15:8]: fa2[widx] <= cfg.data;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
      s1_t      <= '0;
      s1_nf     <= '0;
      s1_fa2    <= '0;
      s1_tag    <= '0;
      out_y     <= '0;
      out_tag   <= '0;
    end else begin
      s1_valid  <= in_valid;
      if (in_valid) begin
        s1_t   <= fp16_fma(fp16_from_int(16'(in_p)), fa1[in_idx], fb[in_idx]);
        s1_nf  <= fp16_from_int(16'(in_n));
        s1_fa2 <= fa2[in_idx];
        s1_tag <= in_tag;
      end
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_y   <= fp16_fma(s1_nf, s1_fa2, s1_t);
        out_tag <= s1_tag;
      end
    end
  end
endmodule
