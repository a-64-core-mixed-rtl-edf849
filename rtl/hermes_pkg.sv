// hermes_pkg: types, constants and FP16 arithmetic shared by the whole chip.
//
// All digital post-processing (LDPU and GDPU) works in IEEE half precision
// (FP16) with INT8 at the boundaries, as in the published design.  The
// arithmetic functions below are the combinational cores of the i2f, f2i and
// FP16 FMA units drawn in the block diagrams.  Rounding is round-to-nearest-
// even with a single rounding per FMA (a true fused multiply-add).  Choices
// of this implementation, not of the original: subnormal inputs and results
// are flushed to zero, overflow saturates to +/-65504, and Inf/NaN are never
// produced.
//
// Also defined here: the configuration write bundle (cfg_t) that every
// block decodes against its own address range, the link word (link_t) that
// travels on the core-to-core links, and the SL potential encoding.
package hermes_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_HALF = 16'h3800;
  localparam fp16_t FP16_MAX  = 16'h7BFF;

  // configuration write, broadcast to every block of a core
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [15:0] data;
  } cfg_t;

  // one link: eight parallel one-bit data channels, plus a valid bit and a
  // start-of-packet bit (marks the preamble byte)
  typedef struct packed {
    logic       sop;
    logic       valid;
    logic [7:0] data;
  } link_t;

  // link controller register offsets (from A_LINK)
  localparam int L_TX_PRE   = 'h00;  // preamble inserted in front of LDPU data
  localparam int L_LDPU_PRE = 'h01;  // preamble accepted for the LDPU
  localparam int L_LDPU_EN  = 'h02;  // RX ports allowed to feed the LDPU (mask)
  localparam int L_HOP_PRE  = 'h03;  // preamble forwarded to another core
  localparam int L_HOP_EN   = 'h04;  // RX ports allowed to hop (mask)
  localparam int L_TX_ROUTE = 'h10;  // +t: source of TX port t (0 off, 1 LDPU, 2+k RX k)
  localparam int L_TX_START = 'h20;  // first LDPU byte sent
  localparam int L_TX_LEN   = 'h21;  // number of LDPU bytes sent
  localparam int L_RX_START = 'h22;  // first payload byte taken by the LDPU
  localparam int L_RX_LEN   = 'h23;  // number of payload bytes taken

  // potential applied to one source line
  typedef enum logic [1:0] {SL_HIZ = 2'd0, SL_VPOS = 2'd1, SL_VNEG = 2'd2} sl_t;

  // input modulation / read modes
  typedef enum logic [1:0] {MOD_1PH = 2'd0, MOD_4PH = 2'd1, MOD_VERIFY = 2'd2} mod_mode_t;

  // programming pulse shapes
  typedef enum logic [1:0] {PULSE_RESET = 2'd0, PULSE_SET = 2'd1, PULSE_PROG = 2'd2} pulse_t;

  // ---- core address map (16-bit word addresses) ----
  localparam logic [15:0] A_INPUT   = 16'h0000; // 256 x INT8 input vector
  localparam logic [15:0] A_FA1     = 16'h0100; // 256 x FP16 ADC gain (positive count)
  localparam logic [15:0] A_FB      = 16'h0200; // 256 x FP16 ADC offset
  localparam logic [15:0] A_FA2     = 16'h0300; // 256 x FP16 ADC gain (negative count)
  localparam logic [15:0] A_SCALE   = 16'h0400; // 256 x FP16 per-channel scale
  localparam logic [15:0] A_OFFSET  = 16'h0500; // 256 x FP16 per-channel offset
  localparam logic [15:0] A_ACTCTL  = 16'h0600; // +0 scale0, +1 {rx_en, relu2, relu1}
  localparam logic [15:0] A_LINK    = 16'h0700; // link controller registers
  localparam logic [15:0] A_TARGET  = 16'h0800; // 256 x signed target conductance per row
  localparam logic [15:0] A_PROG    = 16'h0900; // programming registers
  localparam logic [15:0] A_TRIM    = 16'h0A00; // 256 x ADC gain trim
  localparam logic [15:0] A_CMD     = 16'h0F00; // command register
  localparam logic [15:0] A_GDPU    = 16'h1000; // GDPU slice registers

  // GDPU register offsets (from A_GDPU)
  localparam int G_THR      = 'h00;  // +0..16: tanh LUT bin thresholds (ascending)
  localparam int G_SLOPE    = 'h20;  // +0..17: tanh LUT slope per bin
  localparam int G_OFF      = 'h40;  // +0..17: tanh LUT offset per bin
  localparam int G_IN_SCALE = 'h60;  // +0..3: input_scale  (I, A, F, O)
  localparam int G_IN_OFF   = 'h64;  // +0..3: input_offset (I, A, F, O)
  localparam int G_OUT_SCALE= 'h68;
  localparam int G_OUT_OFF  = 'h69;
  localparam int G_NELEM    = 'h6A;  // elements per timestep (1..64)
  localparam int G_PRE      = 'h6B;  // accepted link preamble
  localparam int G_CMD      = 'h6C;  // bit0: clear cell-state memory

  // programming register offsets (from A_PROG); reset values in brackets
  localparam int P_RESET_AMP = 0;   // RESET amplitude code   [224 = 700 uA]
  localparam int P_RESET_W   = 1;   // RESET width, cycles    [125]
  localparam int P_SET_AMP   = 2;   // SET amplitude code     [40 = 125 uA]
  localparam int P_SET_W     = 3;   // SET width incl. edge   [250]
  localparam int P_SET_TRAIL = 4;   // SET trailing edge      [50]
  localparam int P_PROG_W    = 5;   // iterative pulse width  [125]
  localparam int P_INIT_AMP  = 6;   // first iterative amplitude [40]
  localparam int P_GAIN      = 7;   // amplitude step per count of error [2]
  localparam int P_MARGIN    = 8;   // convergence margin, counts [5]
  localparam int P_MAX_ITER  = 9;   // iteration limit [30]
  localparam int P_TDP       = 10;  // 1: two-device programming [0]

  // ---------------------------------------------------------------------
  // FP16 helpers
  // ---------------------------------------------------------------------

  // Round and pack a signed fixed-point value whose LSB weighs 2^-48.
  function automatic fp16_t fp16_pack(input logic signed [95:0] acc);
    logic [95:0] mag;
    logic        s;
    int          p;
    int          e;
    logic [10:0] m;
    logic        g, st;
    logic [11:0] mr;
    s   = acc[95];
    mag = s ? 96'(-acc) : 96'(acc);
    p   = -1;
    for (int i = 0; i < 96; i++) if (mag[i]) p = i;
    if (p < 0) return FP16_ZERO;
    e = p - 33;                      // 2^(p-48) -> biased exponent p-48+15
    if (e < 1) return FP16_ZERO;     // flush subnormals to zero
    if (p >= 11) begin
      m  = 11'(mag >> (p - 10));
      g  = mag[p-11];
      st = 1'b0;
      for (int i = 0; i < 96; i++) if (i < p - 11 && mag[i]) st = 1'b1;
    end else begin
      m  = 11'(mag << (10 - p));
      g  = 1'b0;
      st = 1'b0;
    end
    mr = {1'b0, m} + 12'((g && (st || m[0])) ? 1 : 0);
    if (mr[11]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e > 30) return {s, FP16_MAX[14:0]};
    return {s, 5'(e), mr[9:0]};
  endfunction

  // Value of an FP16 number as fixed point with LSB 2^-48 (exact).
  function automatic logic signed [95:0] fp16_unpack(input fp16_t a);
    logic [95:0] v;
    if (a[14:10] == 5'd0) return '0;  // zero and subnormals
    v = 96'({1'b1, a[9:0]}) << (int'(a[14:10]) + 23); // m*2^(E-25) in 2^-48 units
    return a[15] ? -$signed(v) : $signed(v);
  endfunction

  // Fused multiply-add a*b + c with a single rounding.
  function automatic fp16_t fp16_fma(input fp16_t a, input fp16_t b, input fp16_t c);
    logic [21:0]        mp;
    logic [95:0]        prod;
    logic signed [95:0] sum;
    logic signed [95:0] addend;
    int                 sh;
    addend = fp16_unpack(c);
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return fp16_pack(addend);
    mp   = 22'({1'b1, a[9:0]}) * 22'({1'b1, b[9:0]});
    // value = mp * 2^(Ea+Eb-50); in 2^-48 units shift by Ea+Eb-2
    sh   = int'(a[14:10]) + int'(b[14:10]) - 2;
    prod = 96'(mp) << sh;
    sum  = (a[15] ^ b[15]) ? addend - $signed(prod) : addend + $signed(prod);
    return fp16_pack(sum);
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    return fp16_fma(a, b, FP16_ZERO);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    return fp16_fma(a, FP16_ONE, b);
  endfunction

  // i2f: signed integer (up to 16 bits) to FP16
  function automatic fp16_t fp16_from_int(input logic signed [15:0] v);
    logic signed [95:0] w;
    w = 96'(v) <<< 48;
    return fp16_pack(w);
  endfunction

  // f2i: FP16 to INT8, round to nearest even, saturate to [-128, 127]
  function automatic logic signed [7:0] fp16_to_int8(input fp16_t a);
    logic [95:0] mag;
    logic [47:0] ip;
    logic        g, st;
    logic [48:0] r;
    int          e;
    e = int'(a[14:10]);
    if (e == 0) return 8'sd0;
    if (e > 22) return a[15] ? -8'sd128 : 8'sd127;  // |a| >= 128
    mag = 96'({1'b1, a[9:0]}) << (e + 23);
    ip  = mag[95:48];
    g   = mag[47];
    st  = |mag[46:0];
    r   = {1'b0, ip} + 49'((g && (st || ip[0])) ? 1 : 0);
    if (a[15]) begin
      if (r >= 49'd128) return -8'sd128;
      return -$signed(8'(r));
    end
    if (r >= 49'd127) return 8'sd127;
    return $signed(8'(r));
  endfunction

  // a < b for FP16 values (zero of either sign equal)
  function automatic logic fp16_lt(input fp16_t a, input fp16_t b);
    return fp16_unpack(a) < fp16_unpack(b);
  endfunction

  // ReLU: max(a, 0)
  function automatic fp16_t fp16_relu(input fp16_t a);
    return (a[15] || a[14:10] == 5'd0) ? FP16_ZERO : a;
  endfunction

endpackage
