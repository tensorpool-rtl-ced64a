// FP16 fused multiply-add, z = a * b + c, with a single rounding
// (round to nearest, ties to even), pipelined over three stages.
//
// The paper specifies FP16 FMAs with P = 3 pipeline stages inside the tensor
// engine; their internal organisation is not described, so this unit uses the
// simplest exact scheme: both the product and the addend are placed into one
// 82-bit fixed-point word whose LSB weighs 2^-48 (the smallest product of two
// FP16 subnormals), the two are added exactly, and the sum is rounded once.
//
//   stage 1: decode, 11x11 multiply, align product and addend
//   stage 2: signed add, leading-one search
//   stage 3: shift and round, special cases (NaN, infinity, zero sign)
//
// Interface: `en` advances the whole pipeline by one stage (a stalled engine
// holds every stage); `z` is valid three enabled cycles after a, b, c were
// sampled. NaN results are the canonical quiet NaN 16'h7E00.
module tp_fma_fp16 (
  input  logic        clk_i,
  input  logic        en_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] z_o
);
  localparam int unsigned FW = 82;   // fixed-point width, LSB = 2^-48

  // ---------------------------------------------------------------- stage 1
  typedef struct packed {
    logic          nan, inf, inf_s;
    logic          ps, cs;
    logic [FW-1:0] pm, cm;     // magnitudes
  } s1_t;

  s1_t s1_d, s1_q;

  always_comb begin
    logic [4:0]  ea, eb, ec;
    logic [10:0] ma, mb, mc;
    logic        a_inf, b_inf, c_inf, a_nan, b_nan, c_nan, a_zero, b_zero;
    logic [21:0] prod;
    logic [5:0]  psh;
    logic [5:0]  csh;
    ea = a_i[14:10]; eb = b_i[14:10]; ec = c_i[14:10];
    ma = {ea != 5'd0, a_i[9:0]};
    mb = {eb != 5'd0, b_i[9:0]};
    mc = {ec != 5'd0, c_i[9:0]};
    a_inf  = (ea == 5'h1f) && (a_i[9:0] == '0);
    b_inf  = (eb == 5'h1f) && (b_i[9:0] == '0);
    c_inf  = (ec == 5'h1f) && (c_i[9:0] == '0);
    a_nan  = (ea == 5'h1f) && (a_i[9:0] != '0);
    b_nan  = (eb == 5'h1f) && (b_i[9:0] != '0);
    c_nan  = (ec == 5'h1f) && (c_i[9:0] != '0);
    a_zero = (a_i[14:0] == '0);
    b_zero = (b_i[14:0] == '0);
    s1_d.ps = a_i[15] ^ b_i[15];
    s1_d.cs = c_i[15];
    s1_d.nan = a_nan | b_nan | c_nan | (a_inf & b_zero) | (b_inf & a_zero)
             | ((a_inf | b_inf) & c_inf & (s1_d.ps != s1_d.cs));
    s1_d.inf   = a_inf | b_inf | c_inf;
    s1_d.inf_s = (a_inf | b_inf) ? s1_d.ps : s1_d.cs;
    prod = ma * mb;
    // value(x) = m * 2^(max(e,1) - 25); product LSB 2^(Ea+Eb-50) -> shift Ea+Eb-2
    psh  = 6'((ea == 5'd0 ? 5'd1 : ea)) + 6'((eb == 5'd0 ? 5'd1 : eb)) - 6'd2;
    csh  = 6'((ec == 5'd0 ? 5'd1 : ec)) + 6'd23;
    s1_d.pm = FW'(prod) << psh;
    s1_d.cm = FW'(mc) << csh;
  end

  always_ff @(posedge clk_i) if (en_i) s1_q <= s1_d;

  // ---------------------------------------------------------------- stage 2
  typedef struct packed {
    logic          nan, inf, inf_s;
    logic          zs;         // sign of the exact sum
    logic [FW-1:0] m;          // magnitude of the exact sum
    logic [6:0]    lead;       // index of the leading one (0 when m == 0)
  } s2_t;

  s2_t s2_d, s2_q;

  always_comb begin
    s2_d.nan   = s1_q.nan;
    s2_d.inf   = s1_q.inf;
    s2_d.inf_s = s1_q.inf_s;
    if (s1_q.ps == s1_q.cs) begin
      s2_d.m  = s1_q.pm + s1_q.cm;
      s2_d.zs = s1_q.ps;
    end else if (s1_q.pm >= s1_q.cm) begin
      s2_d.m  = s1_q.pm - s1_q.cm;
      s2_d.zs = s1_q.ps;
    end else begin
      s2_d.m  = s1_q.cm - s1_q.pm;
      s2_d.zs = s1_q.cs;
    end
    // an exact zero is +0 unless both terms are negative
    if (s2_d.m == '0) s2_d.zs = s1_q.ps & s1_q.cs;
    s2_d.lead = '0;
    for (int i = 0; i < FW; i++) if (s2_d.m[i]) s2_d.lead = 7'(i);
  end

  always_ff @(posedge clk_i) if (en_i) s2_q <= s2_d;

  // ---------------------------------------------------------------- stage 3
  logic [15:0] z_d, z_q;

  always_comb begin
    logic [6:0]    sh;
    logic [FW-1:0] kept, rest, half;  // kept < 2^12 by construction of sh
    logic [16:0]   enc;
    logic          up;
    // keep 11 significant bits for normals, the 2^-24 quantum for subnormals
    sh   = (s2_q.lead > 7'd34) ? s2_q.lead - 7'd10 : 7'd24;
    kept = s2_q.m >> sh;
    rest = s2_q.m & ((FW'(1) << sh) - FW'(1));
    half = FW'(1) << (sh - 7'd1);
    up   = (rest > half) || ((rest == half) && kept[0]);
    // biased exponent minus one in the upper bits; the hidden one carries into it
    enc  = 17'((sh - 7'd24)) * 17'd1024 + 17'(kept) + 17'(up);
    if (s2_q.nan)                 z_d = 16'h7e00;
    else if (s2_q.inf)            z_d = {s2_q.inf_s, 15'h7c00};
    else if (enc >= 17'h7c00)     z_d = {s2_q.zs, 15'h7c00};
    else                          z_d = {s2_q.zs, enc[14:0]};
  end

  always_ff @(posedge clk_i) if (en_i) z_q <= z_d;
  assign z_o = z_q;

endmodule
