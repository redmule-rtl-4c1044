// redmule_fma: FP16 (IEEE binary16) fused multiply-add, z = a * b + c,
// rounded once, to nearest with ties to even, followed by P pipeline
// registers.
//
// How it works: every finite binary16 value is an integer significand
// (11 bits) times a power of two no smaller than 2^-24, so a product is an
// integer times 2^-48 and is at most 2^32.  The product and the addend are
// therefore placed exactly in one 82-bit fixed-point word whose LSB weighs
// 2^-48, added or subtracted in sign-magnitude form without any loss, and
// the exact sum is rounded once to binary16.  Subnormal inputs and outputs
// are handled; overflow gives infinity; an invalid operation (a NaN input,
// inf*0, inf-inf) gives the canonical quiet NaN 0x7E00; an exact zero sum
// is +0 unless both terms are -0.
//
// Interface and timing: the result of the operands presented in a cycle
// with en=1 appears on z after P further cycles with en=1 (P=0: purely
// combinational).  en freezes all pipeline registers, which is how the
// whole array stalls.  The presented instance uses the open-source FPnew
// FMA with P=3; this unit is an own implementation of the same function,
// with the registers placed after the arithmetic (for retiming).
module redmule_fma
  import redmule_pkg::*;
#(
  parameter int unsigned P = P_DEF
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  en_i,
  input  fp16_t a_i,
  input  fp16_t b_i,
  input  fp16_t c_i,
  output fp16_t z_o
);

  localparam int unsigned FW = 82;  // fixed-point width, LSB = 2^-48

  // Operand fields.
  logic        sa, sb, sc, sp;
  logic [4:0]  ea, eb, ec;
  logic [10:0] ma, mb, mc;
  logic        a_nan, b_nan, c_nan, a_inf, b_inf, c_inf, a_zero, b_zero;

  always_comb begin
    sa = a_i[15]; sb = b_i[15]; sc = c_i[15];
    sp = sa ^ sb;
    // Effective biased exponent: subnormals share the exponent of 1.
    ea = (a_i[14:10] == 5'd0) ? 5'd1 : a_i[14:10];
    eb = (b_i[14:10] == 5'd0) ? 5'd1 : b_i[14:10];
    ec = (c_i[14:10] == 5'd0) ? 5'd1 : c_i[14:10];
    ma = {a_i[14:10] != 5'd0, a_i[9:0]};
    mb = {b_i[14:10] != 5'd0, b_i[9:0]};
    mc = {c_i[14:10] != 5'd0, c_i[9:0]};
    a_nan  = (a_i[14:10] == 5'h1F) && (a_i[9:0] != 10'd0);
    b_nan  = (b_i[14:10] == 5'h1F) && (b_i[9:0] != 10'd0);
    c_nan  = (c_i[14:10] == 5'h1F) && (c_i[9:0] != 10'd0);
    a_inf  = (a_i[14:10] == 5'h1F) && (a_i[9:0] == 10'd0);
    b_inf  = (b_i[14:10] == 5'h1F) && (b_i[9:0] == 10'd0);
    c_inf  = (c_i[14:10] == 5'h1F) && (c_i[9:0] == 10'd0);
    a_zero = (a_i[14:0] == 15'd0);
    b_zero = (b_i[14:0] == 15'd0);
  end

  // Exact product and addend in fixed point, then their exact sum.
  logic [21:0]   mp;
  logic [6:0]    sh_p, sh_c;
  logic [FW-1:0] fx_p, fx_c, sum;
  logic          s_sign;

  always_comb begin
    mp   = ma * mb;
    // value(a*b) = mp * 2^(ea+eb-50); in units of 2^-48 the shift is ea+eb-2.
    sh_p = 7'(ea) + 7'(eb) - 7'd2;
    // value(c) = mc * 2^(ec-25); in units of 2^-48 the shift is ec+23.
    sh_c = 7'(ec) + 7'd23;
    fx_p = FW'(mp) << sh_p;
    fx_c = FW'(mc) << sh_c;
    if (sp == sc) begin
      sum    = fx_p + fx_c;
      s_sign = sp;
    end else if (fx_p >= fx_c) begin
      sum    = fx_p - fx_c;
      s_sign = sp;
    end else begin
      sum    = fx_c - fx_p;
      s_sign = sc;
    end
  end

  // Round the exact sum to binary16.
  logic [6:0]    lead;
  logic [6:0]    sh_r;
  logic [FW-1:0] kept, rest_mask;
  logic          rnd, sticky;
  logic [11:0]   rounded;
  logic [16:0]   enc;
  fp16_t         res;

  always_comb begin
    lead = '0;
    for (int unsigned i = 0; i < FW; i++) begin
      if (sum[i]) lead = 7'(i);
    end
    // Keep 11 significant bits, but never go below the subnormal LSB 2^-24.
    sh_r      = (lead >= 7'd34) ? (lead - 7'd10) : 7'd24;
    kept      = sum >> sh_r;
    rnd       = sum[sh_r-7'd1];
    rest_mask = (FW'(1) << (sh_r - 7'd1)) - FW'(1);
    sticky    = |(sum & rest_mask);
    rounded   = 12'(kept) + {11'd0, rnd & (sticky | kept[0])};
    // Exponent field and significand add up to the encoding; a carry out of
    // the significand moves into the exponent by itself.
    enc       = (17'(sh_r - 7'd24) << 10) + 17'(rounded);

    if (a_nan || b_nan || c_nan || (a_inf && b_zero) || (b_inf && a_zero) ||
        ((a_inf || b_inf) && c_inf && (sp != sc))) begin
      res = FP16_QNAN;
    end else if (a_inf || b_inf) begin
      res = {sp, 15'h7C00};
    end else if (c_inf) begin
      res = c_i;
    end else if (sum == '0) begin
      res = {(sp == sc) && sp, 15'd0};
    end else if (enc >= 17'h07C00) begin
      res = {s_sign, 15'h7C00};
    end else begin
      res = {s_sign, enc[14:0]};
    end
  end

  // P pipeline registers after the arithmetic.
  if (P == 0) begin : g_comb
    assign z_o = res;
  end else begin : g_pipe
    fp16_t pipe_q [P];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int unsigned i = 0; i < P; i++) pipe_q[i] <= '0;
      end else if (en_i) begin
        pipe_q[0] <= res;
        for (int unsigned i = 1; i < P; i++) pipe_q[i] <= pipe_q[i-1];
      end
    end
    assign z_o = pipe_q[P-1];
  end

endmodule
