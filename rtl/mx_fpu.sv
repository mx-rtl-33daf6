// mx_fpu: one FPU lane of the vector functional unit.
//
// Computes a*b + c either as a double-precision fused multiply-add (one rounding,
// round to nearest, ties to even) or as a 64-bit integer multiply-add (wrapping), one
// new operation per cycle. The result leaves LAT cycles after it was issued, together
// with the tag it was issued with, so the caller knows where to put it.
//
// How the FMA works: the 106-bit product of the two significands is placed at a fixed
// position in a 221-bit field and the addend's significand is shifted to its own
// position relative to it (bits shifted out below the field collapse into a sticky
// bit). After the signed addition the sum is normalised with a leading-zero count and
// rounded from its guard and sticky bits.
//
// The paper only names the FPUs. The arithmetic here is this design's own: subnormal
// operands and results are flushed to zero, any NaN operand or invalid operation gives
// the canonical quiet NaN, and exception flags are not produced. The latency is a
// parameter; the arithmetic is computed in the first stage and then carried through a
// LAT-deep register pipeline.
module mx_fpu #(
  parameter int unsigned LAT  = 3,
  parameter int unsigned TAGW = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            in_valid_i,
  input  mx_pkg::fpu_op_e in_op_i,
  input  logic [63:0]     in_a_i,
  input  logic [63:0]     in_b_i,
  input  logic [63:0]     in_c_i,
  input  logic [TAGW-1:0] in_tag_i,
  output logic            out_valid_o,
  output logic [63:0]     out_res_o,
  output logic [TAGW-1:0] out_tag_o
);

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;
  localparam int FW = 221;   // working field width

  function automatic logic [63:0] fma64(input logic [63:0] a, input logic [63:0] b,
                                        input logic [63:0] c);
    logic sa, sb, sc, sp, sr;
    int ea, eb, ec, d, pos, sh, lz, er;
    logic a_zero, b_zero, c_zero, a_spec, b_spec, c_spec;
    logic [52:0]  ma, mb, mc;
    logic [105:0] prod;
    logic [FW-1:0] pf, cf, s, sn;
    logic [53:0]  mant;
    logic g, st;
    sa = a[63]; sb = b[63]; sc = c[63];
    ea = int'(a[62:52]); eb = int'(b[62:52]); ec = int'(c[62:52]);
    sp = sa ^ sb;
    a_zero = (ea == 0); b_zero = (eb == 0); c_zero = (ec == 0);
    a_spec = (ea == 2047); b_spec = (eb == 2047); c_spec = (ec == 2047);
    // NaN and infinity.
    if ((a_spec && a[51:0] != 0) || (b_spec && b[51:0] != 0) || (c_spec && c[51:0] != 0))
      return QNAN;
    if (a_spec || b_spec) begin
      if (a_zero || b_zero) return QNAN;                   // inf * 0
      if (c_spec && (sc != sp)) return QNAN;               // inf - inf
      return {sp, 11'h7FF, 52'd0};
    end
    if (c_spec) return c;
    // Zero product.
    if (a_zero || b_zero) begin
      if (c_zero) return {sp & sc, 63'd0};
      return c;
    end
    ma = {1'b1, a[51:0]};
    mb = {1'b1, b[51:0]};
    mc = c_zero ? 53'd0 : {1'b1, c[51:0]};
    prod = 106'(ma) * 106'(mb);
    pf = FW'(prod) << 56;
    cf = '0;
    if (!c_zero) begin
      d = ec - ea - eb + 1075;        // lsb(c) - lsb(product)
      if (d > 110) return c;          // product below half an ulp of c
      pos = 56 + d;
      if (pos >= 0) begin
        cf = FW'(mc) << pos;
      end else begin
        sh = -pos;
        if (sh > 53) cf = FW'(1);
        else begin
          cf = FW'(mc >> sh);
          if ((mc & ((53'd1 << sh) - 53'd1)) != 0) cf[0] = 1'b1;
        end
      end
    end
    if (sp == sc) begin
      s = pf + cf; sr = sp;
    end else if (pf >= cf) begin
      s = pf - cf; sr = sp;
    end else begin
      s = cf - pf; sr = sc;
    end
    if (s == '0) return 64'd0;
    lz = 0;
    for (int i = FW - 1; i >= 0; i--) begin
      if (s[i]) break;
      lz++;
    end
    sn = s << lz;
    er = (FW - 1 - lz) + ea + eb - 1183;
    mant = {1'b0, sn[FW-1 -: 53]};
    g    = sn[FW-54];
    st   = |sn[FW-55:0];
    if (g && (st || mant[0])) mant = mant + 54'd1;
    if (mant[53]) begin
      mant = mant >> 1;
      er++;
    end
    if (er >= 2047) return {sr, 11'h7FF, 52'd0};
    if (er <= 0) return {sr, 63'd0};
    return {sr, er[10:0], mant[51:0]};
  endfunction

  logic [63:0] res_d;
  always_comb begin
    if (in_op_i == mx_pkg::FPU_IMAC) res_d = in_a_i * in_b_i + in_c_i;
    else                             res_d = fma64(in_a_i, in_b_i, in_c_i);
  end

  logic [LAT-1:0]           vld_q;
  logic [LAT-1:0][63:0]     res_q;
  logic [LAT-1:0][TAGW-1:0] tag_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      res_q <= '0;
      tag_q <= '0;
    end else begin
      vld_q[0] <= in_valid_i;
      if (in_valid_i) begin
        res_q[0] <= res_d;
        tag_q[0] <= in_tag_i;
      end
      for (int unsigned s = 1; s < LAT; s++) begin
        vld_q[s] <= vld_q[s-1];
        res_q[s] <= res_q[s-1];
        tag_q[s] <= tag_q[s-1];
      end
    end
  end

  assign out_valid_o = vld_q[LAT-1];
  assign out_res_o   = res_q[LAT-1];
  assign out_tag_o   = tag_q[LAT-1];

endmodule
