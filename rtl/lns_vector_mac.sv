// lns_vector_mac -- LNS vector MAC unit: dot product of two VS-element LNS vectors, result as a
// signed integer partial sum.
//
// How it works (five stages, as in the paper's vector MAC datapath):
//   1. Multiplication: per element, the two (W-1)-bit exponents are added (W-bit sum, the extra
//      bit is the carry) and the two sign bits are XOR-ed.
//   2. Quotient shifting and remainder one-hot coding: the exponent sum p is split into the
//      quotient q = p >> log2(GAMMA) and the remainder r = p mod GAMMA. The element becomes the
//      integer 1 << q, negated (two's complement) when the product sign is 1, or 0 when the
//      product is zero. It is steered to the adder tree of its remainder bin r only.
//   3. Shifted quotient reduction: GAMMA adder trees each sum the VS steered values; their sums
//      are registered (pipeline register 1).
//   4. Constant dot-product: the GAMMA tree sums are multiplied by the constants 2^(r/GAMMA)
//      (held with LUT_F fraction bits) and added; the LUT_F fraction bits are then dropped
//      (floor), since the partial sum is an integer.
//   5. Partial sum accumulation: the result is added into the ACC_W-bit partial-sum register
//      (pipeline register 2), or loaded into it when acc_clear is set.
// So psum = sum_i (-1)^(sa_i^sb_i) * 2^((ea_i+eb_i)/GAMMA), exact in the quotient shift and
// rounded only through the constants.
//
// Interface: in_valid qualifies ea/sa/eb/sb and acc_clear. out_valid/psum follow two cycles
// later. psum saturates at the ACC_W-bit signed limits; sat pulses with out_valid when it did.
//
// Follows the paper: stage order, the W-1 / W / 1 bit signal widths, GAMMA bins, 24-bit partial
// sum, register after the trees and in the accumulator. Own choices: exponent 0 means zero (the
// paper's "is zero?" test), LUT_F, the internal tree widths (wide enough never to overflow), the
// floor after the constant product and saturation of the partial sum.
module lns_vector_mac #(
  parameter int unsigned VS    = lns_pkg::VS,
  parameter int unsigned W     = lns_pkg::W,
  parameter int unsigned GAMMA = lns_pkg::GAMMA,
  parameter int unsigned ACC_W = lns_pkg::ACC_W,
  parameter int unsigned LUT_F = lns_pkg::LUT_F
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    acc_clear,
  input  logic [VS-1:0][W-2:0]    ea,
  input  logic [VS-1:0]           sa,
  input  logic [VS-1:0][W-2:0]    eb,
  input  logic [VS-1:0]           sb,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] psum,
  output logic                    sat
);
  localparam int unsigned P_W   = W;                      // exponent sum incl. carry
  localparam int unsigned R_W   = $clog2(GAMMA);          // remainder bits
  localparam int unsigned Q_W   = P_W - R_W;              // quotient bits
  localparam int unsigned SH_W  = (1 << Q_W) + 1;         // signed 1 << q
  localparam int unsigned T_W   = SH_W + $clog2(VS);      // adder tree sum
  localparam int unsigned C_W   = LUT_F + 2;              // unsigned constant < 2^(LUT_F+1)
  localparam int unsigned D_W   = T_W + C_W + $clog2(GAMMA) + 1;

  initial begin
    assert (GAMMA == (1 << R_W)) else $error("GAMMA must be a power of two");
    assert (P_W > R_W) else $error("exponent narrower than the remainder");
  end

  // ---- remainder constant table 2^(r/GAMMA) ----
  function automatic logic [GAMMA-1:0][C_W-1:0] make_lut();
    for (int unsigned r = 0; r < GAMMA; r++)
      make_lut[r] = C_W'(lns_pkg::rem_const(r, GAMMA, LUT_F));
  endfunction
  localparam logic [GAMMA-1:0][C_W-1:0] LUT = make_lut();

  // ---- stages 1-3: multiply, shift, steer, reduce ----
  logic [GAMMA-1:0][T_W-1:0] tree_sum;   // two's complement sums
  always_comb begin
    logic [P_W-1:0]           p;
    logic [Q_W-1:0]           q;
    logic [R_W-1:0]           r;
    logic                     s;
    logic                     is_zero;
    logic [SH_W-1:0]          shifted;
    tree_sum = '0;
    for (int unsigned i = 0; i < VS; i++) begin
      p       = P_W'(ea[i]) + P_W'(eb[i]);
      s       = sa[i] ^ sb[i];
      is_zero = (ea[i] == '0) || (eb[i] == '0);
      q       = p[P_W-1:R_W];
      r       = p[R_W-1:0];
      shifted = is_zero ? '0 : (SH_W'(1) << q);
      if (s) shifted = -shifted;
      for (int unsigned b = 0; b < GAMMA; b++)
        if (r == R_W'(b))
          tree_sum[b] = tree_sum[b] + {{(T_W-SH_W){shifted[SH_W-1]}}, shifted};
    end
  end

  logic [GAMMA-1:0][T_W-1:0] tree_q;
  logic                      v1, clr1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tree_q <= '0;
      v1     <= 1'b0;
      clr1   <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        tree_q <= tree_sum;
        clr1   <= acc_clear;
      end
    end
  end

  // ---- stage 4: constant dot-product ----
  logic signed [D_W-1:0] dot;
  logic signed [D_W-1:0] dot_int;
  always_comb begin
    dot = '0;
    for (int unsigned b = 0; b < GAMMA; b++)
      dot = dot + D_W'($signed(tree_q[b])) * $signed({1'b0, LUT[b]});
    dot_int = dot >>> LUT_F;
  end

  // ---- stage 5: partial sum accumulation (saturating) ----
  localparam logic signed [D_W:0] MAXV = (D_W+1)'((1 << (ACC_W-1)) - 1);
  localparam logic signed [D_W:0] MINV = -(D_W+1)'(1 << (ACC_W-1));
  logic signed [D_W:0] acc_sum;
  logic signed [ACC_W-1:0] acc_next;
  logic                    acc_sat;
  always_comb begin
    acc_sum = (clr1 ? '0 : (D_W+1)'(psum)) + (D_W+1)'(dot_int);
    acc_sat = 1'b0;
    if (acc_sum > MAXV) begin
      acc_next = MAXV[ACC_W-1:0];
      acc_sat  = 1'b1;
    end else if (acc_sum < MINV) begin
      acc_next = MINV[ACC_W-1:0];
      acc_sat  = 1'b1;
    end else begin
      acc_next = acc_sum[ACC_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum      <= '0;
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= v1;
      sat       <= v1 & acc_sat;
      if (v1) psum <= acc_next;
    end
  end

endmodule
