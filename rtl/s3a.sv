// s3a -- convert a finished FDP accumulator to the output arithmetic format.
//
// Input: the carry-save accumulator of one PE {nan, sum[W], carry[CW]} whose
// value is sum + sum over s of carry[s] * 2^(K*(s+1)) modulo 2^W, read as a
// two's-complement fixed-point number with its bit 0 weighing 2^LSB.
// The converter
//   1. resolves the pending carries with one W-bit addition,
//   2. takes sign and magnitude,
//   3. finds the leading one (position p), giving exponent p + LSB + BIAS,
//   4. keeps WF fraction bits below the leading one and rounds to nearest,
//      ties to even, using the next bit and the OR of all lower bits.
// This is the single rounding of a dot product.  NaN gives 0x7FC0-style
// quiet NaN {0, all ones, 1, 0...}; exponents at or above the all-ones code
// give infinity; results below the smallest normal flush to signed zero;
// zero gives +0.  Output format = input format (bfloat16 by default).  The
// array figure only names this block; rounding mode and special cases are
// this design's choices.
//
// Timing: one register stage; out_valid/out follow in_valid by one cycle.
module s3a #(
  parameter int unsigned WE  = fdp_pkg::EXP_W,
  parameter int unsigned WF  = fdp_pkg::FRAC_W,
  parameter int          MSB = fdp_pkg::ACC_MSB,
  parameter int          LSB = fdp_pkg::ACC_LSB,
  parameter int unsigned OVF = fdp_pkg::ACC_OVF,
  parameter int unsigned K   = fdp_pkg::ACC_SEG,
  localparam int unsigned W    = fdp_pkg::acc_width(OVF, MSB, LSB),
  localparam int unsigned NSEG = fdp_pkg::num_segments(W, K),
  localparam int unsigned CW   = (NSEG > 1) ? NSEG - 1 : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_nan,
  input  logic [W-1:0]    in_sum,
  input  logic [CW-1:0]   in_carry,
  output logic            out_valid,
  output logic [WE+WF:0]  out
);

  localparam int BIAS = (1 << (WE - 1)) - 1;
  localparam int EMAX = (1 << WE) - 1;   // all-ones exponent code

  logic [W-1:0]      carries, value, mag;
  logic [W+WF+1:0]   normx;
  logic [WF-1:0]     frac;
  logic [WF:0]       frac_r;
  logic              guard, sticky, neg;
  logic [WE+WF:0]    result;
  int                p, e;

  always_comb begin
    carries = '0;
    for (int s = 0; s < NSEG - 1; s++) carries[K*(s+1)] = in_carry[s];
    value  = in_sum + carries;
    neg    = value[W-1];
    mag    = neg ? -value : value;

    p = 0;
    for (int i = 0; i < W; i++) if (mag[i]) p = i;

    normx  = {mag << (W - 1 - p), {(WF+2){1'b0}}};
    frac   = normx[W+WF:W+1];
    guard  = normx[W];
    sticky = |normx[W-1:0];
    frac_r = {1'b0, frac} + {{WF{1'b0}}, (guard && (sticky || frac[0]))};
    e      = p + LSB + BIAS + int'(frac_r[WF]);

    if (in_nan)
      result = {1'b0, {WE{1'b1}}, 1'b1, {(WF-1){1'b0}}};
    else if (mag == '0)
      result = '0;
    else if (e >= EMAX)
      result = {neg, {WE{1'b1}}, {WF{1'b0}}};
    else if (e <= 0)
      result = {neg, {(WE+WF){1'b0}}};
    else
      result = {neg, WE'(e), frac_r[WF-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= result;
    end
  end

endmodule
