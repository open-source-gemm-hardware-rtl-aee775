// fdp_pe -- fused dot product (FDP) processing element of the systolic array.
//
// Each cycle the PE multiplies its row operand a (from the left) by its
// column operand b (from above) exactly, places the signed product in a
// fixed-point accumulator whose bits weigh 2^LSB .. 2^(MSB+OVF), and adds it
// there.  Nothing is rounded between two accumulations: the only loss is
// the product bits that fall below 2^LSB.  At the end of a block (EOB) the
// finished accumulator is handed, still in carry-save form, to the column's
// output chain and the next block starts from zero in the following cycle.
//
// Datapath, following the PE drawing of the array figure:
//   scale adder   es = scale_a + scale_b                    (WE+1 bits)
//   multiplier    P  = sig_a * sig_b                        (2WF+2 bits)
//   shift gen     u  = es - (2*BIAS + LSB - 2): position of the product's
//                 LSB in the shifter; too_small when u <= 0 (the whole product
//                 lies below 2^LSB), too_big when u > MSB-LSB+1 (its top bit
//                 lies above 2^MSB)
//   negate        sP = sign_a ^ sign_b ? -P : P, before shifting, so bits
//                 dropped below LSB truncate toward minus infinity
//   shift/select  sign-extended sP << u, bits [W+2WF+1 : 2WF+2] kept
//   accumulate    seg_accumulator (radix 2^K carry-save)
// The product is replaced by zero when an operand is flushed to zero (ftz)
// or too_small.  A NaN operand or a too_big product sets a sticky NaN flag
// for the block.  The figure does not print which signal drives which
// multiplexer; the rules above are this design's reading of it.
//
// Interface: a_in/b_in are S3 words {nan, ftz, sign, scale[WE], sig[WF+1]}
// and are forwarded unchanged to a_out (right) and b_out (down) one cycle
// later, as are valid/eob.  res_in/res_out is the output chain
// {valid, nan, sum[W], carry[CW]}: two registers per PE; a PE injects its
// result in the first register, otherwise both pass the chain down.
//
// Timing: the pair presented in cycle t is added in cycle t+1 (one pipeline
// register after multiply/align); an EOB pair presented in cycle t puts the
// block's result on res_out in cycle t+3.  A result travels one PE down in
// two cycles, which is what keeps the injections of a column, spaced one
// cycle apart, from colliding.  EOB pairs must be at least N cycles apart,
// N being the column height.  Pipeline depth and the output chain are this
// design's choices.
module fdp_pe #(
  parameter int unsigned WE  = fdp_pkg::EXP_W,
  parameter int unsigned WF  = fdp_pkg::FRAC_W,
  parameter int          MSB = fdp_pkg::ACC_MSB,
  parameter int          LSB = fdp_pkg::ACC_LSB,
  parameter int unsigned OVF = fdp_pkg::ACC_OVF,
  parameter int unsigned K   = fdp_pkg::ACC_SEG,
  localparam int unsigned S3W  = WE + WF + 4,
  localparam int unsigned W    = fdp_pkg::acc_width(OVF, MSB, LSB),
  localparam int unsigned NSEG = fdp_pkg::num_segments(W, K),
  localparam int unsigned CW   = (NSEG > 1) ? NSEG - 1 : 1,
  localparam int unsigned RW   = 2 + W + CW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [S3W-1:0] a_in,
  input  logic [S3W-1:0] b_in,
  input  logic           valid_in,
  input  logic           eob_in,
  input  logic [RW-1:0]  res_in,
  output logic [S3W-1:0] a_out,
  output logic [S3W-1:0] b_out,
  output logic           valid_out,
  output logic           eob_out,
  output logic [RW-1:0]  res_out
);

  localparam int unsigned PW   = 2 * WF + 2;          // product width
  localparam int unsigned WW   = W + PW;              // shifter width
  localparam int          BIAS = (1 << (WE - 1)) - 1;
  localparam int          C0   = 2 * BIAS + LSB - 2;  // u = es - C0
  localparam int          UMAX = MSB - LSB + 1;       // largest legal u

  typedef struct packed {
    logic          nan;
    logic          ftz;
    logic          sign;
    logic [WE-1:0] scale;
    logic [WF:0]   sig;
  } s3_t;

  s3_t a, b;
  assign a = s3_t'(a_in);
  assign b = s3_t'(b_in);

  // ---------------------------------------------------------------- forward
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out     <= '0;
      b_out     <= '0;
      valid_out <= 1'b0;
      eob_out   <= 1'b0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      valid_out <= valid_in;
      eob_out   <= eob_in;
    end
  end

  // ---------------------------------------- stage 1: multiply, align, flags
  logic [WE:0]        es;
  logic [PW-1:0]      prod;
  logic signed [PW:0] sprod;
  logic signed [WW-1:0] wide;
  logic [W-1:0]       window;
  logic               ftz, too_small, too_big;
  int                 u;

  always_comb begin
    es        = {1'b0, a.scale} + {1'b0, b.scale};
    prod      = a.sig * b.sig;
    u         = int'(es) - C0;
    too_small = (u <= 0);
    too_big   = (u > UMAX);
    ftz       = a.ftz | b.ftz;
    sprod     = (a.sign ^ b.sign) ? -$signed({1'b0, prod}) : $signed({1'b0, prod});
    wide      = WW'(sprod);  // sign-extended
    wide      = (too_small || too_big) ? '0 : wide <<< u;
    window    = wide[WW-1:PW];
  end

  logic [W-1:0] add_r;
  logic         nan_r, eob_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      add_r <= '0;
      nan_r <= 1'b0;
      eob_r <= 1'b0;
    end else begin
      add_r <= (valid_in && !ftz && !a.nan && !b.nan) ? window : '0;
      nan_r <= valid_in && (a.nan || b.nan || (too_big && !ftz));
      eob_r <= valid_in && eob_in;
    end
  end

  // ----------------------------------------------------- stage 2: accumulate
  logic          clear_r;
  logic          nan_q, nan_next;
  logic [W-1:0]  sum_next, sum_q;
  logic [CW-1:0] carry_next, carry_q;

  seg_accumulator #(.W(W), .K(K)) u_acc (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear_r),
    .addend    (add_r),
    .sum_next  (sum_next),
    .carry_next(carry_next),
    .sum_q     (sum_q),
    .carry_q   (carry_q)
  );

  assign nan_next = (clear_r ? 1'b0 : nan_q) | nan_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear_r <= 1'b1;
      nan_q   <= 1'b0;
    end else begin
      clear_r <= eob_r;
      nan_q   <= nan_next;
    end
  end

  // ------------------------------------------------------------ output chain
  logic [RW-1:0] r1, r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0;
      r2 <= '0;
    end else begin
      r1 <= eob_r ? {1'b1, nan_next, sum_next, carry_next} : res_in;
      r2 <= r1;
    end
  end

  assign res_out = r2;

  // A result may only be injected into an empty chain slot.
  a_chain_free: assert property (@(posedge clk) disable iff (!rst_n) eob_r |-> !res_in[RW-1])
    else $error("fdp_pe: output chain collision, EOB pulses closer than the column height");

endmodule
