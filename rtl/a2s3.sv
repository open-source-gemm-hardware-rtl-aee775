// a2s3 -- decode an operand from the arithmetic (input) format into the S3
// fields consumed by the fused-dot-product PE.
//
// The input is an IEEE-754-style word {sign, exponent[WE], fraction[WF]};
// the default WE=8, WF=7 is bfloat16, and WE=8, WF=23 gives IEEE binary32.
// S3 fields, as labelled on the PE inputs of the array figure:
//   nan   - exponent all ones (NaN or infinity; the FDP treats both as NaN)
//   ftz   - exponent zero: zero or subnormal, flushed to zero
//   sign  - sign bit
//   scale - biased exponent (the PE removes the bias in its shift computation)
//   sig   - implicit bit and fraction, I.F, WF+1 bits
// Posit inputs, which the FDP family also supports, are not decoded here.
// The flush of subnormals and the NaN treatment of infinities are this
// design's choices.
//
// Timing: one register stage, outputs valid one cycle after x.
module a2s3 #(
  parameter int unsigned WE = fdp_pkg::EXP_W,
  parameter int unsigned WF = fdp_pkg::FRAC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WE+WF:0]   x,
  output logic             nan,
  output logic             ftz,
  output logic             sign,
  output logic [WE-1:0]    scale,
  output logic [WF:0]      sig
);

  logic [WE-1:0] e;
  logic [WF-1:0] f;
  assign e = x[WE+WF-1:WF];
  assign f = x[WF-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nan   <= 1'b0;
      ftz   <= 1'b1;
      sign  <= 1'b0;
      scale <= '0;
      sig   <= '0;
    end else begin
      nan   <= (e == '1);
      ftz   <= (e == '0);
      sign  <= x[WE+WF];
      scale <= e;
      sig   <= (e == '0) ? '0 : {1'b1, f};
    end
  end

endmodule
