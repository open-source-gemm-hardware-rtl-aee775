// delay_line -- a chain of DEPTH registers of WIDTH bits.
//
// The systolic array uses it to skew its inputs (row i of A and column j of
// B enter i and j cycles late, so that the operands of one dot-product step
// meet in PE(i,j)) and to re-align the column results on the way out
// (column j is delayed M-1-j cycles).  The register chains are drawn in the
// array figure; their reset to zero is this design's choice.
//
// Timing: q(t) = d(t - DEPTH).  DEPTH = 0 is a plain wire.
module delay_line #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < DEPTH; s++) stage[s] <= '0;
      end else begin
        stage[0] <= d;
        for (int s = 1; s < DEPTH; s++) stage[s] <= stage[s-1];
      end
    end

    assign q = stage[DEPTH-1];
  end

endmodule
