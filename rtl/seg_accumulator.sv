// seg_accumulator -- fixed-point accumulator in carry-save form, radix 2^K.
//
// The W-bit two's-complement accumulator is cut into NSEG = ceil(W/K)
// segments of K bits (the top one may be narrower).  Every cycle each
// segment adds, with its own ripple-carry adder,
//     its stored sum + its slice of the addend + the carry that the segment
//     below produced in the previous cycle,
// and registers its K-bit sum and its carry out.  No carry travels further
// than one segment per cycle, which is what lets a long accumulator run at
// the clock of a short adder.  The value held is
//     sum_q + sum over s of carry_q[s] * 2^(K*(s+1))   (mod 2^W);
// the carry out of the top segment is dropped, so overflow past the OVF
// guard bits wraps.  The segmented structure (RCAs with carry registers) is
// the one drawn in the PE figure; K and the wrap-around are this design's
// choices.
//
// clear: the stored sum and carries are ignored this cycle (the first
// addend of a new block).  sum_next/carry_next are the values that will be
// registered at this clock edge, so a result can be taken in the same cycle
// as its last addend.
module seg_accumulator #(
  parameter int unsigned W = fdp_pkg::acc_width(fdp_pkg::ACC_OVF, fdp_pkg::ACC_MSB, fdp_pkg::ACC_LSB),
  parameter int unsigned K = fdp_pkg::ACC_SEG,
  localparam int unsigned NSEG = fdp_pkg::num_segments(W, K),
  localparam int unsigned CW   = (NSEG > 1) ? NSEG - 1 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [W-1:0]  addend,
  output logic [W-1:0]  sum_next,
  output logic [CW-1:0] carry_next,
  output logic [W-1:0]  sum_q,
  output logic [CW-1:0] carry_q
);

  logic [NSEG-1:0] cout;

  for (genvar s = 0; s < NSEG; s++) begin : g_seg
    localparam int unsigned LO = s * K;
    localparam int unsigned SW = (s == NSEG - 1) ? W - LO : K;
    logic          cin;
    logic [SW:0]   total;

    if (s == 0) begin : g_c0
      assign cin = 1'b0;
    end else begin : g_cn
      assign cin = clear ? 1'b0 : carry_q[s-1];
    end

    always_comb begin
      total = {1'b0, (clear ? {SW{1'b0}} : sum_q[LO +: SW])}
            + {1'b0, addend[LO +: SW]}
            + {{SW{1'b0}}, cin};
    end

    assign sum_next[LO +: SW] = total[SW-1:0];
    assign cout[s]            = total[SW];
  end

  if (NSEG > 1) begin : g_carry
    assign carry_next = cout[NSEG-2:0];
  end else begin : g_nocarry
    assign carry_next = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q   <= '0;
      carry_q <= '0;
    end else begin
      sum_q   <= sum_next;
      carry_q <= carry_next;
    end
  end

endmodule
