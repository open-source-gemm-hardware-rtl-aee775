// systolic_array -- N x M output-stationary systolic array of fused dot
// product PEs computing one N x M tile of C = A x B per block.
//
// Dataflow.  In every valid cycle the host presents one k-slice: A[i][k] for
// all N rows on a_row and B[k][j] for all M columns on b_col.  Row i is
// delayed i cycles and column j is delayed j cycles (skew registers), then
// each word is decoded to the S3 fields (a2s3).  Row operands travel right
// through the PEs, column operands travel down, so PE(i,j) sees A[i][k] and
// B[k][j] in the same cycle and accumulates C[i][j] in its fixed-point
// accumulator without intermediate rounding.  The control pair (valid, eob)
// enters at PE(0,0), travels along row 0 and then down every column, so it
// reaches PE(i,j) together with that PE's operands.  The slice marked by
// in_eob is the last of the block: each PE hands its result to the output
// chain of its column and restarts from zero, so the next block can follow
// immediately (a new block may start in the cycle after an EOB slice).
// Results drain down each column, are converted to the output format by the
// column's s3a unit and de-skewed (column j delayed M-1-j cycles) so that
// one full row of C appears on c_col per c_valid cycle.
//
// Skew/de-skew registers, A2S3 and S3A units, the PE grid and the side each
// stream enters are those of the array figure; the control path, the output
// chain and all latencies are this design's choices.
//
// Timing.  For an EOB slice presented in cycle t0, rows of C leave in cycles
// t0+N+M+3 (row N-1) to t0+2N+M+2 (row 0), bottom row first.  Two EOB slices
// must be at least N cycles apart, so a block has at least N slices when
// slices arrive back to back.
//
// Defaults: 32 x 31 PEs, bfloat16 operands, accumulator <MSB=5, LSB=-30,
// OVF=2> (38 bits), as in the paper's main configuration.
module systolic_array #(
  parameter int unsigned N   = fdp_pkg::ROWS,
  parameter int unsigned M   = fdp_pkg::COLS,
  parameter int unsigned WE  = fdp_pkg::EXP_W,
  parameter int unsigned WF  = fdp_pkg::FRAC_W,
  parameter int          MSB = fdp_pkg::ACC_MSB,
  parameter int          LSB = fdp_pkg::ACC_LSB,
  parameter int unsigned OVF = fdp_pkg::ACC_OVF,
  parameter int unsigned K   = fdp_pkg::ACC_SEG,
  localparam int unsigned IW = WE + WF + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_eob,
  input  logic [IW-1:0] a_row [N],
  input  logic [IW-1:0] b_col [M],
  output logic          c_valid,
  output logic [IW-1:0] c_col [M]
);

  localparam int unsigned S3W  = WE + WF + 4;
  localparam int unsigned W    = fdp_pkg::acc_width(OVF, MSB, LSB);
  localparam int unsigned NSEG = fdp_pkg::num_segments(W, K);
  localparam int unsigned CW   = (NSEG > 1) ? NSEG - 1 : 1;
  localparam int unsigned RW   = 2 + W + CW;

  // buses between PEs: a_bus[i][j] enters PE(i,j) from the left,
  // b_bus[i][j] enters PE(i,j) from above, r_bus[i][j] is the output chain
  // entering PE(i,j) from above.
  logic [S3W-1:0] a_bus [N][M+1];
  logic [S3W-1:0] b_bus [N+1][M];
  logic [RW-1:0]  r_bus [N+1][M];
  logic           v_out [N][M];
  logic           e_out [N][M];
  logic           ctl_v, ctl_e;

  // ------------------------------------------------ input skew and decoding
  for (genvar i = 0; i < N; i++) begin : g_row_in
    logic [IW-1:0] skewed;
    delay_line #(.WIDTH(IW), .DEPTH(i)) u_skew (
      .clk(clk), .rst_n(rst_n), .d(a_row[i]), .q(skewed));
    a2s3 #(.WE(WE), .WF(WF)) u_dec (
      .clk(clk), .rst_n(rst_n), .x(skewed),
      .nan  (a_bus[i][0][S3W-1]),
      .ftz  (a_bus[i][0][S3W-2]),
      .sign (a_bus[i][0][S3W-3]),
      .scale(a_bus[i][0][WF+WE:WF+1]),
      .sig  (a_bus[i][0][WF:0]));
  end

  for (genvar j = 0; j < M; j++) begin : g_col_in
    logic [IW-1:0] skewed;
    delay_line #(.WIDTH(IW), .DEPTH(j)) u_skew (
      .clk(clk), .rst_n(rst_n), .d(b_col[j]), .q(skewed));
    a2s3 #(.WE(WE), .WF(WF)) u_dec (
      .clk(clk), .rst_n(rst_n), .x(skewed),
      .nan  (b_bus[0][j][S3W-1]),
      .ftz  (b_bus[0][j][S3W-2]),
      .sign (b_bus[0][j][S3W-3]),
      .scale(b_bus[0][j][WF+WE:WF+1]),
      .sig  (b_bus[0][j][WF:0]));
    assign r_bus[0][j] = '0;
  end

  // control: one register to match the decoder latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_v <= 1'b0;
      ctl_e <= 1'b0;
    end else begin
      ctl_v <= in_valid;
      ctl_e <= in_valid && in_eob;
    end
  end

  // ------------------------------------------------------------ PE grid
  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < M; j++) begin : g_c
      logic v_in, e_in;
      if (i == 0 && j == 0) begin : g_ctl00
        assign v_in = ctl_v;
        assign e_in = ctl_e;
      end else if (i == 0) begin : g_ctl0j
        assign v_in = v_out[0][j-1];
        assign e_in = e_out[0][j-1];
      end else begin : g_ctlij
        assign v_in = v_out[i-1][j];
        assign e_in = e_out[i-1][j];
      end

      fdp_pe #(.WE(WE), .WF(WF), .MSB(MSB), .LSB(LSB), .OVF(OVF), .K(K)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_in     (a_bus[i][j]),
        .b_in     (b_bus[i][j]),
        .valid_in (v_in),
        .eob_in   (e_in),
        .res_in   (r_bus[i][j]),
        .a_out    (a_bus[i][j+1]),
        .b_out    (b_bus[i+1][j]),
        .valid_out(v_out[i][j]),
        .eob_out  (e_out[i][j]),
        .res_out  (r_bus[i+1][j])
      );
    end
  end

  // ------------------------------------------ output conversion and de-skew
  logic c_vld [M];

  for (genvar j = 0; j < M; j++) begin : g_col_out
    logic          cv;
    logic [IW-1:0] cw;
    logic [RW-1:0] r;
    assign r = r_bus[N][j];

    s3a #(.WE(WE), .WF(WF), .MSB(MSB), .LSB(LSB), .OVF(OVF), .K(K)) u_conv (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (r[RW-1]),
      .in_nan   (r[RW-2]),
      .in_sum   (r[CW+W-1:CW]),
      .in_carry (r[CW-1:0]),
      .out_valid(cv),
      .out      (cw));

    delay_line #(.WIDTH(IW + 1), .DEPTH(M - 1 - j)) u_deskew (
      .clk(clk), .rst_n(rst_n), .d({cv, cw}), .q({c_vld[j], c_col[j]}));
  end

  assign c_valid = c_vld[0];

  // EOB slices closer than N cycles would collide in the output chains.
  int unsigned since_eob;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      since_eob <= N;
    end else if (in_valid && in_eob) begin
      assert (since_eob >= N)
        else $error("systolic_array: EOB slices %0d cycles apart, need %0d", since_eob, N);
      since_eob <= 1;
    end else if (since_eob < N) begin
      since_eob <= since_eob + 1;
    end
  end

endmodule
