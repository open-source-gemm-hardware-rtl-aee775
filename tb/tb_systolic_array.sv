// tb_systolic_array -- end-to-end test of the FDP systolic array at a
// reduced size (4 x 3 PEs, 8-bit accumulator segments so that segment
// carries are frequent).  Random bfloat16 tiles, with a few zero, NaN, huge
// and tiny operands, are multiplied block after block: some blocks follow
// the previous one with no idle cycle, some slices are separated by bubbles.
// Every element of every C tile is compared with a reference computed from
// real arithmetic, and each row must appear in the cycle predicted by the
// array's latency (N+M+3 after the EOB slice, bottom row first).  The test
// counts NaN, too-big and too-small products, flushed zeros, negative
// products, back-to-back blocks, bubbles, rounded results and segment
// carries, and fails if any of them never happened.
module tb_systolic_array;
  localparam int N = 4, M = 3, BLOCKS = 40, EXTRA = 3, WATCHDOG = 20000, SPECIAL = 2;
  import fdp_ref_pkg::*;
  localparam int WE = 8, WF = 7, MSB = 5, LSB = -30, OVF = 2;
  localparam int W = OVF + MSB - LSB + 1;
  localparam int IW = WE + WF + 1;
  localparam int LAT = N + M + 3;   // EOB slice to first row of C

  logic clk = 0, rst_n = 0;
  logic in_valid, in_eob, c_valid;
  logic [IW-1:0] a_row [N];
  logic [IW-1:0] b_col [M];
  logic [IW-1:0] c_col [M];
  int checks = 0, failures = 0, cyc = 0;
  int n_nan = 0, n_big = 0, n_small = 0, n_ftz = 0, n_neg = 0, n_b2b = 0, n_bubble = 0,
      n_round = 0, n_carry = 0, n_rows = 0;

  typedef struct { int cyc; int row; logic [IW-1:0] c [M]; } row_t;
  row_t expq [$];


  systolic_array #(.N(N), .M(M), .K(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // segment carries inside one PE (observed, not driven)
  always @(posedge clk)
    if (dut.g_r[0].g_c[0].u_pe.carry_next != 0) n_carry++;

  task automatic run_block(int len, bit gap_before);
    logic [IW-1:0] A [N][];
    logic [IW-1:0] B [][M];
    longint acc [N][M];
    bit     nan [N][M];
    prod_t  p;
    int     t_eob;
    row_t   r;
    for (int i = 0; i < N; i++) A[i] = new[len];
    B = new[len];
    for (int i = 0; i < N; i++)
      for (int k = 0; k < len; k++) A[i][k] = IW'(rand_operand(WE, WF, 4, SPECIAL));
    for (int k = 0; k < len; k++)
      for (int j = 0; j < M; j++) B[k][j] = IW'(rand_operand(WE, WF, 4, SPECIAL));
    // reference
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        acc[i][j] = 0; nan[i][j] = 0;
        for (int k = 0; k < len; k++) begin
          p = product(A[i][k], B[k][j], WE, WF, MSB, LSB);
          if (p.nan) n_nan++;
          if (p.too_big) n_big++;
          if (p.too_small) n_small++;
          if (p.ftz) n_ftz++;
          if (p.addend < 0) n_neg++;
          acc[i][j] = wrap(acc[i][j] + p.addend, W);
          nan[i][j] |= p.nan;
        end
      end
    if (gap_before) begin
      in_valid = 0; in_eob = 0;
      repeat ($urandom_range(1, 3)) @(negedge clk);
    end else n_b2b++;
    for (int k = 0; k < len; k++) begin
      if (k > 0 && $urandom_range(5) == 0) begin
        n_bubble++;
        in_valid = 0; in_eob = 0;
        foreach (a_row[i]) a_row[i] = IW'($urandom);
        foreach (b_col[j]) b_col[j] = IW'($urandom);
        @(negedge clk);
      end
      in_valid = 1; in_eob = (k == len - 1);
      foreach (a_row[i]) a_row[i] = A[i][k];
      foreach (b_col[j]) b_col[j] = B[k][j];
      if (in_eob) t_eob = cyc;
      @(negedge clk);
    end
    in_valid = 0; in_eob = 0;
    // rows leave bottom first
    for (int q = 0; q < N; q++) begin
      r.cyc = t_eob + LAT + q;
      r.row = N - 1 - q;
      for (int j = 0; j < M; j++) begin
        r.c[j] = IW'(to_format(acc[r.row][j], nan[r.row][j], WE, WF, LSB));
        if (!nan[r.row][j] && !exact_wf(acc[r.row][j])) n_round++;
      end
      expq.push_back(r);
    end
  endtask

  // does |v| fit in WF+1 significant bits (no rounding needed)?
  function automatic bit exact_wf(longint v);
    longint m = (v < 0) ? -v : v;
    while (m >= (longint'(1) <<< (WF + 1))) begin
      if (m[0]) return 0;
      m = m >>> 1;
    end
    return 1;
  endfunction

  // output monitor
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (expq.size() > 0 && expq[0].cyc == cyc) begin
        checks++;
        n_rows++;
        if (!c_valid) begin
          failures++;
          $display("cycle %0d: row %0d missing", cyc, expq[0].row);
        end else begin
          for (int j = 0; j < M; j++) begin
            checks++;
            if (c_col[j] !== expq[0].c[j]) begin
              failures++;
              if (failures < 20)
                $display("cycle %0d: C[%0d][%0d] = %h, expected %h", cyc, expq[0].row, j, c_col[j], expq[0].c[j]);
            end
          end
        end
        void'(expq.pop_front());
      end else if (c_valid) begin
        checks++;
        failures++;
        $display("cycle %0d: unexpected c_valid", cyc);
      end
    end
  end

  initial begin
    int len;
    in_valid = 0; in_eob = 0;
    foreach (a_row[i]) a_row[i] = 0;
    foreach (b_col[j]) b_col[j] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < BLOCKS; blk++) begin
      len = N + $urandom_range(EXTRA);
      run_block(len, blk == 0 || $urandom_range(2) == 0);
    end
    repeat (2 * N + M + 10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d rows of C never appeared", expq.size());
    end
    $display("rows=%0d nan=%0d too_big=%0d too_small=%0d ftz=%0d negative=%0d back_to_back=%0d bubbles=%0d rounded=%0d seg_carries=%0d",
             n_rows, n_nan, n_big, n_small, n_ftz, n_neg, n_b2b, n_bubble, n_round, n_carry);
    checks++;
    if (n_nan == 0 || n_big == 0 || n_small == 0 || n_ftz == 0 || n_neg == 0 ||
        n_b2b == 0 || n_bubble == 0 || n_round == 0 || n_carry == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
