// tb_s3a -- converts random accumulator values, given in random carry-save
// splits, and checks the bfloat16 result against a rounding done on the
// double-precision bit pattern.  Covers NaN, zero, negative values, exact
// ties (round half to even) and values needing a carry into the exponent.
// Also checks the one-cycle latency.
module tb_s3a;
  import fdp_ref_pkg::*;
  localparam int WE = 8, WF = 7, MSB = 5, LSB = -30, OVF = 2, K = 16;
  localparam int W = OVF + MSB - LSB + 1, CW = 2;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_nan, out_valid;
  logic [W-1:0] in_sum;
  logic [CW-1:0] in_carry;
  logic [15:0] out;
  int checks = 0, failures = 0, n_tie = 0, n_nan = 0, n_neg = 0, n_zero = 0;

  s3a dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(longint v, bit nan);
    longint s;
    logic [CW-1:0] c;
    logic [15:0] expv;
    c = CW'($urandom);
    // choose sum so that sum + carries == v (mod 2^W)
    s = v;
    for (int i = 0; i < CW; i++) s -= longint'(c[i]) <<< (K * (i + 1));
    @(negedge clk);
    in_valid = 1; in_nan = nan; in_sum = W'(s); in_carry = c;
    expv = 16'(to_format(v, nan, WE, WF, LSB));
    @(posedge clk); #1;
    checks++;
    if (!out_valid || out !== expv) begin
      failures++;
      $display("v=%0d nan=%b: got %h expected %h", v, nan, out, expv);
    end
    @(negedge clk);
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
  endtask

  initial begin
    longint v;
    in_valid = 0; in_nan = 0; in_sum = 0; in_carry = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    convert(0, 0); n_zero++;
    convert(0, 1); n_nan++;
    convert(longint'(1) <<< 30, 0);          // 1.0
    convert(-(longint'(1) <<< 30), 0);       // -1.0
    convert((longint'(1) <<< (W - 1)) - 1, 0);
    convert(-(longint'(1) <<< (W - 1)), 0);
    convert(1, 0);
    convert(-1, 0);
    for (int i = 0; i < 3000; i++) begin
      case ($urandom_range(3))
        0: v = wrap({$urandom, $urandom}, W);
        1: v = longint'($urandom_range(1 << 20));
        2: begin // exact tie: 9 significant bits ending in 1, then zeros
             v = longint'((1 << 8) | ($urandom_range(127) << 1) | 1) <<< $urandom_range(25);
             n_tie++;
           end
        default: v = -longint'($urandom);
      endcase
      if ($urandom_range(1)) v = wrap(-v, W);
      if (v < 0) n_neg++;
      convert(v, $urandom_range(30) == 0);
    end
    $display("ties=%0d negatives=%0d", n_tie, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
