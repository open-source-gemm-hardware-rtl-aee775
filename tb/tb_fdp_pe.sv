// tb_fdp_pe -- drives one PE with random bfloat16 dot products of random
// length, bubbles and special operands (zero, NaN, too big, too small), and
// checks: operands and control forwarded after one cycle; the block result on
// res_out exactly 3 cycles after the EOB pair, equal (after resolving the
// carries) to the reference sum of floored, scaled products; the sticky NaN
// flag; and output-chain words from above passed down in 2 cycles.
module tb_fdp_pe;
  import fdp_ref_pkg::*;
  localparam int WE = 8, WF = 7, MSB = 5, LSB = -30, OVF = 2, K = 16;
  localparam int W = OVF + MSB - LSB + 1, CW = 2, RW = 2 + W + CW, S3W = WE + WF + 4;

  logic clk = 0, rst_n = 0;
  logic [S3W-1:0] a_in, b_in, a_out, b_out;
  logic valid_in, eob_in, valid_out, eob_out;
  logic [RW-1:0] res_in, res_out;
  int checks = 0, failures = 0;
  int n_nan = 0, n_big = 0, n_small = 0, n_ftz = 0, n_neg = 0, n_pass = 0, n_blocks = 0, n_carry = 0;

  fdp_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [S3W-1:0] s3(logic [15:0] v);
    logic [7:0] e = v[14:7];
    return {e == 8'hFF, e == 8'h00, v[15], e, (e == 0) ? 8'h00 : {1'b1, v[6:0]}};
  endfunction

  function automatic longint resolve(logic [RW-1:0] r);
    longint v = longint'(r[CW+W-1:CW]);
    for (int i = 0; i < CW; i++) v += longint'(r[i]) <<< (K * (i + 1));
    return wrap(v, W);
  endfunction

  // expected outputs, indexed by cycle
  typedef struct { int cyc; bit is_result; longint val; bit nan; logic [RW-1:0] raw; } exp_t;
  exp_t expq [$];
  int cyc = 0;
  longint acc = 0;
  bit nanf = 0;
  logic [S3W-1:0] a_prev, b_prev;
  logic v_prev, e_prev;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic [15:0] x, y;
    prod_t p;
    int len;
    a_in = 0; b_in = 0; valid_in = 0; eob_in = 0; res_in = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 300; blk++) begin
      len = $urandom_range(1, 8);
      acc = 0; nanf = 0;
      for (int k = 0; k < len; k++) begin
        // optional bubble
        while ($urandom_range(4) == 0) begin
          valid_in = 0; eob_in = 0;
          a_in = s3(16'($urandom)); b_in = s3(16'($urandom));
          res_in = 0;
          @(negedge clk);
        end
        x = 16'(rand_operand(WE, WF, 6, 5));
        y = 16'(rand_operand(WE, WF, 6, 5));
        p = product(x, y, WE, WF, MSB, LSB);
        if (p.nan) n_nan++;
        if (p.too_big) n_big++;
        if (p.too_small) n_small++;
        if (p.ftz) n_ftz++;
        if (p.addend < 0) n_neg++;
        acc = wrap(acc + p.addend, W);
        nanf |= p.nan;
        a_in = s3(x); b_in = s3(y); valid_in = 1; eob_in = (k == len - 1);
        res_in = 0;
        // a word from the PE above, in a cycle where no result is injected
        if (!eob_in && !e_prev_now() && $urandom_range(2) == 0) begin
          res_in = {1'b1, RW'({$urandom, $urandom, $urandom})} ;
          expq.push_back('{cyc + 2, 0, 0, 0, res_in});
        end
        if (eob_in) expq.push_back('{cyc + 3, 1, acc, nanf, '0});
        @(negedge clk);
      end
      n_blocks++;
    end
    valid_in = 0; eob_in = 0; res_in = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results never seen", expq.size()); end
    checks++;
    if (n_nan == 0 || n_big == 0 || n_small == 0 || n_ftz == 0 || n_neg == 0 || n_pass == 0 || n_carry == 0) begin
      failures++;
      $display("mechanism missing: nan=%0d big=%0d small=%0d ftz=%0d neg=%0d pass=%0d carry=%0d",
               n_nan, n_big, n_small, n_ftz, n_neg, n_pass, n_carry);
    end
    $display("blocks=%0d nan=%0d too_big=%0d too_small=%0d ftz=%0d negative=%0d chain_pass=%0d carries=%0d",
             n_blocks, n_nan, n_big, n_small, n_ftz, n_neg, n_pass, n_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // was an EOB presented in the previous cycle (result injected next edge)?
  function automatic bit e_prev_now();
    return v_prev && e_prev;
  endfunction

  // monitor, sampled just after each rising edge
  always @(posedge clk) begin
    a_prev <= a_in; b_prev <= b_in; v_prev <= valid_in; e_prev <= eob_in;
    #1;
    if (rst_n && cyc > 3) begin
      checks++;
      if (a_out !== a_prev || b_out !== b_prev || valid_out !== v_prev || eob_out !== e_prev) begin
        failures++;
        $display("cycle %0d: forwarding mismatch", cyc);
      end
      if (res_out[1:0] != 0) n_carry++;
      if (expq.size() > 0 && expq[0].cyc == cyc) begin
        checks++;
        if (expq[0].is_result) begin
          if (!res_out[RW-1] || res_out[RW-2] !== expq[0].nan ||
              (!expq[0].nan && resolve(res_out) != expq[0].val)) begin
            failures++;
            $display("cycle %0d: result v=%b nan=%b val=%0d, expected nan=%b val=%0d", cyc,
                     res_out[RW-1], res_out[RW-2], resolve(res_out), expq[0].nan, expq[0].val);
          end
        end else begin
          n_pass++;
          if (res_out !== expq[0].raw) begin
            failures++;
            $display("cycle %0d: chain word %h, expected %h", cyc, res_out, expq[0].raw);
          end
        end
        void'(expq.pop_front());
      end else begin
        checks++;
        if (res_out[RW-1]) begin
          failures++;
          $display("cycle %0d: unexpected valid on res_out", cyc);
        end
      end
    end
  end
endmodule
