// tb_seg_accumulator -- adds random 38-bit addends, with random block
// restarts, into accumulators of 8-bit and 16-bit segments and checks every
// cycle that sum + pending carries equals a plain integer sum modulo 2^38.
module tb_seg_accumulator;
  import fdp_ref_pkg::*;
  localparam int unsigned W = 38;
  logic clk = 0, rst_n = 0;
  logic clear;
  logic [W-1:0] addend;
  logic [W-1:0] sn8, sq8, sn16, sq16;
  logic [4:0]   cn8, cq8;
  logic [1:0]   cn16, cq16;
  int checks = 0, failures = 0, carry_events = 0, clears = 0;
  longint ref_acc;

  seg_accumulator #(.W(W), .K(8)) dut8 (.clk(clk), .rst_n(rst_n), .clear(clear),
    .addend(addend), .sum_next(sn8), .carry_next(cn8), .sum_q(sq8), .carry_q(cq8));
  seg_accumulator dut16 (.clk(clk), .rst_n(rst_n), .clear(clear),
    .addend(addend), .sum_next(sn16), .carry_next(cn16), .sum_q(sq16), .carry_q(cq16));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint resolve(logic [W-1:0] s, logic [4:0] c, int k, int n);
    longint v = longint'(s);
    for (int i = 0; i < n; i++) v += longint'(c[i]) <<< (k * (i + 1));
    return wrap(v, W);
  endfunction

  initial begin
    clear = 1; addend = 0; ref_acc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear  = ($urandom_range(19) == 0);
      addend = W'({$urandom, $urandom});
      if ($urandom_range(3) == 0) addend = W'(-longint'($urandom_range(255)));
      ref_acc = wrap((clear ? 0 : ref_acc) + wrap(longint'(addend), W), W);
      if (clear) clears++;
      #1;
      checks++;
      if (resolve(sn8, cn8, 8, 4) != ref_acc || resolve(sn16, {3'b0, cn16}, 16, 2) != ref_acc) begin
        failures++;
        if (failures < 10) $display("t=%0d got %0d/%0d expected %0d", t,
          resolve(sn8, cn8, 8, 4), resolve(sn16, {3'b0, cn16}, 16, 2), ref_acc);
      end
      if (cn8 != 0) carry_events++;
      @(posedge clk); #1;
      checks++;
      if (resolve(sq8, cq8, 8, 4) != ref_acc) failures++;
    end
    checks++;
    if (carry_events == 0 || clears == 0) begin
      failures++;
      $display("mechanism not exercised: carries=%0d clears=%0d", carry_events, clears);
    end
    $display("segment carries %0d, restarts %0d", carry_events, clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
