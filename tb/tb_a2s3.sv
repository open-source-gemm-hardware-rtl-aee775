// tb_a2s3 -- decodes random and special bfloat16 and binary32 words and
// compares the S3 fields with values computed from the IEEE definitions.
module tb_a2s3;
  logic clk = 0, rst_n = 0;
  logic [15:0] x16;
  logic [31:0] x32;
  logic nan16, ftz16, s16, nan32, ftz32, s32;
  logic [7:0] sc16, sc32;
  logic [7:0] sig16;
  logic [23:0] sig32;
  int checks = 0, failures = 0;

  a2s3 dut16 (.clk(clk), .rst_n(rst_n), .x(x16), .nan(nan16), .ftz(ftz16),
              .sign(s16), .scale(sc16), .sig(sig16));
  a2s3 #(.WE(8), .WF(23)) dut32 (.clk(clk), .rst_n(rst_n), .x(x32), .nan(nan32),
              .ftz(ftz32), .sign(s32), .scale(sc32), .sig(sig32));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check16(logic [15:0] v);
    real r;
    @(negedge clk); x16 = v; x32 = {v, 16'h0};
    @(posedge clk); #1;
    // a bfloat16 is the top half of a binary32 word
    checks++;
    if (nan16 !== (v[14:7] == 8'hFF) || nan32 !== nan16 ||
        ftz16 !== (v[14:7] == 8'h00) || ftz32 !== ftz16 ||
        s16 !== v[15] || s32 !== v[15] || sc16 !== v[14:7] || sc32 !== v[14:7]) begin
      failures++;
      $display("flags %h: nan=%b ftz=%b s=%b sc=%h", v, nan16, ftz16, s16, sc16);
    end
    // the significand must give back the value (checked against the
    // binary64 word with the same sign, exponent and fraction)
    if (!nan16 && !ftz16) begin
      checks++;
      r = real'(sig16) / 128.0 * fdp_ref_pkg::pow2(int'(sc16) - 127);
      if (v[15]) r = -r;
      if (r != $bitstoreal({v[15], 11'(int'(v[14:7]) - 127 + 1023), v[6:0], 45'h0}) || sig32 !== {sig16, 16'h0}) begin
        failures++;
        $display("value %h: sig=%h", v, sig16);
      end
    end else begin
      checks++;
      if (ftz16 && sig16 !== 0) failures++;
    end
  endtask

  initial begin
    x16 = 0; x32 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check16(16'h3F80); check16(16'hBF80); check16(16'h0000); check16(16'h8000);
    check16(16'h7F80); check16(16'h7FC0); check16(16'h0001); check16(16'h4049);
    for (int i = 0; i < 500; i++) check16(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
