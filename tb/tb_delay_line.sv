// tb_delay_line -- checks that a 3-deep and a 0-deep delay line return
// every input word exactly DEPTH cycles later.
module tb_delay_line;
  localparam int unsigned WIDTH = 16;
  logic clk = 0, rst_n = 0;
  logic [WIDTH-1:0] d, q3, q0;
  logic [WIDTH-1:0] hist [$];
  int checks = 0, failures = 0;

  delay_line #(.WIDTH(WIDTH), .DEPTH(3)) dut  (.clk(clk), .rst_n(rst_n), .d(d), .q(q3));
  delay_line #(.WIDTH(WIDTH), .DEPTH(0)) dut0 (.clk(clk), .rst_n(rst_n), .d(d), .q(q0));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q3 !== '0) begin failures++; $display("reset value %h", q3); end
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      d = WIDTH'($urandom);
      #1;
      checks++;
      if (q0 !== d) failures++;
      hist.push_back(d);
      @(posedge clk); #1;
      if (hist.size() > 3) void'(hist.pop_front());
      if (hist.size() == 3) begin
        checks++;
        if (q3 !== hist[0]) begin
          failures++;
          $display("t=%0d q=%h expected %h", t, q3, hist[0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
