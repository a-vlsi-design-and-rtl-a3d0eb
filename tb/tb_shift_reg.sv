// tb_shift_reg -- self-checking testbench of the rule shift register.
// Shifts random bits into a 4-bit and a 6-bit register and checks that the serial output
// in a cycle is the input of exactly LEN cycles before, that the parallel view holds the
// last word with its first bit in the MSB, and that reset clears it.
module tb_shift_reg;
  logic clk = 1'b0;
  logic rst, d;
  logic q4, q6;
  logic [3:0] p4;
  logic [5:0] p6;
  logic hist [$];
  int checks = 0, failures = 0;

  shift_reg #(.LEN(4)) dut4 (.clk, .rst, .d, .q(q4), .par(p4));
  shift_reg #(.LEN(6)) dut6 (.clk, .rst, .d, .q(q6), .par(p6));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b", what, got, exp);
    end
  endfunction

  initial begin
    rst = 1'b1; d = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    checks++;
    if (p4 != 4'b0 || p6 != 6'b0) begin failures++; $display("reset did not clear"); end
    for (int n = 0; n < 400; n++) begin
      d = 1'($urandom);
      hist.push_front(d);
      @(posedge clk); #1;
      if (hist.size() >= 4) check(q4, hist[3], "q4");
      if (hist.size() >= 6) check(q6, hist[5], "q6");
      if (hist.size() >= 4) check(p4[3], hist[3], "p4 msb");
      if (hist.size() >= 4) check(p4[0], hist[0], "p4 lsb");
      if (hist.size() >= 6) check(p6[5], hist[5], "p6 msb");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
