// tb_bs_min -- self-checking testbench of the bit-serial minimum element.
// Streams random pairs of 4-bit and 8-bit unsigned integers MSB first, back to back, with
// the word-start strobe on each MSB, rebuilds the output word and compares it with the
// minimum computed directly.  Includes equal pairs and pairs differing only in the LSB.
module tb_bs_min;
  logic clk = 1'b0;
  logic ws, a, b, y;
  int checks = 0, failures = 0;

  bs_min dut (.clk, .ws, .a, .b, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_word(input int unsigned wa, input int unsigned wb, input int nbits);
    int unsigned got = 0;
    int unsigned exp = (wa < wb) ? wa : wb;
    for (int i = nbits - 1; i >= 0; i--) begin
      ws = (i == nbits - 1);
      a  = wa[i];
      b  = wb[i];
      #1;
      got = (got << 1) | int'(y);
      @(posedge clk);
      #1;
    end
    checks++;
    if (got != exp) begin
      failures++;
      $display("min(%0d,%0d) gave %0d", wa, wb, got);
    end
  endtask

  initial begin
    ws = 1'b0; a = 1'b0; b = 1'b0;
    @(posedge clk); #1;
    for (int x = 0; x < 16; x++)
      for (int z = 0; z < 16; z++) run_word(x, z, 4);
    for (int n = 0; n < 300; n++) run_word($urandom % 256, $urandom % 256, 8);
    run_word(8'hA5, 8'hA4, 8);
    run_word(8'hA4, 8'hA5, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
