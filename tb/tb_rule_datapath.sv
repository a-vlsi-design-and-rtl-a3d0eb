// tb_rule_datapath -- self-checking testbench of one rule data path.
// Two instances are driven side by side: the chip's one-antecedent rule and the two-antecedent
// rule of the generic data path (A and B).  Each trial draws random grades for the
// observations, the antecedents and the conclusion over 31 elements, streams them MSB first
// with the word-start strobe every 4 cycles, and checks
//   * alpha_k = max_x min(A'_k(x), A_k(x)) in the shift register after the last element,
//   * y = min(w, C(z)) for every element, one cycle after the conclusion bit,
// against values computed directly on the integer grades.
module tb_rule_datapath;
  localparam int NE = 31;
  localparam int GB = 4;

  logic clk = 1'b0;
  logic rst, ws, ante_en, cons;
  logic [1:0] obs, ante;
  logic y1, y2;
  logic [GB-1:0] alpha1 [1];
  logic [GB-1:0] alpha2 [2];
  int checks = 0, failures = 0;

  rule_datapath #(.N_ANT(1), .GRADE_BITS(GB)) dut1 (
    .clk, .rst, .ws, .ante_en, .obs(obs[0:0]), .ante(ante[0:0]), .cons, .y(y1), .alpha(alpha1)
  );
  rule_datapath #(.N_ANT(2), .GRADE_BITS(GB)) dut2 (
    .clk, .rst, .ws, .ante_en, .obs, .ante, .cons, .y(y2), .alpha(alpha2)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endfunction

  int ob [2][NE], an [2][NE], cn [NE];

  task automatic trial(input int mode);
    int al [2];
    int w1, w2;
    int got1, got2;
    // draw grades; mode 1 draws sparse sets so that alpha is often 0
    for (int k = 0; k < 2; k++)
      for (int e = 0; e < NE; e++) begin
        ob[k][e] = (mode == 1 && ($urandom % 4 != 0)) ? 0 : int'($urandom % 16);
        an[k][e] = (mode == 1 && ($urandom % 4 != 0)) ? 0 : int'($urandom % 16);
      end
    for (int e = 0; e < NE; e++) cn[e] = $urandom % 16;
    for (int k = 0; k < 2; k++) begin
      al[k] = 0;
      for (int e = 0; e < NE; e++) begin
        int m = (ob[k][e] < an[k][e]) ? ob[k][e] : an[k][e];
        if (m > al[k]) al[k] = m;
      end
    end
    w1 = al[0];
    w2 = (al[0] < al[1]) ? al[0] : al[1];

    rst = 1'b1; ws = 1'b1; ante_en = 1'b0; obs = '1; ante = '1; cons = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    @(posedge clk); #1;          // wait cycle, strobe high
    ante_en = 1'b1;
    for (int e = 0; e < NE; e++)
      for (int b = GB - 1; b >= 0; b--) begin
        ws = (b == GB - 1);
        for (int k = 0; k < 2; k++) begin
          obs[k]  = ob[k][e][b];
          ante[k] = an[k][e][b];
        end
        @(posedge clk); #1;
      end
    check(int'(alpha1[0]), al[0], "alpha (1 antecedent)");
    check(int'(alpha2[0]), al[0], "alpha_A (2 antecedents)");
    check(int'(alpha2[1]), al[1], "alpha_B (2 antecedents)");
    ante_en = 1'b0; obs = '1; ante = '1;   // observation ignored from now on
    for (int e = 0; e < NE; e++) begin
      got1 = 0; got2 = 0;
      for (int b = GB - 1; b >= 0; b--) begin
        ws = (b == GB - 1);
        cons = cn[e][b];
        @(posedge clk); #1;
        got1 = (got1 << 1) | int'(y1);
        got2 = (got2 << 1) | int'(y2);
      end
      check(got1, (w1 < cn[e]) ? w1 : cn[e], "y (1 antecedent)");
      check(got2, (w2 < cn[e]) ? w2 : cn[e], "y (2 antecedents)");
    end
  endtask

  initial begin
    for (int t = 0; t < 20; t++) trial(t % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
