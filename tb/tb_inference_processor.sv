// tb_inference_processor -- self-checking testbench of the inference processor.
// Two processors share the stimulus: the chip's size (16 rules, one antecedent) and a
// 5-rule, two-antecedent processor (tree padded to 8 leaves).  The testbench plays the
// controller and the ROMs itself: it draws random grades for the observations and for every
// rule's antecedents and conclusion, streams them MSB first with the word strobe every 4
// cycles, and compares
//   * every alpha with max_x min(A'(x), A_i(x)),
//   * every output grade with C'(z) = max_i min(w_i, C_i(z)), exactly 1 + ceil(log2 N)
//     cycles after the conclusion bits (5 and 4 cycles), ws_o marking each output MSB.
module tb_inference_processor;
  localparam int NE = 31, GB = 4;
  localparam int NR1 = 16, NR2 = 5;

  logic clk = 1'b0;
  logic rst, ws, ante_en;
  logic [1:0] obs;
  logic [NR1-1:0] ante1, cons1;
  logic [2*NR2-1:0] ante2;
  logic [NR2-1:0] cons2;
  logic c1, c2, wo1, wo2;
  logic [GB-1:0] alpha1 [NR1][1];
  logic [GB-1:0] alpha2 [NR2][2];
  int checks = 0, failures = 0;

  inference_processor #(.N_RULES(NR1), .N_ANT(1), .GRADE_BITS(GB)) dut1 (
    .clk, .rst, .ws, .ante_en, .obs(obs[0:0]), .ante(ante1), .cons(cons1),
    .c(c1), .ws_o(wo1), .alpha(alpha1)
  );
  inference_processor #(.N_RULES(NR2), .N_ANT(2), .GRADE_BITS(GB)) dut2 (
    .clk, .rst, .ws, .ante_en, .obs, .ante(ante2), .cons(cons2),
    .c(c2), .ws_o(wo2), .alpha(alpha2)
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

  function automatic int min2(int a, int b); return (a < b) ? a : b; endfunction
  function automatic int max2(int a, int b); return (a > b) ? a : b; endfunction

  int ob [2][NE];
  int an [NR1][2][NE];
  int cn [NR1][NE];
  int al [NR1][2];
  int exp1 [NE], exp2 [NE];
  int got1 [NE], got2 [NE];

  task automatic trial(input int sparse);
    int w;
    for (int k = 0; k < 2; k++)
      for (int e = 0; e < NE; e++) ob[k][e] = (sparse && $urandom % 3 != 0) ? 0 : int'($urandom % 16);
    for (int r = 0; r < NR1; r++)
      for (int e = 0; e < NE; e++) begin
        for (int k = 0; k < 2; k++)
          an[r][k][e] = (sparse && $urandom % 3 != 0) ? 0 : int'($urandom % 16);
        cn[r][e] = $urandom % 16;
      end
    for (int r = 0; r < NR1; r++)
      for (int k = 0; k < 2; k++) begin
        al[r][k] = 0;
        for (int e = 0; e < NE; e++) al[r][k] = max2(al[r][k], min2(ob[k][e], an[r][k][e]));
      end
    for (int e = 0; e < NE; e++) begin
      exp1[e] = 0; exp2[e] = 0;
      for (int r = 0; r < NR1; r++) exp1[e] = max2(exp1[e], min2(al[r][0], cn[r][e]));
      for (int r = 0; r < NR2; r++) begin
        w = min2(al[r][0], al[r][1]);
        exp2[e] = max2(exp2[e], min2(w, cn[r][e]));
      end
      got1[e] = 0; got2[e] = 0;
    end

    rst = 1'b1; ws = 1'b1; ante_en = 1'b0;
    @(posedge clk); #1;
    rst = 1'b0;
    @(posedge clk); #1;
    ante_en = 1'b1;
    for (int e = 0; e < NE; e++)
      for (int b = GB - 1; b >= 0; b--) begin
        ws = (b == GB - 1);
        obs[0] = ob[0][e][b];
        obs[1] = ob[1][e][b];
        for (int r = 0; r < NR1; r++) ante1[r] = an[r][0][e][b];
        for (int r = 0; r < NR2; r++) begin
          ante2[2*r]   = an[r][0][e][b];
          ante2[2*r+1] = an[r][1][e][b];
        end
        @(posedge clk); #1;
      end
    for (int r = 0; r < NR1; r++) check(int'(alpha1[r][0]), al[r][0], "alpha 16-rule");
    for (int r = 0; r < NR2; r++) begin
      check(int'(alpha2[r][0]), al[r][0], "alpha_A 5-rule");
      check(int'(alpha2[r][1]), al[r][1], "alpha_B 5-rule");
    end
    ante_en = 1'b0;
    fork
      begin
        for (int e = 0; e < NE; e++)
          for (int b = GB - 1; b >= 0; b--) begin
            ws = (b == GB - 1);
            for (int r = 0; r < NR1; r++) cons1[r] = cn[r][e][b];
            for (int r = 0; r < NR2; r++) cons2[r] = cn[r][e][b];
            @(posedge clk); #1;
          end
        ws = 1'b1;
        repeat (6) @(posedge clk);
      end
      begin
        repeat (5) @(posedge clk);   // 16 rules: 1 + 4 cycles
        #2;
        for (int e = 0; e < NE; e++)
          for (int b = GB - 1; b >= 0; b--) begin
            got1[e] = (got1[e] << 1) | int'(c1);
            if (b == GB - 1) check(int'(wo1), 1, "ws_o 16-rule");
            @(posedge clk); #2;
          end
      end
      begin
        repeat (4) @(posedge clk);   // 5 rules: 1 + 3 cycles
        #2;
        for (int e = 0; e < NE; e++)
          for (int b = GB - 1; b >= 0; b--) begin
            got2[e] = (got2[e] << 1) | int'(c2);
            if (b == GB - 1) check(int'(wo2), 1, "ws_o 5-rule");
            @(posedge clk); #2;
          end
      end
    join
    for (int e = 0; e < NE; e++) begin
      check(got1[e], exp1[e], "C' 16-rule");
      check(got2[e], exp2[e], "C' 5-rule");
    end
  endtask

  initial begin
    for (int t = 0; t < 12; t++) trial(t % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
