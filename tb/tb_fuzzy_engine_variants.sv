// tb_fuzzy_engine_variants -- the engine at sizes other than the chip's.
// Each engine_runner instance builds a complete engine and checks a series of inferences
// against an integer reference (see engine_runner):
//   * 2 rules with two antecedents (A and B), like the two-rule example of approximate
//     reasoning, default rule set;
//   * 16 rules with two antecedents, pseudo-random rule set;
//   * 32 and 64 elements per fuzzy set, 16 rules;
//   * 5-bit grades (32 membership levels, 5-cycle words), 8 rules;
//   * 32 rules (a five-level max tree).
// It fails if any runner reports a failure or if no inference combined several rules.
module tb_fuzzy_engine_variants;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NRUN = 6;
  logic done [NRUN];
  int   chk [NRUN], fl [NRUN], mg [NRUN];

  engine_runner #(.N_RULES(2),  .N_ANT(2), .N_ELEM(31), .GRADE_BITS(4), .RULESET_SEED(0))
    r0 (.clk, .done(done[0]), .checks(chk[0]), .failures(fl[0]), .merged(mg[0]));
  engine_runner #(.N_RULES(16), .N_ANT(2), .N_ELEM(31), .GRADE_BITS(4), .RULESET_SEED(3))
    r1 (.clk, .done(done[1]), .checks(chk[1]), .failures(fl[1]), .merged(mg[1]));
  engine_runner #(.N_RULES(16), .N_ANT(1), .N_ELEM(32), .GRADE_BITS(4), .RULESET_SEED(7))
    r2 (.clk, .done(done[2]), .checks(chk[2]), .failures(fl[2]), .merged(mg[2]));
  engine_runner #(.N_RULES(16), .N_ANT(1), .N_ELEM(64), .GRADE_BITS(4), .RULESET_SEED(9))
    r3 (.clk, .done(done[3]), .checks(chk[3]), .failures(fl[3]), .merged(mg[3]));
  engine_runner #(.N_RULES(8),  .N_ANT(1), .N_ELEM(31), .GRADE_BITS(5), .RULESET_SEED(4))
    r4 (.clk, .done(done[4]), .checks(chk[4]), .failures(fl[4]), .merged(mg[4]));
  engine_runner #(.N_RULES(32), .N_ANT(1), .N_ELEM(31), .GRADE_BITS(4), .RULESET_SEED(12))
    r5 (.clk, .done(done[5]), .checks(chk[5]), .failures(fl[5]), .merged(mg[5]));

  int checks, failures, merged;

  task automatic report();
    checks = 0; failures = 0; merged = 0;
    for (int i = 0; i < NRUN; i++) begin
      checks += chk[i]; failures += fl[i]; merged += mg[i];
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    report();
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    for (int i = 0; i < NRUN; i++) wait (done[i]);
    report();
    checks++;
    if (merged == 0) begin failures++; $display("no inference combined several rules"); end
    $display("merged-rule inferences: %0d", merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
