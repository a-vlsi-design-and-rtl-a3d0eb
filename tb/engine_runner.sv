// engine_runner -- drives one fuzzy_engine of a given size through a series of inferences
// and checks every result; used by tb_fuzzy_engine_variants.
// The rule set is the one selected by RULESET_SEED, read back through fuzzy_pkg::rule_grade;
// the expected conclusion is computed here on integers:
//   w_r = min_k max_x min(obs_k(x), ante_{r,k}(x)),   C'(z) = max_r min(w_r, C_r(z)).
// Timing checked (reset cycle = cycle 1, D = N_ELEM*GRADE_BITS, L = 2 + ceil(log2 N_RULES)):
// observation on cycles 3..D+2, c_start on cycle D+3+L only, c_valid on D+3+L .. 2D+2+L.
// Reports its counts on checks/failures and raises done when finished.
module engine_runner #(
  parameter int unsigned N_RULES      = 16,
  parameter int unsigned N_ANT        = 1,
  parameter int unsigned N_ELEM       = 31,
  parameter int unsigned GRADE_BITS   = 4,
  parameter int unsigned RULESET_SEED = 0,
  parameter int unsigned N_INFER      = 6
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   merged      // inferences in which more than one rule fired
);
  import fuzzy_pkg::*;
  localparam int NE = N_ELEM, GB = GRADE_BITS, NR = N_RULES, NA = N_ANT;
  localparam int D = NE * GB;
  localparam int L = 2 + ((NR < 2) ? 1 : $clog2(NR));
  localparam int MAXG = (1 << GB) - 1;

  logic rst;
  logic [NA-1:0] obs;
  logic c_out, c_valid, c_start;

  fuzzy_engine #(.N_RULES(NR), .N_ANT(NA), .N_ELEM(NE), .GRADE_BITS(GB),
                 .RULESET_SEED(RULESET_SEED)) dut (
    .clk, .rst, .obs, .c_out, .c_valid, .c_start
  );

  function automatic int min2(int a, int b); return (a < b) ? a : b; endfunction
  function automatic int max2(int a, int b); return (a > b) ? a : b; endfunction

  int ob [NA][NE];
  int expc [NE];
  int got [NE];

  task automatic one(input int kind);
    int w, al, fired, bitn, c0;
    for (int k = 0; k < NA; k++) begin
      c0 = $urandom % NE;
      for (int e = 0; e < NE; e++)
        ob[k][e] = (kind == 0) ? int'($urandom % (MAXG + 1))
                 : max2(0, MAXG - int'(1 + $urandom % 3) * ((e > c0) ? e - c0 : c0 - e));
    end
    fired = 0;
    for (int z = 0; z < NE; z++) expc[z] = 0;
    for (int r = 0; r < NR; r++) begin
      w = MAXG;
      for (int k = 0; k < NA; k++) begin
        al = 0;
        for (int e = 0; e < NE; e++)
          al = max2(al, min2(ob[k][e], int'(rule_grade(RULESET_SEED, 1'b0, r, k, e, NR, NE, GB))));
        w = min2(w, al);
      end
      if (w > 0) fired++;
      for (int z = 0; z < NE; z++)
        expc[z] = max2(expc[z], min2(w, int'(rule_grade(RULESET_SEED, 1'b1, r, 0, z, NR, NE, GB))));
    end
    if (fired > 1) merged++;
    for (int z = 0; z < NE; z++) got[z] = 0;
    rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    bitn = 0;
    for (int cyc = 2; cyc <= 2 * D + 2 + L; cyc++) begin
      for (int k = 0; k < NA; k++)
        obs[k] = (cyc >= 3 && cyc <= D + 2) ? ob[k][(cyc - 3) / GB][GB - 1 - (cyc - 3) % GB]
                                           : 1'($urandom);
      #1;
      checks++;
      if (c_start !== (cyc == D + 3 + L)) begin failures++; $display("cycle %0d: c_start", cyc); end
      checks++;
      if (c_valid !== (cyc >= D + 3 + L)) begin failures++; $display("cycle %0d: c_valid", cyc); end
      if (c_valid) begin
        got[bitn / GB] = (got[bitn / GB] << 1) | int'(c_out);
        bitn++;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (bitn != D) begin failures++; $display("%0d output bits", bitn); end
    for (int z = 0; z < NE; z++) begin
      checks++;
      if (got[z] != expc[z]) begin
        failures++;
        $display("rules=%0d ant=%0d elem=%0d bits=%0d: C'(%0d) = %0d expected %0d",
                 NR, NA, NE, GB, z, got[z], expc[z]);
      end
    end
  endtask

  initial begin
    done = 1'b0; checks = 0; failures = 0; merged = 0;
    rst = 1'b1; obs = '0;
    @(posedge clk); #1;
    for (int n = 0; n < int'(N_INFER); n++) one(n % 2);
    done = 1'b1;
  end
endmodule
