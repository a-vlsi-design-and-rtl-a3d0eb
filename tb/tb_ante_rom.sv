// tb_ante_rom -- self-checking testbench of the antecedent rule-set ROM.
// Reads every address of the default ROM (16 rules, 31 elements, 4-bit grades, one and two
// antecedents), rebuilds each grade from its four MSB-first bits and compares it with the
// default triangles written out here: antecedent A of rule r peaks (15) at element 2r and
// falls by 4 per element, antecedent B peaks at element 30-2r.  A ROM with a non-zero
// seed is compared with the rule-set function, and addresses past the end must read 0.
module tb_ante_rom;
  import fuzzy_pkg::*;
  localparam int NE = 31, GB = 4, NR = 16, DEPTH = NE * GB;
  logic [7:0]  addr;
  logic [15:0] d1;
  logic [31:0] d2;
  logic [15:0] ds;
  int checks = 0, failures = 0;

  ante_rom dut1 (.addr, .data(d1));
  ante_rom #(.N_ANT(2)) dut2 (.addr, .data(d2));
  ante_rom #(.RULESET_SEED(11)) dut_s (.addr, .data(ds));

  function automatic int tri_ref(int c, int e);
    int v = 15 - 4 * ((e > c) ? e - c : c - e);
    return (v < 0) ? 0 : v;
  endfunction

  initial begin
    int g1, ga, gb, gs;
    for (int e = 0; e < NE; e++)
      for (int r = 0; r < NR; r++) begin
        g1 = 0; ga = 0; gb = 0; gs = 0;
        for (int b = 0; b < GB; b++) begin
          addr = 8'(e * GB + b);
          #1;
          g1 = (g1 << 1) | int'(d1[r]);
          ga = (ga << 1) | int'(d2[2*r]);
          gb = (gb << 1) | int'(d2[2*r+1]);
          gs = (gs << 1) | int'(ds[r]);
        end
        checks += 4;
        if (g1 != tri_ref(2 * r, e)) begin failures++; $display("A r%0d e%0d = %0d", r, e, g1); end
        if (ga != tri_ref(2 * r, e)) begin failures++; $display("A2 r%0d e%0d = %0d", r, e, ga); end
        if (gb != tri_ref(30 - 2 * r, e)) begin failures++; $display("B r%0d e%0d = %0d", r, e, gb); end
        if (gs != int'(rule_grade(11, 1'b0, r, 0, e, NR, NE, GB))) begin
          failures++; $display("seeded r%0d e%0d = %0d", r, e, gs);
        end
      end
    for (int a = DEPTH; a < 128; a++) begin
      addr = 8'(a);
      #1;
      checks++;
      if (d1 != 0 || d2 != 0) begin failures++; $display("address %0d not 0", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
