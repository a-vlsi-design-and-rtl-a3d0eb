// tb_cons_rom -- self-checking testbench of the conclusion rule-set ROM.
// Reads every address of the default ROM, rebuilds each grade from its four MSB-first bits
// and compares it with the default triangle written out here (conclusion C of rule r peaks
// at element 30-2r and falls by 4 per element).  A seeded ROM is compared with the
// rule-set function, and addresses past the end must read 0.
module tb_cons_rom;
  import fuzzy_pkg::*;
  localparam int NE = 31, GB = 4, NR = 16, DEPTH = NE * GB;
  logic [7:0]  addr;
  logic [15:0] d, ds;
  int checks = 0, failures = 0;

  cons_rom dut (.addr, .data(d));
  cons_rom #(.RULESET_SEED(5)) dut_s (.addr, .data(ds));

  function automatic int tri_ref(int c, int e);
    int v = 15 - 4 * ((e > c) ? e - c : c - e);
    return (v < 0) ? 0 : v;
  endfunction

  initial begin
    int g, gs;
    for (int e = 0; e < NE; e++)
      for (int r = 0; r < NR; r++) begin
        g = 0; gs = 0;
        for (int b = 0; b < GB; b++) begin
          addr = 8'(e * GB + b);
          #1;
          g  = (g << 1) | int'(d[r]);
          gs = (gs << 1) | int'(ds[r]);
        end
        checks += 2;
        if (g != tri_ref(30 - 2 * r, e)) begin failures++; $display("C r%0d e%0d = %0d", r, e, g); end
        if (gs != int'(rule_grade(5, 1'b1, r, 0, e, NR, NE, GB))) begin
          failures++; $display("seeded r%0d e%0d = %0d", r, e, gs);
        end
      end
    for (int a = DEPTH; a < 128; a++) begin
      addr = 8'(a);
      #1;
      checks++;
      if (d != 0) begin failures++; $display("address %0d not 0", a); end
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
