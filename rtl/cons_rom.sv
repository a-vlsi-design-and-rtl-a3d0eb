// cons_rom -- rule-set memory for the conclusions C_i of all rules.
//
// Same organisation as ante_rom: address a holds bit GRADE_BITS-1 - a % GRADE_BITS (MSB first)
// of the grade of element a / GRADE_BITS, for every rule at once; bit i of data belongs to
// rule i.  Addresses past the end read 0; the read is combinational.  The contents come from
// fuzzy_pkg::rule_grade with RULESET_SEED (0 = default triangular rule set).  The paper keeps
// the conclusions in a memory module of their own, read by a counter of its own; the
// contents are this design's.
module cons_rom
  import fuzzy_pkg::*;
#(
  parameter int unsigned N_RULES      = N_RULES_DEF,
  parameter int unsigned N_ELEM       = N_ELEM_DEF,
  parameter int unsigned GRADE_BITS   = GRADE_BITS_DEF,
  parameter int unsigned RULESET_SEED = 0,
  localparam int unsigned DEPTH = N_ELEM * GRADE_BITS,
  localparam int unsigned AW    = $clog2(DEPTH + 1)
) (
  input  logic [AW-1:0]      addr,
  output logic [N_RULES-1:0] data
);
  typedef logic [DEPTH-1:0][N_RULES-1:0] image_t;

  function automatic image_t build_image();
    image_t img;
    int unsigned g;
    for (int e = 0; e < int'(N_ELEM); e++) begin
      for (int i = 0; i < int'(N_RULES); i++) begin
        g = rule_grade(RULESET_SEED, 1'b1, i, 0, e, N_RULES, N_ELEM, GRADE_BITS);
        for (int b = 0; b < int'(GRADE_BITS); b++)
          img[e*GRADE_BITS + b][i] = g[GRADE_BITS-1-b];
      end
    end
    return img;
  endfunction

  localparam image_t IMAGE = build_image();

  assign data = (addr < AW'(DEPTH)) ? IMAGE[addr] : '0;
endmodule
