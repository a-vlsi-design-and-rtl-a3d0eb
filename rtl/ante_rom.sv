// ante_rom -- rule-set memory for the antecedents (A_i, B_i, ...) of all rules.
//
// The memory is read one address per clock.  Address a holds, for every rule and every
// antecedent, one bit of one grade: element e = a / GRADE_BITS, bit GRADE_BITS-1 - a % GRADE_BITS
// of its grade (grades are stored MSB first), so stepping the address through
// 0 .. N_ELEM*GRADE_BITS-1 streams all antecedents of all rules in parallel, each serially.
// Bit i*N_ANT + k of data belongs to antecedent k of rule i.  Addresses past the end read 0.
// The read is combinational, as for a mask ROM.  The contents are computed at elaboration by
// fuzzy_pkg::rule_grade from RULESET_SEED (0 = the default triangular rule set); the paper
// gives the layout (4-bit grades, MSB first, all rules in parallel) but no rule contents.
module ante_rom
  import fuzzy_pkg::*;
#(
  parameter int unsigned N_RULES      = N_RULES_DEF,
  parameter int unsigned N_ANT        = N_ANT_DEF,
  parameter int unsigned N_ELEM       = N_ELEM_DEF,
  parameter int unsigned GRADE_BITS   = GRADE_BITS_DEF,
  parameter int unsigned RULESET_SEED = 0,
  localparam int unsigned DEPTH = N_ELEM * GRADE_BITS,
  localparam int unsigned AW    = $clog2(DEPTH + 1),
  localparam int unsigned W     = N_RULES * N_ANT
) (
  input  logic [AW-1:0] addr,
  output logic [W-1:0]  data
);
  typedef logic [DEPTH-1:0][W-1:0] image_t;

  function automatic image_t build_image();
    image_t img;
    int unsigned g;
    for (int e = 0; e < int'(N_ELEM); e++) begin
      for (int i = 0; i < int'(N_RULES); i++) begin
        for (int k = 0; k < int'(N_ANT); k++) begin
          g = rule_grade(RULESET_SEED, 1'b0, i, k, e, N_RULES, N_ELEM, GRADE_BITS);
          for (int b = 0; b < int'(GRADE_BITS); b++)
            img[e*GRADE_BITS + b][i*N_ANT + k] = g[GRADE_BITS-1-b];
        end
      end
    end
    return img;
  endfunction

  localparam image_t IMAGE = build_image();

  assign data = (addr < AW'(DEPTH)) ? IMAGE[addr] : '0;
endmodule
