// fuzzy_pkg -- constants and rule-set functions shared by the fuzzy inference engine.
//
// The engine stores fuzzy sets as lists of membership grades, one grade per element of a
// finite universe of discourse.  The default sizes follow the fabricated chip: 16 rules,
// 31 elements per fuzzy set and 16 membership levels (4-bit grades, 0 = no membership,
// 15 = full membership).  A rule has N_ANT antecedent sets (1 on the chip, 2 in the
// generic data path with an A and a B input) and one conclusion set.
//
// The contents of the rule-set ROMs are not given by the source design; they are produced
// here by rule_grade().  Seed 0 gives a fixed, readable rule set: rule r has triangular
// antecedents and a triangular conclusion, with the peaks of the antecedents spread evenly
// over the universe (rising with r) and the peak of the conclusion mirrored (falling with r),
// i.e. a simple inverse-acting controller.  Any other seed gives a pseudo-random set of
// triangles, used by the testbenches to exercise arbitrary rule sets.
package fuzzy_pkg;

  // Sizes of the fabricated chip.
  localparam int unsigned N_RULES_DEF    = 16;  // rules held in the ROM
  localparam int unsigned N_ELEM_DEF     = 31;  // elements of a fuzzy set
  localparam int unsigned GRADE_BITS_DEF = 4;   // bits per membership grade
  localparam int unsigned N_ANT_DEF      = 1;   // antecedents per rule ("if A then C")

  // Processing phase of the controller.
  typedef enum logic [1:0] {
    PH_WAIT = 2'd0,  // cycle after reset, before the observation arrives
    PH_ANTE = 2'd1,  // observation streams in, antecedents are matched
    PH_CONS = 2'd2,  // conclusions are read and clipped
    PH_DONE = 2'd3   // idle until the next reset
  } phase_e;

  // 32-bit integer hash used to draw pseudo-random rule sets.
  function automatic logic [31:0] mix32(logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb_352d;
    h = h ^ (h >> 15);
    h = h * 32'h846c_a68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Triangle of height max_grade centred on element centre, falling by slope per element.
  function automatic int unsigned tri_grade(int centre, int elem, int slope, int max_grade);
    int d;
    int v;
    d = (elem > centre) ? (elem - centre) : (centre - elem);
    v = max_grade - slope * d;
    return (v < 0) ? 0 : v;
  endfunction

  // Membership grade of element elem in antecedent ant (is_cons = 0) or in the conclusion
  // (is_cons = 1) of rule rule, for a rule set of n_rules rules over n_elem elements.
  function automatic int unsigned rule_grade(int unsigned seed, bit is_cons, int rule, int ant,
                                             int elem, int n_rules, int n_elem, int grade_bits);
    int max_grade;
    int centre;
    int slope;
    logic [31:0] h;
    max_grade = (1 << grade_bits) - 1;
    if (seed == 0) begin
      centre = (n_rules > 1) ? (rule * (n_elem - 1)) / (n_rules - 1) : (n_elem - 1) / 2;
      if (is_cons || ant[0]) centre = (n_elem - 1) - centre;
      slope = (max_grade + 3) / 4;
    end else begin
      h = mix32((seed * 32'h9e37_79b9) ^ (32'(rule) << 12) ^ (32'(ant) << 8)
                ^ (is_cons ? 32'h55 : 32'h0));
      centre = int'(h % 32'(n_elem));
      slope = 1 + int'((h >> 24) % 32'd8);
    end
    return tri_grade(centre, elem, slope, max_grade);
  endfunction

endpackage
