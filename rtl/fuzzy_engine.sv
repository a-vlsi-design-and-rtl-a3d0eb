// fuzzy_engine -- top level of the bit-serial fuzzy inference engine.
//
// Evaluates N_RULES fuzzy rules "if x is A_i (and y is B_i) then z is C_i" for an observed
// fuzzy set A' (and B') using the compositional rule of inference:
//     alpha_i = max_x min(A'(x), A_i(x)),   w_i = min over the antecedents of alpha_i,
//     C'(z)   = max_i min(w_i, C_i(z)).
// Parts: two rule-set ROMs (antecedents, conclusions), the inference processor (one
// bit-serial data path per rule and a binary max tree) and the controller (two counters).
//
// Interface and timing (defaults: 16 rules, 31 elements, 4-bit grades, 1 antecedent):
//   rst      one-cycle synchronous reset; starts an inference.  Call its cycle cycle 1.
//   obs[k]   observation k, one bit per cycle, grade of element 1 first, each grade MSB first,
//            on cycles 3 .. 2+N_ELEM*GRADE_BITS (3 .. 126).  Ignored at other times.
//   c_out    conclusion C', same format, on cycles 9+N_ELEM*GRADE_BITS .. 8+2*N_ELEM*GRADE_BITS
//            (133 .. 256 with the defaults; 6 = 2 + log2(16) cycles of pipeline).
//   c_valid  high while c_out carries C'; c_start high on its first bit only.
// One inference therefore takes 256 cycles including the reset cycle; the next reset may
// follow in cycle 257.  The chip's two-phase non-overlapping clock is replaced by a single
// rising-edge clock, and its pads by plain ports.
module fuzzy_engine
  import fuzzy_pkg::*;
#(
  parameter int unsigned N_RULES      = N_RULES_DEF,
  parameter int unsigned N_ANT        = N_ANT_DEF,
  parameter int unsigned N_ELEM       = N_ELEM_DEF,
  parameter int unsigned GRADE_BITS   = GRADE_BITS_DEF,
  parameter int unsigned RULESET_SEED = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [N_ANT-1:0] obs,
  output logic             c_out,
  output logic             c_valid,
  output logic             c_start
);
  localparam int unsigned DEPTH    = N_ELEM * GRADE_BITS;
  localparam int unsigned AW       = $clog2(DEPTH + 1);
  localparam int unsigned TREE_LAT = (N_RULES < 2) ? 1 : $clog2(N_RULES);
  localparam int unsigned OUT_LAT  = 2 + TREE_LAT;   // rule register + tree + output register

  logic [AW-1:0]              ante_addr;
  logic [AW-1:0]              cons_addr;
  logic                       ante_en;
  logic                       ws;
  logic [N_RULES*N_ANT-1:0]   ante_bits;
  logic [N_RULES-1:0]         cons_bits;
  logic                       c_tree;
  logic                       ws_tree;

  fis_controller #(.N_ELEM(N_ELEM), .GRADE_BITS(GRADE_BITS), .OUT_LAT(OUT_LAT)) u_ctrl (
    .clk, .rst, .ante_addr, .cons_addr, .ante_en, 
    .cons_en(), .ws, .c_valid, .c_start, .phase()
  );

  ante_rom #(.N_RULES(N_RULES), .N_ANT(N_ANT), .N_ELEM(N_ELEM), .GRADE_BITS(GRADE_BITS),
             .RULESET_SEED(RULESET_SEED)) u_ante_rom (
    .addr(ante_addr), .data(ante_bits)
  );

  cons_rom #(.N_RULES(N_RULES), .N_ELEM(N_ELEM), .GRADE_BITS(GRADE_BITS),
             .RULESET_SEED(RULESET_SEED)) u_cons_rom (
    .addr(cons_addr), .data(cons_bits)
  );

  inference_processor #(.N_RULES(N_RULES), .N_ANT(N_ANT), .GRADE_BITS(GRADE_BITS)) u_proc (
    .clk, .rst, .ws, .ante_en, .obs, .ante(ante_bits), .cons(cons_bits),
    .c(c_tree), .ws_o(ws_tree), .alpha()
  );

  // Output register (the pad driver of the chip).
  always_ff @(posedge clk) begin
    if (rst) c_out <= 1'b0;
    else     c_out <= c_tree;
  end

  // The word boundary leaving the tree must coincide with the controller's valid window.
  assert property (@(posedge clk) disable iff (rst) c_start |-> $past(ws_tree));
endmodule
