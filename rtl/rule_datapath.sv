// rule_datapath -- the data path of one rule (one per rule, all working in parallel).
//
// IF part, once per antecedent k (A, B, ...):
//     MIN(obs[k], ante[k]) -> MAX(., SREG) -> SREG (GRADE_BITS long) -> back to MAX
// The observation grade and the rule's antecedent grade of the same element arrive bit-serially,
// MSB first.  Their minimum (fuzzy intersection) is compared with the running maximum that
// recirculates through the shift register, and the larger value is written back.  After the
// last element the register holds alpha_k = max_x min(A'(x), A_k(x)), the degree of match.
// THEN part: the alphas are combined by a MIN (the rule weight w), and w is intersected with
// the conclusion grades C(z) as they arrive: y carries min(w, C(z)) for every element z.
//
// Timing: all elements are combinational apart from their one-bit decision state, so the bit
// on y is the result for the bits presented one cycle earlier (y is a register).  ws must be
// high on the MSB of every word in both phases; the alpha word leaves the shift register
// aligned with the next word of input because the loop is GRADE_BITS cycles long.
// ante_en is high while the observation is valid; outside it the observation is forced to
// 0 so that the MAX keeps recirculating alpha unchanged (min(0, x) = 0 and max(0, a) = a).
// rst clears the shift registers and the output register.
// The structure (MIN, MAX, 4-bit SREG feedback, MIN of the alphas, MIN with C_i) follows the
// paper's single-rule data path; the output register and the gating by ante_en are this
// design's own.
module rule_datapath #(
  parameter int unsigned N_ANT      = 1,   // antecedents per rule
  parameter int unsigned GRADE_BITS = 4    // bits per grade = SREG length
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  ws,        // word start (MSB of every grade)
  input  logic                  ante_en,   // observation valid (antecedent phase)
  input  logic [N_ANT-1:0]      obs,       // observation bits A', B', ...
  input  logic [N_ANT-1:0]      ante,      // this rule's antecedent bits A_i, B_i, ...
  input  logic                  cons,      // this rule's conclusion bit C_i
  output logic                  y,         // min(w_i, C_i(z)), one cycle after cons
  output logic [GRADE_BITS-1:0] alpha [N_ANT]  // shift register contents (alpha once done)
);
  logic [N_ANT-1:0] sreg_out;
  logic [N_ANT-1:0] w_chain;   // w_chain[k] = min(alpha_0 .. alpha_k)

  for (genvar k = 0; k < N_ANT; k++) begin : g_ante
    logic mn;
    logic mx;

    bs_min u_min (.clk, .ws, .a(obs[k] & ante_en), .b(ante[k]), .y(mn));
    bs_max u_max (.clk, .ws, .a(mn), .b(sreg_out[k]), .y(mx));
    shift_reg #(.LEN(GRADE_BITS)) u_sreg (
      .clk, .rst, .d(mx), .q(sreg_out[k]), .par(alpha[k])
    );

    if (k == 0) begin : g_first
      assign w_chain[0] = sreg_out[0];
    end else begin : g_more
      bs_min u_wmin (.clk, .ws, .a(w_chain[k-1]), .b(sreg_out[k]), .y(w_chain[k]));
    end
  end

  logic clip;
  bs_min u_then (.clk, .ws, .a(w_chain[N_ANT-1]), .b(cons), .y(clip));

  always_ff @(posedge clk) begin
    if (rst) y <= 1'b0;
    else     y <= clip;
  end
endmodule
