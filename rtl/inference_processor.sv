// inference_processor -- all rule data paths side by side, merged by the max tree.
//
// One rule_datapath per rule receives the same observation bits (broadcast) together with
// its own antecedent and conclusion bits from the rule-set ROMs, so all rules are evaluated
// in parallel while each rule is processed bit-serially.  The per-rule outputs
// min(w_i, C_i(z)) are merged by a binary tree of max elements into the conclusion
// C'(z) = max_i min(w_i, C_i(z)).
//
// Rule i uses ante[i*N_ANT + k] for antecedent k and cons[i].  Latency from the conclusion
// bit on cons to the bit on c is 1 + ceil(log2 N_RULES) cycles (5 for 16 rules); ws_o marks
// the MSB of each output word.  Adding rules only widens the buses and deepens the tree by
// one level per doubling, which adds one cycle of latency per doubling.  Structure as in the
// paper; bus layout and latency are this design's.
module inference_processor #(
  parameter int unsigned N_RULES    = 16,
  parameter int unsigned N_ANT      = 1,
  parameter int unsigned GRADE_BITS = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       ws,
  input  logic                       ante_en,
  input  logic [N_ANT-1:0]           obs,
  input  logic [N_RULES*N_ANT-1:0]   ante,
  input  logic [N_RULES-1:0]         cons,
  output logic                       c,
  output logic                       ws_o,
  output logic [GRADE_BITS-1:0]      alpha [N_RULES][N_ANT]  // per-rule match degrees
);
  logic [N_RULES-1:0] rule_y;
  logic               ws_q;   // ws aligned with the registered rule outputs

  for (genvar i = 0; i < N_RULES; i++) begin : g_rule
    rule_datapath #(.N_ANT(N_ANT), .GRADE_BITS(GRADE_BITS)) u_rule (
      .clk, .rst, .ws, .ante_en, .obs,
      .ante (ante[i*N_ANT +: N_ANT]),
      .cons (cons[i]),
      .y    (rule_y[i]),
      .alpha(alpha[i])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) ws_q <= 1'b0;
    else     ws_q <= ws;
  end

  max_tree #(.N_IN(N_RULES)) u_tree (
    .clk, .rst, .ws(ws_q), .x(rule_y), .y(c), .ws_o
  );
endmodule
