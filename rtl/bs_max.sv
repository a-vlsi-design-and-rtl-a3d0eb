// bs_max -- bit-serial maximum element (fuzzy union of two grades).
//
// Two unsigned integers arrive one bit per clock, most significant bit first, on a and b.
// The larger of the two leaves on y in the same cycle as the input bit (no latency).  While
// the bits seen so far are equal the output is their common value (a | b); at the first bit
// where they differ the input carrying the 1 is the larger one, the element remembers it and
// from then on passes that input through.
//
// ws ("word start") marks the first bit of a new pair of integers and clears the decision.
// The element is used twice in the engine: in each rule's IF part, where it keeps the
// running maximum over the universe in a recirculating shift register, and as the node of
// the binary tree that merges the outputs of all rules.  The paper gives the function, the
// MSB-first serial order and the periodic reset; the circuit is this design's own.
module bs_max (
  input  logic clk,
  input  logic ws,   // first bit of a word: forget the previous decision
  input  logic a,
  input  logic b,
  output logic y
);
  logic decided_q;   // an earlier bit of this word differed
  logic pick_b_q;    // ... and b was the larger input
  logic undecided;

  assign undecided = ws | ~decided_q;
  assign y = undecided ? (a | b) : (pick_b_q ? b : a);

  always_ff @(posedge clk) begin
    if (undecided) begin
      decided_q <= a ^ b;
      pick_b_q  <= b & ~a;
    end
  end
endmodule
