// bs_min -- bit-serial minimum element (fuzzy intersection of two grades).
//
// Two unsigned integers arrive one bit per clock, most significant bit first, on a and b.
// The smaller of the two leaves on y in the same cycle as the input bit, so the element adds
// no latency.  While the bits seen so far are equal the output is their common value
// (a & b); at the first bit where they differ the input carrying the 0 is the smaller one,
// the element remembers it and from then on passes that input through.
//
// ws ("word start") marks the first (most significant) bit of a new pair of integers and
// clears the decision, so the element works on words of any length.  The controller of
// the engine pulses it once every GRADE_BITS cycles.  The paper gives the function of the
// element, MSB-first serial order and the periodic reset; the decide-and-pass circuit is
// this design's own.
module bs_min (
  input  logic clk,
  input  logic ws,   // first bit of a word: forget the previous decision
  input  logic a,
  input  logic b,
  output logic y
);
  logic decided_q;   // an earlier bit of this word differed
  logic pick_b_q;    // ... and b was the smaller input
  logic undecided;

  assign undecided = ws | ~decided_q;
  assign y = undecided ? (a & b) : (pick_b_q ? b : a);

  always_ff @(posedge clk) begin
    if (undecided) begin
      decided_q <= a ^ b;
      pick_b_q  <= a & ~b;
    end
  end
endmodule
