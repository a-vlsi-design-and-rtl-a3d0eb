// shift_reg -- the SREG of a rule data path: a LEN-bit serial-in, serial-out shift register.
//
// Every clock the register takes one bit on d and shifts; q is the bit taken LEN cycles
// earlier.  With LEN equal to the number of bits of a membership grade, a word written MSB
// first comes out again MSB first exactly one word later, aligned with the next word of the
// input.  That is what lets a bit-serial max element compare each new grade with the maximum
// so far: the maximum recirculates through the register.  par shows the stored word, MSB in
// par[LEN-1], once a whole word has been shifted in.  A synchronous reset clears it (the
// running maximum starts at 0).  The 4-bit length is printed in the paper's data path figure;
// reset behaviour and the parallel view are this design's choices.
module shift_reg #(
  parameter int unsigned LEN = 4
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           d,
  output logic           q,
  output logic [LEN-1:0] par
);
  logic [LEN-1:0] sr_q;

  always_ff @(posedge clk) begin
    if (rst) sr_q <= '0;
    else     sr_q <= {sr_q[LEN-2:0], d};
  end

  assign q   = sr_q[LEN-1];
  assign par = sr_q;
endmodule
