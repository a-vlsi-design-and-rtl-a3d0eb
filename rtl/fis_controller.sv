// fis_controller -- sequencer of the inference engine: two address counters and strobes.
//
// One inference is started by a one-cycle reset.  Counting the reset cycle as cycle 1:
//   cycle 2                : wait (PH_WAIT)
//   cycles 3 .. 2+DEPTH     : antecedent phase, ante_addr = 0 .. DEPTH-1, ante_en = 1;
//                             the user shifts in the observation, one bit per cycle
//   cycles 3+DEPTH .. 2+2*DEPTH : conclusion phase, cons_addr = 0 .. DEPTH-1, cons_en = 1
//   then PH_DONE until the next reset.
// DEPTH = N_ELEM * GRADE_BITS (124 on the chip).  The conclusion counter starts in the cycle
// after the antecedent counter ends.  ws, the reset of the min/max elements, is high on
// the first bit of every grade, i.e. once every GRADE_BITS cycles in both phases (and in
// the wait and done phases, where it keeps the elements cleared).  c_valid is cons_en
// delayed by OUT_LAT, the latency of the data path from conclusion bit to output pin, and
// c_start marks its first cycle: with OUT_LAT = 6 the result appears on cycle 133 and the
// last bit on cycle 256, the figures the paper gives for its chip.  The two counters, the
// 4-cycle element reset and the output notification follow the paper; the phase encoding
// and the exact OUT_LAT split are this design's.
module fis_controller
  import fuzzy_pkg::*;
#(
  parameter int unsigned N_ELEM     = N_ELEM_DEF,
  parameter int unsigned GRADE_BITS = GRADE_BITS_DEF,
  parameter int unsigned OUT_LAT    = 6,
  localparam int unsigned DEPTH = N_ELEM * GRADE_BITS,
  localparam int unsigned AW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,        // one-cycle synchronous reset starts an inference
  output logic [AW-1:0] ante_addr,  // counter 1: antecedent ROM address
  output logic [AW-1:0] cons_addr,  // counter 2: conclusion ROM address
  output logic          ante_en,    // observation bits are being taken
  output logic          cons_en,    // conclusion bits are being read
  output logic          ws,         // reset of the min/max elements (MSB of each grade)
  output logic          c_valid,    // output bit valid (pipeline-aligned)
  output logic          c_start,    // first valid output bit
  output phase_e        phase
);
  phase_e             phase_q;
  logic [AW-1:0]      ante_cnt_q;
  logic [AW-1:0]      cons_cnt_q;
  logic [OUT_LAT-1:0] valid_sr_q;
  logic [OUT_LAT-1:0] start_sr_q;

  localparam logic [AW-1:0] LAST = AW'(DEPTH - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase_q    <= PH_WAIT;
      ante_cnt_q <= '0;
      cons_cnt_q <= '0;
    end else begin
      unique case (phase_q)
        PH_WAIT: phase_q <= PH_ANTE;
        PH_ANTE: begin
          if (ante_cnt_q == LAST) phase_q <= PH_CONS;
          else                    ante_cnt_q <= ante_cnt_q + 1'b1;
        end
        PH_CONS: begin
          if (cons_cnt_q == LAST) phase_q <= PH_DONE;
          else                    cons_cnt_q <= cons_cnt_q + 1'b1;
        end
        PH_DONE: phase_q <= PH_DONE;
      endcase
    end
  end

  assign phase     = phase_q;
  assign ante_addr = ante_cnt_q;
  assign cons_addr = cons_cnt_q;
  assign ante_en   = (phase_q == PH_ANTE);
  assign cons_en   = (phase_q == PH_CONS);

  always_comb begin
    unique case (phase_q)
      PH_ANTE: ws = (ante_cnt_q % AW'(GRADE_BITS)) == '0;
      PH_CONS: ws = (cons_cnt_q % AW'(GRADE_BITS)) == '0;
      default: ws = 1'b1;
    endcase
  end

  // Valid and start strobes travel down a delay line matching the data path latency.
  always_ff @(posedge clk) begin
    if (rst) begin
      valid_sr_q <= '0;
      start_sr_q <= '0;
    end else begin
      valid_sr_q <= {valid_sr_q[OUT_LAT-2:0], cons_en};
      start_sr_q <= {start_sr_q[OUT_LAT-2:0], cons_en && (cons_cnt_q == '0)};
    end
  end

  assign c_valid = valid_sr_q[OUT_LAT-1];
  assign c_start = start_sr_q[OUT_LAT-1];
endmodule
