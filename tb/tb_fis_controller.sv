// tb_fis_controller -- self-checking testbench of the controller.
// Runs two inferences with the default sizes (31 elements, 4-bit grades, output latency 6)
// and checks, cycle by cycle, counting the reset cycle as cycle 1:
//   observation window (ante_en) on cycles 3..126 with ante_addr = cycle-3,
//   conclusion window (cons_en) on cycles 127..250 with cons_addr = cycle-127,
//   element reset ws on every 4th cycle of both windows, starting with their first cycle,
//   c_valid on cycles 133..256 and c_start on cycle 133 only; nothing after cycle 256.
module tb_fis_controller;
  import fuzzy_pkg::*;
  logic clk = 1'b0;
  logic rst;
  logic [7:0] ante_addr, cons_addr;
  logic ante_en, cons_en, ws, c_valid, c_start;
  phase_e phase;
  int checks = 0, failures = 0;

  fis_controller dut (.clk, .rst, .ante_addr, .cons_addr, .ante_en, .cons_en, .ws, .c_valid,
                      .c_start, .phase);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(int got, int exp, string what, int cyc);
    checks++;
    if (got != exp) begin
      failures++;
      $display("cycle %0d %s: got %0d expected %0d", cyc, what, got, exp);
    end
  endfunction

  initial begin
    for (int run = 0; run < 2; run++) begin
      rst = 1'b1;
      #1;                      // cycle 1 is the reset cycle
      @(posedge clk); #1;
      rst = 1'b0;
      for (int cyc = 2; cyc <= 300; cyc++) begin
        automatic bit in_a = (cyc >= 3 && cyc <= 126);
        automatic bit in_c = (cyc >= 127 && cyc <= 250);
        check(int'(ante_en), int'(in_a), "ante_en", cyc);
        check(int'(cons_en), int'(in_c), "cons_en", cyc);
        if (in_a) check(int'(ante_addr), cyc - 3, "ante_addr", cyc);
        if (in_c) check(int'(cons_addr), cyc - 127, "cons_addr", cyc);
        if (in_a) check(int'(ws), int'((cyc - 3) % 4 == 0), "ws", cyc);
        if (in_c) check(int'(ws), int'((cyc - 127) % 4 == 0), "ws", cyc);
        check(int'(c_valid), int'(cyc >= 133 && cyc <= 256), "c_valid", cyc);
        check(int'(c_start), int'(cyc == 133), "c_start", cyc);
        if (cyc == 2) check(int'(phase), int'(PH_WAIT), "phase", cyc);
        if (cyc == 260) check(int'(phase), int'(PH_DONE), "phase", cyc);
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
