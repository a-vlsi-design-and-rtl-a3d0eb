// tb_fuzzy_engine -- end-to-end testbench of the inference engine at its default size
// (16 rules "if A then C", 31 elements, 4-bit grades, default rule set).
// Runs back-to-back inferences, each started by a one-cycle reset immediately after the
// previous result: crisp observations (one element at a chosen grade), triangular fuzzy
// observations of varying width and height, random observations and an empty observation.
// For each it computes the expected conclusion C'(z) = max_r min(w_r, C_r(z)), with
// w_r = max_x min(A'(x), A_r(x)), from the default triangles written out here (A_r peaks at
// element 2r, C_r at element 30-2r, both falling by 4 grades per element), and checks
//   * every output grade, read MSB first from c_out while c_valid is high,
//   * c_start on cycle 133 only and c_valid on cycles 133..256 (reset cycle = cycle 1),
//   * the 256-cycle period of one inference.
// It also counts how often each behaviour of the engine occurred and fails if one never
// did: a rule clipped below full height, a rule matched fully, several rules merged in one
// conclusion, no rule firing at all, and a reset arriving right after a result.
module tb_fuzzy_engine;
  localparam int NE = 31, GB = 4, NR = 16;
  logic clk = 1'b0;
  logic rst;
  logic [0:0] obs;
  logic c_out, c_valid, c_start;
  int checks = 0, failures = 0;
  int n_clipped = 0, n_full = 0, n_merged = 0, n_none = 0, n_back_to_back = 0, n_done = 0;

  fuzzy_engine dut (.clk, .rst, .obs, .c_out, .c_valid, .c_start);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tri_ref(int c, int e, int slope, int peak);
    int v = peak - slope * ((e > c) ? e - c : c - e);
    return (v < 0) ? 0 : v;
  endfunction
  function automatic int min2(int a, int b); return (a < b) ? a : b; endfunction
  function automatic int max2(int a, int b); return (a > b) ? a : b; endfunction

  function automatic void check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endfunction

  int ob [NE];
  int expc [NE];
  int got [NE];

  task automatic inference(input int kind, input int p0, input int p1, input int p2);
    int w [NR];
    int fired;
    int cyc;
    int bitn;
    // observation
    for (int e = 0; e < NE; e++) begin
      unique case (kind)
        0: ob[e] = (e == p0) ? p1 : 0;                 // crisp value at element p0
        1: ob[e] = tri_ref(p0, e, p1, p2);              // fuzzy value
        2: ob[e] = $urandom % 16;                       // arbitrary fuzzy set
        default: ob[e] = 0;                             // empty observation
      endcase
    end
    // reference
    fired = 0;
    for (int r = 0; r < NR; r++) begin
      w[r] = 0;
      for (int e = 0; e < NE; e++) w[r] = max2(w[r], min2(ob[e], tri_ref(2 * r, e, 4, 15)));
      if (w[r] > 0) fired++;
      if (w[r] > 0 && w[r] < 15) n_clipped++;
      if (w[r] == 15) n_full++;
    end
    if (fired == 0) n_none++;
    if (fired > 1) n_merged++;
    for (int z = 0; z < NE; z++) begin
      expc[z] = 0;
      for (int r = 0; r < NR; r++) expc[z] = max2(expc[z], min2(w[r], tri_ref(30 - 2 * r, z, 4, 15)));
      got[z] = 0;
    end
    // cycle 1: reset
    rst = 1'b1; obs = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    bitn = 0;
    for (cyc = 2; cyc <= 256; cyc++) begin
      if (cyc >= 3 && cyc <= 126) begin
        obs[0] = ob[(cyc - 3) / GB][GB - 1 - (cyc - 3) % GB];
      end else begin
        obs[0] = 1'($urandom);   // must be ignored
      end
      #1;
      checks++;
      if (c_start !== (cyc == 133)) begin
        failures++; $display("cycle %0d: c_start=%b", cyc, c_start);
      end
      checks++;
      if (c_valid !== (cyc >= 133 && cyc <= 256)) begin
        failures++; $display("cycle %0d: c_valid=%b", cyc, c_valid);
      end
      if (c_valid) begin
        got[bitn / GB] = (got[bitn / GB] << 1) | int'(c_out);
        bitn++;
      end
      @(posedge clk); #1;
    end
    check(bitn, NE * GB, "output bits");
    for (int z = 0; z < NE; z++) check(got[z], expc[z], $sformatf("C'(z%0d)", z + 1));
    n_done++;
  endtask

  initial begin
    rst = 1'b1; obs = '0;
    @(posedge clk); #1;
    for (int e = 0; e < NE; e += 3) begin
      inference(0, e, 15, 0);
      n_back_to_back++;
    end
    inference(0, 7, 9, 0);
    inference(0, 12, 4, 0);
    for (int n = 0; n < 8; n++) inference(1, $urandom % NE, 1 + $urandom % 7, 8 + $urandom % 8);
    for (int n = 0; n < 4; n++) inference(2, 0, 0, 0);
    inference(3, 0, 0, 0);
    $display("inferences %0d: clipped rules %0d, full matches %0d, merged results %0d, empty %0d, back-to-back %0d",
             n_done, n_clipped, n_full, n_merged, n_none, n_back_to_back);
    checks++; if (n_clipped == 0)      begin failures++; $display("no rule was clipped"); end
    checks++; if (n_full == 0)         begin failures++; $display("no rule matched fully"); end
    checks++; if (n_merged == 0)       begin failures++; $display("no result merged several rules"); end
    checks++; if (n_none == 0)         begin failures++; $display("no empty inference"); end
    checks++; if (n_back_to_back == 0) begin failures++; $display("no back-to-back inference"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
