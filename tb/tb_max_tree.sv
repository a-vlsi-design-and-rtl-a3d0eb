// tb_max_tree -- self-checking testbench of the binary max tree.
// Drives a 16-input tree (4 levels) and a 5-input tree (padded to 8 leaves, 3 levels) with
// back-to-back random 4-bit words, one per input, MSB first, and checks that y carries the
// maximum of each word set exactly LAT cycles later and that ws_o marks its MSB.
module tb_max_tree;
  localparam int GB = 4;
  logic clk = 1'b0;
  logic rst, ws;
  logic [15:0] x;
  logic y16, y5, wo16, wo5;
  int checks = 0, failures = 0;

  max_tree #(.N_IN(16)) dut16 (.clk, .rst, .ws, .x,       .y(y16), .ws_o(wo16));
  max_tree #(.N_IN(5))  dut5  (.clk, .rst, .ws, .x(x[4:0]), .y(y5),  .ws_o(wo5));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NW = 200;
  int exp16 [NW], exp5 [NW];
  int got16 [NW], got5 [NW];
  logic [3:0] wd [16];

  initial begin
    rst = 1'b1; ws = 1'b0; x = '0;
    @(posedge clk); #1;
    rst = 1'b0;
    foreach (got16[i]) begin got16[i] = 0; got5[i] = 0; end
    fork
      begin : drive
        for (int n = 0; n < NW; n++) begin
          exp16[n] = 0; exp5[n] = 0;
          for (int i = 0; i < 16; i++) begin
            wd[i] = (n % 3 == 0) ? 4'($urandom % 5) : 4'($urandom);
            if (wd[i] > exp16[n]) exp16[n] = wd[i];
            if (i < 5 && wd[i] > exp5[n]) exp5[n] = wd[i];
          end
          for (int b = GB - 1; b >= 0; b--) begin
            ws = (b == GB - 1);
            for (int i = 0; i < 16; i++) x[i] = wd[i][b];
            @(posedge clk); #1;
          end
        end
        ws = 1'b0; x = '0;
      end
      begin : sample16
        repeat (4 - 1) @(posedge clk);
        #2;
        for (int n = 0; n < NW; n++)
          for (int b = GB - 1; b >= 0; b--) begin
            @(posedge clk); #2;
            got16[n] = (got16[n] << 1) | int'(y16);
            if (b == GB - 1) begin
              checks++;
              if (!wo16) begin failures++; $display("ws_o16 misaligned at word %0d", n); end
            end
          end
      end
      begin : sample5
        repeat (3 - 1) @(posedge clk);
        #2;
        for (int n = 0; n < NW; n++)
          for (int b = GB - 1; b >= 0; b--) begin
            @(posedge clk); #2;
            got5[n] = (got5[n] << 1) | int'(y5);
            if (b == GB - 1) begin
              checks++;
              if (!wo5) begin failures++; $display("ws_o5 misaligned at word %0d", n); end
            end
          end
      end
    join
    for (int n = 0; n < NW; n++) begin
      checks += 2;
      if (got16[n] != exp16[n]) begin
        failures++; $display("word %0d: 16-input max %0d expected %0d", n, got16[n], exp16[n]);
      end
      if (got5[n] != exp5[n]) begin
        failures++; $display("word %0d: 5-input max %0d expected %0d", n, got5[n], exp5[n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
