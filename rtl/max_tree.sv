// max_tree -- binary tree of bit-serial max elements merging the outputs of all rules.
//
// N_IN bit streams (one per rule, grades MSB first) enter on x; y carries the bitwise-serial
// maximum over all of them, i.e. the fuzzy union C'(z) = max_i min(w_i, C_i(z)).  The tree
// has LAT = ceil(log2 N_IN) levels; missing leaves (N_IN not a power of two) are tied to 0,
// which does not change a maximum.  Each node registers its output, so y lags x by LAT
// cycles.  ws marks the MSB of each word at the leaves and is delayed alongside the data so
// that every level restarts its comparison on its own word boundary; ws_o is ws delayed by
// LAT cycles, aligned with y.  The binary tree follows the paper; the register per level is
// this design's choice (it bounds the logic depth when more rules are added).
module max_tree #(
  parameter int unsigned N_IN = 16
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ws,
  input  logic [N_IN-1:0] x,
  output logic            y,
  output logic            ws_o
);
  localparam int unsigned LAT = (N_IN < 2) ? 1 : $clog2(N_IN);
  localparam int unsigned P   = 1 << LAT;     // leaves after padding

  logic [P-1:0] leaf;
  logic [P-1:1] node_d;   // combinational max of the two children of node k
  logic [P-1:1] node_q;   // registered node outputs; node 1 is the root
  logic [LAT:0] ws_d;     // ws_d[j] = ws delayed by j cycles
  logic [LAT:1] ws_q;

  always_comb begin
    leaf = '0;
    leaf[N_IN-1:0] = x;
  end

  assign ws_d = {ws_q, ws};

  // Node k sits at depth clog2(k+1)-1; its children are valid with ws delayed accordingly.
  for (genvar k = 1; k < P; k++) begin : g_node
    localparam int unsigned DEPTH = $clog2(k + 1) - 1;
    logic ca;
    logic cb;
    if (2 * k >= P) begin : g_leaf_children
      assign ca = leaf[2*k-P];
      assign cb = leaf[2*k+1-P];
    end else begin : g_node_children
      assign ca = node_q[2*k];
      assign cb = node_q[2*k+1];
    end
    bs_max u_max (.clk, .ws(ws_d[LAT-1-DEPTH]), .a(ca), .b(cb), .y(node_d[k]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      node_q <= '0;
      ws_q   <= '0;
    end else begin
      node_q <= node_d;
      ws_q   <= ws_d[LAT-1:0];
    end
  end

  assign y    = node_q[1];
  assign ws_o = ws_q[LAT];
endmodule
