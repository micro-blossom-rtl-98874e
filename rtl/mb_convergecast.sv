// Convergecast network: reduces the reports of N processing units into one.
//
// The reports travel up a balanced binary tree of N - 1 combine nodes
// (log2 N levels).  Each node forwards one Conflict if either input carries
// one (the left input wins, so the lowest-numbered reporting PU is
// selected), the minimum of the two grow lengths, the OR of the "state
// changed" flags and the XOR of the pre-match parity bits.  The network is
// purely combinational; the controller registers its root.
//
// Follows the paper: a tree of multiplexers that picks one reported Conflict
// and of comparators that finds the minimum length, with logarithmic depth.
// Own choices: the fixed left-first priority, and carrying the stability
// flag and the correction parity in the same tree.
module mb_convergecast
  import mb_pkg::*;
#(
  parameter int N = 4
) (
  input  report_t leaves [N],
  output report_t root
);

  localparam int P = (N <= 1) ? 1 : (1 << $clog2(N));

  report_t node [2*P];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N) begin : g_used
      assign node[P+i] = leaves[i];
    end else begin : g_pad
      assign node[P+i] = REPORT_IDLE;
    end
  end

  for (genvar i = 1; i < P; i++) begin : g_node
    assign node[i] = combine(node[2*i], node[2*i+1]);
  end

  assign root = node[1];

  assign node[0] = REPORT_IDLE;

endmodule
