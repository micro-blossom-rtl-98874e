// Testbench of the convergecast tree: random reports from N = 11 leaves
// (not a power of two, so padding is exercised) are reduced by the tree and
// compared with a sequential reference: first reporting leaf's Conflict,
// minimum length, OR of change flags, XOR of parities.
module tb_mb_convergecast;
  import mb_pkg::*;

  localparam int N = 11;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  report_t leaves [N];
  report_t root;

  mb_convergecast #(.N(N)) dut (.leaves, .root);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 300; it++) begin
      int first;
      len_t mn;
      logic any, par;
      first = -1; mn = LEN_INF; any = 0; par = 0;
      for (int i = 0; i < N; i++) begin
        leaves[i] = REPORT_IDLE;
        leaves[i].conflict = ($urandom_range(0, 9) == 0);
        leaves[i].node1    = idx_t'(i);
        leaves[i].node2    = idx_t'($urandom_range(0, 1000));
        leaves[i].len      = ($urandom_range(0, 3) == 0) ? len_t'($urandom_range(0, 200)) : LEN_INF;
        leaves[i].changed  = ($urandom_range(0, 15) == 0);
        leaves[i].parity   = $urandom_range(0, 1) == 1;
        if (leaves[i].conflict && first < 0) first = i;
        if (leaves[i].len < mn) mn = leaves[i].len;
        any |= leaves[i].changed;
        par ^= leaves[i].parity;
      end
      #1;
      check(root.conflict == (first >= 0), "conflict flag");
      if (first >= 0) check(root.node1 == idx_t'(first) && root.node2 == leaves[first].node2, "first Conflict selected");
      check(root.len == mn, "minimum length");
      check(root.changed == any, "change OR");
      check(root.parity == par, "parity XOR");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
