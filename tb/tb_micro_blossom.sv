// End-to-end testbench of the Micro Blossom accelerator (distance 7).
//
// The testbench plays the CPU, over the AXI4 port: it streams syndrome rounds into the array
// one at a time and, after every round, runs a minimal primal phase over
// the register bus (find Conflict; grow by the reported length; match two
// growing nodes, or a node and a boundary vertex, by setting their
// directions to 0; release matches with the fusion boundary after the next
// round arrives).  Each scenario is built from a few injected errors whose
// minimum-weight matching is unique and needs no alternating trees, so the
// expected Conflicts and the logical correction bit (parity of injected
// errors on the cut column j = 0) are known independently of the design.
// Scenarios: an isolated pair of defects (pre-match Eq. 1), a defect next to
// the code boundary (Eq. 2), a measurement error across the fusion boundary
// (Eq. 3, then Eq. 1), two defects two edges apart (Conflict between
// nodes), a defect two edges from the boundary (Conflict with a virtual
// vertex), a measurement-error chain across rounds (Conflict with the
// fusion boundary, released after the next round), shrinking a matched
// node to zero (blocked response) and relabelling a cover (set Cover).
// Each mechanism is counted and must happen at least once.  The latency of
// an instruction on a stable array is checked against CPI 1.
module tb_micro_blossom;
  import mb_pkg::*;
  import mb_graph_pkg::*;

  localparam int D  = 7;
  localparam int NV = num_vertices(D);
  localparam int NE = num_edges(D);
  localparam int R  = real_per_layer(D);

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        s_awvalid = 1'b0, s_wvalid = 1'b0, s_bready = 1'b0, s_arvalid = 1'b0, s_rready = 1'b0;
  logic [22:0] s_awaddr = '0, s_araddr = '0;
  logic [3:0]  s_awid = 4'd1, s_arid = 4'd2;
  logic [7:0]  s_awlen = '0, s_arlen = '0;
  logic [63:0] s_wdata = '0;
  logic        s_wlast = 1'b1;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid, s_rlast;
  logic [1:0]  s_bresp, s_rresp;
  logic [3:0]  s_bid, s_rid;
  logic [63:0] s_rdata;
  logic [R-1:0] syndrome = '0;
  logic        syndrome_loaded, correction_valid, correction;

  micro_blossom #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_mr = 0, n_mb = 0, n_mf = 0, n_conf_nodes = 0, n_conf_virtual = 0, n_conf_fusion = 0;
  int n_grow = 0, n_load = 0, n_settle = 0, n_blocked = 0, n_cover = 0, n_release = 0;

  // ---- mechanism monitors (pre-match kinds, multi-cycle settling)
  logic [NE-1:0] mr_bits, mb_bits, mf_bits;
  for (genvar e = 0; e < NE; e++) begin : g_mon
    assign mr_bits[e] = dut.g_e[e].u_e.mr;
    assign mb_bits[e] = dut.g_e[e].u_e.mb;
    assign mf_bits[e] = dut.g_e[e].u_e.mf;
  end
  logic mr_seen, mb_seen, mf_seen;
  always_ff @(posedge clk) begin
    mr_seen <= rst_n && (mr_seen || |mr_bits);
    mb_seen <= rst_n && (mb_seen || |mb_bits);
    mf_seen <= rst_n && (mf_seen || |mf_bits);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- AXI4 single-beat transactions
  task automatic bus_write(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk);
    s_awvalid = 1'b1; s_awaddr = {15'd0, a};
    #1; while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 1'b0;
    s_wvalid = 1'b1; s_wdata = d; s_wlast = 1'b1;
    #1; while (!s_wready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_wvalid = 1'b0;
    s_bready = 1'b1;
    #1; while (!s_bvalid) begin @(negedge clk); #1; end
    check(s_bid == s_awid && s_bresp == 2'b00, "AXI4 write response");
    @(negedge clk);
    s_bready = 1'b0;
  endtask
  task automatic bus_read(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk);
    s_arvalid = 1'b1; s_araddr = {15'd0, a};
    #1; while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 1'b0;
    s_rready = 1'b1;
    #1; while (!s_rvalid) begin @(negedge clk); #1; end
    d = s_rdata;
    @(negedge clk);
    s_rready = 1'b0;
  endtask
  task automatic exec(input logic [31:0] w, output logic [63:0] resp);
    bus_write(8'h00, {32'd0, w});
    bus_read(8'h08, resp);
    if (resp[47:32] > 16'(2 + 1)) n_settle++;
  endtask

  // ---- software side of the decoder (minimal primal phase)
  int   node_dir [int];       // CPU view of node directions
  int   fusion_matched [$];   // nodes matched to the fusion boundary
  bit   cpu_parity;
  int   unsupported;


  task automatic set_dir(input int node, input dir_t d);
    logic [63:0] r;
    exec(enc_set_dir(idx_t'(node), d), r);
    node_dir[node] = int'(dir_val(d));
  endtask

  task automatic run_primal();
    logic [63:0] r, c0, c1;
    int n1, n2, v2, guard;
    guard = 0;
    forever begin
      exec(enc_find(), r);
      guard++;
      if (guard > 200) begin check(0, "solve did not finish"); break; end
      if (r[1:0] == 2'd0) break;
      if (r[1:0] == 2'd1) begin
        exec(enc_grow(int'(r[31:16])), r);
        n_grow++;
        continue;
      end
      if (r[1:0] == 2'd3) begin unsupported++; break; end
      bus_read(8'h10, c0);
      bus_read(8'h18, c1);
      n1 = int'(c0[14:0]);
      n2 = int'(c0[30:16]);
      v2 = int'(c1[30:16]);
      if (!node_dir.exists(n1)) node_dir[n1] = 1;
      if (node_dir[n1] != 1) begin unsupported++; break; end
      if (n2 == int'(IDX_NONE)) begin
        set_dir(n1, DIR_ZERO);
        if (v_virtual(D, v2)) begin
          n_conf_virtual++;
          if (v_b(D, v2) == 0) cpu_parity ^= 1'b1;
        end else begin
          n_conf_fusion++;
          fusion_matched.push_back(n1);
        end
      end else begin
        if (!node_dir.exists(n2)) node_dir[n2] = 1;
        if (node_dir[n2] != 1) begin unsupported++; break; end
        set_dir(n1, DIR_ZERO);
        set_dir(n2, DIR_ZERO);
        n_conf_nodes++;
      end
    end
  endtask

  // ---- syndrome of a set of errors (edge indices), per round
  task automatic run_scenario(input string name, input int errs[$], input int exp_nodes,
                              input int exp_virtual, input int exp_fusion);
    bit defect [NV];
    bit exp_par;
    logic [63:0] r;
    int c_nodes, c_virt, c_fus;
    foreach (defect[i]) defect[i] = 1'b0;
    exp_par = 1'b0;
    foreach (errs[i]) begin
      for (int s = 0; s < 2; s++) begin
        int v;
        v = e_end(D, errs[i], s);
        if (!v_virtual(D, v)) defect[v] = !defect[v];
      end
      if (e_on_cut(D, errs[i])) exp_par = !exp_par;
    end
    node_dir.delete();
    fusion_matched.delete();
    cpu_parity = 1'b0;
    unsupported = 0;
    c_nodes = n_conf_nodes; c_virt = n_conf_virtual; c_fus = n_conf_fusion;
    exec(enc_reset(), r);
    for (int t = 0; t < D; t++) begin
      for (int v = t * layer_size(D); v < (t + 1) * layer_size(D); v++)
        if (!v_virtual(D, v)) syndrome[v_real_index(D, v)] = defect[v];
      exec(enc_load(t), r);
      n_load++;
      // release the matches with the fusion boundary of the previous round
      while (fusion_matched.size() > 0) begin
        set_dir(fusion_matched.pop_front(), DIR_GROW);
        n_release++;
      end
      run_primal();
    end
    bus_write(8'h20, {62'd0, 1'b1, cpu_parity});
    @(negedge clk);
    check(correction_valid, {name, ": correction valid"});
    check(correction == exp_par, $sformatf("%s: correction %0b expected %0b", name, correction, exp_par));
    check(unsupported == 0, {name, ": primal phase needed beyond the simple model"});
    check(n_conf_nodes - c_nodes == exp_nodes, $sformatf("%s: node Conflicts %0d expected %0d", name, n_conf_nodes - c_nodes, exp_nodes));
    check(n_conf_virtual - c_virt == exp_virtual, $sformatf("%s: virtual Conflicts %0d expected %0d", name, n_conf_virtual - c_virt, exp_virtual));
    check(n_conf_fusion - c_fus == exp_fusion, $sformatf("%s: fusion Conflicts %0d expected %0d", name, n_conf_fusion - c_fus, exp_fusion));
  endtask

  function automatic int sp(int t, int i, int j);  return t * D * D + i * D + j; endfunction
  function automatic int tm(int t, int a, int b);  return D * D * D + t * R + v_real_index(D, vid(D, 0, a, b)); endfunction

  initial begin
    int errs[$];
    logic [63:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // isolated pair in round 1 (Eq. 1)
    errs = '{sp(1, 2, 3)};
    run_scenario("isolated pair", errs, 0, 0, 0);
    check(mr_seen, "Eq. 1 pre-match seen");
    if (mr_seen) n_mr++;
    // defect beside the code boundary in round 2 (Eq. 2)
    errs = '{sp(2, 3, 0)};
    run_scenario("boundary defect", errs, 0, 0, 0);
    check(mb_seen, "Eq. 2 pre-match seen");
    if (mb_seen) n_mb++;
    // measurement error between rounds 3 and 4 (Eq. 3, then Eq. 1)
    errs = '{tm(3, 3, 3)};
    run_scenario("measurement error", errs, 1, 0, 0);
    check(mf_seen, "Eq. 3 pre-match seen");
    if (mf_seen) n_mf++;
    // two defects two edges apart: Conflict between nodes
    errs = '{sp(0, 2, 3), sp(0, 3, 3)};
    run_scenario("chain of two", errs, 1, 0, 0);
    // the matched pair: relabel one cover and back (set Cover), then shrink it
    begin
      int n1;
      n1 = vid(D, 0, 2, 4);
      exec(enc_set_cover(idx_t'(n1), idx_t'(NV + 5)), r);
      exec(enc_find(), r);
      check(r[1:0] == 2'd0, "after set Cover the array stays finished");
      check(dut.vs[n1].node == idx_t'(NV + 5), "set Cover relabelled the node");
      exec(enc_set_cover(idx_t'(n1), idx_t'(n1)), r);
      check(dut.vs[n1].node == idx_t'(n1), "set Cover restored the node");
      n_cover++;
      check(r[47:32] == 16'd3, $sformatf("set Cover took %0d cycles, expected 3 (CPI 1)", r[47:32]));
      exec(enc_set_dir(idx_t'(n1), DIR_SHRINK), r);
      exec(enc_find(), r);
      check(r[1:0] == 2'd1 && r[31:16] == 16'd14, $sformatf("shrink length %0d kind %0d, expected 14", r[31:16], r[1:0]));
      exec(enc_grow(14), r);
      exec(enc_find(), r);
      check(r[1:0] == 2'd3, "shrunk node reports blocked (length 0)");
      if (r[1:0] == 2'd3) n_blocked++;
    end
    // one defect two edges from the left boundary: Conflict with a virtual vertex
    errs = '{sp(3, 2, 0), sp(3, 3, 1)};
    run_scenario("near boundary", errs, 0, 1, 1);
    // two measurement errors in a row: Conflict with the fusion boundary, later a node pair
    errs = '{tm(2, 3, 3), tm(3, 3, 3)};
    run_scenario("measurement chain", errs, 1, 0, 1);

    check(n_mr > 0, "mechanism: isolated Conflict, regular edge");
    check(n_mb > 0, "mechanism: isolated Conflict, boundary edge");
    check(n_mf > 0, "mechanism: isolated Conflict, fusion boundary");
    check(n_conf_nodes > 0, "mechanism: Conflict between nodes");
    check(n_conf_virtual > 0, "mechanism: Conflict with a virtual vertex");
    check(n_conf_fusion > 0, "mechanism: Conflict with the fusion boundary");
    check(n_release > 0, "mechanism: release of fusion-boundary matches");
    check(n_grow > 0, "mechanism: grow");
    check(n_load > 0, "mechanism: load Defects");
    check(n_settle > 0, "mechanism: multi-cycle update until stable");
    check(n_blocked > 0, "mechanism: blocked (shrinking node at zero)");
    check(n_cover > 0, "mechanism: set Cover");
    $display("mechanisms: mr=%0d mb=%0d mf=%0d conf_nodes=%0d conf_virtual=%0d conf_fusion=%0d release=%0d grow=%0d load=%0d settle=%0d blocked=%0d cover=%0d",
             n_mr, n_mb, n_mf, n_conf_nodes, n_conf_virtual, n_conf_fusion, n_release, n_grow, n_load, n_settle, n_blocked, n_cover);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
