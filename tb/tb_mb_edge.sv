// Testbench of the edge PU: three instances (a regular spatial edge, an
// edge to a permanent virtual vertex, a time edge whose later end can be an
// unloaded round) are driven with hand-made vertex states; tightness, the
// isolated-Conflict conditions (Eq. 1-3), the Conflict report and the grow
// length are compared with values worked out by hand.
module tb_mb_edge;
  import mb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  vstate_t s1, s2;
  dir_t    f1, f2;
  logic    q1, q2, em1, x1, x2;
  logic    t_r, n1_r, n2_r, m_r, t_b, n1_b, n2_b, m_b, t_t, n1_t, n2_t, m_t;
  res_t    w_r, w_b, w_t;
  report_t r_r, r_b, r_t;

  mb_edge #(.V1(3), .V2(4), .WEIGHT(14), .FUSION_WEIGHT(2)) dut_r (
    .s1, .s2, .seff1(f1), .seff2(f2), .q1, .q2, .empty1(em1), .excl_ok1(x1), .excl_ok2(x2),
    .tight(t_r), .ntight1(n1_r), .ntight2(n2_r), .match(m_r), .weight(w_r), .report(r_r));
  mb_edge #(.V1(3), .V2(4), .V2_VIRTUAL(1'b1), .WEIGHT(14), .FUSION_WEIGHT(2)) dut_b (
    .s1, .s2, .seff1(f1), .seff2(f2), .q1, .q2, .empty1(em1), .excl_ok1(x1), .excl_ok2(x2),
    .tight(t_b), .ntight1(n1_b), .ntight2(n2_b), .match(m_b), .weight(w_b), .report(r_b));
  mb_edge #(.V1(3), .V2(4), .IS_TIME(1'b1), .WEIGHT(14), .FUSION_WEIGHT(2)) dut_t (
    .s1, .s2, .seff1(f1), .seff2(f2), .q1, .q2, .empty1(em1), .excl_ok1(x1), .excl_ok2(x2),
    .tight(t_t), .ntight1(n1_t), .ntight2(n2_t), .match(m_t), .weight(w_t), .report(r_t));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic vstate_t st(int node, int r, dir_t s, bit d, bit b);
    return '{touch: (node < 0) ? IDX_NONE : idx_t'(node), node: (node < 0) ? IDX_NONE : idx_t'(node),
             r: res_t'(r), s: s, defect: d, boundary: b};
  endfunction

  initial begin
    q1 = 1; q2 = 1; em1 = 1; x1 = 1; x2 = 1;
    // two growing defects, gap 14 - 3 - 5 = 6, grow 3
    s1 = st(3, 3, DIR_GROW, 1, 0); s2 = st(4, 5, DIR_GROW, 1, 0); f1 = DIR_GROW; f2 = DIR_GROW;
    #1;
    check(!t_r && !r_r.conflict && r_r.len == 3, $sformatf("two growing: len %0d expected 3", r_r.len));
    check(w_r == 14, "full weight between loaded vertices");
    // one growing, other still: gap 6
    f2 = DIR_ZERO;
    #1;
    check(r_r.len == 6, $sformatf("one growing: len %0d expected 6", r_r.len));
    // tight, both growing defects with q: isolated Conflict (Eq. 1), also a Conflict report
    s1.r = 7; s2.r = 7; f2 = DIR_GROW;
    #1;
    check(t_r && m_r, "Eq. 1 isolated Conflict");
    check(r_r.conflict && r_r.node1 == 3 && r_r.node2 == 4 && r_r.vert1 == 3 && r_r.vert2 == 4, "Conflict report fields");
    q2 = 0;
    #1;
    check(!m_r, "Eq. 1 needs q at both ends");
    q2 = 1; q1 = 0;
    #1;
    check(!m_r, "Eq. 1 needs q at end 1 too");
    q1 = 1; s2.defect = 0;
    #1;
    check(!m_r, "Eq. 1 needs two defects");
    s2.defect = 1;
    // pre-matched (effective 0 on both): no Conflict
    f1 = DIR_ZERO; f2 = DIR_ZERO;
    #1;
    check(!r_r.conflict && r_r.len == LEN_INF, "matched nodes: no Conflict, no bound");
    // same node on both ends: no Conflict
    f1 = DIR_GROW; f2 = DIR_GROW; s2.node = 3;
    #1;
    check(!r_r.conflict && r_r.len == LEN_INF, "same node: nothing");
    // growing against shrinking: sum 0, nothing
    s2.node = 4; f2 = DIR_SHRINK;
    #1;
    check(!r_r.conflict && r_r.len == LEN_INF, "grow vs shrink: nothing");
    // growing into an uncovered vertex
    s2 = st(-1, 0, DIR_ZERO, 0, 0); s1.r = 4;
    #1;
    check(!r_r.conflict && r_r.len == 10 && !t_r, "grow into uncovered: len 14 - 4");
    // boundary edge (Eq. 2): v1 growing defect, v2 virtual
    s2 = st(-1, 0, DIR_ZERO, 0, 1); s1 = st(3, 14, DIR_GROW, 1, 0); f1 = DIR_GROW;
    #1;
    check(t_b && m_b, "Eq. 2 isolated Conflict with the code boundary");
    check(w_b == 14, "permanent virtual keeps the full weight");
    check(r_b.conflict && r_b.node1 == 3 && r_b.node2 == IDX_NONE && r_b.vert2 == 4, "Conflict with a virtual vertex");
    check(!n1_b && n2_b, "tight towards a boundary vertex is volatile");
    x1 = 0;
    #1;
    check(!m_b, "Eq. 2 needs the other edges to be harmless");
    x1 = 1;
    check(!m_r, "regular edge has no Eq. 2");
    // the regular edge sees an unloaded end: fusion weight 2
    #1;
    check(w_r == 2 && w_t == 2, "fusion boundary reduces the weight");
    // time edge (Eq. 3): v1 growing defect r=2, v2 unloaded
    s1.r = 2; em1 = 1;
    #1;
    check(t_t && m_t, "Eq. 3 isolated Conflict with the fusion boundary");
    em1 = 0;
    #1;
    check(!m_t, "Eq. 3 needs no non-volatile tight edge at v1");
    em1 = 1; s1.r = 1;
    #1;
    check(!m_t && r_t.len == 1, "not yet tight: grow 1 towards the fusion boundary");
    // once loaded, full weight comes back
    s2.boundary = 0;
    #1;
    check(w_t == 14 && !t_t && r_t.len == 13, "loaded: full weight again");
    // virtual on end 1 of the regular edge: Conflict reported from end 2
    s1 = st(-1, 0, DIR_ZERO, 0, 1); s2 = st(9, 14, DIR_GROW, 0, 0); f1 = DIR_ZERO; f2 = DIR_GROW;
    #1;
    check(r_r.conflict && r_r.node1 == 9 && r_r.vert1 == 4 && r_r.vert2 == 3, "Conflict from end 2 normalised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
