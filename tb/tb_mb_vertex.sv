// Testbench of the vertex PU: drives the broadcast instruction and the
// neighbour / edge inputs by hand and compares the registered state, the
// pre-match outputs (q, empty, excl_ok, effective direction, parity) and
// the grow-length bound with values worked out by hand.  Instance A is a
// real vertex that receives a defect, instance B a real vertex without one
// (covered by its neighbours through update), instance C a virtual vertex.
module tb_mb_vertex;
  import mb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  instr_t instr;
  logic syn;
  logic    [5:0] n_q, n_d, e_t, e_nt, e_m;
  vstate_t [5:0] n_ex;
  dir_t    [5:0] n_seff;
  res_t    [5:0] e_w;
  vstate_t sa, sb, sc, xa, xb, xc;
  dir_t    fa, fb, fc;
  logic    qa, qb, qc, ea, eb, ec, pa, pb, pc, ca, cb, cc;
  logic [5:0] ka, kb, kc;
  len_t    la, lb, lc;

  mb_vertex #(.INDEX(10), .LAYER(2), .VIRTUAL(1'b0), .SLOTS(6'b111111), .CUT(6'b000100)) dut_a (
    .clk, .rst_n, .instr, .syndrome_bit(syn), .nbr_q(n_q), .nbr_defect(n_d), .nbr_ex(n_ex),
    .nbr_seff(n_seff), .e_tight(e_t), .e_ntight(e_nt), .e_match(e_m), .e_weight(e_w),
    .state(sa), .ex_state(xa), .s_eff(fa), .q(qa), .empty(ea), .excl_ok(ka), .len(la), .parity(pa), .changed(ca));
  mb_vertex #(.INDEX(11), .LAYER(2), .VIRTUAL(1'b0), .SLOTS(6'b001111), .CUT(6'b000000)) dut_b (
    .clk, .rst_n, .instr, .syndrome_bit(1'b0), .nbr_q(n_q), .nbr_defect(n_d), .nbr_ex(n_ex),
    .nbr_seff(n_seff), .e_tight(e_t), .e_ntight(e_nt), .e_match(6'b0), .e_weight(e_w),
    .state(sb), .ex_state(xb), .s_eff(fb), .q(qb), .empty(eb), .excl_ok(kb), .len(lb), .parity(pb), .changed(cb));
  mb_vertex #(.INDEX(12), .LAYER(2), .VIRTUAL(1'b1), .SLOTS(6'b000011), .CUT(6'b000000)) dut_c (
    .clk, .rst_n, .instr, .syndrome_bit(1'b1), .nbr_q(n_q), .nbr_defect(n_d), .nbr_ex(n_ex),
    .nbr_seff(n_seff), .e_tight(e_t), .e_ntight(e_nt), .e_match(6'b0), .e_weight(e_w),
    .state(sc), .ex_state(xc), .s_eff(fc), .q(qc), .empty(ec), .excl_ok(kc), .len(lc), .parity(pc), .changed(cc));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam instr_t NOP = '{kind: I_NOP, a: '0, b: '0, dir: DIR_ZERO, imm: '0};
  task automatic issue(input logic [31:0] w);
    @(negedge clk); instr = decode(w);
    @(negedge clk); instr = NOP;
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask
  function automatic vstate_t nb(int node, int r, dir_t s);
    return '{touch: idx_t'(node), node: idx_t'(node), r: res_t'(r), s: s, defect: 1'b0, boundary: 1'b0};
  endfunction

  initial begin
    instr = NOP; syn = 1'b0;
    n_q = '0; n_d = '0; e_t = '0; e_nt = '0; e_m = '0; n_ex = '0; n_seff = '{default: DIR_ZERO};
    e_w = '{default: res_t'(14)};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    issue(enc_reset());
    check(sa.boundary && sa.touch == IDX_NONE && sa.node == IDX_NONE && sa.r == 0, "reset state");
    // load of another layer leaves it unloaded
    syn = 1'b1;
    issue(enc_load(1));
    check(sa.boundary, "load of another layer ignored");
    issue(enc_load(2));
    check(!sa.boundary && sa.defect && sa.touch == 10 && sa.node == 10 && sa.s == DIR_GROW && sa.r == 0, "load defect");
    check(!sb.boundary && !sb.defect && sb.node == IDX_NONE, "load regular vertex");
    check(sc.boundary && !sc.defect, "virtual vertex stays boundary");
    syn = 1'b0;
    // grow
    issue(enc_grow(5));
    check(sa.r == 5, $sformatf("grow 5: r=%0d", sa.r));
    check(la == LEN_INF, "growing defect gives no length bound");
    // shrink
    issue(enc_set_dir(10, DIR_SHRINK));
    check(sa.s == DIR_SHRINK, "set Direction shrink");
    check(la == len_t'(5), $sformatf("shrinking defect bounds length by r: %0d", la));
    issue(enc_grow(3));
    check(sa.r == 2, $sformatf("shrink by 3: r=%0d", sa.r));
    issue(enc_grow(10));
    check(sa.r == 0, "shrink clamps at 0");
    issue(enc_set_dir(99, DIR_ZERO));
    check(sa.s == DIR_SHRINK, "set Direction of another node ignored");
    issue(enc_set_dir(10, DIR_GROW));
    issue(enc_grow(200));
    check(sa.r == RES_MAX, "grow saturates");
    issue(enc_set_dir(10, DIR_SHRINK));
    issue(enc_grow(200));
    issue(enc_set_dir(10, DIR_GROW));
    issue(enc_grow(7));
    check(sa.r == 7, "back to r=7");
    // pre-match: a matched edge on slot 2 holds the node
    e_m = 6'b000100;
    #1;
    check(fa == DIR_ZERO, "pre-matched vertex has effective direction 0");
    check(pa == 1'b1, "pre-matched edge on the cut gives parity 1");
    issue(enc_grow(4));
    check(sa.r == 7 && sa.s == DIR_GROW, "pre-matched vertex does not grow, keeps its direction");
    e_m = 6'b010000;
    #1;
    check(pa == 1'b0, "pre-matched edge off the cut gives parity 0");
    e_m = '0;
    #1;
    check(fa == DIR_GROW, "released pre-match");
    // set Cover
    issue(enc_set_cover(10, 100));
    check(sa.node == 100 && sa.touch == 10, "set Cover by touch");
    issue(enc_set_cover(100, 200));
    check(sa.node == 200, "set Cover by node");
    issue(enc_set_cover(10, 10));
    check(sa.node == 10, "split back to the defect");
    // q / empty / excl_ok
    e_t = 6'b000100; e_nt = 6'b000000;
    #1;
    check(qa && ea, "one tight edge: q, empty");
    e_t = 6'b000110; e_nt = 6'b000010;
    n_d = 6'b000000; n_q = 6'b000010;
    #1;
    check(!qa && !ea, "two tight edges: not q, not empty");
    check(ka[2] == 1'b1, "excl_ok[2]: other tight edge leads to a regular q vertex");
    check(ka[1] == 1'b0, "excl_ok[1]: the other tight edge (slot 2) leads to a vertex without q");
    n_q = 6'b000000;
    #1;
    check(ka[2] == 1'b0 && ka[1] == 1'b0 && ka[0] == 1'b0, "excl_ok follows neighbour q");
    n_q = 6'b000110; n_d = 6'b000010;
    #1;
    check(ka[2] == 1'b0 && ka[1] == 1'b1, "excl_ok false when the other end is a defect");
    e_t = '0; e_nt = '0; n_q = '0; n_d = '0;
    // update: regular vertex B takes the best neighbour
    n_ex[1] = nb(7, 20, DIR_GROW);  n_seff[1] = DIR_GROW;
    idle(1);
    check(sb.node == 7 && sb.touch == 7 && sb.r == 6 && sb.s == DIR_GROW, "update takes neighbour state r-w");
    n_ex[3] = nb(8, 20, DIR_SHRINK); n_seff[3] = DIR_SHRINK;
    idle(1);
    check(sb.node == 7, "tie broken towards the larger direction");
    n_ex[0] = nb(9, 25, DIR_SHRINK); n_seff[0] = DIR_SHRINK;
    idle(1);
    check(sb.node == 9 && sb.r == 11 && sb.s == DIR_SHRINK, "largest residual distance wins");
    n_seff[0] = DIR_ZERO;
    idle(1);
    check(sb.s == DIR_ZERO, "copies the effective (pre-matched) direction");
    n_ex[0].boundary = 1'b1;
    n_ex[3].r = 10;  n_ex[1].r = 13;
    idle(1);
    check(sb.node == IDX_NONE && sb.r == 0, "no neighbour within reach: leaves the Cover");
    #1;
    check(!cb, "stable: no change flag");
    n_ex[1].r = 14;
    #1;
    check(cb, "change flag when the next state differs");
    idle(1);
    check(sb.node == 7 && sb.r == 0, "reaches with r = 0 exactly");
    n_ex = '0;
    idle(1);
    check(sc.node == IDX_NONE && sc.boundary, "virtual vertex never covered");
    issue(enc_reset());
    check(sa.boundary && !sa.defect && sa.node == IDX_NONE, "reset clears the defect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
