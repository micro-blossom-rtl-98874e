// Micro Blossom accelerator: the dual phase of the blossom algorithm for
// minimum-weight perfect matching decoding, run by one processing unit per
// vertex and per edge of a surface-code decoding graph.
//
// Structure: the controller (mb_controller) takes instructions from the CPU
// through its registers, reached over a 64-bit AXI4 slave (mb_axi4_slave); the broadcast network hands each one to all
// vertex PUs (mb_vertex) and edge PUs (mb_edge) at once, every PU updates its
// state from its own and its neighbours' state, and two convergecast trees
// (mb_convergecast, one over the vPUs and one over the ePUs) reduce the
// per-PU reports into the response the CPU reads.  The decoding graph is the
// rotated surface code of distance D over D rounds described in
// mb_graph_pkg; vPU and ePU instances and their wiring are generated from
// its closed-form functions.
//
// Syndrome input: the round to load is presented on syndrome (one bit per
// real stabilizer, row-major over the real sites of a round); a load Defects
// instruction carrying the round number copies it into that round's vPUs
// and pulses syndrome_loaded.  Rounds are loaded in order; until loaded, a
// round's vertices act as the fusion boundary (round-wise fusion).
//
// Timing: an instruction reaches the PUs BCAST_STAGES cycles after the
// controller issues it and executes in one cycle; idle cycles follow until
// the array is stable, after which the response is readable.
//
// Follows the paper: the vPU/ePU array with local connectivity, broadcast
// and convergecast networks, controller with memory-mapped registers,
// streaming syndrome load with round-wise fusion, pre-matching of isolated
// Conflicts and the correction bit output.  Own choices: the graph has
// phenomenological (not circuit-level) edges, no pipeline registers
// between Pre-Match, Execute and Update, one context, one edge weight.
module micro_blossom
  import mb_pkg::*;
  import mb_graph_pkg::*;
#(
  parameter int D             = 13,   // code distance and number of rounds
  parameter int WEIGHT        = 14,   // edge weight (the paper's maximum, 4 bits)
  parameter int FUSION_WEIGHT = 2,    // weight of an edge into a not yet loaded round
  parameter int BCAST_STAGES  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // 64-bit AXI4 slave port to the CPU
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [22:0] s_awaddr,
  input  logic [3:0]  s_awid,
  input  logic [7:0]  s_awlen,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [63:0] s_wdata,
  input  logic        s_wlast,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  output logic [3:0]  s_bid,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [22:0] s_araddr,
  input  logic [3:0]  s_arid,
  input  logic [7:0]  s_arlen,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [63:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic [3:0]  s_rid,
  output logic        s_rlast,
  // syndrome stream from the quantum hardware
  input  logic [(D*D-1)/2-1:0] syndrome,
  output logic        syndrome_loaded,
  // logical correction
  output logic        correction_valid,
  output logic        correction
);

  localparam int NV = num_vertices(D);
  localparam int NE = num_edges(D);

  logic        wr_valid, wr_ready, rd_valid, rd_ready;
  logic [7:0]  wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  logic        instr_valid;
  logic [31:0] instr_word;
  instr_t      instr;
  report_t     root, vroot, eroot;

  // per-vertex outputs
  vstate_t       vs    [NV];
  vstate_t       vex   [NV];
  dir_t          vseff [NV];
  logic          vq    [NV];
  logic          vempty[NV];
  logic [5:0]    vexcl [NV];
  report_t       vrep  [NV];
  // per-edge outputs
  logic          et    [NE];
  logic          ent1  [NE];
  logic          ent2  [NE];
  logic          em    [NE];
  res_t          ew    [NE];
  report_t       erep  [NE];

  mb_axi4_slave #(.ADDR_BITS(23), .ID_BITS(4)) u_axi (
    .clk, .rst_n,
    .awvalid(s_awvalid), .awready(s_awready), .awaddr(s_awaddr), .awid(s_awid), .awlen(s_awlen),
    .wvalid(s_wvalid), .wready(s_wready), .wdata(s_wdata), .wlast(s_wlast),
    .bvalid(s_bvalid), .bready(s_bready), .bresp(s_bresp), .bid(s_bid),
    .arvalid(s_arvalid), .arready(s_arready), .araddr(s_araddr), .arid(s_arid), .arlen(s_arlen),
    .rvalid(s_rvalid), .rready(s_rready), .rdata(s_rdata), .rresp(s_rresp), .rid(s_rid), .rlast(s_rlast),
    .reg_wr_valid(wr_valid), .reg_wr_addr(wr_addr), .reg_wr_data(wr_data), .reg_wr_ready(wr_ready),
    .reg_rd_valid(rd_valid), .reg_rd_addr(rd_addr), .reg_rd_ready(rd_ready), .reg_rd_data(rd_data)
  );

  mb_controller #(.BCAST_STAGES(BCAST_STAGES)) u_ctrl (
    .clk, .rst_n,
    .wr_valid, .wr_addr, .wr_data, .wr_ready,
    .rd_valid, .rd_addr, .rd_ready, .rd_data,
    .instr_valid, .instr_word,
    .root,
    .correction_valid, .correction
  );

  mb_broadcast #(.STAGES(BCAST_STAGES)) u_bcast (
    .clk, .rst_n, .valid(instr_valid), .word(instr_word), .instr
  );

  assign syndrome_loaded = instr.kind == I_LOAD;

  // ------------------------------------------------------------- vertex PUs
  for (genvar v = 0; v < NV; v++) begin : g_v
    localparam bit VIRT = v_virtual(D, v);
    localparam int RI   = VIRT ? 0 : v_real_index(D, v);
    localparam logic [5:0] SL = {v_edge(D, v, 5) >= 0, v_edge(D, v, 4) >= 0, v_edge(D, v, 3) >= 0,
                                 v_edge(D, v, 2) >= 0, v_edge(D, v, 1) >= 0, v_edge(D, v, 0) >= 0};
    logic    [5:0] n_q, n_d, e_t, e_nt, e_m;
    vstate_t [5:0] n_ex;
    dir_t    [5:0] n_seff;
    res_t    [5:0] e_w;
    len_t          len;
    logic          chg, par;

    for (genvar k = 0; k < 6; k++) begin : g_k
      localparam int E = v_edge(D, v, k);
      localparam int U = v_nbr(D, v, k);
      if (E >= 0) begin : g_on
        localparam bit SIDE0 = e_end(D, E, 0) == v;
        assign n_q[k]    = vq[U];
        assign n_d[k]    = vs[U].defect;
        assign n_ex[k]   = vex[U];
        assign n_seff[k] = vseff[U];
        assign e_t[k]    = et[E];
        assign e_nt[k]   = SIDE0 ? ent1[E] : ent2[E];
        assign e_m[k]    = em[E];
        assign e_w[k]    = ew[E];
      end else begin : g_off
        assign n_q[k]    = 1'b0;
        assign n_d[k]    = 1'b0;
        assign n_ex[k]   = '0;
        assign n_seff[k] = DIR_ZERO;
        assign e_t[k]    = 1'b0;
        assign e_nt[k]   = 1'b0;
        assign e_m[k]    = 1'b0;
        assign e_w[k]    = '0;
      end
    end

    localparam logic [5:0] CT = {v_edge(D, v, 5) >= 0 && e_on_cut(D, v_edge(D, v, 5)),
                                 v_edge(D, v, 4) >= 0 && e_on_cut(D, v_edge(D, v, 4)),
                                 v_edge(D, v, 3) >= 0 && e_on_cut(D, v_edge(D, v, 3)),
                                 v_edge(D, v, 2) >= 0 && e_on_cut(D, v_edge(D, v, 2)),
                                 v_edge(D, v, 1) >= 0 && e_on_cut(D, v_edge(D, v, 1)),
                                 v_edge(D, v, 0) >= 0 && e_on_cut(D, v_edge(D, v, 0))};
    mb_vertex #(.INDEX(v), .LAYER(v_layer(D, v)), .VIRTUAL(VIRT), .SLOTS(SL), .CUT(CT)) u_v (
      .clk, .rst_n, .instr,
      .syndrome_bit(VIRT ? 1'b0 : syndrome[RI]),
      .nbr_q(n_q), .nbr_defect(n_d), .nbr_ex(n_ex), .nbr_seff(n_seff),
      .e_tight(e_t), .e_ntight(e_nt), .e_match(e_m), .e_weight(e_w),
      .state(vs[v]), .ex_state(vex[v]), .s_eff(vseff[v]), .q(vq[v]), .empty(vempty[v]),
      .excl_ok(vexcl[v]), .len, .parity(par), .changed(chg)
    );

    always_comb begin
      vrep[v]         = REPORT_IDLE;
      vrep[v].len     = len;
      vrep[v].changed = chg;
      vrep[v].parity  = par;
    end
  end

  // --------------------------------------------------------------- edge PUs
  for (genvar e = 0; e < NE; e++) begin : g_e
    localparam int A  = e_end(D, e, 0);
    localparam int B  = e_end(D, e, 1);
    localparam int KA = e_slot(D, e, 0);
    localparam int KB = e_slot(D, e, 1);
    mb_edge #(
      .V1(A), .V2(B), .V1_VIRTUAL(v_virtual(D, A)), .V2_VIRTUAL(v_virtual(D, B)),
      .IS_TIME(e_is_time(D, e)),
      .WEIGHT(WEIGHT), .FUSION_WEIGHT(FUSION_WEIGHT)
    ) u_e (
      .s1(vs[A]), .s2(vs[B]), .seff1(vseff[A]), .seff2(vseff[B]),
      .q1(vq[A]), .q2(vq[B]), .empty1(vempty[A]),
      .excl_ok1(vexcl[A][KA]), .excl_ok2(vexcl[B][KB]),
      .tight(et[e]), .ntight1(ent1[e]), .ntight2(ent2[e]), .match(em[e]), .weight(ew[e]),
      .report(erep[e])
    );
  end

  // ----------------------------------------------------------- convergecast
  mb_convergecast #(.N(NV)) u_vcast (.leaves(vrep), .root(vroot));
  mb_convergecast #(.N(NE)) u_ecast (.leaves(erep), .root(eroot));
  assign root = combine(eroot, vroot);

endmodule
