// Vertex processing unit (vPU) of the Micro Blossom accelerator.
//
// One vPU exists per vertex of the decoding graph.  It stores the compact
// vertex state (unique touch t_v, unique node n_v, residue r_v, direction
// s_v, defect d_v, boundary b_v) and updates it every clock cycle with three
// combinational steps, each reading only its own state, its incident edge
// PUs and its direct neighbours:
//   Pre-Match: counts its tight incident edges (q_v: exactly one tight edge,
//     empty_v: no tight edge whose far end is loaded), and is pre-matched
//     when an incident edge PU reports an isolated Conflict; a pre-matched
//     vertex acts with direction 0 (s_eff) until the isolation ends.
//   Execute: applies the broadcast instruction: reset, load Defects (this
//     round's syndrome bit, layer ID match), set Direction (n_v == S),
//     set Cover (t_v == C or n_v == C gives n_v := S), grow
//     (r_v := max(0, r_v + l * s_eff), saturating).
//   Update: a regular (non-defect, loaded) vertex takes over the neighbour
//     state with the largest residual distance r_u - w_e >= 0, ties to the
//     larger direction; with none it leaves every Cover.  Defect and
//     boundary vertices keep their Execute result.
// The new state is registered at the clock edge, so one instruction takes
// one cycle (CPI 1) and later idle cycles repeat Pre-Match and Update until
// the state stops changing ("update Cover ... until stable").
//
// Interface: per neighbour slot k (see mb_graph_pkg) the defect and q flags
// of the neighbour, its Execute-step state and effective direction,
// and from the edge PU the tight / non-volatile tight / isolated-Conflict
// flags and the effective weight.  Outputs: state, Execute state, q,
// empty, excl_ok[k] (every other incident edge is loose or leads to a
// regular vertex whose only tight edge it is, for the boundary condition),
// effective direction, its grow-length bound, its share of the correction
// parity (the cut bit of its pre-matched edge) and a change flag.
//
// Follows the paper: the compact state and instruction semantics, the
// pre-match by temporarily zeroing s_v, and the propagation rule of
// update Cover.  Own choices: one context and no pipeline registers between
// the three steps (the paper's prototype registers them and interleaves
// contexts); non-defect vertices copy the effective direction of the
// vertex they take the touch from, so that a pre-matched node stops as a
// whole; a newly loaded defect starts as its own node growing (+1); the
// grow-length bound for a shrinking node is only taken at defect vertices.
module mb_vertex
  import mb_pkg::*;
#(
  parameter int                 INDEX   = 0,          // i_v
  parameter int                 LAYER   = 0,          // measurement round of the vertex
  parameter bit                 VIRTUAL = 1'b0,       // permanently virtual (code boundary)
  parameter logic [5:0]         SLOTS   = 6'b000000,  // which neighbour slots exist
  parameter logic [5:0]         CUT     = 6'b000000   // slot edges crossing the logical cut
) (
  input  logic            clk,
  input  logic            rst_n,
  input  instr_t          instr,                      // valid for exactly one cycle, else I_NOP
  input  logic            syndrome_bit,               // this vertex's bit of the round on the port
  // neighbour side, per slot
  input  logic    [5:0]   nbr_q,
  input  logic    [5:0]   nbr_defect,
  input  vstate_t [5:0]   nbr_ex,
  input  dir_t    [5:0]   nbr_seff,
  // edge side, per slot
  input  logic    [5:0]   e_tight,
  input  logic    [5:0]   e_ntight,
  input  logic    [5:0]   e_match,
  input  res_t    [5:0]   e_weight,
  // outputs
  output vstate_t         state,
  output vstate_t         ex_state,
  output dir_t            s_eff,
  output logic            q,
  output logic            empty,
  output logic    [5:0]   excl_ok,
  output len_t            len,
  output logic            parity,
  output logic            changed
);

  localparam idx_t MY_IDX = idx_t'(INDEX);

  vstate_t state_q, ex_d, up_d;
  logic    prematched;

  // ---------------------------------------------------------------- Pre-Match
  logic [5:0] tight_v, ntight_v, match_v, ok_v;
  always_comb begin
    tight_v  = e_tight  & SLOTS;
    ntight_v = e_ntight & SLOTS;
    match_v  = e_match  & SLOTS;
    q        = $countones(tight_v) == 1;
    empty    = ntight_v == '0;
    prematched = |match_v;
    s_eff    = prematched ? DIR_ZERO : state_q.s;
    for (int k = 0; k < 6; k++) ok_v[k] = !tight_v[k] || (!nbr_defect[k] && nbr_q[k]);
    for (int k = 0; k < 6; k++) begin
      excl_ok[k] = 1'b1;
      for (int j = 0; j < 6; j++)
        if (j != k && SLOTS[j]) excl_ok[k] = excl_ok[k] & ok_v[j];
    end
  end

  // ------------------------------------------------------------------ Execute
  always_comb begin
    logic signed [RES_BITS+2:0] grown;
    ex_d  = state_q;
    grown = '0;
    unique case (instr.kind)
      I_RESET: begin
        ex_d = '{touch: IDX_NONE, node: IDX_NONE, r: '0, s: DIR_ZERO, defect: 1'b0, boundary: 1'b1};
      end
      I_LOAD: begin
        if (!VIRTUAL && instr.imm == 26'(LAYER)) begin
          ex_d.boundary = 1'b0;
          ex_d.defect   = syndrome_bit;
          if (syndrome_bit) begin
            ex_d.touch = MY_IDX;
            ex_d.node  = MY_IDX;
            ex_d.r     = '0;
            ex_d.s     = DIR_GROW;
          end
        end
      end
      I_SET_DIR: begin
        if (state_q.node == instr.a && state_q.node != IDX_NONE) ex_d.s = instr.dir;
      end
      I_SET_COVER: begin
        if ((state_q.touch == instr.a && state_q.touch != IDX_NONE) ||
            (state_q.node == instr.a && state_q.node != IDX_NONE))
          ex_d.node = instr.b;
      end
      I_GROW: begin
        if (state_q.node != IDX_NONE && !state_q.boundary) begin
          if (instr.imm > 26'(RES_MAX)) begin
            grown = (s_eff == DIR_GROW) ? (RES_BITS+3)'(RES_MAX) :
                    (s_eff == DIR_SHRINK) ? '0 : (RES_BITS+3)'(state_q.r);
          end else begin
            grown = $signed({3'b000, state_q.r}) +
                    $signed((RES_BITS+3)'(instr.imm)) * dir_val(s_eff);
          end
          if (grown < 0)                             ex_d.r = '0;
          else if (grown > $signed({3'b000, RES_MAX})) ex_d.r = RES_MAX;
          else                                       ex_d.r = res_t'(grown);
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------- Update
  always_comb begin
    logic       found;
    res_t       best_r;
    dir_t       best_s;
    int         best_k;
    up_d   = ex_d;
    found  = 1'b0;
    best_r = '0;
    best_s = DIR_ZERO;
    best_k = 0;
    if (!ex_d.boundary && !ex_d.defect) begin
      for (int k = 0; k < 6; k++) begin
        if (SLOTS[k] && nbr_ex[k].node != IDX_NONE && !nbr_ex[k].boundary &&
            nbr_ex[k].r >= e_weight[k]) begin
          if (!found || (nbr_ex[k].r - e_weight[k]) > best_r ||
              ((nbr_ex[k].r - e_weight[k]) == best_r && dir_val(nbr_seff[k]) > dir_val(best_s))) begin
            found  = 1'b1;
            best_r = nbr_ex[k].r - e_weight[k];
            best_s = nbr_seff[k];
            best_k = k;
          end
        end
      end
      if (found) begin
        up_d.touch = nbr_ex[best_k].touch;
        up_d.node  = nbr_ex[best_k].node;
        up_d.r     = best_r;
        up_d.s     = best_s;
      end else begin
        up_d.touch = IDX_NONE;
        up_d.node  = IDX_NONE;
        up_d.r     = '0;
        up_d.s     = DIR_ZERO;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= '{touch: IDX_NONE, node: IDX_NONE, r: '0, s: DIR_ZERO, defect: 1'b0, boundary: 1'b1};
    else        state_q <= up_d;
  end

  // a shrinking defect vertex bounds the grow length by its residue
  always_comb begin
    len = LEN_INF;
    if (state_q.defect && !state_q.boundary && state_q.node != IDX_NONE && s_eff == DIR_SHRINK)
      len = len_t'(state_q.r);
  end

  // a pre-matched defect counts the first of its matched edges towards the
  // correction parity (an edge between two defects never crosses the cut)
  always_comb begin
    parity = 1'b0;
    for (int k = 5; k >= 0; k--)
      if (match_v[k]) parity = CUT[k] && state_q.defect;
  end

  assign changed  = up_d != state_q;
  assign state    = state_q;
  assign ex_state = ex_d;

endmodule
