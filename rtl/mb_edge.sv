// Edge processing unit (ePU) of the Micro Blossom accelerator.
//
// One ePU exists per edge e = (v1, v2) of the decoding graph.  Its only
// state is the edge weight w_e, fixed by the WEIGHT parameter; while one end
// is an unloaded vertex of a later round (the fusion boundary) the edge uses
// the reduced weight FUSION_WEIGHT.  From the current states of its two
// vertex PUs it computes, combinationally:
//   tight  t_e = r1 + r2 >= w_e, and the non-volatile tightness towards each
//          end (tight and the far end loaded), for the vPUs' q and empty;
//   match  m_e, an isolated Conflict: m^r (both ends growing defects whose
//          only tight edge is e), m^b (one end a permanent virtual vertex,
//          the other a growing defect whose other tight edges lead only to
//          regular vertices held by it alone), m^f (time edge whose later
//          end is still unloaded, the earlier end a growing defect with no
//          non-volatile tight edge);
//   report a Conflict between two different nodes growing towards each
//          other (effective directions s1 + s2 > 0) over a tight edge, or
//          between a growing node and a boundary vertex; otherwise the
//          largest length the nodes may still grow, (w - r1 - r2)/(s1 + s2)
//          between two nodes, w - r when the far end is a boundary vertex or
//          not yet covered.
//
// Follows the paper: the weight as the only ePU state, the three matching
// conditions Eq. 1-3, the Conflict condition and the local length to grow.
// Own choices: growing into an uncovered vertex also bounds the length (one
// edge per grow), a Conflict with a virtual vertex reports node2 = touch2 =
// all ones, and integer halving of the gap assumes even weights (as with the
// default weight 14).
module mb_edge
  import mb_pkg::*;
#(
  parameter int V1            = 0,       // vertex index of end 1
  parameter int V2            = 1,       // vertex index of end 2
  parameter bit V1_VIRTUAL    = 1'b0,    // end 1 is a permanent virtual vertex
  parameter bit V2_VIRTUAL    = 1'b0,
  parameter bit IS_TIME       = 1'b0,    // time edge, end 2 is the later round
  parameter int WEIGHT        = 14,
  parameter int FUSION_WEIGHT = 2
) (
  input  vstate_t s1,
  input  vstate_t s2,
  input  dir_t    seff1,
  input  dir_t    seff2,
  input  logic    q1,
  input  logic    q2,
  input  logic    empty1,
  input  logic    excl_ok1,     // end 1: all its other edges fine for Eq. 2
  input  logic    excl_ok2,
  output logic    tight,
  output logic    ntight1,      // non-volatile tight, as seen from end 1
  output logic    ntight2,
  output logic    match,
  output res_t    weight,
  output report_t report
);

  localparam idx_t I1 = idx_t'(V1);
  localparam idx_t I2 = idx_t'(V2);

  logic signed [3:0] sum;
  logic [RES_BITS:0] rsum;
  logic c1, c2;             // end covered by a node
  logic mr, mb, mf;

  always_comb begin
    weight = ((s1.boundary && !V1_VIRTUAL) || (s2.boundary && !V2_VIRTUAL)) ?
             res_t'(FUSION_WEIGHT) : res_t'(WEIGHT);
    rsum   = {1'b0, s1.r} + {1'b0, s2.r};
    tight  = rsum >= {1'b0, weight};
    ntight1 = tight && !s2.boundary;
    ntight2 = tight && !s1.boundary;
    c1     = !s1.boundary && s1.node != IDX_NONE;
    c2     = !s2.boundary && s2.node != IDX_NONE;
    sum    = 4'(dir_val(seff1)) + 4'(dir_val(seff2));

    // isolated Conflicts (stored directions)
    mr = tight && s1.defect && q1 && s1.s == DIR_GROW && s2.defect && q2 && s2.s == DIR_GROW;
    mb = 1'b0;
    if (V2_VIRTUAL) mb = tight && s2.boundary && s1.s == DIR_GROW && s1.defect && !s1.boundary && excl_ok1;
    if (V1_VIRTUAL) mb = tight && s1.boundary && s2.s == DIR_GROW && s2.defect && !s2.boundary && excl_ok2;
    mf = 1'b0;
    if (IS_TIME)    mf = tight && s2.boundary && s1.s == DIR_GROW && s1.defect && !s1.boundary && empty1;
    match = mr || mb || mf;

    report        = REPORT_IDLE;
    if (c1 && c2) begin
      if (s1.node != s2.node && sum > 0) begin
        if (tight) begin
          report.conflict = 1'b1;
          report.node1 = s1.node;  report.touch1 = s1.touch;  report.vert1 = I1;
          report.node2 = s2.node;  report.touch2 = s2.touch;  report.vert2 = I2;
        end else if (sum == 2) begin
          report.len = len_t'(({1'b0, weight} - rsum) >> 1);
        end else begin
          report.len = len_t'({1'b0, weight} - rsum);
        end
      end
    end else if (c1 && seff1 == DIR_GROW) begin
      if (s2.boundary && tight) begin
        report.conflict = 1'b1;
        report.node1 = s1.node;  report.touch1 = s1.touch;  report.vert1 = I1;
        report.vert2 = I2;
      end else if (!tight) begin
        report.len = len_t'({1'b0, weight} - rsum);
      end
    end else if (c2 && seff2 == DIR_GROW) begin
      if (s1.boundary && tight) begin
        report.conflict = 1'b1;
        report.node1 = s2.node;  report.touch1 = s2.touch;  report.vert1 = I2;
        report.vert2 = I1;
      end else if (!tight) begin
        report.len = len_t'({1'b0, weight} - rsum);
      end
    end
  end

endmodule
