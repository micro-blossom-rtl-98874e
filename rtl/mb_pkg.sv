// Shared types and constants of the Micro Blossom dual-phase accelerator.
//
// The accelerator executes a small instruction set (32-bit words) on one
// processing unit (PU) per vertex and per edge of the decoding graph.  This
// package holds the instruction encoding, its decoded form, the compact
// vertex state exchanged between neighbouring PUs and the report type that
// the convergecast network reduces into one response.
//
// Follows the paper: the instruction word layouts (reset 1001|00, set
// Direction S[31:17] dir[16:15] 0|00, grow l[31:6] 1101|00, set Cover
// C[31:17] S[16:2] 01, find Conflict 0001|00, load Defects custom[31:6]
// 0111|00), 15-bit blossom indices and the compact state fields (unique
// touch, unique node, residue, direction, defect, boundary).
// Own choices: the 2-bit direction code (00 = 0, 01 = +1, 11 = -1), the use
// of the all-ones index as "none", the layer ID in the low bits of the load
// Defects custom field, and the 7-bit residue (with 11-bit touch and 12-bit
// node indices this gives the 34-bit vertex state the paper lists for
// d = 13; here both indices are 15 bits wide, so the state is 41 bits).
package mb_pkg;

  localparam int IDX_BITS = 15;                  // blossom / vertex index field
  localparam int RES_BITS = 7;                   // residue r_v width
  localparam int LEN_BITS = RES_BITS + 1;        // grow length reported by the convergecast

  typedef logic [IDX_BITS-1:0] idx_t;
  typedef logic [RES_BITS-1:0] res_t;
  typedef logic [LEN_BITS-1:0] len_t;

  localparam idx_t IDX_NONE = '1;                // "no touch" / "no node" / virtual
  localparam len_t LEN_INF  = '1;                // no constraint on growth
  localparam res_t RES_MAX  = '1;

  // direction Delta y_S in {0, +1, -1}, two's complement
  typedef enum logic [1:0] {
    DIR_ZERO   = 2'b00,
    DIR_GROW   = 2'b01,
    DIR_SHRINK = 2'b11
  } dir_t;

  // opcode field [5:2] of the instruction word when [1:0] == 2'b00 and [2] == 1
  localparam logic [3:0] OP_FIND  = 4'b0001;
  localparam logic [3:0] OP_LOAD  = 4'b0111;
  localparam logic [3:0] OP_RESET = 4'b1001;
  localparam logic [3:0] OP_GROW  = 4'b1101;

  typedef enum logic [2:0] {
    I_NOP, I_RESET, I_SET_DIR, I_GROW, I_SET_COVER, I_FIND, I_LOAD
  } ikind_t;

  // decoded instruction as broadcast to every PU
  typedef struct packed {
    ikind_t      kind;
    idx_t        a;      // set Direction: S;  set Cover: C
    idx_t        b;      // set Cover: S
    dir_t        dir;    // set Direction: new direction
    logic [25:0] imm;    // grow: length l;  load Defects: layer ID
  } instr_t;

  // compact vertex state (paper Table 2, compact column)
  typedef struct packed {
    idx_t touch;     // unique touch t_v (defect vertex index) or IDX_NONE
    idx_t node;      // unique node n_v (blossom index) or IDX_NONE
    res_t r;         // residue r_v
    dir_t s;         // direction s_v of n_v
    logic defect;    // d_v
    logic boundary;  // b_v: virtual, or not loaded yet
  } vstate_t;

  // one report travelling up the convergecast tree
  typedef struct packed {
    logic conflict;  // a Conflict is reported
    idx_t node1;     // S1 (a real node)
    idx_t node2;     // S2, IDX_NONE when the other side is a virtual vertex
    idx_t touch1;    // t1 with Root(t1) = S1
    idx_t touch2;    // t2, IDX_NONE for a virtual vertex
    idx_t vert1;     // v1: vertex on the S1 side of the tight edge
    idx_t vert2;     // v2: vertex on the other side
    len_t len;       // maximum length to grow, LEN_INF when unconstrained
    logic changed;   // some PU state changed in this cycle (not yet stable)
    logic parity;    // XOR of pre-matched edges crossing the logical cut
  } report_t;

  localparam report_t REPORT_IDLE = '{conflict: 1'b0, node1: IDX_NONE, node2: IDX_NONE,
                                       touch1: IDX_NONE, touch2: IDX_NONE, vert1: IDX_NONE,
                                       vert2: IDX_NONE, len: LEN_INF, changed: 1'b0,
                                       parity: 1'b0};

  // convergecast combine: keep the left conflict if any, minimum length,
  // OR of the change flags, XOR of the parities
  function automatic report_t combine(report_t x, report_t y);
    report_t o;
    o = x.conflict ? x : y;
    o.len     = (x.len < y.len) ? x.len : y.len;
    o.changed = x.changed | y.changed;
    o.parity  = x.parity ^ y.parity;
    return o;
  endfunction

  function automatic instr_t decode(logic [31:0] w);
    instr_t i;
    i = '{kind: I_NOP, a: '0, b: '0, dir: DIR_ZERO, imm: '0};
    if (w[1:0] == 2'b01) begin
      i.kind = I_SET_COVER;
      i.a    = w[31:17];
      i.b    = w[16:2];
    end else if (w[1:0] == 2'b00 && w[2] == 1'b0) begin
      i.kind = I_SET_DIR;
      i.a    = w[31:17];
      i.dir  = dir_t'(w[16:15]);
    end else if (w[1:0] == 2'b00) begin
      i.imm = w[31:6];
      unique case (w[5:2])
        OP_RESET: i.kind = I_RESET;
        OP_GROW:  i.kind = I_GROW;
        OP_FIND:  i.kind = I_FIND;
        OP_LOAD:  i.kind = I_LOAD;
        default:  i.kind = I_NOP;
      endcase
    end
    return i;
  endfunction

  // instruction word builders, used by software models and testbenches
  function automatic logic [31:0] enc_reset();
    return {26'd0, OP_RESET, 2'b00};
  endfunction
  function automatic logic [31:0] enc_set_dir(idx_t s, dir_t d);
    return {s, d, 12'd0, 1'b0, 2'b00};
  endfunction
  function automatic logic [31:0] enc_grow(logic [25:0] l);
    return {l, OP_GROW, 2'b00};
  endfunction
  function automatic logic [31:0] enc_set_cover(idx_t c, idx_t s);
    return {c, s, 2'b01};
  endfunction
  function automatic logic [31:0] enc_find();
    return {26'd0, OP_FIND, 2'b00};
  endfunction
  function automatic logic [31:0] enc_load(logic [25:0] layer);
    return {layer, OP_LOAD, 2'b00};
  endfunction

  function automatic logic signed [2:0] dir_val(dir_t d);
    return 3'(signed'(d));
  endfunction

endpackage
