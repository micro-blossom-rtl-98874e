// Broadcast network: delivers each instruction word to every processing unit.
//
// The 32-bit instruction word from the controller is decoded once into the
// instr_t form and passed through STAGES register levels, so that a large
// fan-out can be split into a registered tree; every PU receives the same
// decoded instruction in the same cycle, STAGES cycles after the controller
// issued it.  Cycles without an instruction carry I_NOP, which the PUs use
// to keep rectifying their state.
//
// Follows the paper: one instruction broadcast to all PUs, which execute it
// synchronously.  Own choices: decoding at the root of the tree and the
// number of register levels (1 by default; the paper's figure shows the
// instruction registered before the Pre-Match and Execute stages of its
// pipeline, which this single-cycle design does not have).
module mb_broadcast
  import mb_pkg::*;
#(
  parameter int STAGES = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  logic [31:0] word,
  output instr_t      instr
);

  localparam instr_t NOP = '{kind: I_NOP, a: '0, b: '0, dir: DIR_ZERO, imm: '0};

  instr_t stage_q [STAGES+1];

  assign stage_q[0] = valid ? decode(word) : NOP;

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) stage_q[i+1] <= NOP;
      else        stage_q[i+1] <= stage_q[i];
    end
  end

  assign instr = stage_q[STAGES];

endmodule
