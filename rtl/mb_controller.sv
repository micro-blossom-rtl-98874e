// Controller of the Micro Blossom accelerator.
//
// The CPU reaches the accelerator through a small set of memory-mapped
// 64-bit registers (byte addresses):
//   0x00 W  instruction word [31:0]; accepted only while idle
//   0x08 R  response: [1:0] kind (0 finished: nothing can grow, 1 grow by
//           length [31:16], 2 Conflict, 3 blocked: length 0 from a shrinking
//           node at zero), [47:32] cycles the last instruction took;
//           the read waits (rd_ready low) while an instruction is running
//   0x10 R  Conflict: node1 [14:0], node2 [30:16], touch1 [46:32], touch2 [62:48]
//   0x18 R  Conflict: vertex1 [14:0], vertex2 [30:16]
//   0x20 W  [0] parity of the matchings resolved in software, [1] done:
//           the correction bit is the XOR of this parity and the parity
//           of the pre-matched edges on the logical cut
//   0x28 R  status: [0] busy, [1] pre-match parity, [2] correction valid
// An accepted instruction is issued to the broadcast network; after it has
// reached the PUs the controller keeps the array running on idle cycles
// until no PU state changes (the array is stable), then registers the
// convergecast root as the response.  Each instruction costs
// BCAST_STAGES + 2 cycles plus one cycle per further update step.
//
// Follows the paper: the controller between the CPU and the broadcast /
// convergecast networks, memory-mapped registers, a blocking response read
// and the correction bit output once the matching is final.  Own choices:
// the register map, the response encoding and the settle-until-stable
// handshake; the paper's response buffer for many contexts is not built
// (one context only).
//
// Lint note: rst_n is reported as used both asynchronously and
// synchronously.  The asynchronous use is the flip-flop reset; the other is
// the `disable iff` of the assertions below, which is not logic.
module mb_controller
  import mb_pkg::*;
#(
  parameter int BCAST_STAGES = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // register bus
  input  logic        wr_valid,
  input  logic [7:0]  wr_addr,
  input  logic [63:0] wr_data,
  output logic        wr_ready,
  input  logic        rd_valid,
  input  logic [7:0]  rd_addr,
  output logic        rd_ready,
  output logic [63:0] rd_data,
  // to the broadcast network
  output logic        instr_valid,
  output logic [31:0] instr_word,
  // from the convergecast network
  input  report_t     root,
  // logical correction
  output logic        correction_valid,
  output logic        correction
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SETTLE} state_t;
  typedef enum logic [1:0] {R_FINISHED = 2'd0, R_GROW = 2'd1, R_CONFLICT = 2'd2, R_BLOCKED = 2'd3} rkind_t;

  state_t      st_q;
  logic [3:0]  wait_q;
  logic [15:0] cycles_q;
  rkind_t      kind_q;
  report_t     resp_q;
  logic        busy;

  assign busy     = st_q != S_IDLE;
  assign wr_ready = !(wr_addr == 8'h00 && busy);
  assign rd_ready = !((rd_addr == 8'h08 || rd_addr == 8'h10 || rd_addr == 8'h18) && busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q             <= S_IDLE;
      wait_q           <= '0;
      cycles_q         <= '0;
      kind_q           <= R_FINISHED;
      resp_q           <= REPORT_IDLE;
      instr_valid      <= 1'b0;
      instr_word       <= '0;
      correction_valid <= 1'b0;
      correction       <= 1'b0;
    end else begin
      instr_valid <= 1'b0;
      unique case (st_q)
        S_IDLE: begin
          if (wr_valid && wr_ready && wr_addr == 8'h00) begin
            instr_valid <= 1'b1;
            instr_word  <= wr_data[31:0];
            wait_q      <= 4'(BCAST_STAGES + 1);
            cycles_q    <= 16'd1;
            st_q        <= S_WAIT;
            if (decode(wr_data[31:0]).kind == I_RESET) correction_valid <= 1'b0;
          end
          if (wr_valid && wr_addr == 8'h20) begin
            correction_valid <= wr_data[1];
            correction       <= wr_data[0] ^ root.parity;
          end
        end
        S_WAIT: begin
          cycles_q <= cycles_q + 16'd1;
          wait_q   <= wait_q - 4'd1;
          if (wait_q == 4'd1) st_q <= S_SETTLE;
        end
        S_SETTLE: begin
          if (!root.changed) begin
            resp_q <= root;
            if (root.conflict)          kind_q <= R_CONFLICT;
            else if (root.len == LEN_INF) kind_q <= R_FINISHED;
            else if (root.len == '0)    kind_q <= R_BLOCKED;
            else                        kind_q <= R_GROW;
            st_q <= S_IDLE;
          end else begin
            cycles_q <= cycles_q + 16'd1;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rd_data = '0;
    unique case (rd_addr)
      8'h08: rd_data = {16'd0, cycles_q, 16'(resp_q.len), 14'd0, kind_q};
      8'h10: rd_data = {1'b0, resp_q.touch2, 1'b0, resp_q.touch1, 1'b0, resp_q.node2, 1'b0, resp_q.node1};
      8'h18: rd_data = {33'd0, resp_q.vert2, 1'b0, resp_q.vert1};
      8'h28: rd_data = {61'd0, correction_valid, root.parity, busy};
      default: rd_data = '0;
    endcase
  end

  // an instruction is only ever issued from the idle state
  assert property (@(posedge clk) disable iff (!rst_n) instr_valid |-> $past(st_q) == S_IDLE);

endmodule
