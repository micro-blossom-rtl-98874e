// Testbench of the broadcast network: every instruction of the set is sent
// as a 32-bit word and must come out decoded, with its fields, exactly
// STAGES = 2 cycles later; idle cycles must come out as I_NOP.
module tb_mb_broadcast;
  import mb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic valid = 1'b0;
  logic [31:0] word = '0;
  instr_t instr;

  mb_broadcast #(.STAGES(2)) dut (.clk, .rst_n, .valid, .word, .instr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [31:0] w, input ikind_t k, input idx_t a, input idx_t b,
                      input dir_t d, input int imm, input string what);
    @(negedge clk); valid = 1'b1; word = w;
    @(negedge clk); valid = 1'b0;
    check(instr.kind == I_NOP, {what, ": not out after one cycle"});
    @(negedge clk);
    check(instr.kind == k && instr.a == a && instr.b == b && instr.dir == d && instr.imm == 26'(imm),
          {what, ": decoded after two cycles"});
    @(negedge clk);
    check(instr.kind == I_NOP, {what, ": one cycle only"});
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // word layouts written out bit by bit from the instruction table
    send(32'b0000_0000_0000_0000_0000_0000_0010_0100, I_RESET, 0, 0, DIR_ZERO, 0, "reset");
    send({15'd1234, 2'b11, 12'd0, 1'b0, 2'b00}, I_SET_DIR, 1234, 0, DIR_SHRINK, 0, "set Direction");
    send({26'd77, 4'b1101, 2'b00}, I_GROW, 0, 0, DIR_ZERO, 77, "grow");
    send({15'd300, 15'd4000, 2'b01}, I_SET_COVER, 300, 4000, DIR_ZERO, 0, "set Cover");
    send({26'd0, 4'b0001, 2'b00}, I_FIND, 0, 0, DIR_ZERO, 0, "find Conflict");
    send({26'd5, 4'b0111, 2'b00}, I_LOAD, 0, 0, DIR_ZERO, 5, "load Defects");
    check(enc_grow(77) == {26'd77, 4'b1101, 2'b00}, "grow encoder");
    check(enc_set_cover(300, 4000) == {15'd300, 15'd4000, 2'b01}, "set Cover encoder");
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
