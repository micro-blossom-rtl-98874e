// Testbench of the controller: the convergecast root is driven by the
// testbench.  Checks the instruction issue (word and one-cycle pulse), the
// blocking of writes and response reads while busy, the wait-until-stable
// handshake and its cycle count (BCAST_STAGES + 2 cycles, plus one per
// unstable cycle), the response encoding of all four kinds, the Conflict
// registers, the status register and the correction bit.
module tb_mb_controller;
  import mb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wr_valid = 0, rd_valid = 0, wr_ready, rd_ready;
  logic [7:0]  wr_addr = 0, rd_addr = 0;
  logic [63:0] wr_data = 0, rd_data;
  logic        instr_valid, correction_valid, correction;
  logic [31:0] instr_word;
  report_t     root;
  int          pulses;
  logic [31:0] last_word;

  mb_controller #(.BCAST_STAGES(1)) dut (.*);

  always_ff @(posedge clk) if (instr_valid) begin pulses <= pulses + 1; last_word <= instr_word; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); wr_valid = 1; wr_addr = a; wr_data = d;
    @(posedge clk); while (!wr_ready) @(posedge clk);
    @(negedge clk); wr_valid = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); rd_valid = 1; rd_addr = a; #1;
    while (!rd_ready) begin @(negedge clk); #1; end
    d = rd_data;
    @(negedge clk); rd_valid = 0;
  endtask

  initial begin
    logic [63:0] d;
    int p0;
    root = REPORT_IDLE; pulses = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // one instruction on a stable array: 3 cycles, finished
    p0 = pulses;
    wr(8'h00, {32'd0, enc_find()});
    rd(8'h08, d);
    check(pulses == p0 + 1 && last_word == enc_find(), "instruction issued once with its word");
    check(d[1:0] == 2'd0, "no length, no Conflict: finished");
    check(d[47:32] == 16'd3, $sformatf("stable array: %0d cycles, expected 3", d[47:32]));
    // unstable for 5 cycles, grow length 9
    root.changed = 1; root.len = len_t'(9);
    wr(8'h00, {32'd0, enc_grow(4)});
    @(negedge clk); #1;
    check(!wr_ready || wr_addr != 8'h00, "busy");
    wr_addr = 8'h00; #1;
    check(!wr_ready, "instruction write blocked while busy");
    rd_addr = 8'h08; #1;
    check(!rd_ready, "response read blocked while busy");
    rd_addr = 8'h28; #1;
    check(rd_ready && rd_data[0], "status shows busy");
    repeat (4) @(negedge clk);
    root.changed = 0;
    rd(8'h08, d);
    check(d[1:0] == 2'd1 && d[31:16] == 16'd9, "grow response with length 9");
    check(d[47:32] == 16'd6, $sformatf("settling: %0d cycles, expected 6 (3 + 3 unstable)", d[47:32]));
    // blocked
    root.len = '0;
    wr(8'h00, {32'd0, enc_find()});
    rd(8'h08, d);
    check(d[1:0] == 2'd3, "length 0: blocked");
    // Conflict
    root.conflict = 1; root.node1 = 15'd11; root.node2 = 15'd22; root.touch1 = 15'd33;
    root.touch2 = 15'd44; root.vert1 = 15'd55; root.vert2 = 15'd66;
    wr(8'h00, {32'd0, enc_find()});
    rd(8'h08, d);
    root = REPORT_IDLE;
    check(d[1:0] == 2'd2, "Conflict response");
    rd(8'h10, d);
    check(d[14:0] == 11 && d[30:16] == 22 && d[46:32] == 33 && d[62:48] == 44, "Conflict nodes and touches");
    rd(8'h18, d);
    check(d[14:0] == 55 && d[30:16] == 66, "Conflict vertices");
    // correction = software parity XOR pre-match parity
    root.parity = 1;
    wr(8'h20, 64'b11);
    check(correction_valid && correction == 1'b0, "correction 1 ^ 1");
    wr(8'h20, 64'b10);
    check(correction_valid && correction == 1'b1, "correction 0 ^ 1");
    rd(8'h28, d);
    check(d[2:1] == 2'b11 && !d[0], "status: valid, parity, idle");
    wr(8'h00, {32'd0, enc_reset()});
    rd(8'h08, d);
    check(!correction_valid, "reset clears the correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
