// Testbench of the AXI4 slave.  The register side is a small model: 32
// 64-bit registers indexed by address bits [7:3], with a write-ready and a
// read-ready that the bench can hold low to stall the slave.  Checked:
// single and burst writes land at consecutive registers with the write ID
// echoed on B; burst reads return consecutive registers with rlast only on
// the last beat and the read ID echoed; a read stays blocked (no rvalid)
// while the register side is not ready; a write beat is not taken while
// the register side is not ready; an unstalled read answers two cycles
// after the address handshake.
module tb_mb_axi4_slave;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        awvalid = 0, wvalid = 0, wlast = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid, rlast;
  logic [22:0] awaddr = '0, araddr = '0;
  logic [3:0]  awid = '0, arid = '0, bid, rid;
  logic [7:0]  awlen = '0, arlen = '0;
  logic [63:0] wdata = '0, rdata;
  logic [1:0]  bresp, rresp;
  logic        reg_wr_valid, reg_rd_valid;
  logic [7:0]  reg_wr_addr, reg_rd_addr;
  logic [63:0] reg_wr_data, reg_rd_data;
  logic        reg_wr_ready = 1'b1, reg_rd_ready = 1'b1;

  logic [63:0] regs [32];
  initial for (int i = 0; i < 32; i++) regs[i] = '0;
  always_ff @(posedge clk) if (reg_wr_valid && reg_wr_ready) regs[reg_wr_addr[7:3]] <= reg_wr_data;
  assign reg_rd_data = regs[reg_rd_addr[7:3]];

  mb_axi4_slave dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [22:0] addr, input logic [3:0] id,
                           input logic [63:0] data [], input string what);
    @(negedge clk); awvalid = 1; awaddr = addr; awid = id; awlen = 8'(data.size() - 1);
    @(posedge clk); while (!awready) @(posedge clk);
    @(negedge clk); awvalid = 0;
    foreach (data[i]) begin
      wvalid = 1; wdata = data[i]; wlast = i == data.size() - 1;
      @(posedge clk); while (!wready) @(posedge clk);
      @(negedge clk);
    end
    wvalid = 0; wlast = 0; bready = 1;
    @(posedge clk); while (!bvalid) @(posedge clk);
    check(bid == id && bresp == 2'b00, {what, ": B echoes the ID with OKAY"});
    @(negedge clk); bready = 0;
  endtask

  task automatic axi_read(input logic [22:0] addr, input logic [3:0] id, input int beats,
                          output logic [63:0] data [], output int lat, input string what);
    data = new[beats];
    @(negedge clk); arvalid = 1; araddr = addr; arid = id; arlen = 8'(beats - 1);
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0; rready = 1;
    lat = 1;
    for (int i = 0; i < beats; i++) begin
      @(posedge clk); while (!rvalid) begin lat++; @(posedge clk); end
      data[i] = rdata;
      check(rid == id && rresp == 2'b00, {what, ": R echoes the ID with OKAY"});
      check(rlast == (i == beats - 1), {what, ": rlast on the last beat only"});
      @(negedge clk);
    end
    rready = 0;
  endtask

  initial begin
    logic [63:0] wd [], rd [];
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // single write, single read
    wd = new[1]; wd[0] = {$urandom, $urandom};
    axi_write(23'h10, 4'd3, wd, "single write");
    check(regs[2] == wd[0], "single write lands at register 2");
    axi_read(23'h10, 4'd9, 1, rd, lat, "single read");
    check(rd[0] == wd[0], "single read returns register 2");
    check(lat == 2, $sformatf("unstalled read answers 2 cycles after AR (got %0d)", lat));

    // three-beat burst write, two-beat burst read
    wd = new[3]; foreach (wd[i]) wd[i] = {$urandom, $urandom};
    axi_write(23'h28, 4'd5, wd, "burst write");
    for (int i = 0; i < 3; i++) check(regs[5 + i] == wd[i], $sformatf("burst beat %0d", i));
    axi_read(23'h30, 4'd12, 2, rd, lat, "burst read");
    check(rd[0] == wd[1] && rd[1] == wd[2], "burst read returns registers 6 and 7");

    // blocking read: the register side holds the answer back for 20 cycles
    fork
      begin
        @(negedge clk); reg_rd_ready = 0;
        repeat (20) begin
          @(negedge clk);
          check(!rvalid, "no read data while the register side is busy");
        end
        reg_rd_ready = 1;
      end
      begin
        @(negedge clk); @(negedge clk);
        axi_read(23'h38, 4'd1, 1, rd, lat, "blocked read");
      end
    join
    check(rd[0] == wd[2], "blocked read returns register 7");
    check(lat >= 15, $sformatf("blocked read waited (latency %0d)", lat));

    // stalled write: the beat is not taken while the register side is busy
    reg_wr_ready = 0;
    fork
      begin
        wd = new[1]; wd[0] = 64'hdead_beef_0123_4567;
        axi_write(23'h40, 4'd7, wd, "stalled write");
      end
      begin
        repeat (10) begin
          @(negedge clk);
          check(!wready, "write beat not taken while the register side is busy");
        end
        check(regs[8] == '0, "stalled write not yet applied");
        reg_wr_ready = 1;
      end
    join
    check(regs[8] == 64'hdead_beef_0123_4567, "stalled write applied once ready");

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
