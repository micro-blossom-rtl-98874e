// AXI4 slave that maps CPU bus transactions onto the controller registers.
//
// 64-bit data, ADDR_BITS-bit byte addresses (the low 8 bits select the
// register), INCR bursts of any length (each beat moves the address by 8;
// a write burst ends on wlast, so awlen is not needed; the burst type is
// not checked), IDs echoed.  One write burst and one read
// burst are handled at a time.  A write beat is passed to the register
// write port and acknowledged once the controller accepts it; a read beat
// waits until the controller can answer it (reading the response blocks
// while an instruction runs), so the CPU sees a blocking read.  Responses
// are always OKAY.
//
// Follows the paper: the CPU reaches the accelerator over a 64-bit AXI4
// bus.  Own choices: everything else (handshake staging, no write strobes,
// register map in mb_controller).
//
// Lint note: rst_n is reported as used both asynchronously and
// synchronously.  The asynchronous use is the flip-flop reset; the other is
// the `disable iff` of the assertions below, which is not logic.
module mb_axi4_slave #(
  parameter int ADDR_BITS = 23,
  parameter int ID_BITS   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write address
  input  logic                 awvalid,
  output logic                 awready,
  input  logic [ADDR_BITS-1:0] awaddr,
  input  logic [ID_BITS-1:0]   awid,
  input  logic [7:0]           awlen,
  // write data
  input  logic                 wvalid,
  output logic                 wready,
  input  logic [63:0]          wdata,
  input  logic                 wlast,
  // write response
  output logic                 bvalid,
  input  logic                 bready,
  output logic [1:0]           bresp,
  output logic [ID_BITS-1:0]   bid,
  // read address
  input  logic                 arvalid,
  output logic                 arready,
  input  logic [ADDR_BITS-1:0] araddr,
  input  logic [ID_BITS-1:0]   arid,
  input  logic [7:0]           arlen,
  // read data
  output logic                 rvalid,
  input  logic                 rready,
  output logic [63:0]          rdata,
  output logic [1:0]           rresp,
  output logic [ID_BITS-1:0]   rid,
  output logic                 rlast,
  // controller register port
  output logic                 reg_wr_valid,
  output logic [7:0]           reg_wr_addr,
  output logic [63:0]          reg_wr_data,
  input  logic                 reg_wr_ready,
  output logic                 reg_rd_valid,
  output logic [7:0]           reg_rd_addr,
  input  logic                 reg_rd_ready,
  input  logic [63:0]          reg_rd_data
);

  typedef enum logic [1:0] {W_ADDR, W_DATA, W_RESP} wstate_t;
  typedef enum logic [1:0] {R_ADDR, R_FETCH, R_DATA} rstate_t;

  wstate_t               ws_q;
  rstate_t               rs_q;
  logic [ADDR_BITS-1:0]  waddr_q, raddr_q;
  logic [7:0]            rleft_q;

  // ------------------------------------------------------------ write path
  assign awready      = ws_q == W_ADDR;
  assign reg_wr_valid = ws_q == W_DATA && wvalid;
  assign reg_wr_addr  = waddr_q[7:0];
  assign reg_wr_data  = wdata;
  assign wready       = ws_q == W_DATA && reg_wr_ready;
  assign bvalid       = ws_q == W_RESP;
  assign bresp        = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q    <= W_ADDR;
      waddr_q <= '0;
      bid     <= '0;
    end else begin
      unique case (ws_q)
        W_ADDR: if (awvalid) begin
          waddr_q <= awaddr;
          bid     <= awid;
          ws_q    <= W_DATA;
        end
        W_DATA: if (wvalid && wready) begin
          waddr_q <= waddr_q + ADDR_BITS'(8);
          if (wlast) ws_q <= W_RESP;
        end
        W_RESP: if (bready) ws_q <= W_ADDR;
        default: ws_q <= W_ADDR;
      endcase
    end
  end

  // ------------------------------------------------------------- read path
  assign arready      = rs_q == R_ADDR;
  assign reg_rd_valid = rs_q == R_FETCH;
  assign reg_rd_addr  = raddr_q[7:0];
  assign rvalid       = rs_q == R_DATA;
  assign rresp        = 2'b00;
  assign rlast        = rleft_q == 8'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_q    <= R_ADDR;
      raddr_q <= '0;
      rleft_q <= '0;
      rid     <= '0;
      rdata   <= '0;
    end else begin
      unique case (rs_q)
        R_ADDR: if (arvalid) begin
          raddr_q <= araddr;
          rleft_q <= arlen;
          rid     <= arid;
          rs_q    <= R_FETCH;
        end
        R_FETCH: if (reg_rd_ready) begin
          rdata <= reg_rd_data;
          rs_q  <= R_DATA;
        end
        R_DATA: if (rready) begin
          if (rleft_q == 8'd0) rs_q <= R_ADDR;
          else begin
            rleft_q <= rleft_q - 8'd1;
            raddr_q <= raddr_q + ADDR_BITS'(8);
            rs_q    <= R_FETCH;
          end
        end
        default: rs_q <= R_ADDR;
      endcase
    end
  end

  // AXI4 rule: a valid response stays valid until it is taken
  assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid);
  assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);

endmodule
