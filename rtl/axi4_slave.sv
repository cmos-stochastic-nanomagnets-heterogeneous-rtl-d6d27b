// axi4_slave -- AXI4 memory-mapped slave front end of the register bank and
// sample memory.
//
// The host is the AXI master. This slave accepts 32-bit INCR bursts of up to
// 256 beats on both the write and the read side (AxLEN is honoured, AxSIZE
// must be 2, AxBURST is treated as INCR) and turns every beat into one access
// of a simple register bus:
//   write: reg_we is high for one cycle per accepted W beat, with reg_waddr,
//          reg_wdata and reg_wstrb; one B response (OKAY) ends the burst.
//   read:  reg_re is high for one cycle per beat with reg_raddr; the bank
//          returns reg_rdata on the next cycle, which is registered onto R.
// Timing: a write burst of L beats takes L+2 cycles with W streaming; a read
// burst delivers one beat every two cycles. Writes and reads run
// independently. Only what the host link needs is implemented: no narrow or
// unaligned transfers, no WRAP/FIXED bursts, no exclusive access, responses
// are always OKAY. The assertions check the master's side of the handshake
// rules (a VALID may not drop, nor its payload change, before READY).
module axi4_slave #(
  parameter int ADDR_W = 20,
  parameter int ID_W   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // write address
  input  logic [ID_W-1:0]   s_axi_awid,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic [7:0]        s_axi_awlen,
  input  logic [2:0]        s_axi_awsize,
  input  logic [1:0]        s_axi_awburst,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  // write data
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wlast,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  // write response
  output logic [ID_W-1:0]   s_axi_bid,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  // read address
  input  logic [ID_W-1:0]   s_axi_arid,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic [7:0]        s_axi_arlen,
  input  logic [2:0]        s_axi_arsize,
  input  logic [1:0]        s_axi_arburst,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  // read data
  output logic [ID_W-1:0]   s_axi_rid,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rlast,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // register bus
  output logic              reg_we,
  output logic [ADDR_W-1:0] reg_waddr,
  output logic [31:0]       reg_wdata,
  output logic [3:0]        reg_wstrb,
  output logic              reg_re,
  output logic [ADDR_W-1:0] reg_raddr,
  input  logic [31:0]       reg_rdata
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [1:0] {W_ADDR, W_DATA, W_RESP} wstate_e;
  typedef enum logic [1:0] {R_ADDR, R_FETCH, R_WAIT, R_DATA} rstate_e;

  wstate_e           wst;
  rstate_e           rd_st;
  logic [ADDR_W-1:0] waddr, raddr;
  logic [7:0]        rlen, rbeat;

  // ---------------- write side ----------------
  always_comb begin
    s_axi_awready = (wst == W_ADDR);
    s_axi_wready  = (wst == W_DATA);
    s_axi_bvalid  = (wst == W_RESP);
    s_axi_bresp   = 2'b00;
    reg_we        = s_axi_wvalid && s_axi_wready;
    reg_waddr     = waddr;
    reg_wdata     = s_axi_wdata;
    reg_wstrb     = s_axi_wstrb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst       <= W_ADDR;
      waddr     <= '0;
      s_axi_bid <= '0;
    end else begin
      case (wst)
        W_ADDR: if (s_axi_awvalid) begin
          waddr     <= {s_axi_awaddr[ADDR_W-1:2], 2'b00};
          s_axi_bid <= s_axi_awid;
          wst       <= W_DATA;
        end
        W_DATA: if (s_axi_wvalid) begin
          waddr <= waddr + ADDR_W'(4);
          if (s_axi_wlast) wst <= W_RESP;
        end
        default: if (s_axi_bready) wst <= W_ADDR;
      endcase
    end
  end

  // ---------------- read side ----------------
  always_comb begin
    s_axi_arready = (rd_st == R_ADDR);
    s_axi_rvalid  = (rd_st == R_DATA);
    s_axi_rresp   = 2'b00;
    s_axi_rlast   = (rbeat == rlen);
    reg_re        = (rd_st == R_FETCH);
    reg_raddr     = raddr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_st         <= R_ADDR;
      raddr       <= '0;
      rlen        <= '0;
      rbeat       <= '0;
      s_axi_rid   <= '0;
      s_axi_rdata <= '0;
    end else begin
      case (rd_st)
        R_ADDR: if (s_axi_arvalid) begin
          raddr     <= {s_axi_araddr[ADDR_W-1:2], 2'b00};
          rlen      <= s_axi_arlen;
          rbeat     <= '0;
          s_axi_rid <= s_axi_arid;
          rd_st       <= R_FETCH;
        end
        R_FETCH: rd_st <= R_WAIT;
        R_WAIT: begin
          s_axi_rdata <= reg_rdata;
          rd_st         <= R_DATA;
        end
        default: if (s_axi_rready) begin
          if (rbeat == rlen) rd_st <= R_ADDR;
          else begin
            rbeat <= rbeat + 1'b1;
            raddr <= raddr + ADDR_W'(4);
            rd_st   <= R_FETCH;
          end
        end
      endcase
    end
  end

  // ---------------- handshake rules of the master ----------------
  logic              aw_wait, ar_wait, w_wait;
  logic [ADDR_W-1:0] aw_addr_q, ar_addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_wait <= 1'b0; ar_wait <= 1'b0; w_wait <= 1'b0;
      aw_addr_q <= '0; ar_addr_q <= '0;
    end else begin
      aw_wait   <= s_axi_awvalid && !s_axi_awready;
      ar_wait   <= s_axi_arvalid && !s_axi_arready;
      w_wait    <= s_axi_wvalid && !s_axi_wready;
      aw_addr_q <= s_axi_awaddr;
      ar_addr_q <= s_axi_araddr;
      if (aw_wait) assert (s_axi_awvalid && s_axi_awaddr == aw_addr_q)
        else $error("AXI: AWVALID dropped or AWADDR changed before AWREADY");
      if (ar_wait) assert (s_axi_arvalid && s_axi_araddr == ar_addr_q)
        else $error("AXI: ARVALID dropped or ARADDR changed before ARREADY");
      if (w_wait) assert (s_axi_wvalid)
        else $error("AXI: WVALID dropped before WREADY");
      if (s_axi_awvalid && s_axi_awready) assert (s_axi_awsize == 3'd2)
        else $error("AXI: only 32-bit write beats are supported");
      if (s_axi_arvalid && s_axi_arready) assert (s_axi_arsize == 3'd2)
        else $error("AXI: only 32-bit read beats are supported");
    end
  end

  // AxBURST is accepted but every burst is handled as INCR.
  logic unused_burst;
  always_comb unused_burst = ^{s_axi_awburst, s_axi_arburst, s_axi_awlen};
endmodule
