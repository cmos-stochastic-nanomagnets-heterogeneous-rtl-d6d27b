// axi_master_tasks.svh -- AXI4 master tasks shared by the testbenches.
//
// Included inside a testbench module that declares the AXI signals with the
// names used below (awid ... rready), a clock `clk` and the counters
// `checks` and `failures`. The tasks drive one burst at a time and check
// the slave's responses: BID/RID echo the request ID, BRESP/RRESP are OKAY
// and RLAST is high on exactly the last beat. Inputs are driven #1 after a
// rising edge; handshakes are sampled at the falling edge, when everything
// has settled, and complete at the next rising edge. `axi_stall`
// is the probability (0..100) that the master holds WVALID/RREADY low on a
// given cycle, to exercise back-pressure.
int axi_stall = 0;

task automatic axi_idle();
  awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
  awid = '0; awaddr = '0; awlen = '0; awsize = 3'd2; awburst = 2'b01;
  wdata = '0; wstrb = 4'hF; wlast = 0;
  arid = '0; araddr = '0; arlen = '0; arsize = 3'd2; arburst = 2'b01;
endtask

task automatic axi_write_burst(input logic [19:0] addr, input logic [31:0] data [],
                               input logic [3:0] strb = 4'hF);
  int n;
  logic [3:0] id;
  n = data.size();
  id = 4'($urandom);
  @(posedge clk); #1;
  awid = id; awaddr = addr; awlen = 8'(n - 1); awsize = 3'd2; awburst = 2'b01; awvalid = 1;
  @(negedge clk); while (!awready) @(negedge clk);
  @(posedge clk); #1 awvalid = 0;
  for (int b = 0; b < n; b++) begin
    while (($urandom % 100) < axi_stall) begin wvalid = 0; @(posedge clk); #1; end
    wvalid = 1; wdata = data[b]; wstrb = strb; wlast = (b == n - 1);
    @(negedge clk); while (!wready) @(negedge clk);
    @(posedge clk); #1;
  end
  wvalid = 0; wlast = 0; bready = 1;
  @(negedge clk); while (!bvalid) @(negedge clk);
  checks++;
  if (bid !== id || bresp !== 2'b00) begin
    failures++; $display("FAIL: B response id %0h/%0h resp %0d", bid, id, bresp);
  end
  @(posedge clk); #1 bready = 0;
endtask

task automatic axi_write(input logic [19:0] addr, input logic [31:0] d);
  logic [31:0] one [];
  one = new [1];
  one[0] = d;
  axi_write_burst(addr, one);
endtask

task automatic axi_read_burst(input logic [19:0] addr, input int n, output logic [31:0] data []);
  logic [3:0] id;
  int b;
  data = new [n];
  id = 4'($urandom);
  @(posedge clk); #1;
  arid = id; araddr = addr; arlen = 8'(n - 1); arsize = 3'd2; arburst = 2'b01; arvalid = 1;
  @(negedge clk); while (!arready) @(negedge clk);
  @(posedge clk); #1 arvalid = 0;
  b = 0;
  while (b < n) begin
    rready = (($urandom % 100) >= axi_stall);
    @(negedge clk);
    if (rvalid && rready) begin
      data[b] = rdata;
      checks++;
      if (rid !== id || rresp !== 2'b00 || rlast !== (b == n - 1)) begin
        failures++; $display("FAIL: R beat %0d id %0h/%0h resp %0d last %0b", b, rid, id, rresp, rlast);
      end
      b++;
    end
    @(posedge clk); #1;
  end
  rready = 0;
endtask

task automatic axi_read(input logic [19:0] addr, output logic [31:0] d);
  logic [31:0] one [];
  axi_read_burst(addr, 1, one);
  d = one[0];
endtask
