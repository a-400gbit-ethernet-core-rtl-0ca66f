// axil_bfm -- AXI4-Lite master used by the testbenches: write(addr, data) and
// read(addr, data) tasks, one transaction at a time, with a time-out per handshake.
module axil_bfm
  import eth400g_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  int errors = 0;
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data);
    int t = 0;
    @(negedge clk);
    req.awaddr = addr; req.awvalid = 1'b1;
    req.wdata = data; req.wstrb = 4'hf; req.wvalid = 1'b1; req.bready = 1'b1;
    while ((req.awvalid || req.wvalid) && t < 100) begin
      @(posedge clk);
      if (rsp.awready) req.awvalid <= 1'b0;
      if (rsp.wready)  req.wvalid  <= 1'b0;
      t++;
      @(negedge clk);
    end
    while (!rsp.bvalid && t < 100) begin @(negedge clk); t++; end
    @(negedge clk);
    req.bready = 1'b0;
    if (t >= 100) errors++;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data);
    int t = 0;
    @(negedge clk);
    req.araddr = addr; req.arvalid = 1'b1; req.rready = 1'b1;
    while (req.arvalid && t < 100) begin
      @(posedge clk);
      if (rsp.arready) req.arvalid <= 1'b0;
      t++;
      @(negedge clk);
    end
    while (!rsp.rvalid && t < 100) begin @(negedge clk); t++; end
    data = rsp.rdata;
    @(posedge clk);
    @(negedge clk);
    req.rready = 1'b0;
    if (t >= 100) errors++;
  endtask
endmodule
