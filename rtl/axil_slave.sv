// axil_slave -- AXI4-Lite slave front end that turns bus transactions into a simple
// register port.
//
// A write is taken once both its address and its data have arrived (in either order);
// it then appears for one cycle as wr_en with wr_addr/wr_data/wr_strb, and the OKAY
// response is raised the cycle after. A read raises rd_en with rd_addr for one cycle;
// the register logic must present rd_data on the next cycle, which is returned on R.
// One transaction of each kind is in flight at a time. Reads and writes are handled
// independently. The control bus is described only as "AXI4"; using the Lite subset
// and this one-cycle register port are choices of this design.
module axil_slave
  import eth400g_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic        wr_en,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  output logic        rd_en,
  output logic [31:0] rd_addr,
  input  logic [31:0] rd_data
);
  logic        aw_have, w_have, bvalid_q;
  logic [31:0] awaddr_q, wdata_q;
  logic [3:0]  wstrb_q;
  logic        rd_pend, rd_wait, rvalid_q;
  logic [31:0] rdata_q;

  wire aw_take = req.awvalid && !aw_have && !bvalid_q;
  wire w_take  = req.wvalid  && !w_have  && !bvalid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 1'b0; w_have <= 1'b0; bvalid_q <= 1'b0;
      awaddr_q <= '0; wdata_q <= '0; wstrb_q <= '0;
    end else begin
      if (aw_take) begin aw_have <= 1'b1; awaddr_q <= req.awaddr; end
      if (w_take)  begin w_have <= 1'b1; wdata_q <= req.wdata; wstrb_q <= req.wstrb; end
      if (wr_en) begin aw_have <= 1'b0; w_have <= 1'b0; bvalid_q <= 1'b1; end
      if (bvalid_q && req.bready) bvalid_q <= 1'b0;
    end
  end

  assign wr_en   = aw_have && w_have && !bvalid_q;
  assign wr_addr = awaddr_q;
  assign wr_data = wdata_q;
  assign wr_strb = wstrb_q;

  wire ar_take = req.arvalid && !rd_pend && !rd_wait && !rvalid_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0; rd_wait <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0; rd_addr <= '0;
    end else begin
      rd_pend <= ar_take;
      rd_wait <= rd_pend;
      if (ar_take) rd_addr <= req.araddr;
      if (rd_wait) begin rvalid_q <= 1'b1; rdata_q <= rd_data; end
      else if (rvalid_q && req.rready) rvalid_q <= 1'b0;
    end
  end
  assign rd_en = rd_pend;

  always_comb begin
    rsp         = '0;
    rsp.awready = aw_take;
    rsp.wready  = w_take;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = 2'b00;
    rsp.arready = ar_take;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = 2'b00;
  end
endmodule
