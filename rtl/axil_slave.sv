// axil_slave -- AXI4-Lite slave front end of an accelerator's register space.
//
// The paper gives each accelerator an AXI-Lite slave interface through which
// the CPU reaches its 32-bit registers, but does not describe the interface
// itself. This is the simplest one that obeys AXI4-Lite: one write and one
// read in flight at most, 32-bit data, byte strobes passed on.
//
// Write: AWREADY and WREADY are raised together, in the cycle that both
// AWVALID and WVALID are present and no write response is pending. That
// cycle produces a one-cycle wr_valid strobe with wr_addr/wr_data/wr_strb
// for the register block; BVALID (OKAY) follows in the next cycle and stays
// until BREADY.
// Read: ARREADY is high while no read response is pending. In the accepting
// cycle rd_addr is presented and the register block returns rd_data
// combinationally; it is registered and sent as RVALID (OKAY) the next cycle,
// held until RREADY. rd_valid marks the accepting cycle so a register block
// can act on reads with side effects (none of the SoC's registers have any).
// Only the low 8 address bits (the offset in a 256-byte window) are passed on.
module axil_slave
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axil_req,
  output axil_rsp_t   axil_rsp,
  // register side
  output logic        wr_valid,
  output logic [7:0]  wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  output logic        rd_valid,
  output logic [7:0]  rd_addr,
  input  logic [31:0] rd_data
);

  logic        bvalid_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        wr_accept;
  logic        rd_accept;

  assign wr_accept = axil_req.awvalid && axil_req.wvalid && !bvalid_q;
  assign rd_accept = axil_req.arvalid && !rvalid_q;

  assign wr_valid = wr_accept;
  assign wr_addr  = axil_req.awaddr[7:0];
  assign wr_data  = axil_req.wdata;
  assign wr_strb  = axil_req.wstrb;
  assign rd_valid = rd_accept;
  assign rd_addr  = axil_req.araddr[7:0];

  always_comb begin
    axil_rsp.awready = wr_accept;
    axil_rsp.wready  = wr_accept;
    axil_rsp.bvalid  = bvalid_q;
    axil_rsp.bresp   = AXI_OKAY;
    axil_rsp.arready = !rvalid_q;
    axil_rsp.rvalid  = rvalid_q;
    axil_rsp.rdata   = rdata_q;
    axil_rsp.rresp   = AXI_OKAY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (wr_accept)                      bvalid_q <= 1'b1;
      else if (axil_req.bready)           bvalid_q <= 1'b0;
      if (rd_accept) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
      end else if (axil_req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  // AXI rules on the master side: a VALID stays up, with the same payload,
  // until it is accepted.
  a_aw_hold : assert property (@(posedge clk) disable iff (!rst_n)
      axil_req.awvalid && !axil_rsp.awready |=> axil_req.awvalid && $stable(axil_req.awaddr));
  a_w_hold : assert property (@(posedge clk) disable iff (!rst_n)
      axil_req.wvalid && !axil_rsp.wready |=> axil_req.wvalid && $stable(axil_req.wdata));
  a_ar_hold : assert property (@(posedge clk) disable iff (!rst_n)
      axil_req.arvalid && !axil_rsp.arready |=> axil_req.arvalid && $stable(axil_req.araddr));
  // ... and on the slave side: a response stays up until it is taken.
  a_b_hold : assert property (@(posedge clk) disable iff (!rst_n)
      axil_rsp.bvalid && !axil_req.bready |=> axil_rsp.bvalid);
  a_r_hold : assert property (@(posedge clk) disable iff (!rst_n)
      axil_rsp.rvalid && !axil_req.rready |=> axil_rsp.rvalid && $stable(axil_rsp.rdata));

endmodule
