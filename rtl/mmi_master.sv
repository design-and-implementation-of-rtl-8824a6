// mmi_master -- sequencer for an accelerator's memory master interface (MMI).
//
// The accelerator FSM hands it one access at a time on a simple command port
// (cmd_valid/cmd_ready, write enable, address, write data). It drives the
// MMI signals the paper lists: MMI_REQ with MMI_ADDR, MMI_WR_EN and
// MMI_WRDATA; the arbiter answers with MMI_READY in the cycle it grants the
// port and, after the memory's latency, MMI_DONE with MMI_RDDATA. The
// completion is handed back on rsp_valid/rsp_rdata in the same cycle as
// MMI_DONE.
//
// Handshake rules (the paper's read/write sequences, made exact here):
//   * REQ and the request fields are held stable until READY is seen; the
//     cycle in which READY is high is the cycle the request is accepted, so
//     REQ is high for exactly that cycle longer than the wait and then drops.
//   * At most one access is outstanding. A new request may be raised in the
//     same cycle as the DONE of the previous one, so back-to-back accesses
//     to a one-cycle SRAM cost one cycle each.
// cmd_ready is high in the cycle the command is granted (cmd_ready = READY
// while the command is offered), so the FSM can move on in that cycle.
module mmi_master
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command side (accelerator FSM)
  input  logic        cmd_valid,
  input  logic        cmd_we,
  input  logic [31:0] cmd_addr,
  input  logic [31:0] cmd_wdata,
  output logic        cmd_ready,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata,
  output logic        busy,       // an access is outstanding (granted, DONE not yet seen)
  // MMI side (to the arbiter)
  output mmi_req_t    mmi_req,
  input  mmi_rsp_t    mmi_rsp
);

  logic outstanding;
  logic can_issue;

  // A new request may go out when nothing is outstanding or the outstanding
  // access completes in this very cycle.
  assign can_issue = !outstanding || mmi_rsp.done;

  always_comb begin
    mmi_req.req    = cmd_valid && can_issue;
    mmi_req.wr_en  = cmd_we;
    mmi_req.addr   = cmd_addr;
    mmi_req.wrdata = cmd_wdata;
  end

  assign cmd_ready = mmi_req.req && mmi_rsp.ready;
  assign rsp_valid = outstanding && mmi_rsp.done;
  assign rsp_rdata = mmi_rsp.rddata;
  assign busy      = outstanding;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         outstanding <= 1'b0;
    else if (cmd_ready) outstanding <= 1'b1;
    else if (mmi_rsp.done) outstanding <= 1'b0;
  end

  // A request, once raised, stays up with the same fields until granted.
  a_req_hold : assert property (@(posedge clk) disable iff (!rst_n)
      mmi_req.req && !mmi_rsp.ready |=> mmi_req.req);
  a_req_stable : assert property (@(posedge clk) disable iff (!rst_n)
      mmi_req.req && !mmi_rsp.ready |=> $stable(mmi_req.addr) && $stable(mmi_req.wr_en));
  // The arbiter never grants a master that is not requesting.
  a_no_spurious_ready : assert property (@(posedge clk) disable iff (!rst_n)
      mmi_rsp.ready |-> mmi_req.req);

endmodule
