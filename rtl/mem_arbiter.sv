// mem_arbiter -- fixed-priority arbiter for the single DATA_MEM port.
//
// Requesters are the CPU's data port (via the bus interconnect) and the
// memory master interfaces (MMI) of the accelerators. As the paper states,
// the CPU wins on contention; an accelerator whose request is not granted
// simply waits (its REQ stays high). Among the accelerators, a lower index
// wins (conv1d is master 0 in the SoC), a choice of this design since the
// paper does not rank the two accelerators.
//
// Timing: the grant is combinational (CPU gnt / MMI_READY in the cycle the
// request is presented and wins), and the granted access is presented to the
// SRAM in that same cycle. The SRAM answers one clock later, so DONE and the
// read data go back to the winner of the previous cycle, one cycle after its
// grant. One access per cycle is accepted, so the port is never idle while
// anyone is requesting.
//
// Addresses are byte addresses; the SRAM word index is taken from bits
// [AW+1:2], so anything outside DATA_MEM aliases into it (the accelerators
// range-check their buffers before starting).
//
// Lint note: in the assembled SoC, Verilator reports m_gnt as part of a
// combinational loop (UNOPTFLAT). There is no real loop. m_gnt depends on
// m_req[i].req, and an accelerator's REQ depends only on its own flip-flops
// and on DONE, which comes from the registered grant of the previous cycle
// (m_gnt_q), never on this cycle's READY. The report comes from each MMI
// request and response bundle being a single struct variable, which the
// tool tracks as a whole.
module mem_arbiter
  import soc_pkg::*;
#(
  parameter int unsigned NM = 2,   // number of accelerator memory masters
  parameter int unsigned AW = 13   // SRAM word-address width (8192 words = 32 KB)
) (
  input  logic          clk,
  input  logic          rst_n,
  // CPU data port
  input  logic          cpu_req,
  input  logic          cpu_we,
  input  logic [31:0]   cpu_addr,
  input  logic [31:0]   cpu_wdata,
  input  logic [3:0]    cpu_be,
  output logic          cpu_gnt,
  output logic          cpu_done,
  output logic [31:0]   cpu_rdata,
  // accelerator memory masters
  input  mmi_req_t      m_req [NM],
  output mmi_rsp_t      m_rsp [NM],
  // SRAM port
  output logic          mem_en,
  output logic          mem_we,
  output logic [3:0]    mem_be,
  output logic [AW-1:0] mem_addr,
  output logic [31:0]   mem_wdata,
  input  logic [31:0]   mem_rdata
);

  logic [NM-1:0] m_gnt;
  logic          cpu_gnt_q;
  logic [NM-1:0] m_gnt_q;

  // Fixed priority: CPU, then master 0, 1, ...
  always_comb begin
    logic taken;
    cpu_gnt = cpu_req;
    taken   = cpu_req;
    m_gnt   = '0;
    for (int i = 0; i < NM; i++) begin
      if (!taken && m_req[i].req) begin
        m_gnt[i] = 1'b1;
        taken    = 1'b1;
      end
    end
  end

  // Drive the SRAM with the winner.
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_be    = 4'h0;
    mem_addr  = '0;
    mem_wdata = '0;
    if (cpu_gnt) begin
      mem_en    = 1'b1;
      mem_we    = cpu_we;
      mem_be    = cpu_be;
      mem_addr  = cpu_addr[AW+1:2];
      mem_wdata = cpu_wdata;
    end else begin
      for (int i = 0; i < NM; i++) begin
        if (m_gnt[i]) begin
          mem_en    = 1'b1;
          mem_we    = m_req[i].wr_en;
          mem_be    = 4'hF;
          mem_addr  = m_req[i].addr[AW+1:2];
          mem_wdata = m_req[i].wrdata;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cpu_gnt_q <= 1'b0;
      m_gnt_q   <= '0;
    end else begin
      cpu_gnt_q <= cpu_gnt;
      m_gnt_q   <= m_gnt;
    end
  end

  assign cpu_done  = cpu_gnt_q;
  assign cpu_rdata = mem_rdata;

  always_comb begin
    for (int i = 0; i < NM; i++) begin
      m_rsp[i].ready  = m_gnt[i];
      m_rsp[i].done   = m_gnt_q[i];
      m_rsp[i].rddata = mem_rdata;
    end
  end

  // At most one grant per cycle.
  a_one_grant : assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({cpu_gnt, m_gnt}));

endmodule
