// soc_top -- RISC-V edge SoC with 1D-convolution and dot-product accelerators.
//
// Everything of the SoC except the RV32I processor itself: the 32 KB
// instruction ROM, the 32 KB data SRAM, the bus interconnect that decodes the
// CPU's loads and stores, the fixed-priority arbiter that shares the single
// SRAM port between the CPU and the two accelerators, and the accelerators
// DSP_CONV1D and DSP_DOT_PRODUCT with their AXI-Lite register slaves and
// memory master interfaces. The processor attaches through two plain ports:
//   * instruction fetch: imem_en/imem_addr, imem_rdata one clock later;
//   * data bus: cpu_req/we/addr/wdata/be held until the one-cycle cpu_ack,
//     which carries cpu_rdata and cpu_err (see bus_interconnect).
// The two accelerator interrupt lines come out as irq_conv and irq_dot
// (level, high until the CPU writes the unit's IRQ_CLEAR).
//
// Structure (as in the paper's system overview):
//
//   fetch ----------------------------------------> inst_mem (ROM)
//   CPU data bus -> bus_interconnect -+-> mem_arbiter (CPU port) -> data_mem
//                                     +-AXI-Lite-> dsp_conv1d ------MMI 0--^
//                                     +-AXI-Lite-> dsp_dot_product -MMI 1--^
//
// Clock and reset: one clock; rst_n is asynchronous and active low. The
// memories' contents are not reset.
//
// Lint notes. Verilator reports a circular combinational path through the
// arbiter's grant (UNOPTFLAT). It is not a real loop: MMI_READY depends on
// MMI_REQ, but MMI_REQ depends only on registered state and on MMI_DONE,
// which is a flip-flop output; the report comes from each request/response
// bundle being one variable. It also notes that rst_n feeds both flip-flops
// and the `disable iff` of the protocol assertions (SYNCASYNCNET), which is
// intended.
module soc_top
  import soc_pkg::*;
#(
  parameter string IMEM_INIT     = "",    // $readmemh image for the ROM
  parameter bit    CONV_SATURATE = 1'b0   // conv1d output narrowing: 0 truncate, 1 saturate
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction fetch port
  input  logic        imem_en,
  input  logic [31:0] imem_addr,
  output logic [31:0] imem_rdata,
  // CPU data bus
  input  logic        cpu_req,
  input  logic        cpu_we,
  input  logic [31:0] cpu_addr,
  input  logic [31:0] cpu_wdata,
  input  logic [3:0]  cpu_be,
  output logic        cpu_ack,
  output logic [31:0] cpu_rdata,
  output logic        cpu_err,
  // interrupts to the CPU
  output logic        irq_conv,
  output logic        irq_dot
);

  localparam int unsigned DMEM_WORDS = DMEM_BYTES / 4;
  localparam int unsigned DMEM_AW    = $clog2(DMEM_WORDS);

  // ---------------------------------------------------------- instruction ROM
  inst_mem #(.DEPTH(IMEM_BYTES / 4), .INIT_FILE(IMEM_INIT)) u_inst_mem (
    .clk, .en(imem_en), .addr(imem_addr), .rdata(imem_rdata)
  );

  // ---------------------------------------------------------- interconnect
  logic        dm_req, dm_we, dm_gnt, dm_done;
  logic [31:0] dm_addr, dm_wdata, dm_rdata;
  logic [3:0]  dm_be;
  axil_req_t   axil_req [2];
  axil_rsp_t   axil_rsp [2];

  bus_interconnect u_bus (
    .clk, .rst_n,
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_be,
    .cpu_ack, .cpu_rdata, .cpu_err,
    .dm_req, .dm_we, .dm_addr, .dm_wdata, .dm_be,
    .dm_gnt, .dm_done, .dm_rdata,
    .s_req(axil_req), .s_rsp(axil_rsp)
  );

  // ---------------------------------------------------------- accelerators
  mmi_req_t mmi_req [2];
  mmi_rsp_t mmi_rsp [2];

  dsp_conv1d #(.SATURATE(CONV_SATURATE)) u_conv (
    .clk, .rst_n,
    .axil_req(axil_req[0]), .axil_rsp(axil_rsp[0]),
    .mmi_req(mmi_req[0]),   .mmi_rsp(mmi_rsp[0]),
    .irq(irq_conv)
  );

  dsp_dot_product u_dot (
    .clk, .rst_n,
    .axil_req(axil_req[1]), .axil_rsp(axil_rsp[1]),
    .mmi_req(mmi_req[1]),   .mmi_rsp(mmi_rsp[1]),
    .irq(irq_dot)
  );

  // ---------------------------------------------------------- data memory
  logic                mem_en, mem_we;
  logic [3:0]          mem_be;
  logic [DMEM_AW-1:0]  mem_addr;
  logic [31:0]         mem_wdata, mem_rdata;

  mem_arbiter #(.NM(2), .AW(DMEM_AW)) u_arb (
    .clk, .rst_n,
    .cpu_req(dm_req), .cpu_we(dm_we), .cpu_addr(dm_addr), .cpu_wdata(dm_wdata),
    .cpu_be(dm_be), .cpu_gnt(dm_gnt), .cpu_done(dm_done), .cpu_rdata(dm_rdata),
    .m_req(mmi_req), .m_rsp(mmi_rsp),
    .mem_en, .mem_we, .mem_be, .mem_addr, .mem_wdata, .mem_rdata
  );

  data_mem #(.DEPTH(DMEM_WORDS)) u_data_mem (
    .clk, .en(mem_en), .we(mem_we), .be(mem_be), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

endmodule
