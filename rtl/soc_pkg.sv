// soc_pkg -- constants and types shared by the SoC blocks.
//
// Holds the system address map (32 KB instruction ROM at 0x0000_0000,
// 32 KB data SRAM at 0x0000_8000, two 256-byte accelerator register windows
// at 0x0100_0000 and 0x0100_0100, a reserved window at 0x0100_0200), the
// register offsets of the two accelerators, and the bundles that recur:
//   * the memory master interface (MMI) of an accelerator: request side
//     (REQ, ADDR, WRDATA, WR_EN) and response side (READY, DONE, RDDATA);
//   * an AXI4-Lite port, split into the master-driven and slave-driven halves.
// The address map and register offsets are the published ones; the struct
// packing, the AXI-Lite response codes used and the helper functions are this
// design's own.
package soc_pkg;

  // ---------------------------------------------------------------- address map
  localparam logic [31:0] IMEM_BASE   = 32'h0000_0000;
  localparam int unsigned IMEM_BYTES  = 32 * 1024;
  localparam logic [31:0] DMEM_BASE   = 32'h0000_8000;
  localparam int unsigned DMEM_BYTES  = 32 * 1024;
  localparam logic [31:0] CONV_BASE   = 32'h0100_0000;
  localparam logic [31:0] DOT_BASE    = 32'h0100_0100;
  localparam logic [31:0] RSVD_BASE   = 32'h0100_0200;
  localparam int unsigned PERIPH_BYTES = 256;

  // --------------------------------------------- DSP_CONV1D register offsets
  localparam logic [7:0] CONV_IN_ADDR   = 8'h00;
  localparam logic [7:0] CONV_KERN_ADDR = 8'h04;
  localparam logic [7:0] CONV_OUT_ADDR  = 8'h08;
  localparam logic [7:0] CONV_IN_LEN    = 8'h0C;
  localparam logic [7:0] CONV_KERN_LEN  = 8'h10;
  localparam logic [7:0] CONV_CONTROL   = 8'h14;
  localparam logic [7:0] CONV_STATUS    = 8'h18;
  localparam logic [7:0] CONV_IRQ_CLEAR = 8'h1C;

  // ---------------------------------------- DSP_DOT_PRODUCT register offsets
  localparam logic [7:0] DOT_VA_ADDR   = 8'h00;
  localparam logic [7:0] DOT_VB_ADDR   = 8'h04;
  localparam logic [7:0] DOT_LEN       = 8'h08;
  localparam logic [7:0] DOT_CONTROL   = 8'h0C;
  localparam logic [7:0] DOT_STATUS    = 8'h10;
  localparam logic [7:0] DOT_RESULT_LO = 8'h14;
  localparam logic [7:0] DOT_RESULT_HI = 8'h18;
  localparam logic [7:0] DOT_IRQ_CLEAR = 8'h1C;

  // CONTROL and STATUS bit positions (same in both accelerators)
  localparam int CTRL_START  = 0;
  localparam int CTRL_INT_EN = 1;
  localparam int STAT_DONE   = 0;
  localparam int STAT_ERROR  = 1;

  // ------------------------------------------------- memory master interface
  typedef struct packed {
    logic        req;     // MMI_REQ
    logic        wr_en;   // MMI_WR_EN: 1 write, 0 read
    logic [31:0] addr;    // MMI_ADDR, byte address, word aligned
    logic [31:0] wrdata;  // MMI_WRDATA
  } mmi_req_t;

  typedef struct packed {
    logic        ready;   // MMI_READY: request granted this cycle
    logic        done;    // MMI_DONE: access completed, rddata valid on reads
    logic [31:0] rddata;  // MMI_RDDATA
  } mmi_rsp_t;

  // ------------------------------------------------------------- AXI4-Lite
  typedef logic [1:0] axi_resp_t;
  localparam axi_resp_t AXI_OKAY   = 2'b00;
  localparam axi_resp_t AXI_SLVERR = 2'b10;
  localparam axi_resp_t AXI_DECERR = 2'b11;

  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    axi_resp_t   bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    axi_resp_t   rresp;
  } axil_rsp_t;

  // Merge a write into a 32-bit register under byte strobes.
  function automatic logic [31:0] apply_strb(logic [31:0] old_v, logic [31:0] new_v,
                                             logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++)
      r[8*b +: 8] = strb[b] ? new_v[8*b +: 8] : old_v[8*b +: 8];
    return r;
  endfunction

  // True when [base, base + 4*words) lies inside DATA_MEM and base is word aligned.
  // Zero words is treated as out of range.
  function automatic logic dmem_range_ok(logic [31:0] base, logic [31:0] words);
    logic [33:0] last;
    last = {2'b00, base} + {words, 2'b00} - 34'd1;
    return (base[1:0] == 2'b00) && (words != 32'd0) &&
           (base >= DMEM_BASE) &&
           (last < ({2'b00, DMEM_BASE} + 34'(DMEM_BYTES)));
  endfunction

endpackage
