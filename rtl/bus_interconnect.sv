// bus_interconnect -- address decoder and router for the CPU's data bus.
//
// Every load/store the CPU issues is decoded by address, following the
// published memory map:
//   0x0000_8000 - 0x0000_FFFF  DATA_MEM           -> CPU port of the arbiter
//   0x0100_0000 - 0x0100_00FF  DSP_CONV1D regs    -> AXI-Lite master port 0
//   0x0100_0100 - 0x0100_01FF  DSP_DOT_PRODUCT    -> AXI-Lite master port 1
// Anything else -- including the instruction ROM window, which only the
// fetch port reads, and the reserved window 0x0100_0200 - 0x0100_02FF --
// completes at once with cpu_err = 1 and read data 0 (a choice of this
// design; the paper lists only the three routed regions).
//
// CPU bus (this design's own, a plain request/acknowledge bus that gives
// the CPU the wait states the paper mentions): the CPU raises cpu_req with
// cpu_we, cpu_addr, cpu_wdata and cpu_be and holds them until cpu_ack, a
// one-cycle pulse that carries cpu_rdata and cpu_err. The next request may
// be raised in the cycle after cpu_ack.
//
// Timing: a DATA_MEM access costs 2 cycles (request granted, then the SRAM
// answers) when the arbiter grants the CPU at once, which it always does,
// as the CPU has priority. A register access goes out as one AXI-Lite
// write (AW and W together) or read and costs 3 cycles with the SoC's
// slaves. Unmapped accesses cost 2 cycles. One transaction is in flight at
// a time.
module bus_interconnect
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // CPU data bus
  input  logic        cpu_req,
  input  logic        cpu_we,
  input  logic [31:0] cpu_addr,
  input  logic [31:0] cpu_wdata,
  input  logic [3:0]  cpu_be,
  output logic        cpu_ack,
  output logic [31:0] cpu_rdata,
  output logic        cpu_err,
  // DATA_MEM path (to the arbiter's CPU port)
  output logic        dm_req,
  output logic        dm_we,
  output logic [31:0] dm_addr,
  output logic [31:0] dm_wdata,
  output logic [3:0]  dm_be,
  input  logic        dm_gnt,
  input  logic        dm_done,
  input  logic [31:0] dm_rdata,
  // AXI-Lite master ports: 0 = DSP_CONV1D, 1 = DSP_DOT_PRODUCT
  output axil_req_t   s_req [2],
  input  axil_rsp_t   s_rsp [2]
);

  typedef enum logic [2:0] {S_IDLE, S_DM_WAIT, S_AX_REQ, S_AX_RESP, S_ERR} ic_state_t;
  typedef enum logic [1:0] {R_DMEM, R_CONV, R_DOT, R_NONE} region_t;

  function automatic region_t decode(logic [31:0] a);
    if (a >= DMEM_BASE && a < DMEM_BASE + DMEM_BYTES)      return R_DMEM;
    if (a >= CONV_BASE && a < CONV_BASE + PERIPH_BYTES)    return R_CONV;
    if (a >= DOT_BASE  && a < DOT_BASE  + PERIPH_BYTES)    return R_DOT;
    return R_NONE;
  endfunction

  ic_state_t   state;
  region_t     region;
  logic        sel;          // AXI-Lite port index of the current transaction
  logic        we_q;
  logic [31:0] addr_q, wdata_q;
  logic [3:0]  be_q;
  logic        aw_done, w_done;

  assign region = decode(cpu_addr);

  // DATA_MEM requests go straight through while idle.
  assign dm_req   = (state == S_IDLE) && cpu_req && (region == R_DMEM);
  assign dm_we    = cpu_we;
  assign dm_addr  = cpu_addr;
  assign dm_wdata = cpu_wdata;
  assign dm_be    = cpu_be;

  // AXI-Lite master outputs
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      s_req[p].awvalid = 1'b0;
      s_req[p].awaddr  = addr_q;
      s_req[p].wvalid  = 1'b0;
      s_req[p].wdata   = wdata_q;
      s_req[p].wstrb   = be_q;
      s_req[p].bready  = 1'b0;
      s_req[p].arvalid = 1'b0;
      s_req[p].araddr  = addr_q;
      s_req[p].rready  = 1'b0;
      if (sel == p[0]) begin
        if (state == S_AX_REQ) begin
          s_req[p].awvalid = we_q && !aw_done;
          s_req[p].wvalid  = we_q && !w_done;
          s_req[p].arvalid = !we_q;
        end
        if (state == S_AX_RESP) begin
          s_req[p].bready = we_q;
          s_req[p].rready = !we_q;
        end
      end
    end
  end

  axil_rsp_t rsp;
  assign rsp = s_rsp[sel];

  // Acknowledge to the CPU
  always_comb begin
    cpu_ack   = 1'b0;
    cpu_rdata = '0;
    cpu_err   = 1'b0;
    unique case (state)
      S_DM_WAIT: begin
        cpu_ack   = dm_done;
        cpu_rdata = dm_rdata;
      end
      S_AX_RESP: begin
        if (we_q) begin
          cpu_ack = rsp.bvalid;
          cpu_err = rsp.bvalid && (rsp.bresp != AXI_OKAY);
        end else begin
          cpu_ack   = rsp.rvalid;
          cpu_rdata = rsp.rdata;
          cpu_err   = rsp.rvalid && (rsp.rresp != AXI_OKAY);
        end
      end
      S_ERR: begin
        cpu_ack = 1'b1;
        cpu_err = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sel     <= 1'b0;
      we_q    <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      be_q    <= '0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (cpu_req) begin
          we_q    <= cpu_we;
          addr_q  <= cpu_addr;
          wdata_q <= cpu_wdata;
          be_q    <= cpu_be;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          unique case (region)
            R_DMEM: if (dm_gnt) state <= S_DM_WAIT;
            R_CONV: begin sel <= 1'b0; state <= S_AX_REQ; end
            R_DOT:  begin sel <= 1'b1; state <= S_AX_REQ; end
            default: state <= S_ERR;
          endcase
        end
        S_DM_WAIT: if (dm_done) state <= S_IDLE;
        S_AX_REQ: begin
          if (we_q) begin
            if (rsp.awready) aw_done <= 1'b1;
            if (rsp.wready)  w_done  <= 1'b1;
            if ((aw_done || rsp.awready) && (w_done || rsp.wready)) state <= S_AX_RESP;
          end else if (rsp.arready) begin
            state <= S_AX_RESP;
          end
        end
        S_AX_RESP: if (cpu_ack) state <= S_IDLE;
        S_ERR: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // CPU bus rule: a request stays up, unchanged, until acknowledged.
  a_cpu_hold : assert property (@(posedge clk) disable iff (!rst_n)
      cpu_req && !cpu_ack |=> cpu_req && $stable(cpu_addr) && $stable(cpu_we));

endmodule
