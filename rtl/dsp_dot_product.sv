// dsp_dot_product -- vector inner-product accelerator (DSP_DOT_PRODUCT).
//
// Computes Result = sum_{j=0}^{L-1} A[j] * B[j] over two arrays of 32-bit
// words in DATA_MEM and leaves the full 64-bit sum in two read-only
// registers, without CPU involvement once started.
//
// Register map (AXI-Lite slave, byte offsets), as published: 0x00
// CONFIG_VA_ADDR, 0x04 CONFIG_VB_ADDR, 0x08 CONFIG_LEN (L), 0x0C CONTROL
// (bit0 Start, bit1 Int_En), 0x10 STATUS (bit0 Done, bit1 Error), 0x14
// RESULT_LO, 0x18 RESULT_HI, 0x1C IRQ_CLEAR (write 1). Unlisted offsets read
// 0 and ignore writes.
//
// Control FSM, with the paper's three states:
//   IDLE     waits for Start; latches the addresses and L, vec_idx = 0,
//            accumulator = 0.
//   DP_LOOP  per element: read A[vec_idx], read B[vec_idx], accumulate the
//            product; 3 cycles per element on a free memory port (sub-phases
//            RD_A, RD_B, MAC).
//   DONE     first cycle: copies the 64-bit accumulator to RESULT_HI/LO, sets
//            STATUS.Done and, if Int_En, the interrupt. Returns to IDLE when
//            the CPU writes IRQ_CLEAR.
// A run therefore takes 3L + 1 cycles from leaving IDLE to Done, the paper's
// figure, when the CPU does not contend for the memory port.
//
// The memory interface and MAC datapath are the same blocks as in the
// convolution unit, as the paper states. Choices of this design: Error is set
// (and nothing is read) when L = 0, a base address is not word aligned or a
// vector does not lie inside DATA_MEM; Start clears itself when the run
// begins; Done stays set after IRQ_CLEAR until the next start; operands are
// signed.
//
// Interface: clk, rst_n (asynchronous, active low), AXI-Lite slave port, MMI
// master port, irq (level).
module dsp_dot_product
  import soc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t axil_req,
  output axil_rsp_t axil_rsp,
  output mmi_req_t  mmi_req,
  input  mmi_rsp_t  mmi_rsp,
  output logic      irq
);

  typedef enum logic [1:0] {IDLE, DP_LOOP, DONE} dot_state_t;
  typedef enum logic [1:0] {PH_RD_A, PH_RD_B, PH_MAC} elem_phase_t;

  // ------------------------------------------------------------ registers
  logic [31:0] cfg_va_addr, cfg_vb_addr, cfg_len;
  logic        ctrl_start, ctrl_int_en;
  logic        stat_done, stat_error;
  logic        irq_pending;
  logic [63:0] result;

  logic        wr_valid, rd_valid;
  logic [7:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_slave u_axil (
    .clk, .rst_n, .axil_req, .axil_rsp,
    .wr_valid, .wr_addr, .wr_data, .wr_strb,
    .rd_valid, .rd_addr, .rd_data
  );

  always_comb begin
    unique case (rd_addr)
      DOT_VA_ADDR:   rd_data = cfg_va_addr;
      DOT_VB_ADDR:   rd_data = cfg_vb_addr;
      DOT_LEN:       rd_data = cfg_len;
      DOT_CONTROL:   rd_data = {30'b0, ctrl_int_en, ctrl_start};
      DOT_STATUS:    rd_data = {30'b0, stat_error, stat_done};
      DOT_RESULT_LO: rd_data = result[31:0];
      DOT_RESULT_HI: rd_data = result[63:32];
      default:       rd_data = '0;
    endcase
  end

  // ------------------------------------------------------------ FSM state
  dot_state_t  state;
  elem_phase_t phase;
  logic [31:0] va_addr, vb_addr, len;
  logic [31:0] vec_idx;
  logic [31:0] a_q;

  logic        cmd_valid, cmd_ready, rsp_valid, mmi_busy;
  logic [31:0] cmd_addr, rsp_rdata;

  mmi_master u_mmi (
    .clk, .rst_n,
    .cmd_valid, .cmd_we(1'b0), .cmd_addr, .cmd_wdata('0), .cmd_ready,
    .rsp_valid, .rsp_rdata, .busy(mmi_busy),
    .mmi_req, .mmi_rsp
  );

  logic        mac_clr, mac_en;
  logic [63:0] mac_acc;
  logic [31:0] mac_res32;   // unused here: the full 64-bit sum is kept

  mac_unit #(.SATURATE(1'b0)) u_mac (
    .clk, .rst_n,
    .clr(mac_clr), .en(mac_en),
    .a(a_q), .b(rsp_rdata),
    .acc(mac_acc), .res32(mac_res32)
  );

  logic cfg_ok;
  assign cfg_ok = dmem_range_ok(cfg_va_addr, cfg_len) && dmem_range_ok(cfg_vb_addr, cfg_len);

  logic irq_clear_wr;
  assign irq_clear_wr = wr_valid && (wr_addr == DOT_IRQ_CLEAR) && wr_strb[0] && wr_data[0];

  always_comb begin
    cmd_valid = 1'b0;
    cmd_addr  = '0;
    mac_clr   = (state == IDLE) && ctrl_start;
    mac_en    = 1'b0;
    if (state == DP_LOOP) begin
      unique case (phase)
        PH_RD_A: begin cmd_valid = 1'b1; cmd_addr = va_addr + (vec_idx << 2); end
        PH_RD_B: begin cmd_valid = 1'b1; cmd_addr = vb_addr + (vec_idx << 2); end
        PH_MAC:  mac_en = rsp_valid;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_va_addr <= '0;
      cfg_vb_addr <= '0;
      cfg_len     <= '0;
      ctrl_start  <= 1'b0;
      ctrl_int_en <= 1'b0;
      stat_done   <= 1'b0;
      stat_error  <= 1'b0;
      irq_pending <= 1'b0;
      result      <= '0;
      state       <= IDLE;
      phase       <= PH_RD_A;
      va_addr     <= '0;
      vb_addr     <= '0;
      len         <= '0;
      vec_idx     <= '0;
      a_q         <= '0;
    end else begin
      if (wr_valid) begin
        unique case (wr_addr)
          DOT_VA_ADDR: cfg_va_addr <= apply_strb(cfg_va_addr, wr_data, wr_strb);
          DOT_VB_ADDR: cfg_vb_addr <= apply_strb(cfg_vb_addr, wr_data, wr_strb);
          DOT_LEN:     cfg_len     <= apply_strb(cfg_len,     wr_data, wr_strb);
          DOT_CONTROL: if (wr_strb[0]) begin
            ctrl_start  <= wr_data[CTRL_START];
            ctrl_int_en <= wr_data[CTRL_INT_EN];
          end
          DOT_IRQ_CLEAR: if (wr_strb[0] && wr_data[0]) irq_pending <= 1'b0;
          default: ;
        endcase
      end

      unique case (state)
        IDLE: if (ctrl_start) begin
          ctrl_start <= 1'b0;
          stat_done  <= 1'b0;
          stat_error <= 1'b0;
          va_addr    <= cfg_va_addr;
          vb_addr    <= cfg_vb_addr;
          len        <= cfg_len;
          vec_idx    <= '0;
          phase      <= PH_RD_A;
          if (cfg_ok) begin
            state <= DP_LOOP;
          end else begin
            stat_error <= 1'b1;
            state      <= DONE;
          end
        end
        DP_LOOP: begin
          unique case (phase)
            PH_RD_A: if (cmd_ready) phase <= PH_RD_B;
            PH_RD_B: begin
              if (rsp_valid) a_q   <= rsp_rdata;
              if (cmd_ready) phase <= PH_MAC;
            end
            PH_MAC: if (rsp_valid) begin
              vec_idx <= vec_idx + 32'd1;
              phase   <= PH_RD_A;
              if (vec_idx + 32'd1 >= len) state <= DONE;
            end
            default: phase <= PH_RD_A;
          endcase
        end
        DONE: begin
          if (!stat_done) begin
            result      <= mac_acc;
            stat_done   <= 1'b1;
            irq_pending <= ctrl_int_en;
          end
          if (irq_clear_wr && stat_done && !mmi_busy) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign irq = irq_pending;

  a_done_only_in_done : assert property (@(posedge clk) disable iff (!rst_n)
      $rose(stat_done) |-> state == DONE);

endmodule
