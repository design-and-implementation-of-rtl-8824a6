// dsp_conv1d -- 1D convolution accelerator (DSP_CONV1D).
//
// Computes y[i] = sum_{j=0}^{K-1} x[i+j] * h[j] for i = 0 .. N-K, with x, h
// and y arrays of 32-bit words in DATA_MEM, entirely on its own once the CPU
// has written the configuration registers and set CONTROL.Start.
//
// Register map (AXI-Lite slave, byte offsets in its 256-byte window), as
// published: 0x00 CONFIG_IN_ADDR, 0x04 CONFIG_KERN_ADDR, 0x08 CONFIG_OUT_ADDR,
// 0x0C CONFIG_IN_LEN (N), 0x10 CONFIG_KERN_LEN (K), 0x14 CONTROL (bit0 Start,
// bit1 Int_En), 0x18 STATUS (bit0 Done, bit1 Error, read only), 0x1C IRQ_CLEAR
// (write 1). Unlisted offsets read 0 and ignore writes.
//
// Control FSM, with the paper's five states:
//   IDLE        waits for Start; latches the five configuration registers,
//               clears Done/Error, sets out_idx = 0.
//   INIT_OUT    clears the 64-bit accumulator, kern_idx = 0 (1 cycle).
//   KERNEL_LOOP per tap: read x[out_idx+kern_idx], read h[kern_idx], then
//               accumulate their product; 3 cycles per tap when the memory
//               port is free (sub-phases RD_X, RD_H, MAC).
//   OUT_WRITE   writes the narrowed accumulator to y[out_idx]; the write is
//               taken as acknowledged when the arbiter grants it (1 cycle).
//               Then the next output, or DONE after the last one.
//   DONE        sets STATUS.Done (and the interrupt if Int_En); returns to
//               IDLE when the CPU writes IRQ_CLEAR.
// Per output sample this costs 3K + 2 cycles on an uncontended port, against
// the paper's estimate of about 3K + 1; a whole run costs (N-K+1)(3K+2) + 1
// cycles from leaving IDLE to Done. If the CPU takes the port, the
// accelerator waits (CPU priority in the arbiter).
//
// Choices of this design where the paper is silent: STATUS.Error is set, and
// no memory is touched, when K = 0, K > N, a base address is not word
// aligned, or one of the three arrays does not lie inside DATA_MEM.
// CONTROL.Start is cleared by hardware when the run starts, so it reads 1
// only while a start is pending. STATUS.Done stays set after IRQ_CLEAR until
// the next start (the paper's usage flow); IRQ_CLEAR is also what returns
// the FSM from DONE to IDLE (the paper's FSM description). Operands are
// signed; the narrowing is truncation unless SATURATE is set.
//
// Interface: clk, rst_n (asynchronous, active low), AXI-Lite slave port,
// MMI master port to the DATA_MEM arbiter, irq (level, high while an
// interrupt is pending and not cleared).
module dsp_conv1d
  import soc_pkg::*;
#(
  parameter bit SATURATE = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t axil_req,
  output axil_rsp_t axil_rsp,
  output mmi_req_t  mmi_req,
  input  mmi_rsp_t  mmi_rsp,
  output logic      irq
);

  typedef enum logic [2:0] {IDLE, INIT_OUT, KERNEL_LOOP, OUT_WRITE, DONE} conv_state_t;
  typedef enum logic [1:0] {PH_RD_X, PH_RD_H, PH_MAC} tap_phase_t;

  // ------------------------------------------------------------ registers
  logic [31:0] cfg_in_addr, cfg_kern_addr, cfg_out_addr, cfg_in_len, cfg_kern_len;
  logic        ctrl_start, ctrl_int_en;
  logic        stat_done, stat_error;
  logic        irq_pending;

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
      CONV_IN_ADDR:   rd_data = cfg_in_addr;
      CONV_KERN_ADDR: rd_data = cfg_kern_addr;
      CONV_OUT_ADDR:  rd_data = cfg_out_addr;
      CONV_IN_LEN:    rd_data = cfg_in_len;
      CONV_KERN_LEN:  rd_data = cfg_kern_len;
      CONV_CONTROL:   rd_data = {30'b0, ctrl_int_en, ctrl_start};
      CONV_STATUS:    rd_data = {30'b0, stat_error, stat_done};
      default:        rd_data = '0;
    endcase
  end

  // ------------------------------------------------------------ FSM state
  conv_state_t state;
  tap_phase_t  phase;
  logic [31:0] in_addr, kern_addr, out_addr, k_len, n_out;
  logic [31:0] out_idx, kern_idx;
  logic [31:0] x_q;

  // memory master
  logic        cmd_valid, cmd_we, cmd_ready, rsp_valid, mmi_busy;
  logic [31:0] cmd_addr, cmd_wdata, rsp_rdata;

  mmi_master u_mmi (
    .clk, .rst_n,
    .cmd_valid, .cmd_we, .cmd_addr, .cmd_wdata, .cmd_ready,
    .rsp_valid, .rsp_rdata, .busy(mmi_busy),
    .mmi_req, .mmi_rsp
  );

  // MAC datapath
  logic        mac_clr, mac_en;
  logic [63:0] mac_acc;
  logic [31:0] mac_res32;

  mac_unit #(.SATURATE(SATURATE)) u_mac (
    .clk, .rst_n,
    .clr(mac_clr), .en(mac_en),
    .a(x_q), .b(rsp_rdata),
    .acc(mac_acc), .res32(mac_res32)
  );

  // Configuration check made when Start is seen.
  logic cfg_ok;
  always_comb begin
    cfg_ok = (cfg_kern_len != 32'd0) && (cfg_kern_len <= cfg_in_len) &&
             dmem_range_ok(cfg_in_addr,   cfg_in_len) &&
             dmem_range_ok(cfg_kern_addr, cfg_kern_len) &&
             dmem_range_ok(cfg_out_addr,  cfg_in_len - cfg_kern_len + 32'd1);
  end

  logic irq_clear_wr;
  assign irq_clear_wr = wr_valid && (wr_addr == CONV_IRQ_CLEAR) && wr_strb[0] && wr_data[0];

  // Memory commands and MAC control
  always_comb begin
    cmd_valid = 1'b0;
    cmd_we    = 1'b0;
    cmd_addr  = '0;
    cmd_wdata = mac_res32;
    mac_clr   = 1'b0;
    mac_en    = 1'b0;
    unique case (state)
      INIT_OUT: mac_clr = 1'b1;
      KERNEL_LOOP: begin
        unique case (phase)
          PH_RD_X: begin
            cmd_valid = 1'b1;
            cmd_addr  = in_addr + ((out_idx + kern_idx) << 2);
          end
          PH_RD_H: begin
            cmd_valid = 1'b1;
            cmd_addr  = kern_addr + (kern_idx << 2);
          end
          PH_MAC: mac_en = rsp_valid;
          default: ;
        endcase
      end
      OUT_WRITE: begin
        cmd_valid = 1'b1;
        cmd_we    = 1'b1;
        cmd_addr  = out_addr + (out_idx << 2);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_in_addr   <= '0;
      cfg_kern_addr <= '0;
      cfg_out_addr  <= '0;
      cfg_in_len    <= '0;
      cfg_kern_len  <= '0;
      ctrl_start    <= 1'b0;
      ctrl_int_en   <= 1'b0;
      stat_done     <= 1'b0;
      stat_error    <= 1'b0;
      irq_pending   <= 1'b0;
      state         <= IDLE;
      phase         <= PH_RD_X;
      in_addr       <= '0;
      kern_addr     <= '0;
      out_addr      <= '0;
      k_len         <= '0;
      n_out         <= '0;
      out_idx       <= '0;
      kern_idx      <= '0;
      x_q           <= '0;
    end else begin
      // ---- register writes from the CPU
      if (wr_valid) begin
        unique case (wr_addr)
          CONV_IN_ADDR:   cfg_in_addr   <= apply_strb(cfg_in_addr,   wr_data, wr_strb);
          CONV_KERN_ADDR: cfg_kern_addr <= apply_strb(cfg_kern_addr, wr_data, wr_strb);
          CONV_OUT_ADDR:  cfg_out_addr  <= apply_strb(cfg_out_addr,  wr_data, wr_strb);
          CONV_IN_LEN:    cfg_in_len    <= apply_strb(cfg_in_len,    wr_data, wr_strb);
          CONV_KERN_LEN:  cfg_kern_len  <= apply_strb(cfg_kern_len,  wr_data, wr_strb);
          CONV_CONTROL: if (wr_strb[0]) begin
            ctrl_start  <= wr_data[CTRL_START];
            ctrl_int_en <= wr_data[CTRL_INT_EN];
          end
          CONV_IRQ_CLEAR: if (wr_strb[0] && wr_data[0]) irq_pending <= 1'b0;
          default: ;
        endcase
      end

      // ---- control FSM
      unique case (state)
        IDLE: if (ctrl_start) begin
          ctrl_start <= 1'b0;
          stat_done  <= 1'b0;
          stat_error <= 1'b0;
          in_addr    <= cfg_in_addr;
          kern_addr  <= cfg_kern_addr;
          out_addr   <= cfg_out_addr;
          k_len      <= cfg_kern_len;
          n_out      <= cfg_in_len - cfg_kern_len + 32'd1;
          out_idx    <= '0;
          if (cfg_ok) begin
            state <= INIT_OUT;
          end else begin
            stat_error <= 1'b1;
            state      <= DONE;
          end
        end
        INIT_OUT: begin
          kern_idx <= '0;
          phase    <= PH_RD_X;
          state    <= KERNEL_LOOP;
        end
        KERNEL_LOOP: begin
          unique case (phase)
            PH_RD_X: if (cmd_ready) phase <= PH_RD_H;
            PH_RD_H: begin
              if (rsp_valid) x_q   <= rsp_rdata;
              if (cmd_ready) phase <= PH_MAC;
            end
            PH_MAC: if (rsp_valid) begin
              kern_idx <= kern_idx + 32'd1;
              phase    <= PH_RD_X;
              if (kern_idx + 32'd1 >= k_len) state <= OUT_WRITE;
            end
            default: phase <= PH_RD_X;
          endcase
        end
        OUT_WRITE: if (cmd_ready) begin
          out_idx <= out_idx + 32'd1;
          if (out_idx + 32'd1 < n_out) state <= INIT_OUT;
          else                         state <= DONE;
        end
        DONE: begin
          if (!stat_done) begin
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

  // Accelerator-side rules
  a_done_only_in_done : assert property (@(posedge clk) disable iff (!rst_n)
      $rose(stat_done) |-> state == DONE);
  a_irq_needs_en : assert property (@(posedge clk) disable iff (!rst_n)
      $rose(irq_pending) |-> ctrl_int_en);

endmodule
