// tb_dsp_conv1d -- self-checking test of the 1D convolution accelerator.
//
// The testbench plays the CPU on the AXI-Lite port and the arbiter plus a
// 32 KB one-cycle SRAM on the memory master port. The SRAM model can refuse
// grants at random, as the arbiter does when the CPU takes the port. Each
// run writes x and h into the model, programs the registers, starts the
// unit, waits for the interrupt (or polls STATUS) and compares every y[i]
// with y[i] = sum_j x[i+j]*h[j] computed here in 64-bit integers and cut to
// the low 32 bits. Covered:
//   * runs of several sizes, including the paper's example N=1024, K=16;
//   * the cycle count on a free port: (N-K+1)(3K+2)+1 cycles from leaving
//     IDLE to Done (plus the two cycles this testbench needs to see it);
//   * random stalls (results unchanged, run longer);
//   * error checks (K=0, K>N, unaligned base, array outside DATA_MEM): Error
//     and Done set, no memory access;
//   * interrupt: raised only with Int_En, cleared by IRQ_CLEAR while Done
//     stays set; Done cleared by the next start; no restart before IRQ_CLEAR;
//   * configuration latched at start (rewriting registers mid-run is harmless);
//   * register read-back.
module tb_dsp_conv1d;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  mmi_req_t mreq;
  mmi_rsp_t mrsp;
  logic irq;
  int checks = 0, failures = 0;

  dsp_conv1d dut (.clk, .rst_n, .axil_req(req), .axil_rsp(rsp), .mmi_req(mreq), .mmi_rsp(mrsp), .irq);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) fail($sformatf("%s: got %h expected %h", what, got, exp));
  endtask

  // -------------------------------------------------- SRAM + arbiter model
  logic [31:0] mem [8192];
  int stall_pct = 0;
  logic grant_c, done_q;
  logic [31:0] rdata_q;
  int accesses = 0, stall_cycles = 0;
  always @(negedge clk) grant_c = ($urandom_range(0, 99) >= stall_pct);
  always_comb begin
    mrsp.ready  = mreq.req && grant_c;
    mrsp.done   = done_q;
    mrsp.rddata = rdata_q;
  end
  always @(posedge clk) begin
    done_q <= mrsp.ready;
    if (mrsp.ready) begin
      accesses++;
      if (mreq.wr_en) mem[mreq.addr[14:2]] <= mreq.wrdata;
      else rdata_q <= mem[mreq.addr[14:2]];
    end
    if (mreq.req && !mrsp.ready) stall_cycles++;
  end

  // -------------------------------------------------- AXI-Lite master (CPU)
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    req.awaddr = CONV_BASE | a; req.wdata = d; req.wstrb = 4'hF;
    req.awvalid = 1; req.wvalid = 1; req.bready = 1;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    @(negedge clk);
    req.awvalid = 0; req.wvalid = 0;
    while (!rsp.bvalid) @(negedge clk);
    @(negedge clk);
    req.bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req.araddr = CONV_BASE | a; req.arvalid = 1; req.rready = 1;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 0;
    while (!rsp.rvalid) @(negedge clk);
    d = rsp.rdata;
    @(negedge clk);
    req.rready = 0;
  endtask

  // cycle counter and start/irq timestamps
  longint cyc = 0, t_start = 0, t_irq = 0;
  always @(posedge clk) begin
    if (req.awvalid && rsp.awready && req.awaddr[7:0] == CONV_CONTROL && req.wdata[0]) t_start = cyc;
    cyc++;
  end

  localparam logic [31:0] XB = 32'h0000_8000, HB = 32'h0000_A000, YB = 32'h0000_C000;

  task automatic run_conv(int n, int k, int stall, bit big, bit use_irq, bit scramble_cfg);
    longint y;
    logic [31:0] d;
    int n_out;
    int acc0;
    n_out = n - k + 1;
    stall_pct = stall;
    for (int i = 0; i < n; i++) mem[XB[14:2] + i] = big ? $urandom : 32'($urandom_range(0, 200)) - 100;
    for (int j = 0; j < k; j++) mem[HB[14:2] + j] = big ? $urandom : 32'($urandom_range(0, 200)) - 100;
    for (int i = 0; i < n_out; i++) mem[YB[14:2] + i] = 32'hDEAD_BEEF;
    axi_write(CONV_IN_ADDR, XB);
    axi_write(CONV_KERN_ADDR, HB);
    axi_write(CONV_OUT_ADDR, YB);
    axi_write(CONV_IN_LEN, n);
    axi_write(CONV_KERN_LEN, k);
    acc0 = accesses;
    axi_write(CONV_CONTROL, {30'b0, use_irq, 1'b1});
    if (scramble_cfg) begin  // the run must use the latched values
      axi_write(CONV_IN_LEN, 3);
      axi_write(CONV_OUT_ADDR, 32'h0000_8004);
    end
    if (use_irq) begin
      while (!irq) @(negedge clk);
      t_irq = cyc;
      if (stall == 0 && !scramble_cfg) begin
        checks++;
        if (t_irq - t_start != longint'(n_out) * (3 * k + 2) + 3)
          fail($sformatf("N=%0d K=%0d: %0d cycles, expected %0d", n, k, t_irq - t_start,
                         longint'(n_out) * (3 * k + 2) + 3));
      end
    end else begin
      do axi_read(CONV_STATUS, d); while (!d[0]);
      checks++;
      if (irq) fail("irq raised with Int_En = 0");
    end
    axi_read(CONV_STATUS, d);
    check("STATUS after run", d, 32'h1);
    check("memory accesses", accesses - acc0, n_out * (2 * k + 1));
    for (int i = 0; i < n_out; i++) begin
      y = 0;
      for (int j = 0; j < k; j++)
        y += longint'(signed'(mem[XB[14:2] + i + j])) * longint'(signed'(mem[HB[14:2] + j]));
      check($sformatf("y[%0d] N=%0d K=%0d", i, n, k), mem[YB[14:2] + i], y[31:0]);
    end
    if (scramble_cfg) begin
      axi_write(CONV_IN_LEN, n);
      axi_write(CONV_OUT_ADDR, YB);
    end
    axi_write(CONV_IRQ_CLEAR, 1);
    @(negedge clk);
    checks++;
    if (irq) fail("irq still high after IRQ_CLEAR");
    axi_read(CONV_STATUS, d);
    check("Done stays set after IRQ_CLEAR", d, 32'h1);
  endtask

  task automatic run_error(logic [31:0] xb, logic [31:0] hb, logic [31:0] yb, int n, int k);
    logic [31:0] d;
    int acc0;
    axi_write(CONV_IN_ADDR, xb);
    axi_write(CONV_KERN_ADDR, hb);
    axi_write(CONV_OUT_ADDR, yb);
    axi_write(CONV_IN_LEN, n);
    axi_write(CONV_KERN_LEN, k);
    acc0 = accesses;
    axi_write(CONV_CONTROL, 32'h3);
    while (!irq) @(negedge clk);
    axi_read(CONV_STATUS, d);
    check($sformatf("error STATUS N=%0d K=%0d", n, k), d, 32'h3);
    check("no memory access on error", accesses - acc0, 0);
    axi_write(CONV_IRQ_CLEAR, 1);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; done_q = 0; rdata_q = 0; grant_c = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // register read-back
    axi_write(CONV_IN_ADDR, 32'h1234_5678);
    axi_write(CONV_KERN_LEN, 32'h0000_00AB);
    axi_write(CONV_CONTROL, 32'h2);
    axi_read(CONV_IN_ADDR, d);   check("CONFIG_IN_ADDR", d, 32'h1234_5678);
    axi_read(CONV_KERN_LEN, d);  check("CONFIG_KERN_LEN", d, 32'hAB);
    axi_read(CONV_CONTROL, d);   check("CONTROL", d, 32'h2);
    axi_read(CONV_STATUS, d);    check("STATUS at reset", d, 32'h0);
    axi_read(8'h40, d);          check("unmapped offset", d, 32'h0);
    // runs
    run_conv(8, 1, 0, 0, 1, 0);
    run_conv(8, 8, 0, 0, 1, 0);
    run_conv(40, 5, 0, 1, 1, 0);
    run_conv(33, 7, 30, 1, 1, 0);
    run_conv(20, 3, 0, 0, 0, 0);
    run_conv(25, 4, 0, 1, 1, 1);
    run_conv(1024, 16, 0, 0, 1, 0);   // paper's example size
    // errors
    run_error(XB, HB, YB, 10, 0);                 // K = 0
    run_error(XB, HB, YB, 4, 5);                  // K > N
    run_error(XB + 2, HB, YB, 10, 3);             // unaligned
    run_error(32'h0000_FFF0, HB, YB, 10, 3);      // x runs past DATA_MEM
    run_error(XB, 32'h0000_4000, YB, 10, 3);      // h in ROM window
    // no restart before IRQ_CLEAR: start again while in DONE
    axi_write(CONV_IN_ADDR, XB); axi_write(CONV_KERN_ADDR, HB); axi_write(CONV_OUT_ADDR, YB);
    axi_write(CONV_IN_LEN, 6); axi_write(CONV_KERN_LEN, 2);
    axi_write(CONV_CONTROL, 32'h3);
    while (!irq) @(negedge clk);
    axi_write(CONV_CONTROL, 32'h3);      // pending start
    repeat (20) @(negedge clk);
    axi_read(CONV_STATUS, d);  check("still done before IRQ_CLEAR", d, 32'h1);
    axi_read(CONV_CONTROL, d); check("start pending", d, 32'h3);
    axi_write(CONV_IRQ_CLEAR, 1);
    repeat (3) @(negedge clk);
    axi_read(CONV_STATUS, d);  check("Done cleared by restart", d, 32'h0);
    while (!irq) @(negedge clk);
    axi_read(CONV_STATUS, d);  check("second run done", d, 32'h1);
    checks++;
    if (stall_cycles == 0) fail("no stall exercised");
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
