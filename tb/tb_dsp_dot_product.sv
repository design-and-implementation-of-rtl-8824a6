// tb_dsp_dot_product -- self-checking test of the dot-product accelerator.
//
// The testbench plays the CPU on the AXI-Lite port and the arbiter plus a
// 32 KB one-cycle SRAM on the memory master port (with optional random
// refused grants). Each run writes vectors A and B into the model, programs
// the unit, waits for the interrupt or polls STATUS, and compares
// RESULT_HI:RESULT_LO with the 64-bit sum of A[j]*B[j] computed here.
// Covered: several lengths including the paper's dense-layer row (L=128);
// sums that need all 64 bits; the cycle count on a free port, 3L+1 cycles
// from leaving IDLE to Done as in the paper (plus the two cycles this
// testbench needs to see it); random stalls; error checks (L=0, unaligned
// base, vector outside DATA_MEM); interrupt enable and IRQ_CLEAR; register
// read-back; configuration latched at start.
module tb_dsp_dot_product;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  mmi_req_t mreq;
  mmi_rsp_t mrsp;
  logic irq;
  int checks = 0, failures = 0;

  dsp_dot_product dut (.clk, .rst_n, .axil_req(req), .axil_rsp(rsp), .mmi_req(mreq), .mmi_rsp(mrsp), .irq);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) fail($sformatf("%s: got %h expected %h", what, got, exp));
  endtask

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

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    req.awaddr = DOT_BASE | a; req.wdata = d; req.wstrb = 4'hF;
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
    req.araddr = DOT_BASE | a; req.arvalid = 1; req.rready = 1;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 0;
    while (!rsp.rvalid) @(negedge clk);
    d = rsp.rdata;
    @(negedge clk);
    req.rready = 0;
  endtask

  longint cyc = 0, t_start = 0, t_irq = 0;
  always @(posedge clk) begin
    if (req.awvalid && rsp.awready && req.awaddr[7:0] == DOT_CONTROL && req.wdata[0]) t_start = cyc;
    cyc++;
  end

  localparam logic [31:0] AB = 32'h0000_9000, BB = 32'h0000_B000;

  task automatic run_dot(int l, int stall, bit big, bit use_irq, bit scramble_cfg);
    longint s;
    logic [31:0] d, lo, hi;
    int acc0;
    stall_pct = stall;
    for (int i = 0; i < l; i++) begin
      mem[AB[14:2] + i] = big ? $urandom : 32'($urandom_range(0, 2000)) - 1000;
      mem[BB[14:2] + i] = big ? $urandom : 32'($urandom_range(0, 2000)) - 1000;
    end
    axi_write(DOT_VA_ADDR, AB);
    axi_write(DOT_VB_ADDR, BB);
    axi_write(DOT_LEN, l);
    acc0 = accesses;
    axi_write(DOT_CONTROL, {30'b0, use_irq, 1'b1});
    if (scramble_cfg) begin
      axi_write(DOT_LEN, 1);
      axi_write(DOT_VA_ADDR, BB);
    end
    if (use_irq) begin
      while (!irq) @(negedge clk);
      t_irq = cyc;
      if (stall == 0 && !scramble_cfg) begin
        checks++;
        if (t_irq - t_start != longint'(3 * l + 1) + 2)
          fail($sformatf("L=%0d: %0d cycles, expected %0d", l, t_irq - t_start, 3 * l + 3));
      end
    end else begin
      do axi_read(DOT_STATUS, d); while (!d[0]);
      checks++;
      if (irq) fail("irq raised with Int_En = 0");
    end
    axi_read(DOT_STATUS, d);
    check("STATUS after run", d, 32'h1);
    check("memory accesses", accesses - acc0, 2 * l);
    s = 0;
    for (int j = 0; j < l; j++)
      s += longint'(signed'(mem[AB[14:2] + j])) * longint'(signed'(mem[BB[14:2] + j]));
    axi_read(DOT_RESULT_LO, lo);
    axi_read(DOT_RESULT_HI, hi);
    check($sformatf("RESULT_LO L=%0d", l), lo, s[31:0]);
    check($sformatf("RESULT_HI L=%0d", l), hi, s[63:32]);
    axi_write(DOT_IRQ_CLEAR, 1);
    @(negedge clk);
    checks++;
    if (irq) fail("irq still high after IRQ_CLEAR");
    axi_read(DOT_STATUS, d);
    check("Done stays set after IRQ_CLEAR", d, 32'h1);
    axi_read(DOT_RESULT_LO, d);
    check("RESULT held after IRQ_CLEAR", d, s[31:0]);
  endtask

  task automatic run_error(logic [31:0] ab, logic [31:0] bb, int l);
    logic [31:0] d;
    int acc0;
    axi_write(DOT_VA_ADDR, ab);
    axi_write(DOT_VB_ADDR, bb);
    axi_write(DOT_LEN, l);
    acc0 = accesses;
    axi_write(DOT_CONTROL, 32'h3);
    while (!irq) @(negedge clk);
    axi_read(DOT_STATUS, d);
    check($sformatf("error STATUS L=%0d", l), d, 32'h3);
    check("no memory access on error", accesses - acc0, 0);
    axi_write(DOT_IRQ_CLEAR, 1);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; done_q = 0; rdata_q = 0; grant_c = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    axi_write(DOT_VA_ADDR, 32'hCAFE_0004);
    axi_write(DOT_LEN, 32'h55);
    axi_write(DOT_CONTROL, 32'h2);
    axi_read(DOT_VA_ADDR, d); check("CONFIG_VA_ADDR", d, 32'hCAFE_0004);
    axi_read(DOT_LEN, d);     check("CONFIG_LEN", d, 32'h55);
    axi_read(DOT_CONTROL, d); check("CONTROL", d, 32'h2);
    axi_read(DOT_STATUS, d);  check("STATUS at reset", d, 32'h0);
    run_dot(1, 0, 0, 1, 0);
    run_dot(7, 0, 1, 1, 0);
    run_dot(128, 0, 1, 1, 0);     // one row of the paper's 128x64 dense layer
    run_dot(100, 40, 1, 1, 0);
    run_dot(33, 0, 0, 0, 0);
    run_dot(50, 0, 1, 1, 1);
    run_dot(2048, 0, 1, 1, 0);
    run_error(AB, BB, 0);
    run_error(AB + 1, BB, 4);
    run_error(AB, 32'h0000_FFFC, 2);
    run_error(32'h0100_0000, BB, 2);
    checks++;
    if (stall_cycles == 0) fail("no stall exercised");
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
