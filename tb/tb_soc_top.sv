// tb_soc_top -- end-to-end test of the SoC at its full default size.
//
// The processor is replaced by a bus-functional model that issues loads and
// stores on the CPU data bus and fetches on the instruction port, following
// the software flow of the accelerators: put data in DATA_MEM with stores,
// write the configuration registers, set Start, wait for the interrupt or
// poll STATUS, read the results back with loads, write IRQ_CLEAR. All data
// is generated here and every result is compared with a model computed here.
//
// Scenarios:
//   1. boot image: a 64-word image is loaded into the ROM array and fetched;
//   2. loads/stores to the ROM window, the reserved window and unmapped
//      space complete with an error;
//   3. the paper's example convolution (N=1024, K=16), then K=32, with the CPU idle,
//      with the cycle count checked against (N-K+1)(3K+2)+1 and printed next
//      to the paper's estimate (N-K+1)(3K+1)+10;
//   4. convolution and dot product running at once while the CPU keeps
//      loading from DATA_MEM and polling STATUS: both accelerators are held
//      off by the CPU, and the dot-product unit by the convolution unit;
//   5. a convolution with a bad configuration (error path);
//   6. a dot product finished by polling with Int_En = 0.
// Each mechanism is counted and a failure is counted for any that never
// happened: ROM fetch, bus error, interrupt, IRQ_CLEAR, polling, CPU-over-DSP
// stall, DSP-over-DSP stall, concurrent runs, error status, 32-bit
// truncation of a convolution output.
module tb_soc_top;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic imem_en;
  logic [31:0] imem_addr, imem_rdata;
  logic cpu_req, cpu_we, cpu_ack, cpu_err;
  logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic [3:0] cpu_be;
  logic irq_conv, irq_dot;
  int checks = 0, failures = 0;

  soc_top dut (.clk, .rst_n, .imem_en, .imem_addr, .imem_rdata,
               .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_be, .cpu_ack, .cpu_rdata, .cpu_err,
               .irq_conv, .irq_dot);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 30) $display("FAIL %s at %0t", msg, $time);
  endtask
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) fail($sformatf("%s: got %h expected %h", what, got, exp));
  endtask

  // ------------------------------------------------ CPU bus-functional model
  task automatic cpu_write(input logic [31:0] a, input logic [31:0] d, output logic err);
    @(negedge clk);
    cpu_req = 1; cpu_we = 1; cpu_addr = a; cpu_wdata = d; cpu_be = 4'hF;
    do @(posedge clk); while (!cpu_ack);
    err = cpu_err;
    @(negedge clk);
    cpu_req = 0;
  endtask
  task automatic cpu_read(input logic [31:0] a, output logic [31:0] d, output logic err);
    @(negedge clk);
    cpu_req = 1; cpu_we = 0; cpu_addr = a; cpu_be = 4'hF;
    do @(posedge clk); while (!cpu_ack);
    d = cpu_rdata; err = cpu_err;
    @(negedge clk);
    cpu_req = 0;
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic e;
    cpu_write(a, d, e);
    checks++;
    if (e) fail($sformatf("bus error writing %h", a));
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    logic e;
    cpu_read(a, d, e);
    checks++;
    if (e) fail($sformatf("bus error reading %h", a));
  endtask

  // ------------------------------------------------ mechanism counters
  int n_fetch = 0, n_bus_err = 0, n_irq = 0, n_irq_clear = 0, n_poll = 0;
  int n_cpu_over_dsp = 0, n_dsp_over_dsp = 0, n_concurrent = 0, n_error_status = 0;
  int n_truncated = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_arb.cpu_gnt && (dut.mmi_req[0].req || dut.mmi_req[1].req)) n_cpu_over_dsp++;
    if (dut.mmi_rsp[0].ready && dut.mmi_req[1].req) n_dsp_over_dsp++;
    if (dut.u_conv.state != 0 && dut.u_dot.state != 0) n_concurrent++;
  end
  logic irq_conv_q = 0, irq_dot_q = 0;
  always @(posedge clk) begin
    if ((irq_conv && !irq_conv_q) || (irq_dot && !irq_dot_q)) n_irq++;
    irq_conv_q <= irq_conv;
    irq_dot_q  <= irq_dot;
  end

  // ------------------------------------------------ helpers
  localparam logic [31:0] XB = 32'h0000_8000, HB = 32'h0000_8100, YB = 32'h0000_8200;

  logic [31:0] shadow [8192];  // what the CPU model wrote to DATA_MEM

  task automatic put(input logic [31:0] a, input logic [31:0] d);
    wr(a, d);
    shadow[a[14:2]] = d;
  endtask

  task automatic conv_config(logic [31:0] xb, logic [31:0] hb, logic [31:0] yb, int n, int k);
    wr(CONV_BASE + CONV_IN_ADDR, xb);
    wr(CONV_BASE + CONV_KERN_ADDR, hb);
    wr(CONV_BASE + CONV_OUT_ADDR, yb);
    wr(CONV_BASE + CONV_IN_LEN, n);
    wr(CONV_BASE + CONV_KERN_LEN, k);
  endtask

  task automatic conv_check(logic [31:0] xb, logic [31:0] hb, logic [31:0] yb, int n, int k);
    logic [31:0] d;
    longint y;
    for (int i = 0; i <= n - k; i++) begin
      y = 0;
      for (int j = 0; j < k; j++)
        y += longint'(signed'(shadow[xb[14:2] + i + j])) * longint'(signed'(shadow[hb[14:2] + j]));
      if (y != longint'(signed'(y[31:0]))) n_truncated++;
      rd(yb + 32'(4 * i), d);
      check($sformatf("y[%0d] (N=%0d K=%0d)", i, n, k), d, y[31:0]);
    end
  endtask

  task automatic irq_clear(logic [31:0] base);
    wr(base + 32'h1C, 1);
    n_irq_clear++;
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic e;
    longint t0, t1, expect_cyc, paper_cyc;
    logic [31:0] bad_addr [4];
    int mech [10];
    bad_addr = '{32'h0000_0040, 32'h0100_0200, 32'h0200_0000, 32'h0001_0000};
    imem_en = 0; imem_addr = 0;
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_be = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. boot image and instruction fetch
    $readmemh("tb/imem_test.hex", dut.u_inst_mem.rom);
    for (int i = 0; i < 70; i++) begin
      @(negedge clk);
      imem_en = 1; imem_addr = 32'(4 * i);
      @(negedge clk);
      imem_en = 0;
      check($sformatf("fetch %0d", i), imem_rdata, i < 64 ? 32'h00100093 + 32'(i) * 32'h01010101 : 32'h13);
      n_fetch++;
    end

    // 2. accesses outside the routed regions
    for (int i = 0; i < 4; i++) begin
      logic [31:0] a;
      a = bad_addr[i];
      cpu_read(a, d, e);
      checks++;
      if (!e) fail($sformatf("no bus error at %h", a)); else n_bus_err++;
      cpu_write(a, 32'h1, e);
      checks++;
      if (!e) fail($sformatf("no bus error writing %h", a)); else n_bus_err++;
    end

    // 3. the paper's example: N=1024, K=16, CPU idle while it runs
    for (int i = 0; i < 1024; i++) put(XB + 32'(4 * i), $urandom);
    for (int j = 0; j < 16; j++) put(HB + 32'(4 * j), $urandom);
    conv_config(XB, HB, 32'h0000_A000, 1024, 16);
    wr(CONV_BASE + CONV_CONTROL, 32'h3);
    t0 = cyc;
    while (!irq_conv) @(negedge clk);
    t1 = cyc;
    expect_cyc = longint'(1009) * (3 * 16 + 2) + 1;
    paper_cyc  = longint'(1009) * (3 * 16 + 1) + 10;
    $display("conv N=1024 K=16: %0d cycles from Start to interrupt (run %0d, paper estimate %0d)",
             t1 - t0, expect_cyc, paper_cyc);
    checks++;
    if (t1 - t0 != expect_cyc) fail($sformatf("conv cycles %0d, expected %0d", t1 - t0, expect_cyc));
    rd(CONV_BASE + CONV_STATUS, d);
    check("conv STATUS", d, 32'h1);
    conv_check(XB, HB, 32'h0000_A000, 1024, 16);
    irq_clear(CONV_BASE);
    @(negedge clk);
    checks++;
    if (irq_conv) fail("irq_conv still high after IRQ_CLEAR");
    rd(CONV_BASE + CONV_STATUS, d);
    check("Done stays after IRQ_CLEAR", d, 32'h1);

    // 3b. the same input with the larger K = 32 kernel
    for (int j = 0; j < 32; j++) put(32'h0000_9000 + 32'(4 * j), $urandom);
    conv_config(XB, 32'h0000_9000, 32'h0000_A000, 1024, 32);
    wr(CONV_BASE + CONV_CONTROL, 32'h3);
    t0 = cyc;
    while (!irq_conv) @(negedge clk);
    t1 = cyc;
    expect_cyc = longint'(993) * (3 * 32 + 2) + 1;
    $display("conv N=1024 K=32: %0d cycles from Start to interrupt (expected %0d)", t1 - t0, expect_cyc);
    checks++;
    if (t1 - t0 != expect_cyc) fail($sformatf("conv K=32 cycles %0d, expected %0d", t1 - t0, expect_cyc));
    conv_check(XB, 32'h0000_9000, 32'h0000_A000, 1024, 32);
    irq_clear(CONV_BASE);

    // 4. both accelerators at once, CPU contending for DATA_MEM
    for (int i = 0; i < 200; i++) put(32'h0000_C000 + 32'(4 * i), 32'($urandom_range(0, 2000)) - 1000);
    for (int j = 0; j < 8; j++)   put(32'h0000_C400 + 32'(4 * j), 32'($urandom_range(0, 2000)) - 1000);
    for (int i = 0; i < 300; i++) begin
      put(32'h0000_D000 + 32'(4 * i), $urandom);
      put(32'h0000_E000 + 32'(4 * i), $urandom);
    end
    conv_config(32'h0000_C000, 32'h0000_C400, 32'h0000_C800, 200, 8);
    wr(DOT_BASE + DOT_VA_ADDR, 32'h0000_D000);
    wr(DOT_BASE + DOT_VB_ADDR, 32'h0000_E000);
    wr(DOT_BASE + DOT_LEN, 300);
    wr(CONV_BASE + CONV_CONTROL, 32'h3);
    wr(DOT_BASE + DOT_CONTROL, 32'h3);
    while (!(irq_conv && irq_dot)) begin
      rd(32'h0000_8000 + 32'(4 * $urandom_range(0, 255)), d);   // background loads
      rd(DOT_BASE + DOT_STATUS, d);
      n_poll++;
    end
    conv_check(32'h0000_C000, 32'h0000_C400, 32'h0000_C800, 200, 8);
    begin
      longint s;
      logic [31:0] lo, hi;
      s = 0;
      for (int j = 0; j < 300; j++)
        s += longint'(signed'(shadow[(32'h0000_D000 >> 2) % 8192 + j])) *
             longint'(signed'(shadow[(32'h0000_E000 >> 2) % 8192 + j]));
      rd(DOT_BASE + DOT_RESULT_LO, lo);
      rd(DOT_BASE + DOT_RESULT_HI, hi);
      check("dot RESULT_LO", lo, s[31:0]);
      check("dot RESULT_HI", hi, s[63:32]);
    end
    irq_clear(CONV_BASE);
    irq_clear(DOT_BASE);

    // 5. bad configuration: output array runs past DATA_MEM
    conv_config(XB, HB, 32'h0000_FFF0, 64, 4);
    wr(CONV_BASE + CONV_CONTROL, 32'h3);
    while (!irq_conv) @(negedge clk);
    rd(CONV_BASE + CONV_STATUS, d);
    check("conv error STATUS", d, 32'h3);
    if (d == 32'h3) n_error_status++;
    irq_clear(CONV_BASE);

    // 6. dot product by polling, interrupts off
    for (int i = 0; i < 16; i++) begin
      put(32'h0000_D000 + 32'(4 * i), 32'(i + 1));
      put(32'h0000_E000 + 32'(4 * i), 32'(i + 1));
    end
    wr(DOT_BASE + DOT_LEN, 16);
    wr(DOT_BASE + DOT_CONTROL, 32'h1);
    do begin rd(DOT_BASE + DOT_STATUS, d); n_poll++; end while (!d[0]);
    checks++;
    if (irq_dot) fail("irq_dot with Int_En = 0");
    rd(DOT_BASE + DOT_RESULT_LO, d);
    check("dot 1..16 squared", d, 32'd1496);
    irq_clear(DOT_BASE);

    // mechanisms
    $display("mechanisms: fetch=%0d bus_err=%0d irq=%0d irq_clear=%0d poll=%0d cpu_over_dsp=%0d dsp_over_dsp=%0d concurrent=%0d error_status=%0d truncated=%0d",
             n_fetch, n_bus_err, n_irq, n_irq_clear, n_poll, n_cpu_over_dsp, n_dsp_over_dsp,
             n_concurrent, n_error_status, n_truncated);
    mech = '{n_fetch, n_bus_err, n_irq, n_irq_clear, n_poll, n_cpu_over_dsp, n_dsp_over_dsp,
             n_concurrent, n_error_status, n_truncated};
    for (int i = 0; i < 10; i++) begin
      checks++;
      if (mech[i] == 0) fail($sformatf("mechanism %0d never happened", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
