// tb_workload_dense -- a dense (fully connected) layer on the dot-product unit.
//
// Layer: 128 inputs, 64 outputs, one sample: out[o] = sum_i W[o][i] * x[i].
// The 64x128 weight matrix (8192 words) and the input vector together exceed
// the 8192-word DATA_MEM, so the CPU model keeps x resident and writes one
// weight row at a time into one of two row buffers before starting
// DSP_DOT_PRODUCT on it, polling STATUS for completion (Int_En = 0). Each
// 64-bit RESULT is compared with the row's dot product computed here, and
// each call's cycles on the free port are checked against 3L+1.
module tb_workload_dense;
  import soc_pkg::*;
  localparam int NI = 128, NO = 64;
  logic clk = 0, rst_n = 0;
  logic imem_en = 0;
  logic [31:0] imem_addr = 0, imem_rdata;
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
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask

  task automatic bus(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk);
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d; cpu_be = 4'hF;
    do @(posedge clk); while (!cpu_ack);
    r = cpu_rdata;
    checks++;
    if (cpu_err) fail($sformatf("bus error at %h", a));
    @(negedge clk);
    cpu_req = 0;
  endtask

  // Cycles the unit spends between leaving IDLE and setting Done.
  longint busy_cycles = 0;
  always @(posedge clk) if (dut.u_dot.state == 1) busy_cycles++;

  localparam logic [31:0] X_B = 32'h0000_8000;
  localparam logic [31:0] R_B = 32'h0000_8400;   // row buffer b at R_B + b*0x200

  int x_v [NI];

  initial begin
    repeat (1_000_000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, lo, hi;
    longint b0, total;
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_be = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      x_v[i] = $urandom;
      bus(1, X_B + 32'(4 * i), x_v[i], r);
    end
    total = 0;
    for (int o = 0; o < NO; o++) begin
      longint s;
      logic [31:0] rb;
      rb = R_B + 32'((o % 2) * 'h200);
      s = 0;
      for (int i = 0; i < NI; i++) begin
        int w;
        w = $urandom;
        bus(1, rb + 32'(4 * i), w, r);
        s += longint'(w) * longint'(x_v[i]);
      end
      bus(1, DOT_BASE + DOT_VA_ADDR, rb, r);
      bus(1, DOT_BASE + DOT_VB_ADDR, X_B, r);
      bus(1, DOT_BASE + DOT_LEN, NI, r);
      b0 = busy_cycles;
      bus(1, DOT_BASE + DOT_CONTROL, 32'h1, r);
      do bus(0, DOT_BASE + DOT_STATUS, 0, r); while (!r[0]);
      checks++;
      // DP_LOOP occupies 3L cycles; DONE adds the one latching cycle
      if (busy_cycles - b0 != 3 * NI) fail($sformatf("row %0d: DP_LOOP %0d cycles", o, busy_cycles - b0));
      total += busy_cycles - b0 + 1;
      bus(0, DOT_BASE + DOT_RESULT_LO, 0, lo);
      bus(0, DOT_BASE + DOT_RESULT_HI, 0, hi);
      checks++;
      if ({hi, lo} != s) fail($sformatf("out[%0d] = %h, expected %h", o, {hi, lo}, s));
      bus(1, DOT_BASE + DOT_IRQ_CLEAR, 1, r);
    end
    $display("dense 128x64: %0d accelerator cycles for %0d MACs", total, NI * NO);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
