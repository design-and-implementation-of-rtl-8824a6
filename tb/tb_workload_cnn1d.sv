// tb_workload_cnn1d -- a 1D-CNN layer run on the SoC, decomposed into
// single-channel convolutions.
//
// Layer: input length N = 256, kernel K = 16, C = 4 input channels, 8 output
// channels, batch 1:  Out[i,k] = sum_c sum_j In[i+j,c] * W[k,c,j].
// The CPU model stores the four input channels and all 8x4 kernels in
// DATA_MEM once, then for every (k, c) pair programs DSP_CONV1D to convolve
// channel c with kernel W[k,c,:] into a scratch buffer, waits for the
// interrupt, and adds the 241 partial outputs into Out[:,k] (the adds are the
// CPU's work and are done in the testbench). Every Out value is compared with
// the layer computed directly here (32-bit wrap-around, like the stores).
// The accelerator cycles of each call are checked against (N-K+1)(3K+2)+1
// and the layer total is printed.
module tb_workload_cnn1d;
  import soc_pkg::*;
  localparam int N = 256, K = 16, C = 4, KO = 8, NO = N - K + 1;
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

  longint cyc = 0;
  always @(posedge clk) cyc++;

  localparam logic [31:0] IN_B = 32'h0000_8000;   // channel c at IN_B + c*0x400
  localparam logic [31:0] W_B  = 32'h0000_9000;   // W[k][c] at W_B + (k*C+c)*0x40
  localparam logic [31:0] P_B  = 32'h0000_A000;   // partial output scratch
  localparam logic [31:0] O_B  = 32'h0000_B000;   // Out[:,k] at O_B + k*0x400

  int in_v [C][N];
  int w_v [KO][C][K];
  int out_v [KO][NO];

  initial begin
    repeat (2_000_000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    longint t0, acc_cycles;
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_be = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++)
      for (int i = 0; i < N; i++) begin
        in_v[c][i] = $urandom_range(0, 255) - 128;          // 8-bit activations
        bus(1, IN_B + 32'(c * 'h400 + 4 * i), in_v[c][i], r);
      end
    for (int k = 0; k < KO; k++)
      for (int c = 0; c < C; c++)
        for (int j = 0; j < K; j++) begin
          w_v[k][c][j] = $urandom_range(0, 255) - 128;      // 8-bit weights
          bus(1, W_B + 32'((k * C + c) * 'h40 + 4 * j), w_v[k][c][j], r);
        end
    acc_cycles = 0;
    for (int k = 0; k < KO; k++) begin
      for (int i = 0; i < NO; i++) out_v[k][i] = 0;
      for (int c = 0; c < C; c++) begin
        bus(1, CONV_BASE + CONV_IN_ADDR, IN_B + 32'(c * 'h400), r);
        bus(1, CONV_BASE + CONV_KERN_ADDR, W_B + 32'((k * C + c) * 'h40), r);
        bus(1, CONV_BASE + CONV_OUT_ADDR, P_B, r);
        bus(1, CONV_BASE + CONV_IN_LEN, N, r);
        bus(1, CONV_BASE + CONV_KERN_LEN, K, r);
        bus(1, CONV_BASE + CONV_CONTROL, 32'h3, r);
        t0 = cyc;
        while (!irq_conv) @(negedge clk);
        acc_cycles += cyc - t0;
        checks++;
        if (cyc - t0 != longint'(NO) * (3 * K + 2) + 1)
          fail($sformatf("call (%0d,%0d) took %0d cycles", k, c, cyc - t0));
        for (int i = 0; i < NO; i++) begin
          bus(0, P_B + 32'(4 * i), 0, r);
          out_v[k][i] += int'(r);
        end
        bus(1, CONV_BASE + CONV_IRQ_CLEAR, 1, r);
      end
      for (int i = 0; i < NO; i++) bus(1, O_B + 32'(k * 'h400 + 4 * i), out_v[k][i], r);
    end
    // compare with the layer computed directly
    for (int k = 0; k < KO; k++)
      for (int i = 0; i < NO; i++) begin
        int ref_o;
        ref_o = 0;
        for (int c = 0; c < C; c++)
          for (int j = 0; j < K; j++) ref_o += in_v[c][i + j] * w_v[k][c][j];
        bus(0, O_B + 32'(k * 'h400 + 4 * i), 0, r);
        checks++;
        if (int'(r) != ref_o) fail($sformatf("Out[%0d,%0d] = %0d, expected %0d", i, k, int'(r), ref_o));
      end
    $display("CNN layer: %0d convolution calls, %0d accelerator cycles (%0d MACs)",
             KO * C, acc_cycles, KO * C * NO * K);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
