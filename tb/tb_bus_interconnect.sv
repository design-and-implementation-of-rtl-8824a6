// tb_bus_interconnect -- self-checking test of the CPU-side address decoder.
//
// The interconnect is surrounded by: two axil_slave register windows, each
// backed by a 64-word register array in the testbench; and a model of the
// arbiter's CPU port plus a one-cycle SRAM that can delay its grant. A CPU
// model makes random reads and writes with random byte enables across the
// whole map: DATA_MEM, both register windows, the ROM window, the reserved
// window and unmapped space. Checked against a reference model: read data,
// that writes land only in the decoded target, cpu_err for every access
// outside the three routed regions, and the access latencies on a free
// path (DATA_MEM 2 cycles, register 3 cycles, error 2 cycles, counting the
// request cycle).
module tb_bus_interconnect;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req, cpu_we, cpu_ack, cpu_err;
  logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic [3:0] cpu_be;
  logic dm_req, dm_we, dm_gnt, dm_done;
  logic [31:0] dm_addr, dm_wdata, dm_rdata;
  logic [3:0] dm_be;
  axil_req_t s_req [2];
  axil_rsp_t s_rsp [2];
  int checks = 0, failures = 0;

  bus_interconnect dut (.clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_be,
    .cpu_ack, .cpu_rdata, .cpu_err, .dm_req, .dm_we, .dm_addr, .dm_wdata, .dm_be,
    .dm_gnt, .dm_done, .dm_rdata, .s_req, .s_rsp);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask

  // register windows
  logic [31:0] regs [2][64];
  for (genvar g = 0; g < 2; g++) begin : g_s
    logic wr_valid, rd_valid;
    logic [7:0] wr_addr, rd_addr;
    logic [31:0] wr_data, rd_data;
    logic [3:0] wr_strb;
    axil_slave u_s (.clk, .rst_n, .axil_req(s_req[g]), .axil_rsp(s_rsp[g]), .wr_valid, .wr_addr,
                    .wr_data, .wr_strb, .rd_valid, .rd_addr, .rd_data);
    assign rd_data = regs[g][rd_addr[7:2]];
    always @(posedge clk)
      if (wr_valid) regs[g][wr_addr[7:2]] <= apply_strb(regs[g][wr_addr[7:2]], wr_data, wr_strb);
  end

  // arbiter CPU port + SRAM model (8192 words)
  logic [31:0] mem [8192];
  int gnt_pct = 100;
  logic gnt_c, done_q;
  logic [31:0] rdata_q;
  always @(negedge clk) gnt_c = ($urandom_range(0, 99) < gnt_pct);
  assign dm_gnt   = dm_req && gnt_c;
  assign dm_done  = done_q;
  assign dm_rdata = rdata_q;
  always @(posedge clk) begin
    done_q <= dm_gnt;
    if (dm_gnt) begin
      if (dm_we) begin
        for (int b = 0; b < 4; b++) if (dm_be[b]) mem[dm_addr[14:2]][8*b +: 8] <= dm_wdata[8*b +: 8];
      end else rdata_q <= mem[dm_addr[14:2]];
    end
  end

  // reference model
  logic [31:0] ref_mem [8192];
  logic [31:0] ref_regs [2][64];

  task automatic cpu_access(input logic we, input logic [31:0] a, input logic [31:0] d,
                            input logic [3:0] be, output logic [31:0] rd, output logic err,
                            output int lat);
    @(negedge clk);
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d; cpu_be = be;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!cpu_ack);
    rd = cpu_rdata; err = cpu_err;
    @(negedge clk);
    cpu_req = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_dm = 0, n_conv = 0, n_dot = 0, n_err = 0;

  initial begin
    logic [31:0] rd;
    logic err;
    int lat;
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_be = 0;
    done_q = 0; rdata_q = 0;
    for (int i = 0; i < 8192; i++) begin mem[i] = 32'(i); ref_mem[i] = 32'(i); end
    for (int g = 0; g < 2; g++) for (int i = 0; i < 64; i++) begin regs[g][i] = 0; ref_regs[g][i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      logic [31:0] a, d;
      logic [3:0] be;
      logic we;
      int kind;
      if (it == 2000) gnt_pct = 50;  // second half: the arbiter sometimes delays the CPU
      kind = $urandom_range(0, 5);
      we = $urandom_range(0, 1);
      d = $urandom;
      be = 4'($urandom_range(1, 15));
      case (kind)
        0, 1: a = DMEM_BASE + 32'(4 * $urandom_range(0, 8191));
        2: a = CONV_BASE + 32'(4 * $urandom_range(0, 63));
        3: a = DOT_BASE + 32'(4 * $urandom_range(0, 63));
        4: a = RSVD_BASE + 32'(4 * $urandom_range(0, 63));
        default: case ($urandom_range(0, 2))
          0: a = IMEM_BASE + 32'(4 * $urandom_range(0, 8191));
          1: a = 32'h0001_0000 + 32'(4 * $urandom_range(0, 1000));
          default: a = 32'h8000_0000 | 32'($urandom);
        endcase
      endcase
      cpu_access(we, a, d, be, rd, err, lat);
      checks++;
      case (kind)
        0, 1: begin
          n_dm++;
          if (err) fail("error on DATA_MEM");
          if (gnt_pct == 100 && lat != 2) fail($sformatf("DATA_MEM latency %0d", lat));
          if (we) ref_mem[a[14:2]] = apply_strb(ref_mem[a[14:2]], d, be);
          else if (rd !== ref_mem[a[14:2]]) fail($sformatf("DATA_MEM read %h got %h exp %h", a, rd, ref_mem[a[14:2]]));
        end
        2, 3: begin
          int g;
          g = kind - 2;
          if (g == 0) n_conv++; else n_dot++;
          if (err) fail("error on register window");
          if (lat != 3) fail($sformatf("register latency %0d", lat));
          if (we) ref_regs[g][a[7:2]] = apply_strb(ref_regs[g][a[7:2]], d, be);
          else if (rd !== ref_regs[g][a[7:2]]) fail($sformatf("reg read %h got %h exp %h", a, rd, ref_regs[g][a[7:2]]));
        end
        default: begin
          n_err++;
          if (!err) fail($sformatf("no error for address %h", a));
          if (rd !== 32'h0) fail("error read data not zero");
          if (lat != 2) fail($sformatf("error latency %0d", lat));
        end
      endcase
    end
    // final sweep: targets hold exactly what was written to them
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (regs[g][i] !== ref_regs[g][i]) fail($sformatf("window %0d reg %0d corrupted", g, i));
      end
    for (int i = 0; i < 8192; i++) begin
      checks++;
      if (mem[i] !== ref_mem[i]) fail($sformatf("DATA_MEM word %0d corrupted", i));
    end
    $display("accesses: dmem %0d conv %0d dot %0d error %0d", n_dm, n_conv, n_dot, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
