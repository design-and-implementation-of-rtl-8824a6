// tb_mem_arbiter -- self-checking test of the DATA_MEM arbiter.
//
// The arbiter is connected to a full-size data_mem. The CPU port and two
// accelerator masters make random reads and writes at the same time, each
// holding its request until granted (CPU: until done). A reference memory
// in the testbench checks every read. The test also checks the priority
// rule in every cycle (CPU first, then master 0, then master 1), that
// exactly the requester granted in cycle t sees DONE in cycle t+1, and it
// counts cycles in which an accelerator was held off by the CPU.
module tb_mem_arbiter;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req, cpu_we, cpu_gnt, cpu_done;
  logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic [3:0] cpu_be;
  mmi_req_t m_req [2];
  mmi_rsp_t m_rsp [2];
  logic mem_en, mem_we;
  logic [3:0] mem_be;
  logic [12:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  int stalls = 0;
  logic [31:0] ref_mem [256];

  mem_arbiter #(.NM(2), .AW(13)) dut (.clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata,
    .cpu_be, .cpu_gnt, .cpu_done, .cpu_rdata, .m_req, .m_rsp,
    .mem_en, .mem_we, .mem_be, .mem_addr, .mem_wdata, .mem_rdata);
  data_mem u_mem (.clk, .en(mem_en), .we(mem_we), .be(mem_be), .addr(mem_addr),
                  .wdata(mem_wdata), .rdata(mem_rdata));

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask

  // Priority and DONE timing monitor
  logic [2:0] gnt_q;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (cpu_req && !cpu_gnt) fail("CPU requested but not granted");
    if (m_req[0].req && !cpu_req && !m_rsp[0].ready) fail("master 0 not granted on free port");
    if (m_req[1].req && !cpu_req && !m_req[0].req && !m_rsp[1].ready) fail("master 1 not granted");
    if (m_rsp[1].ready && (cpu_req || m_req[0].req)) fail("master 1 granted over higher priority");
    if (m_rsp[0].ready && cpu_req) fail("master 0 granted over CPU");
    if ({cpu_done, m_rsp[0].done, m_rsp[1].done} !== gnt_q) fail("DONE not one cycle after grant");
    if ((m_req[0].req && !m_rsp[0].ready) || (m_req[1].req && !m_rsp[1].ready)) stalls++;
    gnt_q <= {cpu_gnt, m_rsp[0].ready, m_rsp[1].ready};
  end

  // Two accelerator masters: hold REQ until READY, then wait for DONE.
  for (genvar g = 0; g < 2; g++) begin : g_m
    initial begin
      m_req[g] = '0;
      wait (rst_n);
      for (int i = 0; i < 1500; i++) begin
        logic [7:0] w;
        logic [31:0] d;
        logic we;
        @(negedge clk);
        w = 8'(128 * g + $urandom_range(0, 127));  // disjoint halves per master
        we = $urandom_range(0, 1);
        d = $urandom;
        m_req[g].req = 1; m_req[g].wr_en = we; m_req[g].addr = DMEM_BASE + {22'h0, w, 2'b00};
        m_req[g].wrdata = d;
        do @(posedge clk); while (!m_rsp[g].ready);
        @(negedge clk);
        m_req[g].req = 0;
        if (!m_rsp[g].done) fail("master DONE missing");
        if (we) ref_mem[w] = d;
        else begin
          checks++;
          if (m_rsp[g].rddata !== ref_mem[w]) fail($sformatf("m%0d read %0d got %h exp %h", g, w, m_rsp[g].rddata, ref_mem[w]));
        end
        repeat ($urandom_range(0, 1)) @(negedge clk);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_be = 0; gnt_q = 0;
    @(negedge clk);
    // CPU fills the reference region first (masters wait for reset release)
    for (int i = 0; i < 256; i++) begin
      cpu_req = 1; cpu_we = 1; cpu_be = 4'hF; cpu_addr = DMEM_BASE + 32'(i * 4);
      cpu_wdata = 32'hC0DE0000 + 32'(i); ref_mem[i] = cpu_wdata;
      @(negedge clk);
      cpu_req = 0;
    end
    rst_n = 1;
    // The CPU keeps reading at random while the masters run, to contend for
    // the port; its data is not checked here (the masters change it).
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) begin
        cpu_req = 1; cpu_we = 0; cpu_be = 4'hF;
        cpu_addr = DMEM_BASE + 32'(4 * $urandom_range(0, 255));
        @(negedge clk);
        cpu_req = 0;
        checks++;
        if (!cpu_done) fail("CPU DONE missing");
      end
    end
    repeat (20) @(negedge clk);
    checks++;
    if (stalls == 0) fail("no accelerator stall seen");
    $display("accelerator stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
