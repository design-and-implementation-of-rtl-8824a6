// tb_mmi_master -- self-checking test of the memory-master-interface sequencer.
//
// A command source issues reads and writes, each command held until
// cmd_ready. The testbench plays the arbiter and a one-cycle memory: it
// grants MMI_REQ (MMI_READY) at random, answers MMI_DONE exactly one cycle
// after each grant and returns read data from a reference array. Checks:
// every read returns the right word on rsp_valid, every write lands, REQ is
// never raised while an access is outstanding (except in its DONE cycle),
// REQ stays up until granted, and with the port always free the access
// stream runs at one access per cycle (back-to-back grant in the DONE cycle).
module tb_mmi_master;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_we, cmd_ready, rsp_valid, busy;
  logic [31:0] cmd_addr, cmd_wdata, rsp_rdata;
  mmi_req_t mmi_req;
  mmi_rsp_t mmi_rsp;
  int checks = 0, failures = 0;
  logic [31:0] mem [64];
  logic grant_prob_full;
  logic done_q;
  logic [31:0] rdata_q;
  int outstanding_reads;

  mmi_master dut (.clk, .rst_n, .cmd_valid, .cmd_we, .cmd_addr, .cmd_wdata, .cmd_ready,
                  .rsp_valid, .rsp_rdata, .busy, .mmi_req, .mmi_rsp);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask

  // Arbiter + one-cycle memory model.
  // the grant decision is drawn once per cycle, at the falling edge
  logic grant_c;
  always @(negedge clk) grant_c = mmi_req.req && (grant_prob_full || ($urandom_range(0, 2) == 0));
  always_comb begin
    mmi_rsp.ready  = grant_c && mmi_req.req;
    mmi_rsp.done   = done_q;
    mmi_rsp.rddata = rdata_q;
  end
  always_ff @(posedge clk) begin
    done_q <= mmi_rsp.ready;
    if (mmi_rsp.ready) begin
      if (mmi_req.wr_en) mem[mmi_req.addr[7:2]] <= mmi_req.wrdata;
      else rdata_q <= mem[mmi_req.addr[7:2]];
    end
  end

  // Protocol monitor
  logic req_q, ready_q;
  always @(posedge clk) if (rst_n) begin
    if (busy && mmi_req.req && !mmi_rsp.done) fail("REQ while outstanding");
    if (req_q && !ready_q && !mmi_req.req) fail("REQ dropped before READY");
    checks++;
    req_q   <= mmi_req.req;
    ready_q <= mmi_rsp.ready;
  end

  initial begin
    repeat (50000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_mem [64];

  task automatic do_access(input logic we, input logic [5:0] w, input logic [31:0] d,
                           output logic [31:0] rd);
    cmd_valid = 1; cmd_we = we; cmd_addr = {24'h0, w, 2'b00}; cmd_wdata = d;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    if (!rsp_valid) begin
      do @(posedge clk); while (!rsp_valid);
    end
    rd = rsp_rdata;
  endtask

  initial begin
    logic [31:0] rd;
    int t0;
    cmd_valid = 0; cmd_we = 0; cmd_addr = 0; cmd_wdata = 0;
    done_q = 0; rdata_q = 0; grant_prob_full = 0;
    req_q = 0; ready_q = 0;
    for (int i = 0; i < 64; i++) begin mem[i] = 32'(i) * 7; ref_mem[i] = 32'(i) * 7; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // random traffic with random grants
    for (int i = 0; i < 2000; i++) begin
      logic we; logic [5:0] w; logic [31:0] d;
      we = $urandom_range(0, 1); w = 6'($urandom); d = $urandom;
      do_access(we, w, d, rd);
      if (we) ref_mem[w] = d;
      else begin
        checks++;
        if (rd !== ref_mem[w]) fail($sformatf("read word %0d got %h exp %h", w, rd, ref_mem[w]));
      end
      #1;
    end
    // back-to-back throughput: command always valid, port always free
    @(negedge clk);
    grant_prob_full = 1;
    cmd_valid = 1; cmd_we = 0; cmd_addr = 32'h10;
    t0 = 0;
    for (int i = 0; i < 20; i++) begin
      @(posedge clk);
      if (cmd_ready) t0++;
    end
    cmd_valid = 0;
    checks++;
    if (t0 != 20) fail($sformatf("back-to-back grants %0d of 20 cycles", t0));
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
