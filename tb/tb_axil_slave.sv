// tb_axil_slave -- self-checking test of the AXI4-Lite slave front end.
//
// Behind the slave sits a 64-word register array kept by the testbench
// (written on wr_valid under wr_strb, read combinationally on rd_addr). An
// AXI-Lite master in the testbench issues random writes (AW and W raised in
// either order, with random delays) and reads, with random BREADY/RREADY
// back-pressure, and checks every read against a reference copy, the
// one-cycle response timing on a free slave, and that responses are OKAY.
module tb_axil_slave;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic wr_valid, rd_valid;
  logic [7:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0] wr_strb;
  logic [31:0] regs [64];
  logic [31:0] ref_regs [64];
  int checks = 0, failures = 0;

  axil_slave dut (.clk, .rst_n, .axil_req(req), .axil_rsp(rsp), .wr_valid, .wr_addr,
                  .wr_data, .wr_strb, .rd_valid, .rd_addr, .rd_data);

  assign rd_data = regs[rd_addr[7:2]];
  always_ff @(posedge clk)
    if (wr_valid) regs[wr_addr[7:2]] <= apply_strb(regs[wr_addr[7:2]], wr_data, wr_strb);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at %0t", msg, $time);
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s,
                           input bit slow_b);
    bit aw_first;
    aw_first = $urandom_range(0, 1);
    @(negedge clk);
    req.awaddr = 32'h0100_0000 | a; req.wdata = d; req.wstrb = s;
    if (aw_first) req.awvalid = 1; else req.wvalid = 1;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    req.awvalid = 1; req.wvalid = 1;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    @(negedge clk);
    req.awvalid = 0; req.wvalid = 0;
    checks++;
    if (!rsp.bvalid) fail("BVALID not one cycle after accept");
    if (slow_b) repeat ($urandom_range(1, 3)) @(negedge clk);
    req.bready = 1;
    checks++;
    if (!rsp.bvalid || rsp.bresp != AXI_OKAY) fail("bad write response");
    @(negedge clk);
    req.bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, input bit slow_r, output logic [31:0] d);
    @(negedge clk);
    req.araddr = 32'h0100_0000 | a; req.arvalid = 1;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 0;
    checks++;
    if (!rsp.rvalid) fail("RVALID not one cycle after accept");
    if (slow_r) repeat ($urandom_range(1, 3)) @(negedge clk);
    req.rready = 1;
    d = rsp.rdata;
    checks++;
    if (rsp.rresp != AXI_OKAY) fail("bad read response");
    @(negedge clk);
    req.rready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nwr = 0;
  always @(posedge clk) if (wr_valid) nwr++;

  initial begin
    logic [31:0] d;
    int nwr_exp;
    req = '0;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; ref_regs[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    nwr_exp = 0;
    for (int i = 0; i < 1500; i++) begin
      logic [5:0] w;
      w = 6'($urandom);
      if ($urandom_range(0, 1)) begin
        logic [31:0] v; logic [3:0] s;
        v = $urandom; s = 4'($urandom_range(1, 15));
        axi_write({w, 2'b00}, v, s, $urandom_range(0, 1));
        ref_regs[w] = apply_strb(ref_regs[w], v, s);
        nwr_exp++;
      end else begin
        axi_read({w, 2'b00}, $urandom_range(0, 1), d);
        checks++;
        if (d !== ref_regs[w]) fail($sformatf("reg %0d read %h exp %h", w, d, ref_regs[w]));
      end
    end
    checks++;
    if (nwr != nwr_exp) fail($sformatf("%0d write strobes for %0d writes", nwr, nwr_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
