// tb_inst_mem -- self-checking test of the instruction ROM.
//
// Loads a 64-word image (tb/imem_test.hex, word i = 0x00100093 + i*0x01010101)
// into a full-size 32 KB ROM, fetches every image word and a sample of the
// words beyond it, and checks that each word arrives one clock after the
// fetch, that words past the image read as the RV32I nop 0x00000013, and that
// rdata holds while en is low.
module tb_inst_mem;
  logic clk = 0;
  logic en;
  logic [31:0] addr, rdata;
  int checks = 0, failures = 0;

  inst_mem #(.INIT_FILE("tb/imem_test.hex")) dut (.clk, .en, .addr, .rdata);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    en = 0; addr = 0;
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      en = 1; addr = 32'(i * 4);
      exp = 32'h00100093 + 32'(i) * 32'h01010101;
      @(negedge clk);
      check($sformatf("word %0d", i), rdata, exp);
      en = 0; addr = 32'h0;
      @(negedge clk);
      check($sformatf("hold %0d", i), rdata, exp);
    end
    for (int i = 0; i < 200; i++) begin
      en = 1; addr = 32'($urandom_range(64, 8191) * 4);
      @(negedge clk);
      check("nop fill", rdata, 32'h0000_0013);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
