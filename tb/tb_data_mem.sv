// tb_data_mem -- self-checking test of the data SRAM.
//
// Writes every word of a 32 KB memory with a known pattern, overwrites
// random bytes under random byte enables, then reads back each word and
// checks it arrives one clock after the read is issued and matches a
// reference copy held in the testbench.
module tb_data_mem;
  localparam int DEPTH = 8192;
  logic clk = 0;
  logic en, we;
  logic [3:0] be;
  logic [12:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  data_mem dut (.clk, .en, .we, .be, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      en = 1; we = 1; be = 4'hF; addr = 13'(i); wdata = 32'hA5000000 ^ (i * 32'h9E37);
      ref_mem[i] = wdata;
      @(negedge clk);
    end
    for (int i = 0; i < 3000; i++) begin
      en = 1; we = 1; be = 4'($urandom); addr = 13'($urandom); wdata = $urandom;
      for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      @(negedge clk);
    end
    for (int i = 0; i < DEPTH; i++) begin
      en = 1; we = 0; addr = 13'(i);
      @(negedge clk);
      en = ($urandom_range(0, 1) == 1); we = 1; be = 4'h0;  // idle or empty write: rdata must hold
      checks++;
      if (rdata !== ref_mem[i]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: got %h expected %h", i, rdata, ref_mem[i]);
      end
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[i]) begin
        failures++;
        if (failures < 10) $display("FAIL hold word %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
