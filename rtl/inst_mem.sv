// inst_mem -- 32 KB single-port instruction ROM (INST_MEM).
//
// Holds the program that the CPU's fetch unit reads. The paper gives only
// its size, its place in the address map (0x0000_0000 - 0x0000_7FFF) and
// that it is a single-port ROM. The contents are fixed at build time: the
// INIT_FILE parameter names a $readmemh image (32-bit words, word 0 at byte
// address 0); with an empty name every word reads as 0x0000_0013 (RV32I
// "nop", addi x0,x0,0), a choice of this design.
//
// Interface and timing: addr is a byte address; bits [AW+1:2] select the
// word and higher bits are ignored (the ROM aliases). With en=1 the word
// appears on rdata one clock later, like the synchronous ROMs of FPGA and
// ASIC libraries; rdata holds while en=0.
module inst_mem #(
  parameter int unsigned DEPTH     = 8192,        // 32-bit words (32 KB)
  parameter string       INIT_FILE = "",
  parameter int unsigned AW        = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] addr,
  output logic [31:0] rdata
);

  logic [31:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) rom[i] = 32'h0000_0013;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  always_ff @(posedge clk) begin
    if (en) rdata <= rom[addr[AW+1:2]];
  end

endmodule
