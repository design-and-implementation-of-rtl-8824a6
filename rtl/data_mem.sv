// data_mem -- 32 KB single-port data SRAM (DATA_MEM).
//
// Holds the input arrays, kernel coefficients and results that the CPU and
// the accelerators exchange. One access per cycle through a single port
// (the paper's "single-port SRAM"); the arbiter in front of it decides who
// owns the port. Written as a synthesizable array: a synthesis flow maps it
// to an SRAM macro or block RAM.
//
// Interface and timing: en/we/be/addr/wdata are sampled on the rising clock.
// A write updates the bytes whose be bit is set. A read (en=1, we=0) returns
// the word on rdata one clock later ("single-cycle SRAM"); rdata holds its
// value until the next read. The contents are not reset.
module data_mem #(
  parameter int unsigned DEPTH = 8192,             // 32-bit words (32 KB)
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [3:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
