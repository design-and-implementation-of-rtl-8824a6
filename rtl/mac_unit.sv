// mac_unit -- multiply-accumulate datapath shared by both accelerators.
//
// One 32x32 multiplier feeding a 64-bit accumulator register, plus a
// cast unit that narrows the 64-bit sum to the 32-bit word that is stored
// back to memory. Following the paper: the product of the two read words is
// added to a 64-bit accumulator so long sums do not overflow, and the final
// value is either truncated (upper 32 bits dropped) or saturated to 32 bits.
// Which of the two is used is the SATURATE parameter here (the paper leaves
// the policy open; truncation is the default). Operands are treated as signed
// two's-complement integers, a choice of this design.
//
// Interface and timing:
//   clr   : accumulator <= 0 on the next clock edge (has priority over en)
//   en    : accumulator <= accumulator + a*b on the next clock edge
//   acc   : the 64-bit accumulator register
//   res32 : acc narrowed to 32 bits, combinational from acc
// The multiply and add sit in one cycle: the sum is visible one clock after en.
module mac_unit #(
  parameter bit SATURATE = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               en,
  input  logic signed [31:0] a,
  input  logic signed [31:0] b,
  output logic signed [63:0] acc,
  output logic        [31:0] res32
);

  logic signed [63:0] product;

  assign product = a * b;  // both operands extended to 64 bits before the multiply

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + product;
  end

  // Narrowing: saturate to [-2^31, 2^31-1] or keep the low word.
  always_comb begin
    if (SATURATE) begin
      if (acc > 64'sd2147483647)       res32 = 32'h7FFF_FFFF;
      else if (acc < -64'sd2147483648) res32 = 32'h8000_0000;
      else                             res32 = acc[31:0];
    end else begin
      res32 = acc[31:0];
    end
  end

endmodule
