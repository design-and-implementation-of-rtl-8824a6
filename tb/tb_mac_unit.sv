// tb_mac_unit -- self-checking test of the MAC datapath.
//
// Drives random signed operand pairs with random clear/enable patterns into
// two instances, one truncating and one saturating, and compares the 64-bit
// accumulator and the 32-bit narrowed result against a reference kept in
// 64-bit integers. Large operands make the sum leave the 32-bit range, so
// truncation and saturation give different answers. Also checks the
// one-cycle timing: a product enabled in cycle t is in acc after edge t.
module tb_mac_unit;
  logic clk = 0, rst_n = 0;
  logic clr, en;
  logic signed [31:0] a, b;
  logic signed [63:0] acc_t, acc_s;
  logic [31:0] res_t, res_s;
  int checks = 0, failures = 0;
  longint ref_acc;
  int sat_seen = 0;

  mac_unit #(.SATURATE(1'b0)) dut_t (.clk, .rst_n, .clr, .en, .a, .b, .acc(acc_t), .res32(res_t));
  mac_unit #(.SATURATE(1'b1)) dut_s (.clk, .rst_n, .clr, .en, .a, .b, .acc(acc_s), .res32(res_s));

  always #5 clk = ~clk;

  function automatic logic [31:0] sat32(longint v);
    if (v > 64'sd2147483647) return 32'h7FFF_FFFF;
    if (v < -64'sd2147483648) return 32'h8000_0000;
    return v[31:0];
  endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 15) == 0);
      en  = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: begin a = $urandom; b = $urandom; end
        1: begin a = $urandom_range(0, 2000) - 1000; b = $urandom_range(0, 2000) - 1000; end
        2: begin a = 32'sh7FFF_FFFF; b = 32'sh7FFF_FFFF; end
        default: begin a = 32'sh8000_0000; b = $urandom_range(0, 3); end
      endcase
      @(posedge clk);
      if (clr) ref_acc = 0;
      else if (en) ref_acc = ref_acc + longint'(a) * longint'(b);
      #1;
      check("acc trunc", acc_t, ref_acc);
      check("acc sat", acc_s, ref_acc);
      check("res trunc", {32'b0, res_t}, {32'b0, ref_acc[31:0]});
      check("res sat", {32'b0, res_s}, {32'b0, sat32(ref_acc)});
      if (sat32(ref_acc) != ref_acc[31:0]) sat_seen++;
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL no saturating case seen"); end
    $display("saturating cases: %0d", sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
