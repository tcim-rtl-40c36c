// tb_bit_counter: checks bit_counter against $countones for all 8-bit patterns spread over
// the vector, random 64-bit vectors and the worked example BitCount(0110) = 2 (4-bit instance).
module tb_bit_counter;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0] vec;
  logic [6:0]  cnt;
  logic [3:0]  v4;
  logic [2:0]  c4;
  bit_counter #(.WIDTH(64)) dut (.vec(vec), .count(cnt));
  bit_counter #(.WIDTH(4))  dut4 (.vec(v4), .count(c4));

  task automatic check(input logic [63:0] v);
    vec = v; #1;
    checks++;
    if (cnt !== 7'($countones(v))) begin
      failures++; $display("FAIL vec=%h count=%0d exp=%0d", v, cnt, $countones(v));
    end
  endtask

  initial begin
    for (int n = 0; n < 256; n++)
      for (int s = 0; s < 8; s++) check(64'(n) << (8*s));
    check('0); check('1);
    repeat (2000) check({$urandom, $urandom});
    v4 = 4'b0110; #1; checks++;
    if (c4 !== 3'd2) begin failures++; $display("FAIL BitCount(0110)=%0d", c4); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
