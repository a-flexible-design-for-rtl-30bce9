// tb_da_cla: self-checking test of the carry-lookahead adder.
// Checks sum == a + b (mod 2^W) for corner cases (full carry chains) and
// random operands.
module tb_da_cla;
  localparam int unsigned W = 24;
  logic clk = 1'b0;
  logic [W-1:0] a, b, s;
  int checks = 0, failures = 0;

  da_cla #(.W(W)) dut (.a_i(a), .b_i(b), .sum_o(s));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [W-1:0] x, y);
    a = x; b = y;
    @(posedge clk);
    checks++;
    if (s !== W'(x + y)) begin
      failures++;
      $display("FAIL a=%h b=%h sum=%h", x, y, s);
    end
  endtask

  initial begin
    check_one('0, '0);
    check_one({W{1'b1}}, 1);
    check_one({1'b0, {(W-1){1'b1}}}, 1);
    check_one({W{1'b1}}, {W{1'b1}});
    for (int i = 0; i < W; i++) check_one(W'((1 << i) - 1), 1);
    for (int i = 0; i < 3000; i++) check_one(W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
