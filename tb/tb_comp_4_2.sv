// tb_comp_4_2: self-checking test of the word-wide 4:2 compressor.
// Drives random and corner-case operands and checks that
// sum + carry == x1 + x2 + x3 + x4 (mod 2^W).
module tb_comp_4_2;
  localparam int unsigned W = 24;
  logic clk = 1'b0;
  logic [W-1:0] x1, x2, x3, x4, s, cy;
  int checks = 0, failures = 0;

  comp_4_2 #(.W(W)) dut (.x1_i(x1), .x2_i(x2), .x3_i(x3), .x4_i(x4), .sum_o(s), .carry_o(cy));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [W-1:0] a, b, c, d);
    logic [W-1:0] expect_sum;
    x1 = a; x2 = b; x3 = c; x4 = d;
    @(posedge clk);
    expect_sum = a + b + c + d;
    checks++;
    if (W'(s + cy) !== expect_sum) begin
      failures++;
      $display("FAIL %h %h %h %h sum=%h carry=%h", a, b, c, d, s, cy);
    end
  endtask

  initial begin
    check_one('0, '0, '0, '0);
    check_one('1, '1, '1, '1);
    check_one({W{1'b1}}, {W{1'b1}}, {W{1'b1}}, 1);
    for (int i = 0; i < 2000; i++)
      check_one(W'($urandom), W'($urandom), W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
