// tb_da_add_shift: self-checking test of the add/shift accumulator.
// Feeds B random signed plane sums per sample, most significant plane first,
// with the sign plane subtracted. For B = 3 the expected result is
// y = -4*S2 + 2*S1 + S0, worked out in the testbench. Samples follow each
// other back to back or after idle gaps. A monitor checks that y_valid pulses
// exactly once per sample, one cycle after the last plane, and that y is
// right then.
module tb_da_add_shift;
  localparam int unsigned WI = 24;
  localparam int unsigned B  = 3;
  localparam int unsigned WO = WI + B;
  localparam int NSAMPLES = 500;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, first, sign, last;
  logic [WI-1:0] data;
  logic [WO-1:0] y;
  logic y_valid;
  logic valid_due;            // last plane went in at the previous edge
  longint expected [$];
  int checks = 0, failures = 0, results = 0;

  da_add_shift #(.WI(WI), .B(B)) dut (.clk(clk), .rst_n(rst_n), .en_i(en), .first_i(first),
    .sign_i(sign), .last_i(last), .data_i(data), .y_o(y), .y_valid_o(y_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: y_valid must follow the last plane by exactly one cycle
  always @(posedge clk) begin
    if (rst_n) begin
      #1;
      checks++;
      if (y_valid !== valid_due) begin
        failures++;
        $display("FAIL y_valid=%b expected %b", y_valid, valid_due);
      end
      if (y_valid) begin
        results++;
        checks++;
        if (expected.size() == 0 || longint'($signed(y)) != expected[0]) begin
          failures++;
          $display("FAIL y=%0d expected %0d", $signed(y), expected.size() ? expected[0] : 0);
        end
        if (expected.size() != 0) void'(expected.pop_front());
      end
    end
  end

  always @(posedge clk) valid_due <= rst_n && en && last;

  initial begin
    longint s [B];
    longint acc;
    en = 0; first = 0; sign = 0; last = 0; data = '0; valid_due = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NSAMPLES; t++) begin
      for (int j = 0; j < B; j++) s[j] = longint'($signed(WI'($urandom))) >>> 2;
      if (t == 0) for (int j = 0; j < B; j++) s[j] = -(longint'(1) <<< (WI - 1));
      if (t == 1) for (int j = 0; j < B; j++) s[j] = (longint'(1) <<< (WI - 1)) - 1;
      acc = 0;
      for (int j = B - 1; j >= 0; j--) begin
        en = 1; first = (j == B - 1); sign = (j == B - 1); last = (j == 0);
        data = WI'(s[j]);
        acc = (j == B - 1) ? -s[j] : 2 * acc + s[j];
        if (j == 0) expected.push_back(acc);
        @(negedge clk);
      end
      en = 0; first = 0; sign = 0; last = 0;
      data = WI'($urandom);   // ignored while en is low
      if (t % 3 == 0) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (results != NSAMPLES) begin
      failures++;
      $display("FAIL %0d results for %0d samples", results, NSAMPLES);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
