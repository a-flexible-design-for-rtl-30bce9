// tb_da_coef_regs: self-checking test of the coefficient register file.
// Checks reset to zero, random writes against a reference array, that
// out-of-range addresses write nothing, and that we = 0 writes nothing.
module tb_da_coef_regs;
  localparam int unsigned N = 13;
  localparam int unsigned C = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [$clog2(N)-1:0] waddr;
  logic [C-1:0] wdata;
  logic [N-1:0][C-1:0] coef;
  logic [C-1:0] model [N];
  int checks = 0, failures = 0;

  da_coef_regs #(.N(N), .C(C)) dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr),
    .wdata(wdata), .coef_o(coef));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (coef[i] !== model[i]) begin
        failures++;
        $display("FAIL coef[%0d]=%h expected %h", i, coef[i], model[i]);
      end
    end
  endtask

  initial begin
    we = 1'b0; waddr = '0; wdata = '0;
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();
    for (int t = 0; t < 500; t++) begin
      we    = ($urandom % 3) != 0;
      waddr = 4'($urandom);          // 0..15, so some are out of range
      wdata = C'($urandom);
      @(posedge clk);
      if (we && waddr < N) model[waddr] = wdata;
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
