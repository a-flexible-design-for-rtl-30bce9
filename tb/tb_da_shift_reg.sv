// tb_da_shift_reg: self-checking test of the tap delay line.
// Shifts random 3-bit samples in (with random idle cycles) and, after every
// clock, checks all B bit planes against a reference window kept in the
// testbench: plane bit i of plane j must be bit j of the sample i shifts ago.
module tb_da_shift_reg;
  localparam int unsigned N = 11;
  localparam int unsigned B = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic shift_en;
  logic [B-1:0] sample;
  logic [$clog2(B)-1:0] bit_sel;
  logic [N-1:0] plane;
  logic [B-1:0] model [N];
  int checks = 0, failures = 0;

  da_shift_reg #(.N(N), .B(B)) dut (.clk(clk), .rst_n(rst_n), .shift_en(shift_en),
    .sample_i(sample), .bit_sel(bit_sel), .plane_o(plane));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_planes();
    for (int j = 0; j < B; j++) begin
      bit_sel = 2'(j);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (plane[i] !== model[i][j]) begin
          failures++;
          $display("FAIL tap %0d plane %0d: got %b expected %b", i, j, plane[i], model[i][j]);
        end
      end
    end
  endtask

  initial begin
    shift_en = 1'b0; sample = '0; bit_sel = '0;
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_planes();
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      shift_en = ($urandom % 4) != 0;
      sample   = B'($urandom);
      @(posedge clk);
      if (shift_en) begin
        for (int i = N - 1; i > 0; i--) model[i] = model[i-1];
        model[0] = sample;
      end
      @(negedge clk);
      shift_en = 1'b0;
      check_planes();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
