// tb_da_unit: self-checking test of the DA unit.
// Three instances share one coefficient set: the default partition (143 taps,
// 16 LUTs of 4 address bits, 79 multiplexers), a LUT-less one (11 taps, no
// LUT) and a LUT-only one with unequal LUTs (12 taps, LUTs of 3, 4 and 5 bits).
// A fourth instance has the same LUTs but no compressor: its LUT words are
// added by the CLA tree (the partitioned-LUT form). After the LUTs are
// filled, random bit planes are applied. Each output must equal the sum of
// the coefficients whose plane bit is set, worked out in the testbench.
module tb_da_unit;
  localparam int unsigned C  = 16;
  localparam int unsigned N0 = 143, M0 = 16;
  localparam int unsigned N1 = 11,  M1 = 0;
  localparam int unsigned N2 = 12,  M2 = 3;
  localparam da_pkg::lut_bits_t K0 = '{default: 4};
  localparam da_pkg::lut_bits_t K1 = '{default: 4};
  localparam da_pkg::lut_bits_t K2 = '{0: 3, 1: 4, 2: 5, default: 0};
  localparam int unsigned OW0 = C + $clog2(N0);
  localparam int unsigned OW1 = C + $clog2(N1);
  localparam int unsigned OW2 = C + $clog2(N2);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N0-1:0][C-1:0] coef;
  logic [N0-1:0] plane;
  logic fill;
  logic busy0, busy1, busy2, busy3;
  logic [OW0-1:0] s0;
  logic [OW1-1:0] s1;
  logic [OW2-1:0] s2, s3;
  int checks = 0, failures = 0;

  da_unit #(.N(N0), .M(M0), .KI(K0), .C(C)) dut0 (.clk(clk), .rst_n(rst_n),
    .coef_i(coef), .fill_i(fill), .busy_o(busy0), .plane_i(plane), .sum_o(s0));
  da_unit #(.N(N1), .M(M1), .KI(K1), .C(C)) dut1 (.clk(clk), .rst_n(rst_n),
    .coef_i(coef[N1-1:0]), .fill_i(fill), .busy_o(busy1), .plane_i(plane[N1-1:0]), .sum_o(s1));
  da_unit #(.N(N2), .M(M2), .KI(K2), .C(C)) dut2 (.clk(clk), .rst_n(rst_n),
    .coef_i(coef[N2-1:0]), .fill_i(fill), .busy_o(busy2), .plane_i(plane[N2-1:0]), .sum_o(s2));
  da_unit #(.N(N2), .M(M2), .KI(K2), .C(C), .USE_COMPRESSOR(1'b0)) dut3 (.clk(clk), .rst_n(rst_n),
    .coef_i(coef[N2-1:0]), .fill_i(fill), .busy_o(busy3), .plane_i(plane[N2-1:0]), .sum_o(s3));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_sum(int unsigned n);
    longint acc = 0;
    for (int i = 0; i < int'(n); i++) if (plane[i]) acc += longint'($signed(coef[i]));
    return acc;
  endfunction

  task automatic compare();
    #1;
    checks += 4;
    if (longint'($signed(s3)) != ref_sum(N2)) begin
      failures++; $display("FAIL partitioned-lut: got %0d expected %0d", $signed(s3), ref_sum(N2));
    end
    if (longint'($signed(s0)) != ref_sum(N0)) begin
      failures++; $display("FAIL default: got %0d expected %0d", $signed(s0), ref_sum(N0));
    end
    if (longint'($signed(s1)) != ref_sum(N1)) begin
      failures++; $display("FAIL lut-less: got %0d expected %0d", $signed(s1), ref_sum(N1));
    end
    if (longint'($signed(s2)) != ref_sum(N2)) begin
      failures++; $display("FAIL lut-only: got %0d expected %0d", $signed(s2), ref_sum(N2));
    end
  endtask

  initial begin
    fill = 1'b0; plane = '0; coef = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk);
      for (int i = 0; i < N0; i++) coef[i] = C'($urandom);
      if (round == 0) for (int i = 0; i < N0; i++) coef[i] = 16'h8000;
      fill = 1'b1;
      @(negedge clk);
      fill = 1'b0;
      while (busy0 || busy1 || busy2 || busy3) @(negedge clk);
      plane = '1;
      compare();
      plane = '0;
      compare();
      for (int t = 0; t < 200; t++) begin
        for (int i = 0; i < N0; i++) plane[i] = 1'($urandom);
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
