// tb_da_fir: end-to-end test of the DA FIR filter at its default size
// (143 taps, 16 LUTs of 4 address bits, 79 multiplexer taps, B = 3, C = 16).
//
// Loads random coefficients, fills the LUTs, and streams random 3-bit samples.
// Some gaps are random and some runs are back to back. The coefficients are
// then replaced, the LUTs refilled, and more samples streamed. Every output is
// compared with a direct convolution sum_i coef[i]*x[t-i], worked out in the
// testbench from the history of accepted samples.
// Timing is checked too: the LUT fill lasts 2^4 - 1 cycles, each result
// appears B+1 cycles after the cycle in which its sample was accepted, and with
// in_valid held high a sample is accepted every B cycles.
// Each mechanism must happen at least once, or a failure is counted: LUT
// fill, input stall during a fill, back-to-back acceptance, acceptance after
// an idle gap, negative samples (sign plane subtracted), full-scale samples.
module tb_da_fir;
  localparam int unsigned N  = da_pkg::DEF_N;
  localparam int unsigned KI = da_pkg::DEF_LUT_BITS;  // every default LUT has 4 bits
  localparam int unsigned B  = da_pkg::B_BITS;
  localparam int unsigned C  = da_pkg::C_BITS;
  localparam int unsigned YW = C + $clog2(N) + B;

  logic clk = 1'b0, rst_n = 1'b0;
  logic coef_we = 1'b0;
  logic [$clog2(N)-1:0] coef_addr = '0;
  logic [C-1:0] coef_wdata = '0;
  logic lut_fill = 1'b0, lut_busy;
  logic in_valid = 1'b0, in_ready;
  logic [B-1:0] in_sample = '0;
  logic out_valid;
  logic [YW-1:0] out_y;

  da_fir dut (
    .clk, .rst_n, .coef_we, .coef_addr, .coef_wdata, .lut_fill, .lut_busy,
    .in_valid, .in_ready, .in_sample, .out_valid, .out_y
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint coefs [N];
  longint hist [N];           // hist[i] = x[t-i] of the accepted samples
  longint exp_y [$];
  longint exp_cyc [$];
  longint last_accept = -100;
  int outputs = 0;
  // mechanism counters
  int n_fill = 0, n_stall = 0, n_back_to_back = 0, n_after_gap = 0;
  int n_negative = 0, n_full_scale = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one clock: inputs are driven at the falling edge; acceptance and outputs
  // are observed just before the rising edge
  task automatic step();
    #1;
    if (in_valid && in_ready) begin
      longint y = 0;
      longint x = longint'($signed(in_sample));
      for (int i = N - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = x;
      for (int i = 0; i < N; i++) y += coefs[i] * hist[i];
      exp_y.push_back(y);
      exp_cyc.push_back(cyc);
      if (cyc - last_accept == B) n_back_to_back++;
      else if (cyc - last_accept > B) n_after_gap++;
      if (x < 0) n_negative++;
      if (x == -(1 << (B - 1))) n_full_scale++;
      last_accept = cyc;
    end
    if (in_valid && !in_ready && lut_busy) n_stall++;
    if (out_valid) begin
      outputs++;
      checks += 2;
      if (exp_y.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        if (longint'($signed(out_y)) != exp_y[0]) begin
          failures++;
          $display("FAIL output %0d: got %0d expected %0d", outputs, $signed(out_y), exp_y[0]);
        end
        if (cyc - exp_cyc[0] != B + 1) begin
          failures++;
          $display("FAIL latency %0d cycles, expected %0d", cyc - exp_cyc[0], B + 1);
        end
        void'(exp_y.pop_front());
        void'(exp_cyc.pop_front());
      end
    end
    @(negedge clk);
  endtask

  task automatic load_coefs(input int mode);
    for (int i = 0; i < N; i++) begin
      logic [C-1:0] c;
      c = C'($urandom);
      if (mode == 1) c = (i % 2) ? 16'h8000 : 16'h7fff;
      coef_we = 1'b1; coef_addr = $clog2(N)'(i); coef_wdata = c;
      coefs[i] = longint'($signed(c));
      step();
    end
    coef_we = 1'b0;
  endtask

  task automatic fill_luts();
    int busy_cycles = 0;
    lut_fill = 1'b1;
    step();
    lut_fill = 1'b0;
    n_fill++;
    while (lut_busy) begin
      busy_cycles++;
      step();
    end
    checks++;
    if (busy_cycles != (1 << KI) - 1) begin
      failures++;
      $display("FAIL LUT fill took %0d cycles, expected %0d", busy_cycles, (1 << KI) - 1);
    end
  endtask

  task automatic drain();
    in_valid = 1'b0;
    while (exp_y.size() != 0) step();
    step();
  endtask

  task automatic stream(input int count, input int valid_pct);
    int accepted = 0;
    while (accepted < count) begin
      in_valid  = ($urandom % 100) < valid_pct;
      in_sample = B'($urandom);
      #1;
      if (in_valid && in_ready) accepted++;
      #0 step();
    end
    in_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) hist[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    step();

    // full-scale coefficients first, then random ones
    load_coefs(1);
    fill_luts();
    stream(200, 100);
    drain();

    load_coefs(0);
    // hold a sample at the input while the LUTs fill: it must stall
    in_valid = 1'b1;
    in_sample = B'($urandom);
    fill_luts();
    stream(400, 60);
    stream(300, 100);

    // throughput: with in_valid held high, one sample every B cycles
    begin
      longint first_cyc = -1;
      int n = 0;
      in_valid = 1'b1;
      while (n < 50) begin
        in_sample = B'($urandom);
        #1;
        if (in_ready) begin
          if (first_cyc < 0) first_cyc = cyc;
          n++;
        end
        #0 step();
      end
      in_valid = 1'b0;
      checks++;
      if (last_accept - first_cyc != longint'(49 * B)) begin
        failures++;
        $display("FAIL 50 samples took %0d cycles, expected %0d", last_accept - first_cyc, 49 * B);
      end
    end
    drain();

    checks++;
    if (outputs != 950) begin
      failures++;
      $display("FAIL %0d outputs, expected 950", outputs);
    end
    $display("mechanisms: fill=%0d stall=%0d back_to_back=%0d after_gap=%0d negative=%0d full_scale=%0d",
             n_fill, n_stall, n_back_to_back, n_after_gap, n_negative, n_full_scale);
    checks += 6;
    if (n_fill == 0)         begin failures++; $display("FAIL no LUT fill"); end
    if (n_stall == 0)        begin failures++; $display("FAIL no stall"); end
    if (n_back_to_back == 0) begin failures++; $display("FAIL no back-to-back accept"); end
    if (n_after_gap == 0)    begin failures++; $display("FAIL no accept after a gap"); end
    if (n_negative == 0)     begin failures++; $display("FAIL no negative sample"); end
    if (n_full_scale == 0)   begin failures++; $display("FAIL no full-scale sample"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
