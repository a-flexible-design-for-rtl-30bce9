// tb_da_fir_table1: the filter orders of the evaluation (8, 18, 31, 72, 108
// and 143 taps, 40 MHz sampling, B = 3, C = 16), run end to end.
//
// One da_fir per order. The 143-tap one uses the default parameters. The
// others use one 4-input LUT per 8 taps, so half the taps go to LUTs and half
// to multiplexers. Two further instances cover the extreme partitions: a
// LUT-less 31-tap filter (no LUT, all multiplexers) and an 8-tap filter served
// only by LUTs (two 4-input LUTs, no multiplexer). A last 8-tap filter has
// the same two LUTs but no compressor: it adds the LUT words with carry-
// lookahead adders (the partitioned-LUT form).
// The published coefficient sets are not available. Each filter therefore
// gets a Hamming-windowed sinc lowpass, designed here with the cutoff midway
// between the pass and stop edges of its row, quantised to 16 bits. All
// filters see the same 3-bit input: a slow sine plus a fast sine plus a
// little noise. Every output is compared with a direct convolution, and the
// testbench counts how often each filter's output moved, to show that the
// data is not trivial.
module tb_da_fir_table1;
  localparam int NF = 9;
  localparam int unsigned ORDER [NF] = '{8, 18, 31, 72, 108, 143, 31, 8, 8};
  localparam int unsigned NLUT  [NF] = '{1, 2, 4, 8, 12, 16, 0, 2, 2};
  localparam bit          COMPR [NF] = '{1, 1, 1, 1, 1, 1, 1, 1, 0};
  localparam real FPASS [NF] = '{1.2, 1.2, 1.6, 2.2, 2.2, 2.2, 1.6, 1.2, 1.2};
  localparam real FSTOP [NF] = '{3.8, 3.8, 3.0, 2.8, 2.8, 2.8, 3.0, 3.8, 3.8};
  localparam real FS = 40.0;
  localparam int unsigned B = 3, C = 16;
  localparam int unsigned NMAX = 143;
  localparam int unsigned YWMAX = C + 8 + B;
  localparam int NSAMPLES = 400;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0;
  logic coef_we = 1'b0;
  logic [7:0] coef_addr = '0;
  logic [NF-1:0][C-1:0] coef_wdata;
  logic lut_fill = 1'b0;
  logic [NF-1:0] lut_busy, in_ready, out_valid;
  logic in_valid = 1'b0;
  logic [B-1:0] in_sample = '0;
  logic [NF-1:0][YWMAX-1:0] out_y;

  for (genvar z = 0; z < NF; z++) begin : g_f
    localparam int unsigned N  = ORDER[z];
    localparam int unsigned YW = C + $clog2(N) + B;
    logic [YW-1:0] y;
    logic we;
    assign we = coef_we && (coef_addr < N);
    if (z == 5) begin : g_default
      da_fir dut (.clk, .rst_n, .coef_we(we), .coef_addr(coef_addr[$clog2(N)-1:0]),
        .coef_wdata(coef_wdata[z]), .lut_fill, .lut_busy(lut_busy[z]), .in_valid,
        .in_ready(in_ready[z]), .in_sample, .out_valid(out_valid[z]), .out_y(y));
    end else begin : g_sized
      da_fir #(.N(N), .M(NLUT[z]), .KI('{default: 4}), .USE_COMPRESSOR(COMPR[z])) dut (.clk, .rst_n, .coef_we(we),
        .coef_addr(coef_addr[$clog2(N)-1:0]), .coef_wdata(coef_wdata[z]), .lut_fill,
        .lut_busy(lut_busy[z]), .in_valid, .in_ready(in_ready[z]), .in_sample,
        .out_valid(out_valid[z]), .out_y(y));
    end
    assign out_y[z] = YWMAX'($signed(y));
  end

  int checks = 0, failures = 0;
  longint coefs [NF][NMAX];
  longint hist [NMAX];
  longint exp_y [NF][$];
  int outputs [NF];
  int changes [NF];
  longint last_y [NF];

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Hamming-windowed sinc lowpass, Q15, cutoff fc (cycles per sample)
  function automatic longint design_tap(int unsigned n_taps, real fc, int n);
    real m, h, w;
    longint q;
    m = n - (n_taps - 1) / 2.0;
    h = (m == 0.0) ? 2.0 * fc : $sin(2.0 * PI * fc * m) / (PI * m);
    w = (n_taps > 1) ? 0.54 - 0.46 * $cos(2.0 * PI * n / (n_taps - 1)) : 1.0;
    q = longint'($rtoi((h * w * 32768.0) + ((h * w) >= 0 ? 0.5 : -0.5)));
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return q;
  endfunction

  task automatic step();
    #1;
    if (in_valid && in_ready[0]) begin
      for (int i = NMAX - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = longint'($signed(in_sample));
      for (int z = 0; z < NF; z++) begin
        longint y = 0;
        for (int i = 0; i < int'(ORDER[z]); i++) y += coefs[z][i] * hist[i];
        exp_y[z].push_back(y);
      end
    end
    // filters with LUTs share the fill time, so they must agree on in_ready
    // (the LUT-less one is also ready while the others fill)
    for (int z = 0; z < NF; z++) begin
      if (NLUT[z] != 0) begin
        checks++;
        if (in_ready[z] !== in_ready[0]) begin
          failures++; $display("FAIL filter %0d disagrees on in_ready", z);
        end
      end
    end
    for (int z = 0; z < NF; z++) begin
      if (out_valid[z]) begin
        longint y = longint'($signed(out_y[z]));
        outputs[z]++;
        checks++;
        if (exp_y[z].size() == 0 || y != exp_y[z][0]) begin
          failures++;
          $display("FAIL filter %0d (order %0d): got %0d expected %0d", z, ORDER[z], y,
                   exp_y[z].size() ? exp_y[z][0] : 0);
        end
        if (exp_y[z].size() != 0) void'(exp_y[z].pop_front());
        if (y != last_y[z]) changes[z]++;
        last_y[z] = y;
      end
    end
    @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < NMAX; i++) hist[i] = 0;
    for (int z = 0; z < NF; z++) begin
      outputs[z] = 0; changes[z] = 0; last_y[z] = 0;
      for (int i = 0; i < NMAX; i++)
        coefs[z][i] = (i < int'(ORDER[z]))
          ? design_tap(ORDER[z], (FPASS[z] + FSTOP[z]) / 2.0 / FS, i) : 0;
    end
    coef_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // load all coefficient sets in parallel, address by address
    for (int i = 0; i < int'(NMAX); i++) begin
      coef_we = 1'b1;
      coef_addr = 8'(i);
      for (int z = 0; z < NF; z++) coef_wdata[z] = C'(coefs[z][i]);
      step();
    end
    coef_we = 1'b0;
    lut_fill = 1'b1;
    step();
    lut_fill = 1'b0;
    while (|lut_busy) step();
    // stream the test signal
    for (int t = 0; t < NSAMPLES; ) begin
      real v;
      int q;
      v = 2.2 * $sin(2.0 * PI * 0.5 / FS * t) + 1.2 * $sin(2.0 * PI * 9.0 / FS * t)
          + (($urandom % 100) - 50) / 100.0;
      q = $rtoi(v + 4.5) - 4;     // round to nearest
      if (q > 3) q = 3;
      if (q < -4) q = -4;
      in_valid = 1'b1;
      in_sample = B'(q);
      #1;
      if (in_ready[0]) t++;
      #0 step();
    end
    in_valid = 1'b0;
    repeat (2 * B + 2) step();
    for (int z = 0; z < NF; z++) begin
      checks += 2;
      if (outputs[z] != NSAMPLES) begin
        failures++; $display("FAIL filter %0d: %0d outputs", z, outputs[z]);
      end
      if (changes[z] < NSAMPLES / 4) begin
        failures++; $display("FAIL filter %0d: output barely moves", z);
      end
      $display("order %0d, %0d LUTs: %0d outputs checked", ORDER[z], NLUT[z], outputs[z]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
