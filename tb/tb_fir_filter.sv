// tb_fir_filter: the FIR filter against a behavioural convolution.
// A default filter (the design's 8-tap low-pass) and a second filter with
// large coefficients (DC gain 4, to drive the output into saturation) get the
// same stream: full-scale steps, random samples and a reset in the middle.
// Every cycle yn must equal sat((sum c[k] * x[n-k]) >>> 15) of the sample
// applied one clock earlier (one cycle of latency).
module tb_fir_filter;
  localparam int DW = 16;
  localparam int T  = ft_pkg::FIR_TAPS;
  localparam logic signed [DW-1:0] BIG [T] = '{
    16'sd16384, 16'sd16384, 16'sd16384, 16'sd16384,
    16'sd16384, 16'sd16384, 16'sd16384, -16'sd16384};

  logic clk = 1'b0, rst = 1'b1;
  logic signed [DW-1:0] xn = '0, y_a, y_b;
  int checks = 0, failures = 0, sat_hits = 0, cycles = 0;

  fir_filter dut_a (.clk(clk), .rst(rst), .xn(xn), .yn(y_a));
  fir_filter #(.COEFS(BIG)) dut_b (.clk(clk), .rst(rst), .xn(xn), .yn(y_b));

  always #5 clk = ~clk;

  // Reference history: hist[0] is the newest sample.
  int hist [T];

  function automatic int ref_y(input logic signed [DW-1:0] c [T], input int h [T]);
    longint acc = 0;
    longint s;
    for (int k = 0; k < T; k++) acc += longint'(c[k]) * longint'(h[k]);
    s = acc >>> 15;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic signed [DW-1:0] x, input logic do_rst);
    int ea, eb;
    xn  = x;
    rst = do_rst;
    @(posedge clk);
    #1;
    cycles++;
    if (do_rst) begin
      for (int k = 0; k < T; k++) hist[k] = 0;
      ea = 0; eb = 0;
    end else begin
      for (int k = T - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = int'(x);
      ea = ref_y(ft_pkg::FIR_COEFS, hist);
      eb = ref_y(BIG, hist);
    end
    checks += 2;
    if (int'(y_a) != ea) begin
      failures++;
      if (failures < 10) $display("FAIL default filter cycle %0d: %0d expected %0d", cycles, y_a, ea);
    end
    if (int'(y_b) != eb) begin
      failures++;
      if (failures < 10) $display("FAIL gain-4 filter cycle %0d: %0d expected %0d", cycles, y_b, eb);
    end
    if (!do_rst && (eb == 32767 || eb == -32768)) sat_hits++;
  endtask

  initial begin
    for (int k = 0; k < T; k++) hist[k] = 0;
    step('0, 1'b1);
    step('0, 1'b1);
    // Impulse: the output must walk through the coefficients.
    step(16'sd32767, 1'b0);
    for (int k = 0; k < 10; k++) step('0, 1'b0);
    // Full-scale steps.
    for (int k = 0; k < 12; k++) step(-16'sd32768, 1'b0);
    for (int k = 0; k < 12; k++) step(16'sd32767, 1'b0);
    // Random samples, reset in the middle.
    for (int n = 0; n < 3000; n++) step(DW'($urandom), n == 1500);
    checks++;
    if (sat_hits == 0) begin
      failures++;
      $display("FAIL saturation never reached");
    end
    $display("saturated outputs: %0d", sat_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
