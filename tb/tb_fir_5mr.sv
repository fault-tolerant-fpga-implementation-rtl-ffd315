// tb_fir_5mr: end-to-end test of the five-module fault-tolerant FIR filter at
// its default size (16-bit samples, 8 taps, five modules).
//
// Input: a synthetic noisy ECG generated here - a heartbeat every 300 samples
// (P wave, sharp negative-going QRS complex, T wave) plus 50 Hz mains hum at a
// 360 Hz sample rate and random wide-band noise.
// Each of the five voter configurations is selected in turn for 1200 samples.
// During each phase faults are injected into module outputs by forcing the
// output register of one, two or three filter modules to the fault-free value
// with random bits flipped, for a few cycles at a time:
//   - one or two faulty modules must not change yn;
//   - three modules with the same flipped bits must show through (the voter
//     really votes and does not just pass one module along).
// yn is checked every cycle against a behavioural filter model, with one cycle
// of latency (two in the 4:1-mux configuration). The test also checks that the
// output is smoother than the input (less sample-to-sample noise energy) and
// counts each mechanism: every configuration, single, double and triple
// faults, and a reset; one that never happens counts as a failure.
module tb_fir_5mr;
  import ft_pkg::*;

  localparam int DW = 16;
  localparam int T  = FIR_TAPS;
  localparam int PHASE = 1200;

  logic clk = 1'b0, rst = 1'b1;
  logic signed [DW-1:0] xn = '0, yn;
  voter_cfg_e cfg = VOTE_CONVENTIONAL;

  fir_5mr dut (.clk(clk), .rst(rst), .xn(xn), .cfg(cfg), .yn(yn));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cfg_cycles [5];
  int n_single = 0, n_double = 0, n_triple = 0, n_reset = 0;
  real dx2 = 0.0, dy2 = 0.0;

  int hist [T];
  int y_ref_now, y_ref_prev;

  function automatic int ref_y(input int h [T]);
    longint acc = 0;
    longint s;
    for (int k = 0; k < T; k++) acc += longint'(FIR_COEFS[k]) * longint'(h[k]);
    s = acc >>> COEF_FRAC;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  // Synthetic ECG sample n.
  function automatic logic signed [DW-1:0] ecg(input int n);
    real t, v, pi;
    int ph;
    pi = 3.141592653589793;
    ph = n % 300;
    v = 0.0;
    if (ph >= 40 && ph < 70)   v += 600.0 * $sin(pi * real'(ph - 40) / 30.0);    // P
    if (ph >= 90 && ph < 96)   v += 1500.0 * real'(ph - 90) / 6.0;                // Q..R
    if (ph >= 96 && ph < 102)  v += -9000.0 * $sin(pi * real'(ph - 96) / 6.0);    // sharp spike
    if (ph >= 150 && ph < 210) v += 1500.0 * $sin(pi * real'(ph - 150) / 60.0);  // T
    t = real'(n) / 360.0;
    v += 400.0 * $sin(2.0 * pi * 50.0 * t);                                      // mains hum
    v += real'(int'($urandom_range(800)) - 400);                                  // noise
    return DW'(int'(v));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Fault injection: while any module is faulty, the five module outputs seen
  // by the voters are forced to the fault-free value, with flip[m] XORed into
  // each module m in fmask. (Forcing the whole bundle at once keeps the
  // simulator from sharing one forced value between the identical modules.)
  logic [4:0][DW-1:0] fword;
  logic               forcing = 1'b0;

  task automatic inject(input logic [4:0] fmask, input logic [DW-1:0] good,
                        input logic [DW-1:0] flip [5]);
    for (int m = 0; m < 5; m++) fword[m] = fmask[m] ? (good ^ flip[m]) : good;
    if (fmask != 0) force dut.rep_y = fword;
    forcing = (fmask != 0);
  endtask

  initial begin
    int n = 0;
    int lag;
    logic signed [DW-1:0] prev_x = '0, prev_y = '0;
    logic [DW-1:0] flip [5];
    logic [4:0] fmask;
    int nf;
    int expect_v;
    int prev_nf = 0;
    logic [DW-1:0] prev_flip0 = '0;
    logic shown_bad, prev_bad = 1'b0;

    for (int k = 0; k < T; k++) hist[k] = 0;
    y_ref_now = 0;
    y_ref_prev = 0;
    repeat (3) @(posedge clk);
    #1;
    rst = 1'b0;
    n_reset++;
    for (int p = 0; p < 5; p++) begin
      cfg = voter_cfg_e'(p);
      for (int i = 0; i < PHASE; i++) begin
        // Apply the next sample, then step the reference model over the edge.
        xn = ecg(n);
        @(posedge clk);
        #1;
        for (int k = T - 1; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = int'(xn);
        y_ref_prev = y_ref_now;
        y_ref_now  = ref_y(hist);

        // Fault pattern for this cycle: in bursts of 4 out of every 16 cycles.
        fmask = '0;
        nf = 0;
        if ((i % 16) >= 8 && (i % 16) < 12) begin
          nf = 1 + ((i / 16) % 3);
          while ($countones(fmask) < nf) fmask[$urandom_range(4)] = 1'b1;
          flip[0] = DW'($urandom) | 16'h0001;
          for (int m = 1; m < 5; m++) flip[m] = (nf == 3) ? flip[0] : (DW'($urandom) | 16'h0001);
        end
        inject(fmask, DW'(y_ref_now), flip);
        #1;

        lag = (cfg == VOTE_MUX4) ? 2 : 1;
        // In the 4:1-mux configuration yn shows the vote from one cycle back,
        // so its faults are those of the previous cycle: track them by delay.
        expect_v = (lag == 1) ? y_ref_now : y_ref_prev;
        if (i >= 2) begin
          checks++;
          cfg_cycles[p]++;
          if (lag == 1 && nf == 3) expect_v = int'($signed(DW'(y_ref_now) ^ flip[0]));
          if (lag == 2 && prev_nf == 3) expect_v = int'($signed(DW'(y_ref_prev) ^ prev_flip0));
          case ((lag == 1) ? nf : prev_nf)
            1: n_single++;
            2: n_double++;
            3: n_triple++;
            default: ;
          endcase
          if (int'(yn) != expect_v) begin
            failures++;
            if (failures < 10)
              $display("FAIL cfg %0d sample %0d faults %b: yn %0d expected %0d",
                       p, n, fmask, yn, expect_v);
          end
        end
        n++;
        // Release before the next clock edge so that the modules' new outputs
        // reach the voters at that edge.
        if (forcing) begin
          release dut.rep_y;
          forcing = 1'b0;
        end
        // Smoothness is measured only where no triple fault shows at the output.
        shown_bad = (lag == 1) ? (nf == 3) : (prev_nf == 3);
        if (!shown_bad && !prev_bad) begin
          dx2 += (real'(xn) - real'(prev_x)) ** 2;
          dy2 += (real'(yn) - real'(prev_y)) ** 2;
        end
        prev_bad   = shown_bad;
        prev_nf    = nf;
        prev_flip0 = flip[0];
        prev_x = xn;
        prev_y = yn;
      end
    end
    inject(5'b00000, '0, flip);

    // A reset mid-stream clears every module and the output register.
    rst = 1'b1;
    @(posedge clk);
    @(posedge clk);
    #1;
    n_reset++;
    checks++;
    if (yn != 0) begin
      failures++;
      $display("FAIL yn %0d after reset", yn);
    end

    for (int p = 0; p < 5; p++) begin
      checks++;
      if (cfg_cycles[p] == 0) begin
        failures++;
        $display("FAIL configuration %0d never exercised", p);
      end
    end
    checks += 3;
    if (n_single == 0) begin failures++; $display("FAIL no single faults"); end
    if (n_double == 0) begin failures++; $display("FAIL no double faults"); end
    if (n_triple == 0) begin failures++; $display("FAIL no triple faults"); end
    checks++;
    if (!(dy2 < 0.5 * dx2)) begin
      failures++;
      $display("FAIL output not smoother than input: %f vs %f", dy2, dx2);
    end
    $display("cycles per configuration: %0d %0d %0d %0d %0d",
             cfg_cycles[0], cfg_cycles[1], cfg_cycles[2], cfg_cycles[3], cfg_cycles[4]);
    $display("faulty-module cycles: single %0d double %0d triple %0d, resets %0d",
             n_single, n_double, n_triple, n_reset);
    $display("sample-to-sample energy: input %0.3e output %0.3e", dx2, dy2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
