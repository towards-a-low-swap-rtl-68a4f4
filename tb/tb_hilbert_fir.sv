// tb_hilbert_fir: self-checking testbench of the Hilbert-transform FIR.
//
// The reference recomputes the 31-tap windowed Hilbert coefficients from their
// formula with real arithmetic, keeps its own history of accepted samples and
// predicts every (I, Q) output bit-exactly, including rounding and saturation.
// Stimulus: random samples with random idle clocks, full-scale alternating
// samples (saturation), then a tone at 0.05 of the sample rate (the 10 MHz IF at
// 200 MS/s), whose I and Q must be a cosine and a sine of the same amplitude
// (within the filter's ripple). Every output must come two clocks after the
// in_valid of its sample.
module tb_hilbert_fir;

  localparam int TAPS = 31;
  localparam int M    = 15;
  localparam real PI  = 3.14159265358979;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              in_valid;
  logic signed [7:0] in_x;
  logic              out_valid;
  logic signed [7:0] out_i, out_q;

  hilbert_fir dut (.*);

  int hcoef [8];
  int hist [$];        // accepted samples, oldest first
  longint in_cyc [$];  // clock of each accepted sample
  longint cycle = 0;
  int n_out = 0;
  int checks = 0;
  int failures = 0;
  int tone_checks = 0;
  int n_sat = 0;
  real w0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int xh(input int t);
    return (t >= 0 && t < hist.size()) ? hist[t] : 0;
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      hist.push_back(int'(in_x));
      in_cyc.push_back(cycle);
    end
    if (rst_n && out_valid) begin
      int acc, ei, eq, t;
      t = n_out;
      acc = 0;
      for (int m = 0; m < 8; m++)
        acc += hcoef[m] * (xh(t - M - (2*m + 1)) - xh(t - M + (2*m + 1)));
      eq = (acc + 1024) >>> 11;
      if (eq > 127) begin eq = 127; n_sat++; end
      if (eq < -128) begin eq = -128; n_sat++; end
      ei = xh(t - M);
      checks++;
      if (int'(out_i) != ei || int'(out_q) != eq) begin
        failures++;
        if (failures < 10) $display("FAIL: output %0d got (%0d,%0d) expected (%0d,%0d)",
                                    t, out_i, out_q, ei, eq);
      end
      checks++;
      if (cycle - in_cyc[t] != 2) begin
        failures++;
        $display("FAIL: output %0d latency %0d", t, cycle - in_cyc[t]);
      end
      // Tone section: analytic signal of a cosine.
      if (t >= 1200 + 40 && t < 1600) begin
        real ri, rq;
        ri = 100.0 * $cos(w0 * real'(t - M - 1200));
        rq = 100.0 * $sin(w0 * real'(t - M - 1200));
        tone_checks++;
        checks++;
        if ((real'(out_i) - ri) > 1.0 || (ri - real'(out_i)) > 1.0 ||
            (real'(out_q) - rq) > 4.0 || (rq - real'(out_q)) > 4.0) begin
          failures++;
          if (failures < 10) $display("FAIL: tone %0d I=%0d Q=%0d ref (%f,%f)", t, out_i, out_q, ri, rq);
        end
      end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input int x);
    in_x = 8'(x);
    in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    w0 = 2.0 * PI * 0.05;
    for (int m = 0; m < 8; m++) begin
      real n;
      n = real'(2*m + 1);
      hcoef[m] = int'($floor(2048.0 * 2.0 / (PI * n) * (0.54 + 0.46 * $cos(PI * n / 15.0)) + 0.5));
    end
    in_valid = 1'b0;
    in_x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // Random samples, random gaps.
    for (int s = 0; s < 1000; s++) begin
      put(int'($urandom_range(255)) - 128);
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
    end
    // Full-scale square wave at half the sample rate: |Q| exceeds the range.
    for (int s = 0; s < 200; s++) put((s % 2 == 0) ? 127 : -128);
    // Tone at 0.05 * fs, amplitude 100, continuous.
    for (int s = 0; s < 400; s++) put(int'($floor(100.0 * $cos(w0 * real'(s)) + 0.5)));
    repeat (4) @(posedge clk);
    checks++;
    if (n_out != 1600 || tone_checks != 360 || n_sat == 0) begin
      failures++;
      $display("FAIL: outputs %0d tone checks %0d saturations %0d", n_out, tone_checks, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
