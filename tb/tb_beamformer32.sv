// tb_beamformer32: end-to-end test of the 32-beam receiver back-end, at the
// default parameters.
//
// The testbench plays the part of the antenna array, receivers and ADCs: for a
// plane wave arriving from the direction of beam k0, element n sees the IF tone
// A * g[n] * cos(w*t + 2*pi*k0*n/32 + phi[n]) (w = 0.05 of the sample rate, the
// 10 MHz IF at 200 MS/s), where g[n] and phi[n] are random gain and phase
// mismatches of the receiver chains, rounded to 8 bits. It plays the control
// processor too: it writes the calibration coefficients 1/g[n] * exp(-j*phi[n])
// and reads the beam energies.
//
// Checks:
//  * every energy equals the sum of |beam|^2 the testbench sees on beam_re/im
//    over the same window (exact);
//  * with calibration, the energy pattern over the 32 beams matches an
//    independent floating-point model within 1 % of the peak, and the strongest
//    beam is k0, for all 32 directions. The model is
//      L * (|sum_n F32_hat(k,n) * a+ * e^{j*theta_n}|^2 + |... a- ... image|^2),
//    a+ = A*(1+G)/2 the wanted tone, a- = A*(1-G)/2 the small image tone the
//    Hilbert filter leaves, G its gain at w, theta_n = 2*pi*k0*n/32;
//  * without calibration (unit coefficients) the main beam loses energy;
//  * int_len = 0 stops all windows;
//  * the first beams come 11 clocks after the first snapshot.
// Each of these mechanisms is counted and must have happened.
module tb_beamformer32;
  import adft_pkg::*;

  localparam int   CAL_W = 12;
  localparam int   LEN_W = 24;
  localparam int   BEAM_W = ADC_W + ADFT_GROWTH;
  localparam int   ACC_W = 2 * BEAM_W + LEN_W;
  localparam int   L = 200;           // integration window, samples
  localparam real  PI = 3.14159265358979;
  localparam real  A = 100.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     adc_valid;
  logic signed [ADC_W-1:0]  adc_data [N];
  logic signed [CAL_W-1:0]  cal_re   [N];
  logic signed [CAL_W-1:0]  cal_im   [N];
  logic [LEN_W-1:0]         int_len;
  logic                     energy_valid;
  logic [ACC_W-1:0]         energy   [N];
  logic                     beam_valid;
  logic signed [BEAM_W-1:0] beam_re  [N];
  logic signed [BEAM_W-1:0] beam_im  [N];

  beamformer32 dut (.*);

  // F32_hat for the model (same file as the core's own testbench).
  logic [4*N-1:0] fhat_rows [N];
  real fr [N][N];
  real fi [N][N];

  real g [N];
  real phi [N];
  real w0, ht_gain;
  real max_dev = 0.0;
  longint cycle = 0;
  longint first_adc = -1, first_beam = -1;
  int checks = 0, failures = 0;
  int n_windows = 0;
  int n_steer = 0, n_calib = 0, n_stop = 0, n_latency = 0;
  longint m_acc [N];
  int m_cnt = 0;
  longint last_energy [N];
  int k0 = 0;
  longint t_sig = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Mirror of the energy windows, from the beams the DUT puts out.
  always @(posedge clk) begin
    if (rst_n && adc_valid && first_adc < 0) first_adc = cycle;
    if (rst_n && beam_valid && first_beam < 0) first_beam = cycle;
    if (rst_n && beam_valid && int_len != 0) begin
      for (int k = 0; k < N; k++)
        m_acc[k] += longint'(beam_re[k]) * beam_re[k] + longint'(beam_im[k]) * beam_im[k];
      m_cnt++;
      if (m_cnt >= int'(int_len)) begin
        for (int k = 0; k < N; k++) begin
          last_energy[k] = m_acc[k];
          m_acc[k] = 0;
        end
        m_cnt = 0;
      end
    end
    if (rst_n && energy_valid) begin
      n_windows++;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (longint'(energy[k]) != last_energy[k]) begin
          failures++;
          if (failures < 10) $display("FAIL: beam %0d energy %0d, beams give %0d", k, energy[k], last_energy[k]);
        end
      end
    end
  end

  // ADC samples of a plane wave from the direction of beam k0.
  always @(posedge clk) begin
    #1;
    for (int n = 0; n < N; n++)
      adc_data[n] = ADC_W'(int'($floor(A * g[n] * $cos(w0 * real'(t_sig) + 2.0 * PI * real'(k0 * n) / 32.0 + phi[n]) + 0.5)));
    t_sig++;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_cal(input bit on);
    for (int n = 0; n < N; n++) begin
      if (on) begin
        cal_re[n] = CAL_W'(int'($floor(1024.0 / g[n] * $cos(-phi[n]) + 0.5)));
        cal_im[n] = CAL_W'(int'($floor(1024.0 / g[n] * $sin(-phi[n]) + 0.5)));
      end else begin
        cal_re[n] = CAL_W'(1024);
        cal_im[n] = '0;
      end
    end
  endtask

  // Return the energies of the first window that holds only the current input.
  task automatic measure(output longint e [N]);
    int w;
    int_len = LEN_W'(L);
    // Let the new input reach the integrators (filter delay + pipeline < 40
    // clocks), discard the window in progress, keep the next one.
    repeat (40) @(posedge clk);
    w = n_windows;
    while (n_windows < w + 2) @(posedge clk);
    for (int k = 0; k < N; k++) e[k] = longint'(energy[k]);
  endtask

  function automatic int argmax(input longint e [N]);
    int b = 0;
    for (int k = 1; k < N; k++) if (e[k] > e[b]) b = k;
    return b;
  endfunction

  initial begin
    longint e [N];
    longint e_unc [N];
    real model [N];
    real peak;
    $readmemh("tb/adft32_fhat.hex", fhat_rows);
    for (int k = 0; k < N; k++)
      for (int n = 0; n < N; n++) begin
        logic [1:0] cr, ci;
        cr = fhat_rows[k][4*(N-1-n)+2 +: 2];
        ci = fhat_rows[k][4*(N-1-n)   +: 2];
        fr[k][n] = (cr == 2'd1) ? 1.0 : (cr == 2'd3) ? -1.0 : 0.0;
        fi[k][n] = (ci == 2'd1) ? 1.0 : (ci == 2'd3) ? -1.0 : 0.0;
      end
    w0 = 2.0 * PI * 0.05;
    // Gain of the 31-tap Hamming-windowed Hilbert filter at w0.
    ht_gain = 0.0;
    for (int m = 0; m < 8; m++) begin
      real nn;
      nn = real'(2*m + 1);
      ht_gain += 2.0 * ($floor(2048.0 * 2.0 / (PI * nn) * (0.54 + 0.46 * $cos(PI * nn / 15.0)) + 0.5) / 2048.0) * $sin(w0 * nn);
    end
    for (int n = 0; n < N; n++) begin
      g[n] = 0.8 + 0.4 * real'($urandom_range(1000)) / 1000.0;
      phi[n] = PI * (real'($urandom_range(2000)) / 1000.0 - 1.0);
      m_acc[n] = 0;
      last_energy[n] = 0;
      adc_data[n] = '0;
    end
    adc_valid = 1'b0;
    int_len = '0;
    set_cal(1'b1);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    adc_valid = 1'b1;
    repeat (20) @(posedge clk);
    #1;
    checks++;
    if (first_beam - first_adc == 11) n_latency++;
    else begin
      failures++;
      $display("FAIL: first beam %0d clocks after first snapshot", first_beam - first_adc);
    end

    for (k0 = 0; k0 < N; k0++) begin
      // Uncalibrated, for a few directions.
      if (k0 % 8 == 3) begin
        set_cal(1'b0);
        measure(e_unc);
        set_cal(1'b1);
      end
      measure(e);
      // Independent model of the calibrated beam pattern.
      peak = 0.0;
      for (int k = 0; k < N; k++) begin
        real sr, si, mr, mi, ap, am;
        sr = 0.0; si = 0.0; mr = 0.0; mi = 0.0;
        ap = A * (1.0 + ht_gain) / 2.0;   // wanted (positive-frequency) tone
        am = A * (1.0 - ht_gain) / 2.0;   // residual image tone
        for (int n = 0; n < N; n++) begin
          real th, tm;
          th = 2.0 * PI * real'(k0 * n) / 32.0;
          tm = -(th + 2.0 * phi[n]);     // image phase after calibration
          sr += fr[k][n] * $cos(th) - fi[k][n] * $sin(th);
          si += fr[k][n] * $sin(th) + fi[k][n] * $cos(th);
          mr += fr[k][n] * $cos(tm) - fi[k][n] * $sin(tm);
          mi += fr[k][n] * $sin(tm) + fi[k][n] * $cos(tm);
        end
        model[k] = real'(L) * (ap * ap * (sr * sr + si * si) + am * am * (mr * mr + mi * mi));
        if (model[k] > peak) peak = model[k];
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if ((real'(e[k]) - model[k]) / peak > max_dev) max_dev = (real'(e[k]) - model[k]) / peak;
        if ((model[k] - real'(e[k])) / peak > max_dev) max_dev = (model[k] - real'(e[k])) / peak;
        if (real'(e[k]) - model[k] > 0.01 * peak || model[k] - real'(e[k]) > 0.01 * peak) begin
          failures++;
          if (failures < 10) $display("FAIL: k0=%0d beam %0d energy %0d model %f", k0, k, e[k], model[k]);
        end
      end
      checks++;
      if (argmax(e) == k0) n_steer++;
      else begin
        failures++;
        $display("FAIL: wave from beam %0d, strongest beam %0d", k0, argmax(e));
      end
      if (k0 % 8 == 3) begin
        checks++;
        if (real'(e_unc[k0]) < 0.7 * real'(e[k0])) n_calib++;
        else begin
          failures++;
          $display("FAIL: beam %0d uncalibrated %0d calibrated %0d", k0, e_unc[k0], e[k0]);
        end
      end
    end

    // int_len = 0: no window may close.
    begin
      int w;
      int_len = '0;
      repeat (20) @(posedge clk);
      w = n_windows;
      repeat (3 * L) @(posedge clk);
      checks++;
      if (n_windows == w) n_stop++;
      else begin
        failures++;
        $display("FAIL: %0d windows closed while stopped", n_windows - w);
      end
    end

    $display("largest deviation from the model: %f of the peak", max_dev);
    $display("mechanisms: latency %0d, steered beams %0d, calibration %0d, stop %0d, windows %0d",
             n_latency, n_steer, n_calib, n_stop, n_windows);
    checks++;
    if (n_latency == 0 || n_steer == 0 || n_calib == 0 || n_stop == 0 || n_windows == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
