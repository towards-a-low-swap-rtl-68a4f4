// tb_beam_sweep: beam patterns of the 32-beam receiver over azimuth.
//
// Reproduces the measurement the array was built for: a continuous-wave source
// moves across azimuth psi from -72 to +72 degrees in 3-degree steps, and the
// energy of all 32 beams is read at each angle. The elements are 0.6 wavelength
// apart, so element n sees the IF tone (0.05 of the sample rate) with phase
// 2*pi*0.6*sin(psi)*n plus a random receiver phase error, scaled by a random gain
// error; the matching calibration coefficients are programmed. Element patterns,
// noise and the finite range of a real test site are not modelled.
//
// At every angle each beam's energy (200-sample windows) must agree with a
// floating-point model of F32_hat, L * (|sum_n F32_hat(k,n) a+ e^{j theta_n}|^2 +
// image term), within 1 % of the strongest response seen over the whole sweep;
// where the model's strongest beam leads the runner-up by more than 20 %, the
// hardware's strongest beam must be the same one. Both mechanisms (pattern points
// and main-beam decisions) are counted and must have happened.
module tb_beam_sweep;
  import adft_pkg::*;

  localparam int   CAL_W = 12;
  localparam int   LEN_W = 24;
  localparam int   BEAM_W = ADC_W + ADFT_GROWTH;
  localparam int   ACC_W = 2 * BEAM_W + LEN_W;
  localparam int   L = 200;
  localparam real  PI = 3.14159265358979;
  localparam real  A = 100.0;
  localparam real  D = 0.6;      // element spacing, wavelengths

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

  logic [4*N-1:0] fhat_rows [N];
  real fr [N][N];
  real fi [N][N];
  real g [N];
  real phi [N];
  real theta [N];      // spatial phase of the current angle
  real w0, ht_gain;
  longint t_sig = 0;
  int n_windows = 0;
  int checks = 0, failures = 0;
  int n_points = 0, n_decisions = 0;

  always @(posedge clk) if (rst_n && energy_valid) n_windows++;

  always @(posedge clk) begin
    #1;
    for (int n = 0; n < N; n++)
      adc_data[n] = ADC_W'(int'($floor(A * g[n] * $cos(w0 * real'(t_sig) + theta[n] + phi[n]) + 0.5)));
    t_sig++;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int NA = 49;   // -72 .. +72 in 3-degree steps
    real model [NA][N];
    longint meas [NA][N];
    real peak_all = 0.0;
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
    ht_gain = 0.0;
    for (int m = 0; m < 8; m++) begin
      real nn;
      nn = real'(2*m + 1);
      ht_gain += 2.0 * ($floor(2048.0 * 2.0 / (PI * nn) * (0.54 + 0.46 * $cos(PI * nn / 15.0)) + 0.5) / 2048.0) * $sin(w0 * nn);
    end
    for (int n = 0; n < N; n++) begin
      g[n] = 0.8 + 0.4 * real'($urandom_range(1000)) / 1000.0;
      phi[n] = PI * (real'($urandom_range(2000)) / 1000.0 - 1.0);
      theta[n] = 0.0;
      adc_data[n] = '0;
      cal_re[n] = CAL_W'(int'($floor(1024.0 / g[n] * $cos(-phi[n]) + 0.5)));
      cal_im[n] = CAL_W'(int'($floor(1024.0 / g[n] * $sin(-phi[n]) + 0.5)));
    end
    adc_valid = 1'b0;
    int_len = LEN_W'(L);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    adc_valid = 1'b1;

    for (int a = 0; a < NA; a++) begin
      real psi;
      int w;
      psi = (-72.0 + 3.0 * real'(a)) * PI / 180.0;
      for (int n = 0; n < N; n++) theta[n] = 2.0 * PI * D * $sin(psi) * real'(n);
      // Let the new angle reach the integrators (filter delay + pipeline < 40
      // clocks), discard the window in progress, keep the next one.
      repeat (40) @(posedge clk);
      w = n_windows;
      while (n_windows < w + 2) @(posedge clk);
      for (int k = 0; k < N; k++) meas[a][k] = longint'(energy[k]);
      for (int k = 0; k < N; k++) begin
        real sr, si, mr, mi, ap, am;
        sr = 0.0; si = 0.0; mr = 0.0; mi = 0.0;
        ap = A * (1.0 + ht_gain) / 2.0;
        am = A * (1.0 - ht_gain) / 2.0;
        for (int n = 0; n < N; n++) begin
          real tm;
          tm = -(theta[n] + 2.0 * phi[n]);
          sr += fr[k][n] * $cos(theta[n]) - fi[k][n] * $sin(theta[n]);
          si += fr[k][n] * $sin(theta[n]) + fi[k][n] * $cos(theta[n]);
          mr += fr[k][n] * $cos(tm) - fi[k][n] * $sin(tm);
          mi += fr[k][n] * $sin(tm) + fi[k][n] * $cos(tm);
        end
        model[a][k] = real'(L) * (ap * ap * (sr * sr + si * si) + am * am * (mr * mr + mi * mi));
        if (model[a][k] > peak_all) peak_all = model[a][k];
      end
    end

    for (int a = 0; a < NA; a++) begin
      int bm, bh, b2;
      bm = 0; bh = 0; b2 = -1;
      for (int k = 0; k < N; k++) begin
        checks++;
        n_points++;
        if (real'(meas[a][k]) - model[a][k] > 0.01 * peak_all ||
            model[a][k] - real'(meas[a][k]) > 0.01 * peak_all) begin
          failures++;
          if (failures < 10) $display("FAIL: angle %0d beam %0d energy %0d model %f",
                                      -72 + 3 * a, k, meas[a][k], model[a][k]);
        end
        if (model[a][k] > model[a][bm]) bm = k;
        if (meas[a][k] > meas[a][bh]) bh = k;
      end
      for (int k = 0; k < N; k++)
        if (k != bm && (b2 < 0 || model[a][k] > model[a][b2])) b2 = k;
      if (model[a][bm] > 1.2 * model[a][b2]) begin
        checks++;
        n_decisions++;
        if (bh != bm) begin
          failures++;
          $display("FAIL: angle %0d strongest beam %0d, model %0d", -72 + 3 * a, bh, bm);
        end
      end
    end

    $display("mechanisms: pattern points %0d, main-beam decisions %0d", n_points, n_decisions);
    checks++;
    if (n_points == 0 || n_decisions == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
