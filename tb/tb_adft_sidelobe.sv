// tb_adft_sidelobe: filter-bank responses of the ADFT core and its worst side lobe.
//
// Each of the 32 beams is a spatial band-pass filter. This testbench measures all
// 32 responses on the hardware: it feeds the core complex exponentials
// x[n] = 127 * e^{j*w*n} (rounded to 8 bits) for 2048 spatial frequencies w evenly
// spread over [-pi, pi), one snapshot per clock, and records |X_k|^2 of every
// output. For beam k, the side-lobe region is every w more than 2*pi/32 away from
// the beam centre 2*pi*k/32, and the side-lobe level is the largest response
// there relative to the beam's own maximum.
//
// Expected: every beam peaks within one grid step of its centre, and the worst
// side lobe over all beams is -11.03 dB (the approximation's published figure;
// an exact DFT gives -13.26 dB), here accepted within 0.25 dB because the input
// is quantised to 8 bits. A worst side lobe below -12.5 dB would mean the core
// behaves like an exact DFT, which it must not.
module tb_adft_sidelobe;
  import adft_pkg::*;

  localparam int IN_W  = ADC_W;
  localparam int OUT_W = IN_W + ADFT_GROWTH;
  localparam int NW    = 2048;
  localparam real PI   = 3.14159265358979;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    in_valid;
  logic signed [IN_W-1:0]  in_re  [N];
  logic signed [IN_W-1:0]  in_im  [N];
  logic                    out_valid;
  logic signed [OUT_W-1:0] out_re [N];
  logic signed [OUT_W-1:0] out_im [N];

  adft32 dut (.*);

  real resp [NW][N];
  int n_out = 0;
  int checks = 0, failures = 0;

  function automatic real omega(input int i);
    return -PI + 2.0 * PI * real'(i) / real'(NW);
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid && n_out < NW) begin
      for (int k = 0; k < N; k++)
        resp[n_out][k] = real'(out_re[k]) * real'(out_re[k]) + real'(out_im[k]) * real'(out_im[k]);
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (NW + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real worst_db;
    int worst_k;
    in_valid = 1'b0;
    foreach (in_re[n]) begin in_re[n] = '0; in_im[n] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NW; i++) begin
      for (int n = 0; n < N; n++) begin
        in_re[n] = IN_W'(int'($floor(127.0 * $cos(omega(i) * real'(n)) + 0.5)));
        in_im[n] = IN_W'(int'($floor(127.0 * $sin(omega(i) * real'(n)) + 0.5)));
      end
      in_valid = 1'b1;
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (ADFT_LATENCY + 2) @(posedge clk);
    checks++;
    if (n_out != NW) begin
      failures++;
      $display("FAIL: %0d responses, expected %0d", n_out, NW);
    end

    worst_db = -100.0;
    worst_k = -1;
    for (int k = 0; k < N; k++) begin
      real c, pk, side, d;
      int ipk;
      c = 2.0 * PI * real'(k) / real'(N);
      if (c >= PI) c -= 2.0 * PI;
      pk = 0.0; side = 0.0; ipk = 0;
      for (int i = 0; i < NW; i++) begin
        if (resp[i][k] > pk) begin pk = resp[i][k]; ipk = i; end
        d = omega(i) - c;
        if (d > PI) d -= 2.0 * PI;
        if (d < -PI) d += 2.0 * PI;
        if ((d < 0.0 ? -d : d) > 2.0 * PI / real'(N) + 1e-9 && resp[i][k] > side) side = resp[i][k];
      end
      d = omega(ipk) - c;
      if (d > PI) d -= 2.0 * PI;
      if (d < -PI) d += 2.0 * PI;
      checks++;
      if ((d < 0.0 ? -d : d) > 2.0 * PI / real'(NW) + 1e-9) begin
        failures++;
        $display("FAIL: beam %0d peaks at w = %f, centre %f", k, omega(ipk), c);
      end
      if (10.0 * $log10(side / pk) > worst_db) begin
        worst_db = 10.0 * $log10(side / pk);
        worst_k = k;
      end
    end
    $display("largest side lobe: %f dB (beam %0d)", worst_db, worst_k);
    checks++;
    if (worst_db > -11.03 + 0.25 || worst_db < -11.03 - 0.25) begin
      failures++;
      $display("FAIL: largest side lobe %f dB, expected -11.03 dB", worst_db);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
