// hilbert_fir: IQ decomposition of one element's real low-IF sample stream.
//
// The receivers deliver a real signal at a low intermediate frequency (10 MHz
// in the measured set-up, sampled at 200 MS/s). A Hilbert transformer turns it
// into an analytic (complex) signal: Q is the input filtered by an odd-symmetric
// FIR approximating h[n] = 2/(pi*n) for odd n (0 for even n); I is the input
// delayed by the FIR's group delay M = (TAPS-1)/2, so that I + jQ carries only
// the positive-frequency half of the spectrum.
//
// The published design says only that an FIR filter implementing the Hilbert
// transform performs this step. Its length and coefficients are this design's
// choice: 31 taps, Hamming window, coefficients scaled by 2^11 and rounded:
//   H[m] = round(2^11 * 2/(pi*(2m+1)) * (0.54 + 0.46*cos(pi*(2m+1)/15))), m = 0..7
// which gives a gain of 0.98 at 0.05 of the sample rate (10 MHz at 200 MS/s)
// and within 0.5 % of 1 from 0.1 to 0.4 of the sample rate. Thanks to odd
// symmetry each coefficient multiplies the difference of two taps (8 constant
// multiplications per output). Q is rounded (half up) and saturated to OUT_W.
//
// Timing: the delay line advances on in_valid; out_valid follows two clocks
// after the in_valid that completed the window. Reset clears the delay line.
module hilbert_fir #(
  parameter int IN_W  = 8,
  parameter int OUT_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_x,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q
);

  localparam int TAPS = 31;
  localparam int M    = (TAPS - 1) / 2;   // group delay, samples
  localparam int NC   = (M + 1) / 2;      // distinct coefficient magnitudes
  localparam int CF   = 11;               // coefficient fraction bits
  localparam int CW   = 12;               // coefficient width (signed)
  localparam logic signed [CW-1:0] H [NC] = '{
    12'sd1291, 12'sd396, 12'sd201, 12'sd110, 12'sd58, 12'sd28, 12'sd12, 12'sd7
  };
  localparam int AW = IN_W + 1 + CW + 3;   // accumulator width, >= 8 products

  logic signed [IN_W-1:0] dl [TAPS];   // dl[k] = x[t-k]
  logic                   dl_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) dl[k] <= '0;
      dl_valid <= 1'b0;
    end else begin
      dl_valid <= in_valid;
      if (in_valid) begin
        dl[0] <= in_x;
        for (int k = 1; k < TAPS; k++) dl[k] <= dl[k-1];
      end
    end
  end

  // Q = sum_m H[m] * (x[t-M-(2m+1)] - x[t-M+(2m+1)])
  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] q_round;
  always_comb begin
    acc = '0;
    for (int m = 0; m < NC; m++)
      acc += AW'(H[m]) * (AW'(dl[M + 2*m + 1]) - AW'(dl[M - 2*m - 1]));
    q_round = (acc + AW'(1 <<< (CF - 1))) >>> CF;
  end

  localparam logic signed [AW-1:0] QMAX = AW'((1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [AW-1:0] QMIN = -AW'(1 <<< (OUT_W - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= dl_valid;
      if (dl_valid) begin
        out_i <= OUT_W'(dl[M]);
        if (q_round > QMAX)      out_q <= OUT_W'(QMAX);
        else if (q_round < QMIN) out_q <= OUT_W'(QMIN);
        else                     out_q <= OUT_W'(q_round);
      end
    end
  end

endmodule
