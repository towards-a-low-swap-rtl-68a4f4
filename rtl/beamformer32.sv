// beamformer32: digital back-end of the 32-element, 32-beam receive array.
//
// A uniform linear array of 32 elements feeds 32 receivers whose low-IF outputs
// are digitised by 32 ADC channels (8 bit). This module turns those 32 real
// sample streams into 32 simultaneous beams and measures the energy received in
// each beam, in four steps per element / beam, as in the published system:
//   1. hilbert_fir  (x32): real IF samples -> complex I/Q (Hilbert transform)
//   2. iq_calib     (x32): I/Q times the channel's gain/phase correction
//   3. adft32       (x1) : 32-point multiplierless approximate DFT across the
//                          elements of each snapshot; output k is beam k
//   4. energy_calc  (x32): sum of |beam k|^2 over int_len snapshots
// Beam k points at spatial frequency 2*pi*k/32 across the array, exactly like
// bin k of a spatial DFT; the approximate transform only changes the side lobes.
//
// Interface: adc_data[n] is element n's sample, adc_valid marks a new snapshot
// (every clock at full rate; the published set-up clocks ADCs and logic at
// 200 MHz). cal_re/cal_im are the per-channel calibration coefficients and
// int_len the integration window; in the published system a control processor
// writes these and reads `energy`, so here they are plain ports. beam_re/beam_im
// give the raw beams for any later processing.
//
// Timing: one snapshot per clock. A snapshot's beams appear on beam_* 2 (FIR) +
// 1 (calibration) + 8 (ADFT) = 11 clocks after its adc_valid,
// delayed in addition by the Hilbert filter's 15-sample group delay. energy_valid
// pulses two clocks after the last beam of each window.
module beamformer32
  import adft_pkg::*;
#(
  parameter int CAL_W = 12,   // calibration coefficient width
  parameter int CAL_F = 10,   // calibration coefficient fraction bits
  parameter int LEN_W = 24,   // integration window counter width
  parameter int BEAM_W = ADC_W + ADFT_GROWTH,
  parameter int ACC_W  = 2 * BEAM_W + LEN_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ADC cards
  input  logic                     adc_valid,
  input  logic signed [ADC_W-1:0]  adc_data [N],
  // control processor
  input  logic signed [CAL_W-1:0]  cal_re   [N],
  input  logic signed [CAL_W-1:0]  cal_im   [N],
  input  logic [LEN_W-1:0]         int_len,
  output logic                     energy_valid,
  output logic [ACC_W-1:0]         energy   [N],
  // beams
  output logic                     beam_valid,
  output logic signed [BEAM_W-1:0] beam_re  [N],
  output logic signed [BEAM_W-1:0] beam_im  [N]
);

  logic                    ht_valid  [N];
  logic signed [ADC_W-1:0] ht_i      [N];
  logic signed [ADC_W-1:0] ht_q      [N];
  logic                    cal_valid [N];
  logic signed [ADC_W-1:0] cal_i     [N];
  logic signed [ADC_W-1:0] cal_q     [N];
  logic                    en_valid  [N];

  for (genvar n = 0; n < N; n++) begin : g_chan
    hilbert_fir #(.IN_W(ADC_W), .OUT_W(ADC_W)) u_ht (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (adc_valid),
      .in_x     (adc_data[n]),
      .out_valid(ht_valid[n]),
      .out_i    (ht_i[n]),
      .out_q    (ht_q[n])
    );

    iq_calib #(.IN_W(ADC_W), .OUT_W(ADC_W), .CAL_W(CAL_W), .CAL_F(CAL_F)) u_cal (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (ht_valid[n]),
      .in_i     (ht_i[n]),
      .in_q     (ht_q[n]),
      .cal_re   (cal_re[n]),
      .cal_im   (cal_im[n]),
      .out_valid(cal_valid[n]),
      .out_i    (cal_i[n]),
      .out_q    (cal_q[n])
    );
  end

  adft32 #(.IN_W(ADC_W), .OUT_W(BEAM_W)) u_adft (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (cal_valid[0]),
    .in_re    (cal_i),
    .in_im    (cal_q),
    .out_valid(beam_valid),
    .out_re   (beam_re),
    .out_im   (beam_im)
  );

  for (genvar k = 0; k < N; k++) begin : g_beam
    energy_calc #(.DW(BEAM_W), .LEN_W(LEN_W), .ACC_W(ACC_W)) u_energy (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_valid    (beam_valid),
      .in_re       (beam_re[k]),
      .in_im       (beam_im[k]),
      .int_len     (int_len),
      .energy_valid(en_valid[k]),
      .energy      (energy[k])
    );
  end

  // All channels share one valid and one window, so channel 0 speaks for all.
  assign energy_valid = en_valid[0];

  // The snapshot stays aligned: every channel's valid matches channel 0's.
  for (genvar n = 1; n < N; n++) begin : g_chk
    a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      cal_valid[n] == cal_valid[0] && en_valid[n] == en_valid[0]);
  end

endmodule
