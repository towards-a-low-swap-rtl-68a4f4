// iq_calib: per-channel gain and phase equalisation by one complex multiplication.
//
// Each receiver chain has its own gain and phase, measured against a reference
// chain with a carrier injected at the operating frequency. Because the system
// is narrowband, a single complex coefficient c = cr + j*ci per channel corrects
// both: (I + jQ) * c, applied right after the Hilbert transformer. That much
// follows the published design; the coefficient format and the output
// arithmetic are this design's choices.
//
// Coefficients are CAL_W-bit signed with CAL_F fraction bits (default 12 bits,
// 1.0 = 1024, so |cr|, |ci| < 2). Products are summed at full precision, rounded
// half up and saturated back to the OUT_W-bit word the beamformer expects.
// The coefficients are static control values written by the control processor;
// they are sampled every clock, so a change takes effect on the next sample.
//
// Timing: one clock of latency, one sample per clock; out_valid follows
// in_valid. Reset clears the outputs.
module iq_calib #(
  parameter int IN_W  = 8,
  parameter int OUT_W = 8,
  parameter int CAL_W = 12,
  parameter int CAL_F = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_i,
  input  logic signed [IN_W-1:0]  in_q,
  input  logic signed [CAL_W-1:0] cal_re,
  input  logic signed [CAL_W-1:0] cal_im,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q
);

  localparam int PW = IN_W + CAL_W + 1;   // width of a sum of two products

  logic signed [PW-1:0] p_re, p_im, r_re, r_im;

  always_comb begin
    p_re = PW'(in_i) * PW'(cal_re) - PW'(in_q) * PW'(cal_im);
    p_im = PW'(in_i) * PW'(cal_im) + PW'(in_q) * PW'(cal_re);
    r_re = (p_re + PW'(1 <<< (CAL_F - 1))) >>> CAL_F;
    r_im = (p_im + PW'(1 <<< (CAL_F - 1))) >>> CAL_F;
  end

  localparam logic signed [PW-1:0] VMAX = PW'((1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] VMIN = -PW'(1 <<< (OUT_W - 1));

  function automatic logic signed [OUT_W-1:0] sat(input logic signed [PW-1:0] v);
    if (v > VMAX)      return OUT_W'(VMAX);
    else if (v < VMIN) return OUT_W'(VMIN);
    else               return OUT_W'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_i <= sat(r_re);
        out_q <= sat(r_im);
      end
    end
  end

endmodule
