// energy_calc: received-energy integrator on one beam output.
//
// Beam patterns are measured by integrating the power of every beam for a fixed
// time: E = sum over a window of (re^2 + im^2). The published design names this
// "energy calculator" and states its purpose; its insides here are the simplest
// circuit that does it: a power squarer, an accumulator and a sample counter.
//
// The window length is int_len samples (counted on in_valid), taken with each
// sample, so a new length applies from the next sample on; int_len = 0 stops
// integration. A window whose count already reaches a shortened length closes
// at the next sample. When a window closes, its energy is placed on `energy`, held there
// until the next window closes, and energy_valid pulses for one clock; the
// accumulator restarts from zero with the next sample, so no sample is lost
// between windows. The accumulator is wide enough for the largest window at
// full scale (ACC_W = 2*DW + LEN_W), so it never wraps.
//
// Timing: the power is registered (one clock), so energy_valid rises two clocks
// after the in_valid of the last sample of a window.
module energy_calc #(
  parameter int DW    = 14,              // beam word width
  parameter int LEN_W = 24,              // window length counter width
  parameter int ACC_W = 2 * DW + LEN_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  input  logic [LEN_W-1:0]     int_len,
  output logic                 energy_valid,
  output logic [ACC_W-1:0]     energy
);

  logic [2*DW-1:0]  pwr;
  logic             pwr_valid;
  logic [ACC_W-1:0] acc;
  logic signed [2*DW-1:0] sq_re, sq_im;

  // re^2 <= 2^(2*DW-2), so re^2 + im^2 fits 2*DW bits unsigned.
  always_comb begin
    sq_re = (2*DW)'(in_re) * (2*DW)'(in_re);
    sq_im = (2*DW)'(in_im) * (2*DW)'(in_im);
  end
  logic [LEN_W-1:0] cnt;
  logic [LEN_W-1:0] len_q;   // window length that came with the sample in pwr

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pwr       <= '0;
      pwr_valid <= 1'b0;
      len_q     <= '0;
    end else begin
      pwr_valid <= in_valid && (int_len != '0);
      len_q     <= int_len;
      pwr       <= (2*DW)'(sq_re + sq_im);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc          <= '0;
      cnt          <= '0;
      energy       <= '0;
      energy_valid <= 1'b0;
    end else begin
      energy_valid <= 1'b0;
      if (pwr_valid) begin
        if (cnt >= len_q - 1'b1) begin
          energy       <= acc + ACC_W'(pwr);
          energy_valid <= 1'b1;
          acc          <= '0;
          cnt          <= '0;
        end else begin
          acc <= acc + ACC_W'(pwr);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
