// adft_stage: one sparse factor Wi of the 32-point approximate DFT, registered.
//
// Output row r is the sum of at most three complex inputs, each taken with a
// coefficient +1, -1, +j or -j, as listed for this stage in adft_pkg::W_TABLE.
// Multiplying by +j or -j is only a swap of real and imaginary parts and a
// negation, so the stage is built from adders alone:
//   +1: ( re,  im)   -1: (-re, -im)   +j: (-im,  re)   -j: ( im, -re)
// Unused term slots are constant zero and vanish in synthesis.
//
// Interface: in_re/in_im hold 32 complex words of DW bits each; out_re/out_im
// are the stage outputs, registered once (one clock of latency), same width.
// The width is sized by the caller so that no sum can overflow (see adft_pkg).
// The valid bit travels with the data. Reset clears only the valid bit.
module adft_stage
  import adft_pkg::*;
#(
  parameter int STAGE = 0,   // 0 = W1 ... 7 = W8
  parameter int DW    = ADC_W + ADFT_GROWTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re  [N],
  input  logic signed [DW-1:0] in_im  [N],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re [N],
  output logic signed [DW-1:0] out_im [N]
);

  logic signed [DW-1:0] sum_re [N];
  logic signed [DW-1:0] sum_im [N];

  for (genvar r = 0; r < N; r++) begin : g_row
    always_comb begin
      sum_re[r] = '0;
      sum_im[r] = '0;
      for (int t = 0; t < MAX_TERMS; t++) begin
        unique case (W_TABLE[STAGE][r][t].coef)
          CP1: begin
            sum_re[r] = sum_re[r] + in_re[W_TABLE[STAGE][r][t].src];
            sum_im[r] = sum_im[r] + in_im[W_TABLE[STAGE][r][t].src];
          end
          CM1: begin
            sum_re[r] = sum_re[r] - in_re[W_TABLE[STAGE][r][t].src];
            sum_im[r] = sum_im[r] - in_im[W_TABLE[STAGE][r][t].src];
          end
          CPJ: begin
            sum_re[r] = sum_re[r] - in_im[W_TABLE[STAGE][r][t].src];
            sum_im[r] = sum_im[r] + in_re[W_TABLE[STAGE][r][t].src];
          end
          CMJ: begin
            sum_re[r] = sum_re[r] + in_im[W_TABLE[STAGE][r][t].src];
            sum_im[r] = sum_im[r] - in_re[W_TABLE[STAGE][r][t].src];
          end
          default: ;  // CZ: unused slot
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    out_re <= sum_re;
    out_im <= sum_im;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
