// adft32: 32-point multiplierless approximate DFT core (the beam former).
//
// Each clock it takes one spatial snapshot, 32 complex samples x[0..31] (one
// per antenna element), and produces the 32 beam outputs X = F32_hat * x, where
// F32_hat approximates the 32-point DFT matrix with entries whose real and
// imaginary parts are 0 or +-1. The product is computed through the published
// fast factorization F32_hat = W8 * ... * W1: eight sparse stages of complex
// additions and subtractions (348 real additions in all, no multipliers).
//
// Timing: fully pipelined, one register after every stage, so a snapshot is
// accepted every clock and its beams appear LATENCY = 8 clocks later with
// out_valid (ADFT_LATENCY in adft_pkg). The register placement is this design's choice; the published
// figures (0.86 ns critical path in 45 nm) do not say where registers sit.
//
// Word lengths: inputs are IN_W bits (8 in the published design). Inputs are
// sign-extended to IN_W + 6 bits at the first stage and the datapath keeps full
// precision with no rounding; the worst-case gain of any partial product is 48,
// so the OUT_W = IN_W + 6 bit outputs never overflow. Beam k is output index k,
// in the row order of F32_hat (bin k points towards spatial frequency 2*pi*k/32).
module adft32
  import adft_pkg::*;
#(
  parameter int IN_W  = ADC_W,
  parameter int OUT_W = IN_W + ADFT_GROWTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re  [N],
  input  logic signed [IN_W-1:0]  in_im  [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re [N],
  output logic signed [OUT_W-1:0] out_im [N]
);

  // st_*[s] feeds stage s; st_*[N_STAGES] is the core output.
  logic                    st_valid [N_STAGES+1];
  logic signed [OUT_W-1:0] st_re    [N_STAGES+1][N];
  logic signed [OUT_W-1:0] st_im    [N_STAGES+1][N];

  always_comb begin
    st_valid[0] = in_valid;
    for (int i = 0; i < N; i++) begin
      st_re[0][i] = OUT_W'(in_re[i]);   // sign extension
      st_im[0][i] = OUT_W'(in_im[i]);
    end
  end

  for (genvar s = 0; s < N_STAGES; s++) begin : g_stage
    adft_stage #(.STAGE(s), .DW(OUT_W)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (st_valid[s]),
      .in_re    (st_re[s]),
      .in_im    (st_im[s]),
      .out_valid(st_valid[s+1]),
      .out_re   (st_re[s+1]),
      .out_im   (st_im[s+1])
    );
  end

  assign out_valid = st_valid[N_STAGES];
  assign out_re    = st_re[N_STAGES];
  assign out_im    = st_im[N_STAGES];

  // Every accepted snapshot leaves exactly ADFT_LATENCY clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ##ADFT_LATENCY out_valid);

endmodule
