// tb_adft32: self-checking testbench of the 32-point approximate DFT core.
//
// The reference model multiplies each input snapshot directly by the 32 x 32
// matrix F32_hat, read from adft32_fhat.hex (one hex digit per entry: real part
// in bits 3:2, imaginary part in bits 1:0, 0 -> 0, 1 -> +1, 3 -> -1). It does not
// use the sparse factorization the core is built from, so the test checks the
// factorization as well as the adders. Stimulus: unit impulses on every element
// (which read out one column of the matrix each), full-scale vectors signed to
// drive each bin to its largest value (overflow check), and random snapshots,
// streamed back to back and with random gaps. Each result must arrive exactly
// ADFT_LATENCY clocks after its snapshot, and one result per clock when the
// input is continuous.
module tb_adft32;
  import adft_pkg::*;

  localparam int IN_W  = ADC_W;
  localparam int OUT_W = IN_W + ADFT_GROWTH;

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

  logic [4*N-1:0] fhat_rows [N];
  int fr [N][N];
  int fi [N][N];

  function automatic int dec(input logic [1:0] c);
    return (c == 2'd1) ? 1 : (c == 2'd3) ? -1 : 0;
  endfunction

  typedef struct {
    int re [N];
    int im [N];
    longint cyc;
  } expect_t;

  expect_t q [$];
  longint cycle = 0;
  int checks = 0;
  int failures = 0;
  int n_out = 0;
  int back_to_back = 0;
  logic prev_out_valid = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;

  // Reference: direct matrix-vector product.
  task automatic push_expect(input int xr [N], input int xi [N]);
    expect_t e;
    for (int k = 0; k < N; k++) begin
      e.re[k] = 0;
      e.im[k] = 0;
      for (int n = 0; n < N; n++) begin
        e.re[k] += fr[k][n] * xr[n] - fi[k][n] * xi[n];
        e.im[k] += fr[k][n] * xi[n] + fi[k][n] * xr[n];
      end
    end
    e.cyc = cycle;
    q.push_back(e);
  endtask

  task automatic send(input int xr [N], input int xi [N]);
    for (int n = 0; n < N; n++) begin
      in_re[n] = IN_W'(xr[n]);
      in_im[n] = IN_W'(xi[n]);
    end
    in_valid = 1'b1;
    push_expect(xr, xi);
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  // Output monitor.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      expect_t e;
      n_out++;
      if (prev_out_valid) back_to_back++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output at cycle %0d", cycle);
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cyc != longint'(ADFT_LATENCY)) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", cycle - e.cyc, ADFT_LATENCY);
        end
        for (int k = 0; k < N; k++) begin
          checks++;
          if (int'(out_re[k]) != e.re[k] || int'(out_im[k]) != e.im[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL: bin %0d got (%0d,%0d) expected (%0d,%0d)", k,
                       out_re[k], out_im[k], e.re[k], e.im[k]);
          end
        end
      end
    end
    prev_out_valid <= out_valid;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xr [N];
    int xi [N];
    $readmemh("tb/adft32_fhat.hex", fhat_rows);
    for (int k = 0; k < N; k++)
      for (int n = 0; n < N; n++) begin
        fr[k][n] = dec(fhat_rows[k][4*(N-1-n)+2 +: 2]);
        fi[k][n] = dec(fhat_rows[k][4*(N-1-n)   +: 2]);
      end
    in_valid = 1'b0;
    foreach (in_re[n]) begin in_re[n] = '0; in_im[n] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // Impulses, real and imaginary, on every element: back to back.
    for (int n = 0; n < N; n++) begin
      foreach (xr[i]) begin xr[i] = 0; xi[i] = 0; end
      xr[n] = 1;
      xi[(n + 5) % N] = -1;
      send(xr, xi);
    end
    // Full scale, signed to maximise the real and the imaginary part of each bin.
    for (int k = 0; k < N; k++) begin
      for (int n = 0; n < N; n++) begin
        xr[n] = (fr[k][n] < 0) ? -128 : 127;
        xi[n] = (fi[k][n] > 0) ? -128 : 127;
      end
      send(xr, xi);
      for (int n = 0; n < N; n++) begin
        xr[n] = (fi[k][n] < 0) ? -128 : 127;
        xi[n] = (fr[k][n] < 0) ? -128 : 127;
      end
      send(xr, xi);
    end
    // Random snapshots, some with idle clocks in between.
    for (int v = 0; v < 400; v++) begin
      for (int n = 0; n < N; n++) begin
        xr[n] = int'($urandom_range(255)) - 128;
        xi[n] = int'($urandom_range(255)) - 128;
      end
      send(xr, xi);
      if (v >= 200) repeat ($urandom_range(2)) begin @(posedge clk); #1; end
    end
    repeat (ADFT_LATENCY + 3) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_out != 32 + 64 + 400) begin
      failures++;
      $display("FAIL: %0d outputs, %0d still pending", n_out, q.size());
    end
    // The first 96 + 200 snapshots were sent on consecutive clocks.
    checks++;
    if (back_to_back < 295) begin
      failures++;
      $display("FAIL: only %0d back-to-back outputs", back_to_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
