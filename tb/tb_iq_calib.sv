// tb_iq_calib: self-checking testbench of the calibration complex multiplier.
//
// The reference computes (I + jQ)(cr + j ci) with integers, rounds half up at
// 10 fraction bits and saturates to 8 bits. Stimulus: identity and pure +-90
// and 180 degree rotations, random samples with random coefficients (including
// gains near 2 that saturate), streamed with random idle clocks. Each output must
// come one clock after its input.
module tb_iq_calib;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid;
  logic signed [7:0]  in_i, in_q;
  logic signed [11:0] cal_re, cal_im;
  logic               out_valid;
  logic signed [7:0]  out_i, out_q;

  iq_calib dut (.*);

  typedef struct { int i; int q; longint cyc; } exp_t;
  exp_t q [$];
  longint cycle = 0;
  int checks = 0;
  int failures = 0;
  int n_sat = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int rsat(input int v);
    int r;
    r = (v + 512) >>> 10;
    if (r > 127) begin n_sat++; return 127; end
    if (r < -128) begin n_sat++; return -128; end
    return r;
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      exp_t e;
      e.i = rsat(int'(in_i) * int'(cal_re) - int'(in_q) * int'(cal_im));
      e.q = rsat(int'(in_i) * int'(cal_im) + int'(in_q) * int'(cal_re));
      e.cyc = cycle;
      q.push_back(e);
    end
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        e = q.pop_front();
        if (int'(out_i) != e.i || int'(out_q) != e.q || cycle - e.cyc != 1) begin
          failures++;
          if (failures < 10) $display("FAIL: got (%0d,%0d) expected (%0d,%0d) latency %0d",
                                      out_i, out_q, e.i, e.q, cycle - e.cyc);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input int i, input int qq, input int cr, input int ci);
    in_i = 8'(i); in_q = 8'(qq); cal_re = 12'(cr); cal_im = 12'(ci);
    in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    in_valid = 1'b0;
    in_i = '0; in_q = '0; cal_re = '0; cal_im = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // Unit gain, +90, -90 and 180 degrees: exact.
    put(100, -37, 1024, 0);
    put(100, -37, 0, 1024);
    put(100, -37, 0, -1024);
    put(-128, 127, -1024, 0);
    for (int s = 0; s < 5000; s++) begin
      put(int'($urandom_range(255)) - 128, int'($urandom_range(255)) - 128,
          int'($urandom_range(4095)) - 2048, int'($urandom_range(4095)) - 2048);
      if ($urandom_range(4) == 0) begin @(posedge clk); #1; end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_sat == 0) begin
      failures++;
      $display("FAIL: %0d outputs missing, %0d saturations", q.size(), n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
