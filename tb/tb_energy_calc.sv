// tb_energy_calc: self-checking testbench of the beam energy integrator.
//
// The reference accumulates re^2 + im^2 of the accepted samples with 64-bit
// integers and closes a window every int_len samples. Stimulus: random beam
// words (with full-scale -8192 corners) with random idle clocks, windows of
// several lengths including 1, a change of length, and int_len = 0, which must
// stop integration. Each energy_valid must rise two clocks after the last
// sample of its window, and nothing may be reported in between.
module tb_energy_calc;

  localparam int DW = 14;
  localparam int LEN_W = 24;
  localparam int ACC_W = 2 * DW + LEN_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid;
  logic signed [DW-1:0] in_re, in_im;
  logic [LEN_W-1:0]     int_len;
  logic                 energy_valid;
  logic [ACC_W-1:0]     energy;

  energy_calc dut (.*);

  typedef struct { longint e; longint cyc; } exp_t;
  exp_t q [$];
  longint cycle = 0;
  longint acc = 0;
  int cnt = 0;
  int checks = 0;
  int failures = 0;
  int windows = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && in_valid && int_len != 0) begin
      acc += longint'(in_re) * longint'(in_re) + longint'(in_im) * longint'(in_im);
      cnt++;
      if (cnt >= int'(int_len)) begin
        exp_t e;
        e.e = acc;
        e.cyc = cycle;
        q.push_back(e);
        acc = 0;
        cnt = 0;
      end
    end
    if (rst_n && energy_valid) begin
      exp_t e;
      checks++;
      windows++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected energy_valid");
      end else begin
        e = q.pop_front();
        if (longint'(energy) != e.e || cycle - e.cyc != 2) begin
          failures++;
          if (failures < 10) $display("FAIL: energy %0d expected %0d latency %0d",
                                      energy, e.e, cycle - e.cyc);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input int re, input int im);
    in_re = DW'(re); in_im = DW'(im);
    in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic run(input int len, input int samples);
    int_len = LEN_W'(len);
    for (int s = 0; s < samples; s++) begin
      if ($urandom_range(15) == 0) put(-8192, -8192);
      else put(int'($urandom_range(16383)) - 8192, int'($urandom_range(16383)) - 8192);
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    in_valid = 1'b0;
    in_re = '0; in_im = '0;
    int_len = 24'd16;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run(16, 160);
    run(1, 20);
    run(0, 50);     // stopped: no windows, no accumulation
    run(100, 1000);
    run(7, 70);
    // A long window of full-scale samples: 2^12 * 2 * 2^26 exceeds 32 bits.
    int_len = 24'd4096;
    for (int s = 0; s < 4096; s++) put(-8192, -8192);
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0 || windows != 10 + 20 + 10 + 10 + 1) begin
      failures++;
      $display("FAIL: %0d windows, %0d pending", windows, q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
