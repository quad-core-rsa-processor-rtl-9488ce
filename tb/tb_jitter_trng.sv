// tb_jitter_trng: self-checking test of the jitter-amplifier RNG model.
//
// The system clock has a fixed period; a slower free-running waveform is
// sampled. Over 4000 system clocks the test measures the period of the
// jitter-amplified clock and checks that it varies by more than the cells'
// thermal jitter alone could make it (the random control of the delay cells
// must widen the spread), that the output bit stream is balanced (between
// 25% and 75% ones) and changes often, and that the delay-cell control bits
// toggle (random power activity).
module tb_jitter_trng;
  localparam int PERIOD = 1000;   // system clock period in time units

  logic clk = 0, rst_n = 0, osc = 0;
  logic clk_jamp, q;
  logic [15:0] act;
  int checks = 0, failures = 0;

  always #(PERIOD / 2) clk = ~clk;
  always #1733 osc = ~osc;          // sampled waveform, not a multiple of the clock

  jitter_trng dut (.sys_clk(clk), .rst_n(rst_n), .osc_in(osc),
                   .sys_clk_jamp(clk_jamp), .q(q), .pwr_activity(act));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  time last_edge;
  longint pmin = 1 << 30, pmax = 0;
  int ones = 0, samples = 0, changes = 0;
  logic qprev = 0;

  always @(posedge clk_jamp) if (rst_n) begin
    if (last_edge != 0) begin
      if ($time - last_edge < pmin) pmin = $time - last_edge;
      if ($time - last_edge > pmax) pmax = $time - last_edge;
    end
    last_edge = $time;
  end

  always @(posedge clk) if (rst_n) begin
    samples++;
    ones += int'(q);
    changes += int'(q != qprev);
    qprev = q;
  end

  initial begin
    last_edge = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4000) @(posedge clk);
    $display("clk_jamp period %0d..%0d, ones %0d/%0d, changes %0d, activity %0d",
             pmin, pmax, ones, samples, changes, act);
    check(pmax - pmin > 2 * 20, "jitter amplified beyond thermal jitter");
    check(pmin > PERIOD / 2 && pmax < 2 * PERIOD, "clock period stays near the system clock");
    check(ones > samples / 4 && ones < 3 * samples / 4, "balanced bit stream");
    check(changes > samples / 10, "bit stream changes");
    check(act > 100, "delay-cell control toggles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
