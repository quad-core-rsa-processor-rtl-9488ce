// tb_rsa_top: end-to-end test of the RSA processor at its full 1024-bit size.
//
// Acting as the host, the testbench generates a random odd 1024-bit modulus
// M, a random 1024-bit key and e = 2^2048 mod M, loads key, M and e over the
// 32-bit pin, loads a random message P < M, starts the exponentiation and
// reads back the 32 result words, which must equal P^key mod M computed by
// plain square-and-multiply. It then loads a second message only (the key
// load is independent and need not be repeated) and runs again, and finally
// loads a new key, modulus and constant with a very different number of 1
// bits and a third message. All three runs must take the same number of
// cycles: the schedule does not depend on the key.
//
// Checked besides the results: finish comes after exactly 96 and 32 words;
// the run takes 2051 products of 131 cycles; the result appears on data_out
// in 32 consecutive cycles flagged by data_oe. It counts how often each
// mechanism of the design happened and fails if one never did: key load,
// message load, finish, a kept MONT3 product (key bit 1), a discarded one
// (key bit 0), the loop exit from MONT3 to MONT5, the Montgomery clear, the
// output phase, and a change of the RNG output bit.
module tb_rsa_top;
  import tb_ref_pkg::*;
  import rsa_pkg::*;
  localparam int N = 1024;
  localparam int W = 32;

  logic clk = 0, rst_n = 0, osc = 0;
  logic [1:0] sel = 2'b00;
  logic [W-1:0] data_in = '0, data_out;
  logic data_oe, ready, finish, rng_bit;
  int checks = 0, failures = 0;

  // 1000-unit clock period, matching the time scale of the RNG model's delays
  always #500 clk = ~clk;
  always #1733 osc = ~osc;

  rsa_top dut (.clk(clk), .sys_reset_n(rst_n), .sel(sel), .data_in(data_in),
    .data_out(data_out), .data_oe(data_oe), .ready(ready), .finish(finish),
    .rng_osc_in(osc), .rng_bit(rng_bit));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters, observed inside the design
  int n_keyload, n_dataload, n_finish, n_kept, n_dropped, n_loopexit, n_clr, n_out, n_rng;
  logic rng_prev;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.state == ST_IDLE && sel == SEL_KEY)  n_keyload++;
    if (dut.u_ctrl.state == ST_IDLE && sel == SEL_DATA) n_dataload++;
    if (finish) n_finish++;
    if (dut.u_ctrl.state == ST_MONT3 && dut.u_ctrl.mont_finished) begin
      if (dut.key_bit) n_kept++; else n_dropped++;
    end
    if (dut.u_ctrl.loop_end) n_loopexit++;
    if (dut.mont_clr) n_clr++;
    if (data_oe) n_out++;
    if (rng_bit != rng_prev) n_rng++;
    rng_prev = rng_bit;
  end

  task automatic send_words(sel_e s, num_t v[3], int nv, output int cyc);
    sel = s;
    @(negedge clk);            // controller leaves IDLE at the next edge
    for (int k = 0; k < nv; k++)
      for (int i = 0; i < N / W; i++) begin
        data_in = v[k][W*i +: W];
        @(negedge clk);
      end
    cyc = 0;
    while (!finish && cyc < 10) begin @(negedge clk); cyc++; end
    check(finish, "finish after the last word");
    sel = SEL_NONE;
    @(negedge clk);
  endtask

  task automatic run(num_t expect_v);
    int cyc, nwords;
    num_t got;
    sel = SEL_RUN;
    cyc = 0;
    while (!ready && cyc < 400000) begin @(negedge clk); cyc++; end
    sel = SEL_NONE;
    check(ready, "ready");
    $display("run took %0d cycles", cyc);
    check(cyc == 1 + (2 * N + 3) * 131 + 1, $sformatf("run cycles %0d", cyc));
    nwords = 0;
    got = '0;
    cyc = 0;
    while (!data_oe && cyc < 5) begin @(negedge clk); cyc++; end
    while (data_oe && nwords < N / W + 2) begin
      got[W*nwords +: W] = data_out;
      nwords++;
      @(negedge clk);
    end
    check(nwords == N / W, $sformatf("%0d result words", nwords));
    check(got == expect_v, "result equals P^key mod M");
    if (got != expect_v) $display("got %h\nexp %h", got[63:0], expect_v[63:0]);
  endtask

  initial begin
    num_t m, key, e, p1, p2, m2, key2, e2, p3;
    int ones1, ones2;
    num_t v[3];
    int cyc;
    n_keyload = 0; n_dataload = 0; n_finish = 0; n_kept = 0; n_dropped = 0;
    n_loopexit = 0; n_clr = 0; n_out = 0; n_rng = 0; rng_prev = 0;
    m   = rand_modulus(N);
    key = rand_bits(N);
    e   = r2_mod(m, N);
    p1  = rand_below(m, N);
    p2  = rand_below(m, N);
    m2  = rand_modulus(N);
    key2 = rand_bits(N) & rand_bits(N) & rand_bits(N);   // about 1/8 of the bits set
    e2  = r2_mod(m2, N);
    p3  = rand_below(m2, N);
    ones1 = $countones(key);
    ones2 = $countones(key2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    v[0] = key; v[1] = m; v[2] = e;
    send_words(SEL_KEY, v, 3, cyc);
    v[0] = p1;
    send_words(SEL_DATA, v, 1, cyc);
    run(modexp(p1, key, m, N));
    v[0] = p2;
    send_words(SEL_DATA, v, 1, cyc);
    run(modexp(p2, key, m, N));
    v[0] = key2; v[1] = m2; v[2] = e2;
    send_words(SEL_KEY, v, 3, cyc);
    v[0] = p3;
    send_words(SEL_DATA, v, 1, cyc);
    run(modexp(p3, key2, m2, N));
    $display("mechanisms: key loads %0d, data loads %0d, finish %0d, MONT3 kept %0d, dropped %0d, loop exits %0d, clears %0d, output words %0d, rng changes %0d",
             n_keyload, n_dataload, n_finish, n_kept, n_dropped, n_loopexit, n_clr, n_out, n_rng);
    check(n_keyload == 2 && n_dataload == 3 && n_finish == 5, "loads and finish pulses");
    check(n_kept == ones1 * 2 + ones2 && n_dropped == (N - ones1) * 2 + (N - ones2),
          "MONT3 kept/dropped per key bit");
    check(n_kept > 0 && n_dropped > 0, "both MONT3 outcomes happened");
    check(n_loopexit == 3 && n_clr == 3, "loop exit and Montgomery clear");
    check(n_out == 3 * N / W, "output phases");
    check(n_rng > 0, "RNG output changes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
