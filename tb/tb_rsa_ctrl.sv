// tb_rsa_ctrl: self-checking test of the top-level controller.
//
// The Montgomery block is replaced by a small model that raises done_mont a
// fixed number of cycles after start_mont. With the default N = 1024 the test
// checks: the key load asks for exactly 96 words and pulses finish once, the
// message load asks for 32; the exponentiation issues exactly 2051 products
// with the operand pairs (e,plain), (1,e), then (P,R),(P,P) 1024 times, then
// (1,R); P is written 1025 times, R once plus once per 1 bit of the key,
// the result once, the Montgomery block is cleared once, and ready stays up
// for 32 cycles before the controller returns to IDLE.
module tb_rsa_ctrl;
  import rsa_pkg::*;
  localparam int N = 1024;
  localparam int MLAT = 3;   // model latency of a product, start to done

  logic clk = 0, rst_n = 0;
  sel_e sel = SEL_NONE;
  logic done_mont, key_bit;
  logic finish, ready, load_cycle, out_en, start_mont, mont_clr, load_xy;
  op_sel_e x_sel, y_sel;
  logic wr_p, wr_r, wr_cipher, shift_cipher, key_mult_kept;
  logic [$clog2(N)-1:0] key_idx;
  top_state_e state_o;
  int checks = 0, failures = 0;

  logic [N-1:0] key;
  int mcount;
  logic mbusy;

  always #5 clk = ~clk;

  rsa_ctrl #(.N(N)) dut (.*);

  assign key_bit = key[key_idx];

  // Montgomery block model
  always_ff @(posedge clk) begin
    if (!rst_n) begin mbusy <= 0; mcount <= 0; done_mont <= 0; end
    else if (start_mont) begin mbusy <= 1; mcount <= 0; done_mont <= 0; end
    else if (mont_clr) begin mbusy <= 0; done_mont <= 0; end
    else if (mbusy) begin
      mcount <= mcount + 1;
      if (mcount == MLAT - 2) begin done_mont <= 1; mbusy <= 0; end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // event counters
  int n_load, n_finish, n_start, n_wrp, n_wrr, n_wrc, n_clr, n_ready, n_kept, seq_err, n_xy;
  always_ff @(posedge clk) if (rst_n) begin
    n_load   <= n_load + int'(load_cycle);
    n_finish <= n_finish + int'(finish);
    n_start  <= n_start + int'(start_mont);
    n_wrp    <= n_wrp + int'(wr_p);
    n_wrr    <= n_wrr + int'(wr_r);
    n_wrc    <= n_wrc + int'(wr_cipher);
    n_clr    <= n_clr + int'(mont_clr);
    n_ready  <= n_ready + int'(ready);
    n_kept   <= n_kept + int'(key_mult_kept);
    if (load_xy) begin
      op_sel_e ex, ey;
      if (n_xy == 0)            begin ex = OP_E;   ey = OP_PLAIN; end
      else if (n_xy == 1)       begin ex = OP_ONE; ey = OP_E;     end
      else if (n_xy == 2*N + 2) begin ex = OP_ONE; ey = OP_R;     end
      else if (n_xy % 2 == 0)   begin ex = OP_P;   ey = OP_R;     end
      else                      begin ex = OP_P;   ey = OP_P;     end
      if (x_sel != ex || y_sel != ey) seq_err <= seq_err + 1;
      n_xy <= n_xy + 1;
    end
  end

  task automatic clear_counts();
    n_load = 0; n_finish = 0; n_start = 0; n_wrp = 0; n_wrr = 0; n_wrc = 0;
    n_clr = 0; n_ready = 0; n_kept = 0; seq_err = 0; n_xy = 0;
  endtask

  task automatic wait_finish(int limit, output int cyc);
    cyc = 0;
    while (!finish && cyc < limit) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, ones;
    for (int i = 0; i < N / 32; i++) key[32*i +: 32] = $urandom;
    key[0] = 1'b1; key[N-1] = 1'b0;
    ones = $countones(key);
    clear_counts();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state_o == ST_IDLE, "IDLE after reset");
    // key load
    sel = SEL_KEY;
    wait_finish(500, cyc);
    check(n_load == 3 * N / 32, $sformatf("key load words %0d", n_load));
    check(cyc == 3 * N / 32 + 1, $sformatf("finish after %0d cycles", cyc));
    sel = SEL_NONE;
    @(negedge clk);
    check(n_finish == 1 && state_o == ST_IDLE, "finish pulse, back to IDLE");
    // message load
    clear_counts();
    sel = SEL_DATA;
    wait_finish(500, cyc);
    sel = SEL_NONE;
    @(negedge clk);
    check(n_load == N / 32, $sformatf("data load words %0d", n_load));
    check(state_o == ST_IDLE, "back to IDLE after data load");
    // exponentiation
    clear_counts();
    sel = SEL_RUN;
    cyc = 0;
    while (!ready && cyc < 100000) begin @(negedge clk); cyc++; end
    sel = SEL_NONE;
    check(ready, "ready rises");
    check(n_start == 2 * N + 3, $sformatf("products started %0d", n_start));
    check(seq_err == 0, "operand sequence");
    check(n_wrp == N + 1, $sformatf("P writes %0d", n_wrp));
    check(n_wrr == ones + 1, $sformatf("R writes %0d, key ones %0d", n_wrr, ones));
    check(n_kept == ones, "multiplications kept");
    check(n_wrc == 1 && n_clr == 1, "result written and Montgomery block cleared once");
    check(cyc == 1 + (2 * N + 3) * (MLAT + 2) + 1, $sformatf("run cycles %0d", cyc));
    while (ready && cyc < 200000) begin @(negedge clk); cyc++; end
    check(n_ready == N / 32, $sformatf("ready cycles %0d", n_ready));
    check(state_o == ST_IDLE, "IDLE after output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
