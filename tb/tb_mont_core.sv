// tb_mont_core: self-checking test of the four Montgomery partitions.
//
// All four cores (CORE_IDX 0..3) run side by side at the full 1024-bit width
// on random operands. The testbench feeds core j the digit X[8i+2j+1:8i+2j]
// in WORK cycle i. Each core's result S_j must satisfy
//     S_j < 2M   and   S_j mod M = Mont(X_j, Y)
// where X_j keeps only core j's digits of X and Mont is the bit-serial
// reference. The sum of the four must match Mont(X, Y). The testbench also
// checks that done rises exactly 128 cycles after start_core and that
// sn_out is 0 before done.
module tb_mont_core;
  import tb_ref_pkg::*;
  localparam int N = 1024;
  localparam int ITER = N / 8;

  logic clk = 0, rst_n = 0, clr = 0, start = 0;
  logic [N-1:0] x, y, m;
  logic [N+1:0] y3;
  logic [7:0] mprime;
  logic [1:0] xj [4];
  logic [N:0] sn [4];
  logic [3:0] done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar j = 0; j < 4; j++) begin : g_dut
    mont_core #(.N(N), .CORE_IDX(j)) dut (
      .clk(clk), .rst_n(rst_n), .clr(clr), .start_core(start), .xj(xj[j]),
      .y(y), .y3(y3), .m(m), .mprime(mprime), .sn_out(sn[j]), .done(done[j]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] neg_inv8(logic [7:0] v);
    for (int c = 1; c < 256; c += 2) if (8'(c * v) == 8'd1) return 8'(256 - c);
    return 8'd0;
  endfunction

  task automatic run_one(num_t xv, num_t yv, num_t mv);
    num_t xmask, ref_j, total_ref;
    logic [N+2:0] total;
    int cyc;
    x = xv; y = yv; m = mv; y3 = 3 * (N+2)'(yv); mprime = neg_inv8(mv[7:0]);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    for (int i = 0; i < ITER; i++) begin
      for (int j = 0; j < 4; j++) xj[j] = xv[8*i + 2*j +: 2];
      check(done == 4'b0000 && sn[0] == '0, "sn_out/done before the end");
      @(negedge clk);
      cyc++;
    end
    check(done == 4'b1111, "done after 128 WORK cycles");
    check(cyc == ITER, "cycle count");
    total = '0;
    for (int j = 0; j < 4; j++) begin
      xmask = '0;
      for (int i = 0; i < ITER; i++) xmask[8*i + 2*j +: 2] = 2'b11;
      ref_j = mont_ref(xv & xmask, yv, mv, N);
      check(sn[j] < 2 * (N+1)'(mv), $sformatf("core %0d result below 2M", j));
      check(num_t'(sn[j] % (N+1)'(mv)) == ref_j, $sformatf("core %0d partial product", j));
      total += (N+3)'(sn[j]);
    end
    total_ref = mont_ref(xv, yv, mv, N);
    check(num_t'(total % (N+3)'(mv)) == total_ref, "sum of partial products");
  endtask

  initial begin
    num_t mv;
    for (int j = 0; j < 4; j++) xj[j] = '0;
    x = '0; y = '0; m = 1; y3 = '0; mprime = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      mv = rand_modulus(N);
      run_one(rand_below(mv, N), rand_below(mv, N), mv);
    end
    // worst case operands
    mv = rand_modulus(N);
    run_one(mv - 1, mv - 1, mv);
    // clr returns the cores to INIT
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    check(done == 4'b0000, "clr leaves DONE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
