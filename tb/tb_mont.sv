// tb_mont: self-checking test of the four-core Montgomery multiplier.
//
// Full 1024-bit width. For random X, Y < M (and the worst case X = Y = M-1,
// plus X = 1 and Y = 1 as used for mapping back) the output must equal the
// bit-serial reference X*Y*2^-1024 mod M. Latency is checked too: done_mont
// must rise exactly 129 cycles after the start_mont edge (128 WORK cycles,
// then DONE), and stay low before that. Back-to-back products are started
// from DONE without an idle cycle, and clr must drop done_mont.
module tb_mont;
  import tb_ref_pkg::*;
  localparam int N = 1024;

  logic clk = 0, rst_n = 0, clr = 0, start = 0;
  logic [N-1:0] x, y, m, m_out;
  logic [7:0] mprime;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mont #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .start_mont(start),
    .x(x), .y(y), .m(m), .mprime(mprime), .m_out(m_out), .done_mont(done));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] neg_inv8(logic [7:0] v);
    for (int c = 1; c < 256; c += 2) if (8'(c * v) == 8'd1) return 8'(256 - c);
    return 8'd0;
  endfunction

  task automatic run_one(num_t xv, num_t yv, num_t mv);
    int lat;
    x = xv; y = yv; m = mv; mprime = neg_inv8(mv[7:0]);
    start = 1;
    @(negedge clk);
    start = 0;
    x = '0;            // X is only needed at the start edge
    lat = 1;
    while (!done && lat < 400) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 129, $sformatf("latency %0d, expected 129", lat));
    check(m_out == mont_ref(xv, yv, mv, N), "Montgomery product");
  endtask

  initial begin
    num_t mv;
    x = '0; y = '0; m = 1; mprime = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 8; t++) begin
      mv = rand_modulus(N);
      run_one(rand_below(mv, N), rand_below(mv, N), mv);
    end
    mv = rand_modulus(N);
    run_one(mv - 1, mv - 1, mv);
    run_one(1, mv - 1, mv);
    run_one(mv - 1, 1, mv);
    run_one(0, mv - 1, mv);
    clr = 1; @(negedge clk); clr = 0;
    check(!done, "clr drops done_mont");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
