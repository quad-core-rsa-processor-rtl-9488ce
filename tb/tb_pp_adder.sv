// tb_pp_adder: self-checking test of the partial-product adder.
//
// Drives four partial products, each below M, and compares the output with
// (p0 + p1 + p2 + p3) mod M computed with the % operator. Random cases are
// followed by the corner cases 4(M-1), which needs all three subtract
// stages, and exact multiples of M.
module tb_pp_adder;
  import tb_ref_pkg::*;
  localparam int N = 1024;

  logic [3:0][N-1:0] pp;
  logic [N-1:0] m, m_out;
  int checks = 0, failures = 0;

  pp_adder #(.N(N)) dut (.pp(pp), .m(m), .m_out(m_out));

  task automatic try(num_t a, num_t b, num_t c, num_t d, num_t mv);
    logic [N+2:0] s;
    pp = {d, c, b, a}; m = mv;
    #1;
    s = (N+3)'(a) + (N+3)'(b) + (N+3)'(c) + (N+3)'(d);
    checks++;
    if (m_out != num_t'(s % (N+3)'(mv))) begin
      failures++;
      $display("FAIL: sum mod M");
    end
  endtask

  initial begin
    num_t mv;
    for (int t = 0; t < 200; t++) begin
      mv = rand_modulus(N - (t % 7));
      try(rand_below(mv, N), rand_below(mv, N), rand_below(mv, N), rand_below(mv, N), mv);
    end
    for (int t = 0; t < 10; t++) begin
      mv = rand_modulus(N);
      try(mv - 1, mv - 1, mv - 1, mv - 1, mv);
      try(mv - 1, mv - 1, mv - 1, 1, mv);
      try(mv - 1, 1, 0, 0, mv);
      try(0, 0, 0, 0, mv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
