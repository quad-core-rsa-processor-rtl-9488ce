// tb_rsa_regfile: self-checking test of the register file.
//
// Loads 96 random words through the key/M/e chain and 32 through the message
// chain, then checks: every key bit through key_bit, M on its output, Mprime
// (M * Mprime = -1 mod 256), the operand selection of X_reg and Y_reg for all
// five sources (e and the message are checked through X_reg/Y_reg), writes of
// P, R and cipher_text from m_out, and the word-by-word shift of the result.
module tb_rsa_regfile;
  import rsa_pkg::*;
  localparam int N = 1024;
  localparam int W = 32;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] word_in;
  logic key_shift = 0, plain_shift = 0, load_xy = 0, wr_p = 0, wr_r = 0;
  logic wr_cipher = 0, shift_cipher = 0;
  op_sel_e x_sel = OP_ONE, y_sel = OP_ONE;
  logic [N-1:0] m_out, x_reg, y_reg, m;
  logic [$clog2(N)-1:0] key_idx;
  logic [7:0] mprime;
  logic key_bit;
  logic [W-1:0] cipher_word;
  int checks = 0, failures = 0;

  logic [N-1:0] k_ref, m_ref, e_ref, pl_ref, p_ref, r_ref, c_ref;

  always #5 clk = ~clk;

  rsa_regfile #(.N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic sel_xy(op_sel_e xs, op_sel_e ys, logic [N-1:0] xe, logic [N-1:0] ye, string what);
    x_sel = xs; y_sel = ys; load_xy = 1;
    @(negedge clk);
    load_xy = 0;
    check(x_reg == xe, {"X_reg from ", what});
    check(y_reg == ye, {"Y_reg from ", what});
  endtask

  initial begin
    word_in = '0; m_out = '0; key_idx = '0;
    k_ref = rnd(); m_ref = rnd(); e_ref = rnd(); pl_ref = rnd();
    m_ref[0] = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // key, then M, then e; low word first
    key_shift = 1;
    for (int i = 0; i < N / W; i++) begin word_in = k_ref[W*i +: W]; @(negedge clk); end
    for (int i = 0; i < N / W; i++) begin word_in = m_ref[W*i +: W]; @(negedge clk); end
    for (int i = 0; i < N / W; i++) begin word_in = e_ref[W*i +: W]; @(negedge clk); end
    key_shift = 0;
    plain_shift = 1;
    for (int i = 0; i < N / W; i++) begin word_in = pl_ref[W*i +: W]; @(negedge clk); end
    plain_shift = 0;
    word_in = '1;
    @(negedge clk);
    check(m == m_ref, "M loaded");
    check(8'(m_ref[7:0] * mprime) == 8'hFF, "Mprime = -M^-1 mod 256");
    for (int i = 0; i < N; i += 7) begin
      key_idx = 10'(i); #1;
      check(key_bit == k_ref[i], $sformatf("key bit %0d", i));
    end
    @(negedge clk);
    sel_xy(OP_E, OP_PLAIN, e_ref, pl_ref, "e / plain_text");
    sel_xy(OP_ONE, OP_E, N'(1), e_ref, "1 / e");
    // P and R writes
    p_ref = rnd(); r_ref = rnd();
    m_out = p_ref; wr_p = 1; @(negedge clk); wr_p = 0;
    m_out = r_ref; wr_r = 1; @(negedge clk); wr_r = 0;
    sel_xy(OP_P, OP_R, p_ref, r_ref, "P / R");
    sel_xy(OP_P, OP_P, p_ref, p_ref, "P / P");
    sel_xy(OP_ONE, OP_R, N'(1), r_ref, "1 / R");
    // result and its word output
    c_ref = rnd();
    m_out = c_ref; wr_cipher = 1; @(negedge clk); wr_cipher = 0;
    shift_cipher = 1;
    for (int i = 0; i < N / W; i++) begin
      check(cipher_word == c_ref[W*i +: W], $sformatf("cipher word %0d", i));
      @(negedge clk);
    end
    shift_cipher = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
