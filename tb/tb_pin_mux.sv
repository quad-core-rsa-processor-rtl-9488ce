// tb_pin_mux: self-checking test of the data-pin sharing logic.
//
// For every sel value and load_cycle setting it checks which load strobe is
// raised, and it checks that during out_en each word appears on data_out
// with data_oe one cycle later, and that data_oe and data_out hold otherwise.
module tb_pin_mux;
  import rsa_pkg::*;
  logic clk = 0, rst_n = 0;
  sel_e sel = SEL_NONE;
  logic load_cycle = 0, out_en = 0;
  logic [31:0] cipher_word = '0, data_out;
  logic key_shift, plain_shift, data_oe;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pin_mux dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] words [8];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      for (int l = 0; l < 2; l++) begin
        sel = sel_e'(s); load_cycle = l[0]; #1;
        check(key_shift   == (l == 1 && s == 1), $sformatf("key_shift sel=%0d load=%0d", s, l));
        check(plain_shift == (l == 1 && s == 2), $sformatf("plain_shift sel=%0d load=%0d", s, l));
      end
    end
    load_cycle = 0;
    @(negedge clk);
    check(!data_oe, "pin not driven outside output phase");
    sel = SEL_RUN;
    for (int i = 0; i < 8; i++) words[i] = $urandom;
    for (int i = 0; i < 8; i++) begin
      out_en = 1; cipher_word = words[i];
      @(negedge clk);
      check(data_oe && data_out == words[i], $sformatf("output word %0d", i));
    end
    out_en = 0; cipher_word = 32'hDEAD_BEEF;
    @(negedge clk);
    check(!data_oe, "data_oe drops after the output phase");
    check(data_out == words[7], "data_out holds its last word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
