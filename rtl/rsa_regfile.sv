// rsa_regfile: the processor's operand and result registers.
//
// Holds the secret exponent (key), the modulus M, Mprime = -M^-1 mod 2^8, the
// mapping constant e = 2^(2N) mod M, the message (plain_text), the two
// exponentiation variables P and R, the Montgomery operand registers X_reg
// and Y_reg, and the result (cipher_text).
//
// Loading: key, M and e form one 3N-bit chain that takes a 32-bit word per
// key_shift cycle at its top and moves right by 32 bits, so after 3N/32 = 96
// words the first word sits in key[31:0]. The host therefore sends key, then
// M, then e, each least significant word first. plain_text is a separate
// N/32 = 32 word chain loaded the same way. Mprime is recomputed from M[7:0]
// in every cycle, so it is valid one cycle after M is loaded.
//
// Exponentiation: load_xy copies the sources chosen by x_sel and y_sel
// (1, e, plain_text, P or R) into X_reg and Y_reg; wr_p, wr_r and wr_cipher
// store the Montgomery result m_out. key_bit is key[key_idx]. During the
// output phase shift_cipher moves cipher_text right by one word, so
// cipher_word = cipher_text[31:0] walks through the result, low word first.
//
// The register set and the data paths between them follow the paper's top
// datapath; the word order, the shared load chain and computing Mprime from
// M (instead of loading it) are this design's own choices.
module rsa_regfile
  import rsa_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // serial loading
  input  logic [WORD_BITS-1:0] word_in,
  input  logic                 key_shift,     // take word_in into key/M/e chain
  input  logic                 plain_shift,   // take word_in into plain_text
  // Montgomery operands and results
  input  logic                 load_xy,
  input  op_sel_e              x_sel,
  input  op_sel_e              y_sel,
  input  logic                 wr_p,
  input  logic                 wr_r,
  input  logic                 wr_cipher,
  input  logic [N-1:0]         m_out,
  input  logic [$clog2(N)-1:0] key_idx,
  // output phase
  input  logic                 shift_cipher,
  output logic [N-1:0]         x_reg,
  output logic [N-1:0]         y_reg,
  output logic [N-1:0]         m,
  output logic [7:0]           mprime,
  output logic                 key_bit,
  output logic [WORD_BITS-1:0] cipher_word
);
  logic [N-1:0] key, e, plain_text, p, r, cipher_text;

  function automatic logic [N-1:0] pick(op_sel_e s, logic [N-1:0] e_v,
                                        logic [N-1:0] pl_v, logic [N-1:0] p_v,
                                        logic [N-1:0] r_v);
    unique case (s)
      OP_ONE:   return N'(1);
      OP_E:     return e_v;
      OP_PLAIN: return pl_v;
      OP_P:     return p_v;
      OP_R:     return r_v;
      default:  return '0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key         <= '0;
      m           <= '0;
      e           <= '0;
      mprime      <= '0;
      plain_text  <= '0;
      p           <= '0;
      r           <= '0;
      x_reg       <= '0;
      y_reg       <= '0;
      cipher_text <= '0;
    end else begin
      if (key_shift)
        {e, m, key} <= {word_in, e, m, key[N-1:WORD_BITS]};
      mprime <= mprime8(m[7:0]);
      if (plain_shift)
        plain_text <= {word_in, plain_text[N-1:WORD_BITS]};
      if (load_xy) begin
        x_reg <= pick(x_sel, e, plain_text, p, r);
        y_reg <= pick(y_sel, e, plain_text, p, r);
      end
      if (wr_p) p <= m_out;
      if (wr_r) r <= m_out;
      if (wr_cipher)
        cipher_text <= m_out;
      else if (shift_cipher)
        cipher_text <= cipher_text >> WORD_BITS;
    end
  end

  assign key_bit     = key[key_idx];
  assign cipher_word = cipher_text[WORD_BITS-1:0];

endmodule
