// pin_mux: sharing of the 32-bit bidirectional data pin.
//
// The host selects with sel what the pin carries: 01 key material, 10 the
// message, 11 the result (00 nothing). While the controller reports a load
// cycle (load_cycle), the word on the pin is steered to the key/M/e chain
// (sel = 01) or to the plain_text register (sel = 10) by raising key_shift or
// plain_shift. During the output phase (out_en) the current ciphertext word is
// captured in the data_out register and the pin driver is enabled, one cycle
// later, with data_oe; the pad itself (tristate buffer) lies outside this
// module, so the pin appears here as data_in, data_out and data_oe.
//
// The sel encoding and the data_out register in front of the pin follow the
// paper's top datapath; the load strobes and the one-cycle output register
// timing are this design's own.
module pin_mux
  import rsa_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  sel_e                 sel,
  input  logic                 load_cycle,   // controller: a word is due now
  input  logic                 out_en,       // controller: output phase
  input  logic [WORD_BITS-1:0] cipher_word,
  output logic                 key_shift,
  output logic                 plain_shift,
  output logic [WORD_BITS-1:0] data_out,
  output logic                 data_oe
);
  always_comb begin
    key_shift   = 1'b0;
    plain_shift = 1'b0;
    unique case (sel)
      SEL_KEY:  key_shift   = load_cycle;
      SEL_DATA: plain_shift = load_cycle;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_out <= '0;
      data_oe  <= 1'b0;
    end else begin
      data_oe <= out_en;
      if (out_en) data_out <= cipher_word;
    end
  end
endmodule
