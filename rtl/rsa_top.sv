// rsa_top: quad-core 1024-bit RSA processor with a jitter-based power-noise
// source.
//
// The processor computes C = P^key mod M with Montgomery arithmetic
// (R = 2^N). A host loads key, M and e = 2^(2N) mod M (96 words), then the
// message (32 words), over a single 32-bit data pin, starts the
// exponentiation and reads the N-bit result back as 32 words. The Montgomery
// multiplier splits every product over four cores that work in parallel on
// interleaved radix-4 digits of the multiplier, 8 bits per clock, 128 clocks
// per product. A jitter-amplifier random number generator runs alongside and
// draws random supply current to mask the data-dependent power of the
// datapath; it has no data connection to the RSA datapath.
//
// Host protocol (all on the rising clock edge, sys_reset_n active low):
//   1. Drive sel = 01 while the processor is idle. One cycle later the key
//      load begins: drive word i (key words 0..31, M words 0..31, e words
//      0..31, each low word first) in the i-th cycle of the load, keeping
//      sel = 01. finish pulses for one cycle after the 96th word; then set
//      sel = 00.
//   2. The same with sel = 10 and the 32 message words.
//   3. Drive sel = 11 to start; keep it until ready rises, then drive 00.
//      While ready is high, and shifted one cycle later, data_oe = 1 marks 32
//      consecutive cycles on data_out carrying the result, low word first.
// The bidirectional pin is left to the pad: drive it with data_out when
// data_oe is 1, and feed it back on data_in.
//
// Structure, register set, pin sharing, state machine, cycle counts and the
// Montgomery organisation follow the paper; the word order, reset polarity,
// the exact cycle of each handshake and the split of the pin into in, out
// and enable are this design's own.
module rsa_top
  import rsa_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                 clk,
  input  logic                 sys_reset_n,
  input  logic [1:0]           sel,
  input  logic [WORD_BITS-1:0] data_in,
  output logic [WORD_BITS-1:0] data_out,
  output logic                 data_oe,
  output logic                 ready,
  output logic                 finish,
  input  logic                 rng_osc_in,   // waveform sampled by the RNG
  output logic                 rng_bit       // random bit stream
);
  sel_e                 sel_s;
  logic                 load_cycle, out_en, key_shift, plain_shift;
  logic                 start_mont, mont_clr, done_mont;
  logic                 load_xy, wr_p, wr_r, wr_cipher, shift_cipher, key_bit;
  op_sel_e              x_sel, y_sel;
  logic [$clog2(N)-1:0] key_idx;
  logic [N-1:0]         x_reg, y_reg, m, m_out;
  logic [7:0]           mprime;
  logic [WORD_BITS-1:0] cipher_word;
  top_state_e           state;
  logic                 key_mult_kept;
  logic                 clk_jamp;
  logic [15:0]          rng_activity;

  assign sel_s = sel_e'(sel);

  rsa_ctrl #(.N(N)) u_ctrl (
    .clk           (clk),
    .rst_n         (sys_reset_n),
    .sel           (sel_s),
    .done_mont     (done_mont),
    .key_bit       (key_bit),
    .finish        (finish),
    .ready         (ready),
    .load_cycle    (load_cycle),
    .out_en        (out_en),
    .start_mont    (start_mont),
    .mont_clr      (mont_clr),
    .load_xy       (load_xy),
    .x_sel         (x_sel),
    .y_sel         (y_sel),
    .wr_p          (wr_p),
    .wr_r          (wr_r),
    .wr_cipher     (wr_cipher),
    .shift_cipher  (shift_cipher),
    .key_idx       (key_idx),
    .state_o       (state),
    .key_mult_kept (key_mult_kept)
  );

  pin_mux u_pin_mux (
    .clk         (clk),
    .rst_n       (sys_reset_n),
    .sel         (sel_s),
    .load_cycle  (load_cycle),
    .out_en      (out_en),
    .cipher_word (cipher_word),
    .key_shift   (key_shift),
    .plain_shift (plain_shift),
    .data_out    (data_out),
    .data_oe     (data_oe)
  );

  rsa_regfile #(.N(N)) u_regs (
    .clk          (clk),
    .rst_n        (sys_reset_n),
    .word_in      (data_in),
    .key_shift    (key_shift),
    .plain_shift  (plain_shift),
    .load_xy      (load_xy),
    .x_sel        (x_sel),
    .y_sel        (y_sel),
    .wr_p         (wr_p),
    .wr_r         (wr_r),
    .wr_cipher    (wr_cipher),
    .m_out        (m_out),
    .key_idx      (key_idx),
    .shift_cipher (shift_cipher),
    .x_reg        (x_reg),
    .y_reg        (y_reg),
    .m            (m),
    .mprime       (mprime),
    .key_bit      (key_bit),
    .cipher_word  (cipher_word)
  );

  mont #(.N(N)) u_mont (
    .clk        (clk),
    .rst_n      (sys_reset_n),
    .clr        (mont_clr),
    .start_mont (start_mont),
    .x          (x_reg),
    .y          (y_reg),
    .m          (m),
    .mprime     (mprime),
    .m_out      (m_out),
    .done_mont  (done_mont)
  );

  jitter_trng u_rng (
    .sys_clk      (clk),
    .rst_n        (sys_reset_n),
    .osc_in       (rng_osc_in),
    .sys_clk_jamp (clk_jamp),
    .q            (rng_bit),
    .pwr_activity (rng_activity)
  );

endmodule
