// rsa_pkg: constants, encodings and helper functions shared by the
// quad-core RSA processor.
//
// The processor computes 1024-bit modular exponentiations with a Montgomery
// multiplier split into four partitions ("cores"). Each core consumes one
// radix-4 digit (2 bits) of the multiplier per clock, so the four cores retire
// 8 multiplier bits per clock and one Montgomery product takes N/8 = 128
// iterations. The operand width, the 32-bit pin width, the core count and the
// digit size follow the paper; the encodings of the FSM states are this
// design's own choice.
package rsa_pkg;

  // Operand width of the processor (RSA modulus length).
  parameter int unsigned N_BITS      = 1024;
  // Width of the shared data pin.
  parameter int unsigned WORD_BITS   = 32;
  // Number of Montgomery partitions (cores) and multiplier bits per core per step.
  parameter int unsigned NUM_CORES   = 4;
  parameter int unsigned DIGIT_BITS  = 2;
  // Bits retired per Montgomery iteration by all cores together (4 x 2 = 8).
  parameter int unsigned STEP_BITS   = NUM_CORES * DIGIT_BITS;

  // Host command on the sel pins.
  typedef enum logic [1:0] {
    SEL_NONE = 2'b00,
    SEL_KEY  = 2'b01,
    SEL_DATA = 2'b10,
    SEL_RUN  = 2'b11
  } sel_e;

  // Top-level controller states (state diagram of the processor).
  typedef enum logic [3:0] {
    ST_IDLE,
    ST_LOAD_KEY,
    ST_LOAD_DATA,
    ST_MONT1,   // P = Mont(e, plain)   mapping of the message
    ST_MONT2,   // R = Mont(1, e)       Montgomery form of 1
    ST_MONT3,   // R = Mont(R, P)       multiply, kept only if key bit is 1
    ST_MONT4,   // P = Mont(P, P)       square
    ST_MONT5,   // C = Mont(1, R)       remapping
    ST_DONE
  } top_state_e;

  // Sub-phase of every MONTx state: load X_reg/Y_reg, pulse start_mont, wait.
  typedef enum logic [1:0] {
    PH_LOAD,
    PH_START,
    PH_WAIT
  } mont_phase_e;

  // State of the Montgomery block and of each core.
  typedef enum logic [1:0] {
    MS_INIT,
    MS_WORK,
    MS_DONE
  } mont_state_e;

  // Source of the X_reg / Y_reg operand registers.
  typedef enum logic [2:0] {
    OP_ONE,
    OP_E,
    OP_PLAIN,
    OP_P,
    OP_R
  } op_sel_e;

  // Mprime = -M^-1 mod 2^8 for odd M: Newton iteration inv = inv*(2 - m*inv),
  // starting from inv = m (correct to 3 bits for odd m), doubles the number of
  // correct bits per step: 3 -> 6 -> 12 bits.
  function automatic logic [7:0] mprime8(input logic [7:0] m);
    logic [7:0] inv;
    inv = m;
    inv = 8'(inv * (8'd2 - 8'(m * inv)));
    inv = 8'(inv * (8'd2 - 8'(m * inv)));
    return 8'(8'd0 - inv);
  endfunction

endpackage
