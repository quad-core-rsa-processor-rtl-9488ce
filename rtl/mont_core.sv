// mont_core: one partition of the k-partition radix-4 Montgomery multiplier.
//
// Core j of four receives, on every WORK cycle i, the 2-bit digit
// xj = X[8i+2j+1 : 8i+2j] and performs one step of the partitioned Montgomery
// recurrence:
//     op1  = xj * Y            (mux of 0, Y, 2Y and the precomputed 3Y)
//     Sn1  = Sn + op1 * 4^j    (the 4^j weight places this core's digit)
//     Qi   = Sn1[7:0] * Mprime mod 2^8      (Mprime = -M^-1 mod 2^8)
//     Sn   = (Sn1 + Qi * M) / 2^8
// After N/8 = 128 steps Sn = X_j * Y * 2^-N (mod M), where X_j is the part of
// X made of this core's digits; the four partial products sum to X*Y*2^-N.
// With X, Y < M every Sn stays below 2M, hence the 1025-bit Sn register.
//
// Interface and timing: a start_core pulse (in INIT or DONE) clears Sn and
// the counter and enters WORK; the following 128 cycles each consume one xj
// digit; then the core sits in DONE with done = 1 and sn_out = Sn. In every
// other state sn_out is 0, as in the core's timing diagram. clr returns the
// core to INIT. Y, y3, M and Mprime must be stable from start_core to done.
//
// The digit mux, the 8-bit Qi multiply, the M multiply, the 8-bit shift, the
// 128-cycle count and the INIT/WORK/DONE states follow the paper. The 4^j
// weight is taken from the partition algorithm (its "2^j Y" term); the core
// diagram does not draw it.
module mont_core
  import rsa_pkg::*;
#(
  parameter int unsigned N        = N_BITS,  // operand width
  parameter int unsigned CORE_IDX = 0        // partition index j, 0..3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,         // synchronous return to INIT
  input  logic         start_core,  // begin a new partial product
  input  logic [1:0]   xj,          // radix-4 multiplier digit for this step
  input  logic [N-1:0] y,           // multiplicand Y
  input  logic [N+1:0] y3,          // 3*Y, precomputed by the Montgomery block
  input  logic [N-1:0] m,           // modulus M (odd)
  input  logic [7:0]   mprime,      // -M^-1 mod 2^8
  output logic [N:0]   sn_out,      // partial product, valid while done
  output logic         done
);
  localparam int unsigned ITER  = N / STEP_BITS;        // 128 for N = 1024
  localparam int unsigned CW    = $clog2(ITER);          // counter width
  localparam int unsigned SHIFT = DIGIT_BITS * CORE_IDX; // log2(4^j)
  localparam int unsigned AW    = N + 10;                // accumulator width

  mont_state_e       state;
  logic [CW-1:0]     counter;
  logic [N:0]        sn;        // Sn register (< 2M)

  logic [N+1:0]      op1;       // xj * Y
  logic [AW-1:0]     sn1;       // Sn + op1 * 4^j
  logic [7:0]        qi;
  logic [AW-1:0]     sum;       // Sn1 + Qi * M, low 8 bits are 0 by construction
  logic [N:0]        sn_next;

  always_comb begin
    unique case (xj)
      2'b00:   op1 = '0;                     // Y00
      2'b01:   op1 = {2'b00, y};             // Y01
      2'b10:   op1 = {1'b0, y, 1'b0};        // Y10 = Y shifted by one
      default: op1 = y3;                     // Y11 = 3Y
    endcase
    sn1     = AW'(sn) + (AW'(op1) << SHIFT);
    qi      = 8'(sn1[7:0] * mprime);
    sum     = sn1 + AW'(qi) * AW'(m);
    sn_next = sum[STEP_BITS +: N+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= MS_INIT;
      counter <= '0;
      sn      <= '0;
    end else if (clr) begin
      state   <= MS_INIT;
      counter <= '0;
      sn      <= '0;
    end else begin
      unique case (state)
        MS_INIT, MS_DONE: begin
          if (start_core) begin
            state   <= MS_WORK;
            counter <= '0;
            sn      <= '0;
          end
        end
        MS_WORK: begin
          sn      <= sn_next;
          counter <= counter + 1'b1;
          if (counter == CW'(ITER - 1)) state <= MS_DONE;
        end
        default: state <= MS_INIT;
      endcase
    end
  end

  assign done   = (state == MS_DONE);
  assign sn_out = done ? sn : '0;

  // The partition algorithm needs an odd modulus.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == MS_WORK) |-> m[0])
    else $error("mont_core: even modulus");

endmodule
