// mont: 1024-bit Montgomery multiplier built from four parallel cores.
//
// Computes m_out = X * Y * 2^-N mod M for X, Y < M and odd M. The multiplier
// X is loaded into the Xm shift register, which moves right by 8 bits every
// WORK cycle; core j always sees Xm[2j+1:2j], so over 128 cycles core 0 gets
// digits X[1:0], X[9:8], ..., core 1 gets X[3:2], X[11:10], ..., and so on.
// The multiplicand Y and its multiple 3Y (the "mult x3" box, one shift and
// one add) go to all four cores. Each core result (< 2M) is brought below M
// by a conditional subtraction, and pp_adder sums and reduces the four.
//
// Interface and timing: raise start_mont for one cycle with x, y, m and
// mprime valid; y, m and mprime must stay unchanged until done_mont. The
// block leaves INIT (or DONE) for WORK at that edge, spends exactly 128 cycles
// in WORK, and then holds done_mont = 1 with m_out valid (combinational from
// the core registers) until the next start_mont or clr. A product therefore
// takes 129 cycles from the start_mont edge to the first cycle of done_mont.
//
// The Xm register, the 8-bit shift, the digit wiring, the x3 multiple, the
// per-core subtraction, the adder and the INIT/WORK states follow the paper;
// the clr input and the exact start/done handshake are this design's own.
module mont
  import rsa_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,         // synchronous reset of the block
  input  logic         start_mont,
  input  logic [N-1:0] x,           // multiplier   (X_reg)
  input  logic [N-1:0] y,           // multiplicand (Y_reg)
  input  logic [N-1:0] m,           // modulus
  input  logic [7:0]   mprime,      // -M^-1 mod 2^8
  output logic [N-1:0] m_out,
  output logic         done_mont
);
  localparam int unsigned ITER = N / STEP_BITS;
  localparam int unsigned CW   = $clog2(ITER);

  mont_state_e              state;
  logic [CW-1:0]            counter;
  logic [N-1:0]             xm;
  logic [N+1:0]             y3;
  logic                     start_core;
  logic [NUM_CORES-1:0]     core_done;
  logic [N:0]               sn   [NUM_CORES];
  logic [N:0]               sred [NUM_CORES];
  logic [NUM_CORES-1:0][N-1:0] pp;

  // mult x3: Y11 = 2Y + Y
  assign y3 = {1'b0, y, 1'b0} + {2'b00, y};

  assign start_core = start_mont && (state != MS_WORK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= MS_INIT;
      counter <= '0;
      xm      <= '0;
    end else if (clr) begin
      state   <= MS_INIT;
      counter <= '0;
      xm      <= '0;
    end else begin
      unique case (state)
        MS_INIT, MS_DONE: begin
          if (start_core) begin
            state   <= MS_WORK;
            counter <= '0;
            xm      <= x;
          end
        end
        MS_WORK: begin
          xm      <= xm >> STEP_BITS;
          counter <= counter + 1'b1;
          if (counter == CW'(ITER - 1)) state <= MS_DONE;
        end
        default: state <= MS_INIT;
      endcase
    end
  end

  for (genvar j = 0; j < NUM_CORES; j++) begin : g_core
    mont_core #(.N(N), .CORE_IDX(j)) u_core (
      .clk        (clk),
      .rst_n      (rst_n),
      .clr        (clr),
      .start_core (start_core),
      .xj         (xm[DIGIT_BITS*j +: DIGIT_BITS]),
      .y          (y),
      .y3         (y3),
      .m          (m),
      .mprime     (mprime),
      .sn_out     (sn[j]),
      .done       (core_done[j])
    );

    cond_sub #(.W(N+1)) u_sub (
      .a (sn[j]),
      .m ({1'b0, m}),
      .y (sred[j])
    );
    assign pp[j] = sred[j][N-1:0];
  end

  pp_adder #(.N(N)) u_adder (
    .pp    (pp),
    .m     (m),
    .m_out (m_out)
  );

  assign done_mont = (state == MS_DONE) && (&core_done);

  // The cores run in lock step with the block's own counter.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == MS_DONE) |-> (&core_done))
    else $error("mont: cores out of step");

endmodule
