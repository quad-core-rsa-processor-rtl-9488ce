// pp_adder: sum of the four partial Montgomery products, reduced modulo M.
//
// Each input is a core result already brought below M by its own
// conditional subtraction, so the sum is below 4M. The sum is formed in one
// N+2-bit adder and then passed through NUM_SUB conditional "subtract M"
// stages; three stages are needed to bring any value below 4M into [0, M).
// Purely combinational.
//
// The four-input adder followed by subtract-M stages is the paper's
// structure. Its block diagram draws two subtract stages after the adder;
// this design uses three by default, because with two the result can still
// be as large as 2M - 1, which the cores cannot take as an operand.
module pp_adder
  import rsa_pkg::*;
#(
  parameter int unsigned N       = N_BITS,
  parameter int unsigned NUM_SUB = 3
) (
  input  logic [NUM_CORES-1:0][N-1:0] pp,     // reduced partial products, each < M
  input  logic [N-1:0]                m,
  output logic [N-1:0]                m_out   // (sum of pp) mod M
);
  localparam int unsigned SW = N + 2;

  logic [SW-1:0] acc;

  // Adder, then NUM_SUB "Sub (Sn-M)" stages, each keeping a - M when a >= M.
  always_comb begin
    acc = '0;
    for (int c = 0; c < NUM_CORES; c++) acc += SW'(pp[c]);
    for (int s = 0; s < NUM_SUB; s++) begin
      if (acc >= SW'(m)) acc -= SW'(m);
    end
  end

  assign m_out = acc[N-1:0];
endmodule
