// jitter_trng: behavioural model of the jitter-amplifier true random number
// generator and power-noise source. Not synthesizable: the real block is a
// custom analog cell (delay cells with a random-control input), and this file
// models its timing with delays.
//
// How the circuit works: the system clock passes through a chain of
// NUM_CELLS delay cells. Each cell has a control input RAN that switches its
// delay between two values. The RAN inputs come from a small register chain
// fed by the random bit itself (Q_IN), with an exclusive-or at every tap, so
// the delay of the chain, and with it the phase of the delayed clock
// SYSTEM_CLK_JAMP, changes from cycle to cycle: the jitter of the system clock
// is amplified. SYSTEM_CLK_JAMP samples a free-running input waveform IN in
// a flip-flop; its output q is the random bit stream, which also feeds Q_IN.
// Because the delay cells switch at random, their supply current adds a
// random component to the chip's power, which is the countermeasure against
// power analysis.
//
// Model: each cell delay is BASE_PS, plus STEP_PS when its RAN bit is 1,
// plus a random thermal jitter of 0..JITTER_PS drawn with $urandom (the
// physical noise that makes the generator "true"). The register chain is
// clocked by the system clock. pwr_activity counts RAN toggles as a stand-in
// for the cells' random current. Delays are in the simulator's time unit
// (1 ps is intended) and only their ratio to the clock period matters.
//
// The cell chain, the four RAN-controlled cells, the register chain with
// exclusive-or taps fed from Q_IN and the sampling flip-flop are read from the
// paper's circuit figure; the delay values, the clock of the register chain
// and the activity counter are this model's own.
module jitter_trng #(
  parameter int unsigned NUM_CELLS = 4,
  parameter int unsigned BASE_PS   = 150,
  parameter int unsigned STEP_PS   = 60,
  parameter int unsigned JITTER_PS = 20
) (
  input  logic        sys_clk,        // SYSTEM CLK
  input  logic        rst_n,
  input  logic        osc_in,         // IN: waveform that is sampled
  output logic        sys_clk_jamp,   // SYSTEM CLK_JAMP: jitter-amplified clock
  output logic        q,              // random bit stream
  output logic [15:0] pwr_activity    // RAN toggles (random power proxy)
);
  logic [NUM_CELLS-1:0] ran;
  logic [NUM_CELLS:0]   tap;   // tap[0] = input of the chain

  assign tap[0] = sys_clk;

  for (genvar c = 0; c < NUM_CELLS; c++) begin : g_cell
    always @(tap[c]) begin
      tap[c+1] <= #(BASE_PS + (ran[c] ? STEP_PS : 0) + $urandom_range(JITTER_PS, 0)) tap[c];
    end
  end

  assign sys_clk_jamp = tap[NUM_CELLS];

  // RAN register chain: Q_IN enters at one end, every tap is exclusive-or'ed
  // with Q_IN before the next stage.
  always @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n) begin
      ran          <= '0;
      pwr_activity <= '0;
    end else begin
      ran          <= {ran[NUM_CELLS-2:0], 1'b0} ^ {NUM_CELLS{q}};
      pwr_activity <= pwr_activity + 16'($countones(ran ^ ({ran[NUM_CELLS-2:0], 1'b0} ^ {NUM_CELLS{q}})));
    end
  end

  // Sampling flip-flop: D = IN, clock = SYSTEM CLK_JAMP.
  always @(posedge sys_clk_jamp or negedge rst_n) begin
    if (!rst_n) q <= 1'b0;
    else        q <= osc_in;
  end
endmodule
