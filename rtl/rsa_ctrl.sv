// rsa_ctrl: top-level controller of the RSA processor.
//
// States: IDLE, LOAD_KEY, LOAD_DATA, MONT1..MONT5 and DONE. From IDLE the
// host command sel = 01 starts a 3N/32 = 96 cycle key load (key, M, e),
// sel = 10 a N/32 = 32 cycle message load, and sel = 11 the exponentiation.
// Each load ends with a one-cycle finish pulse and a return to IDLE, so loads
// can be repeated in any order.
//
// The exponentiation is the right-to-left Montgomery ladder:
//   MONT1  P = Mont(e, plain)          MONT2  R = Mont(1, e)
//   repeat N times, i = 0..N-1:
//     MONT3  T = Mont(P, R); R = T only if key[i] = 1
//     MONT4  P = Mont(P, P)
//   MONT5  C = Mont(1, R)
// MONT3 is computed for every key bit, so the work done and its timing do not
// depend on the key: 2 + 2N + 1 = 2051 products for N = 1024. When the
// iteration counter reaches N, MONT3 hands over to MONT5 without computing.
// After MONT5 the Montgomery block is cleared, ready rises and the controller
// stays N/32 = 32 cycles in DONE while the result is shifted out.
//
// Every MONTx state has three phases: LOAD (X_reg/Y_reg loaded), START
// (start_mont pulse) and WAIT (until done_mont, when the result is written).
// One product thus costs 1 + 1 + 128 + 1 = 131 cycles, and a whole 1024-bit
// exponentiation 2051 * 131 = 268,681 cycles plus loading.
//
// States, transitions, cycle counts and the key-independent MONT3 follow the
// paper's state diagram and text; the three phases inside each MONTx state,
// the sampling of the first load word one cycle after sel is seen and the
// exact finish/ready timing are this design's own.
module rsa_ctrl
  import rsa_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sel_e                 sel,
  input  logic                 done_mont,
  input  logic                 key_bit,
  // host handshake
  output logic                 finish,       // one-cycle pulse at end of a load
  output logic                 ready,        // result is being output
  // pin mux
  output logic                 load_cycle,
  output logic                 out_en,
  // Montgomery block
  output logic                 start_mont,
  output logic                 mont_clr,
  // register file
  output logic                 load_xy,
  output op_sel_e              x_sel,
  output op_sel_e              y_sel,
  output logic                 wr_p,
  output logic                 wr_r,
  output logic                 wr_cipher,
  output logic                 shift_cipher,
  output logic [$clog2(N)-1:0] key_idx,
  // observation
  output top_state_e           state_o,
  output logic                 key_mult_kept  // MONT3 result written to R
);
  localparam int unsigned KEY_WORDS  = 3 * N / WORD_BITS;   // 96
  localparam int unsigned DATA_WORDS = N / WORD_BITS;       // 32
  localparam int unsigned CNTW       = $clog2(N + 1);

  top_state_e   state;
  mont_phase_e  phase;
  logic [CNTW-1:0] counter;

  assign state_o = state;
  assign key_idx = counter[$clog2(N)-1:0];

  // Operand sources of each Montgomery step.
  always_comb begin
    x_sel = OP_ONE;
    y_sel = OP_ONE;
    unique case (state)
      ST_MONT1: begin x_sel = OP_E; y_sel = OP_PLAIN; end
      ST_MONT2: begin x_sel = OP_ONE; y_sel = OP_E;     end
      ST_MONT3: begin x_sel = OP_P;   y_sel = OP_R;     end
      ST_MONT4: begin x_sel = OP_P;   y_sel = OP_P;     end
      ST_MONT5: begin x_sel = OP_ONE; y_sel = OP_R;     end
      default: ;
    endcase
  end

  logic in_mont, mont_finished, loop_end;
  assign loop_end      = (state == ST_MONT3) && (counter == CNTW'(N));
  assign in_mont       = state inside {ST_MONT1, ST_MONT2, ST_MONT3, ST_MONT4, ST_MONT5};
  assign mont_finished = in_mont && (phase == PH_WAIT) && done_mont;

  always_comb begin
    finish        = 1'b0;
    ready         = (state == ST_DONE);
    load_cycle    = 1'b0;
    out_en        = (state == ST_DONE);
    start_mont    = in_mont && (phase == PH_START);
    load_xy       = in_mont && (phase == PH_LOAD) && !loop_end;
    mont_clr      = 1'b0;
    wr_p          = 1'b0;
    wr_r          = 1'b0;
    wr_cipher     = 1'b0;
    shift_cipher  = (state == ST_DONE);
    key_mult_kept = 1'b0;
    unique case (state)
      ST_LOAD_KEY: begin
        load_cycle = (counter < CNTW'(KEY_WORDS));
        finish     = (counter == CNTW'(KEY_WORDS));
      end
      ST_LOAD_DATA: begin
        load_cycle = (counter < CNTW'(DATA_WORDS));
        finish     = (counter == CNTW'(DATA_WORDS));
      end
      ST_MONT1: wr_p = mont_finished;
      ST_MONT2: wr_r = mont_finished;
      ST_MONT3: begin
        wr_r          = mont_finished && key_bit;
        key_mult_kept = wr_r;
      end
      ST_MONT4: wr_p = mont_finished;
      ST_MONT5: begin
        wr_cipher = mont_finished;
        mont_clr  = mont_finished;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      phase   <= PH_LOAD;
      counter <= '0;
    end else begin
      // phase sequencing inside the MONTx states
      if (in_mont) begin
        unique case (phase)
          PH_LOAD:  phase <= PH_START;
          PH_START: phase <= PH_WAIT;
          default:  if (done_mont) phase <= PH_LOAD;
        endcase
      end
      unique case (state)
        ST_IDLE: begin
          counter <= '0;
          phase   <= PH_LOAD;
          unique case (sel)
            SEL_KEY:  state <= ST_LOAD_KEY;
            SEL_DATA: state <= ST_LOAD_DATA;
            SEL_RUN:  state <= ST_MONT1;
            default:  state <= ST_IDLE;
          endcase
        end
        ST_LOAD_KEY: begin
          counter <= counter + 1'b1;
          if (counter == CNTW'(KEY_WORDS)) begin
            state   <= ST_IDLE;
            counter <= '0;
          end
        end
        ST_LOAD_DATA: begin
          counter <= counter + 1'b1;
          if (counter == CNTW'(DATA_WORDS)) begin
            state   <= ST_IDLE;
            counter <= '0;
          end
        end
        ST_MONT1: if (mont_finished) state <= ST_MONT2;
        ST_MONT2: if (mont_finished) state <= ST_MONT3;
        ST_MONT3: begin
          if (loop_end) begin
            state <= ST_MONT5;          // all key bits done, MONT3 not computed
            phase <= PH_LOAD;
          end else if (mont_finished) begin
            state <= ST_MONT4;
          end
        end
        ST_MONT4: begin
          if (mont_finished) begin
            state   <= ST_MONT3;
            counter <= counter + 1'b1;
          end
        end
        ST_MONT5: begin
          if (mont_finished) begin
            state   <= ST_DONE;
            counter <= '0;
          end
        end
        ST_DONE: begin
          counter <= counter + 1'b1;
          if (counter == CNTW'(DATA_WORDS - 1)) begin
            state   <= ST_IDLE;
            counter <= '0;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // The result is taken only after all N key bits have been processed.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_cipher |-> (counter == CNTW'(N)))
    else $error("rsa_ctrl: result written before the last key bit");

endmodule
