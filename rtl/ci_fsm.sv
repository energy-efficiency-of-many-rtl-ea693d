// ci_fsm: controller of the trial-division custom instruction.
//
// On start it loads the operand and the divisor registers (load), then issues
// blocks of divisors into the dividers (issue, which also steps every divisor
// register to i + inc).  It finishes when a remainder of zero comes back
// (found: the candidate has a factor, result 1) or when the bound test says no
// divisor is left to try (loop low: no factor, result 0).  On finishing it
// pulses done for one cycle, holds result until the next finish and flushes the
// dividers so no stale remainder is seen by the next operation.
//
// PIPELINED = 1 (default): a new block is issued every cycle, without waiting
// for earlier remainders; when the block that fails the bound test has been
// issued the controller waits STAGES cycles for the last remainders (DRAIN).
// An operation whose divisors run to block K takes K + STAGES + 1 cycles from
// start to done, or fewer when a factor turns up early.
// PIPELINED = 0: one block is in the dividers at a time; each block costs
// 1 + STAGES cycles (ISSUE, then WAIT for its remainders), and the controller
// stops after the first block with a factor or the first one past the bound.
//
// Both behaviours are the design's; the state encoding, the registered done /
// result and the flush are this implementation's choices.  The extension
// field n reaches the controller as on the soft-core's custom-instruction
// port, but no use of it is defined, so it is ignored.
module ci_fsm
  import prime_pkg::*;
#(
  parameter int unsigned STAGES    = DEF_STAGES,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [N_WIDTH-1:0] n,
  input  logic               loop,    // bound test of the block now in the registers
  input  logic               found,   // a valid zero remainder this cycle
  output logic               load,    // load v and the initial divisors
  output logic               issue,   // divisors enter the dividers, registers step
  output logic               flush,   // clear the dividers' in-flight operations
  output logic               busy,
  output logic               done,
  output logic               result
);

  localparam int unsigned CW = $clog2(STAGES + 1);

  ci_state_e     state_q, state_d;
  logic [CW-1:0] cnt_q, cnt_d;
  logic          loop_q, loop_d;
  logic          done_d, result_d;

  always_comb begin
    state_d  = state_q;
    cnt_d    = cnt_q;
    loop_d   = loop_q;
    done_d   = 1'b0;
    result_d = result;
    load     = 1'b0;
    issue    = 1'b0;
    flush    = 1'b0;
    unique case (state_q)
      ST_IDLE: begin
        if (start) begin
          load    = 1'b1;
          state_d = ST_ISSUE;
        end
      end
      ST_ISSUE: begin
        issue = 1'b1;
        if (PIPELINED) begin
          if (found) begin
            done_d = 1'b1; result_d = 1'b1; flush = 1'b1; state_d = ST_IDLE;
          end else if (!loop) begin
            cnt_d   = CW'(STAGES - 1);
            state_d = ST_DRAIN;
          end
        end else begin
          loop_d  = loop;
          cnt_d   = CW'(STAGES - 1);
          state_d = ST_WAIT;
        end
      end
      ST_WAIT: begin
        if (cnt_q == '0) begin
          if (found) begin
            done_d = 1'b1; result_d = 1'b1; flush = 1'b1; state_d = ST_IDLE;
          end else if (!loop_q) begin
            done_d = 1'b1; result_d = 1'b0; flush = 1'b1; state_d = ST_IDLE;
          end else begin
            state_d = ST_ISSUE;
          end
        end else begin
          cnt_d = cnt_q - 1'b1;
        end
      end
      ST_DRAIN: begin
        if (found) begin
          done_d = 1'b1; result_d = 1'b1; flush = 1'b1; state_d = ST_IDLE;
        end else if (cnt_q == '0) begin
          done_d = 1'b1; result_d = 1'b0; flush = 1'b1; state_d = ST_IDLE;
        end else begin
          cnt_d = cnt_q - 1'b1;
        end
      end
      default: state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= ST_IDLE;
      cnt_q   <= '0;
      loop_q  <= 1'b0;
      done    <= 1'b0;
      result  <= 1'b0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
      loop_q  <= loop_d;
      done    <= done_d;
      result  <= result_d;
    end
  end

  assign busy = (state_q != ST_IDLE);

  // A start while an operation is running is not defined by the port protocol.
  a_no_start_busy: assert property (@(posedge clk) disable iff (rst) start |-> !busy)
    else $error("ci_fsm: start while busy");

  logic unused_n;
  assign unused_n = ^n;

endmodule
