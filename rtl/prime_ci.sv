// prime_ci: multi-unit, pipelined trial-division custom instruction.
//
// The candidate v arrives on operand a with start.  UNITS = M divider units
// test M consecutive trial divisors per block: the unit with the bound test
// (iter) starts at i = M+1 and the M-1 optimised units (opt_iter) at
// i = M, M-1, ..., 2; every issue adds M to each divisor, so block k (k >= 1)
// covers i = (k-1)M+2 .. kM+1.  A block is issued while the largest divisor i
// of the block before it satisfies i*i <= v, so every divisor up to sqrt(v)
// is tried.  Any unit's zero remainder means that v has a factor.
// With UNITS = 1 the unit starts at 2 and steps by 1: the single-unit custom
// instruction.
//
// Interface (as the soft-core's multi-cycle custom instruction): start for one
// cycle with a; done pulses one cycle later than the deciding cycle and result
// holds {31'b0, f} from then until the next done, with f = 1 when a factor was
// found (v composite) and f = 0 when none was (v prime).  Because every divisor
// of the first block is tried, a candidate 2 <= v <= M+1 finds itself as a
// "factor" and is reported composite; such small candidates, like the even
// and v <= 3 cases of the software loop, are left to the caller.  v = 0 and
// v = 1 are reported with f = 0.
//
// Timing at the defaults (PIPELINED = 1, STAGES = 5): K + 6 cycles from start
// to done when the bound stops the search after K blocks, fewer with an early
// factor; K = ceil((sqrt(v)-1)/M) roughly.  PIPELINED = 0 costs 6 cycles per
// block.  The register layout (one i and one v register per unit) follows the
// design's block diagram; flushing and the valid bits are this
// implementation's.
module prime_ci
  import prime_pkg::*;
#(
  parameter int unsigned UNITS     = DEF_UNITS,
  parameter int unsigned STAGES    = DEF_STAGES,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [N_WIDTH-1:0] n,
  input  word_t              a,
  output logic               done,
  output word_t              result
);

  localparam word_t INC = word_t'(UNITS);

  logic load, issue, flush, loop, found, busy, result_bit;

  word_t i_q    [UNITS];
  word_t v_q    [UNITS];
  word_t i_next [UNITS];
  logic  vld    [UNITS];
  logic  hit    [UNITS];

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    // Divisor and operand registers of unit u.
    always_ff @(posedge clk) begin
      if (rst) begin
        i_q[u] <= word_t'(UNITS + 1 - u);
        v_q[u] <= '0;
      end else if (load) begin
        i_q[u] <= word_t'(UNITS + 1 - u);
        v_q[u] <= a;
      end else if (issue) begin
        i_q[u] <= i_next[u];
      end
    end

    if (u == 0) begin : g_iter
      iter #(.W(XLEN), .STAGES(STAGES)) u_iter (
        .clk, .rst, .flush,
        .in_valid (issue),
        .v        (v_q[u]),
        .i        (i_q[u]),
        .inc      (INC),
        .i_next   (i_next[u]),
        .loop     (loop),
        .out_valid(vld[u]),
        .is_prime (hit[u])
      );
    end else begin : g_opt
      opt_iter #(.W(XLEN), .STAGES(STAGES)) u_opt (
        .clk, .rst, .flush,
        .in_valid (issue),
        .v        (v_q[u]),
        .i        (i_q[u]),
        .inc      (INC),
        .i_next   (i_next[u]),
        .out_valid(vld[u]),
        .is_prime (hit[u])
      );
    end
  end

  // Combine the units' zero-remainder flags: a factor anywhere ends the test.
  always_comb begin
    found = 1'b0;
    for (int u = 0; u < UNITS; u++) found = found | (vld[u] & hit[u]);
  end

  ci_fsm #(.STAGES(STAGES), .PIPELINED(PIPELINED)) u_fsm (
    .clk, .rst, .start, .n, .loop, .found,
    .load, .issue, .flush, .busy, .done,
    .result(result_bit)
  );

  assign result = {{(XLEN-1){1'b0}}, result_bit};

  logic unused_busy;
  assign unused_busy = busy;

endmodule
