// opt_iter: one trial-division iteration without the loop-bound hardware.
//
// The optimised unit of the multi-unit custom instruction.  Only one unit per
// block of divisors needs the bound test (the one holding the largest i), so
// this unit keeps just
//   is_prime = (v % i == 0)   raised when i divides v (a factor was found)
//   i_next   = i + inc
// and drops the multiplier and comparator of iter.
//
// Timing: i_next is combinational; is_prime/out_valid come from the pipelined
// divider mod_pipe and belong to the operands issued STAGES cycles earlier.
module opt_iter #(
  parameter int unsigned W      = prime_pkg::XLEN,
  parameter int unsigned STAGES = prime_pkg::DEF_STAGES
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         flush,
  input  logic         in_valid,
  input  logic [W-1:0] v,
  input  logic [W-1:0] i,
  input  logic [W-1:0] inc,
  output logic [W-1:0] i_next,
  output logic         out_valid,
  output logic         is_prime
);

  logic [W-1:0] rem;

  mod_pipe #(.W(W), .STAGES(STAGES)) u_mod (
    .clk, .rst, .flush, .in_valid,
    .dividend (v),
    .divisor  (i),
    .out_valid,
    .remainder(rem)
  );

  assign is_prime = (rem == '0);
  assign i_next   = i + inc;

endmodule
