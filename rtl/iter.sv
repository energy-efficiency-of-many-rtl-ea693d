// iter: one iteration of the trial-division loop, with the loop-bound test.
//
// Follows the iteration data-flow graph: from the candidate v, the trial
// divisor i and the increment inc it forms
//   is_prime = (v % i == 0)   remainder compared with the constant 0
//   loop     = (v >= i * i)   v against the square of i
//   i_next   = i + inc        the divisor of the next iteration (i')
// The port names follow the graph.  Despite its name, is_prime is raised when i
// divides v, i.e. when a factor has been found.
//
// Timing: loop and i_next are combinational in i and v.  The remainder comes
// from the pipelined divider mod_pipe, so is_prime and out_valid belong to the
// operands presented with in_valid STAGES cycles earlier.  The full 2W-bit
// product is compared, so loop is exact for every W-bit i.
module iter #(
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
  output logic         loop,
  output logic         out_valid,
  output logic         is_prime
);

  logic [W-1:0]   rem;
  logic [2*W-1:0] sq;

  mod_pipe #(.W(W), .STAGES(STAGES)) u_mod (
    .clk, .rst, .flush, .in_valid,
    .dividend (v),
    .divisor  (i),
    .out_valid,
    .remainder(rem)
  );

  assign is_prime = (rem == '0);
  assign sq       = {{W{1'b0}}, i} * {{W{1'b0}}, i};
  assign loop     = ({{W{1'b0}}, v} >= sq);
  assign i_next   = i + inc;

endmodule
