// manycore_top: the many-soft-core prime-counting multiprocessor, at the level
// of its custom logic.
//
// CORES processor cores each own one prime_ci custom instruction.  The cores,
// their floating-point units, the on-chip memories and the interconnect are
// vendor components that are not part of this RTL; each core's custom
// instruction port is brought out here instead, indexed by core.  Threads on
// different cores test different candidates, so the custom instructions work
// independently and in parallel; nothing is shared between them but clock and
// reset.
//
// Per-core port c (c = 0 .. CORES-1): start[c], n[c], a[c] in; done[c],
// result[c] out, with the protocol and timing of prime_ci.  Defaults: 8 cores,
// 10 divider units each, 5-stage dividers, pipelined issue.  Only bit 0 of
// each 32-bit result word carries information; the other bits are constant 0,
// kept so that the port matches the cores' 32-bit result bus.
module manycore_top
  import prime_pkg::*;
#(
  parameter int unsigned CORES     = DEF_CORES,
  parameter int unsigned UNITS     = DEF_UNITS,
  parameter int unsigned STAGES    = DEF_STAGES,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start  [CORES],
  input  logic [N_WIDTH-1:0] n      [CORES],
  input  word_t              a      [CORES],
  output logic               done   [CORES],
  output word_t              result [CORES]
);

  for (genvar c = 0; c < CORES; c++) begin : g_core
    prime_ci #(.UNITS(UNITS), .STAGES(STAGES), .PIPELINED(PIPELINED)) u_ci (
      .clk, .rst,
      .start (start[c]),
      .n     (n[c]),
      .a     (a[c]),
      .done  (done[c]),
      .result(result[c])
    );
  end

endmodule
