// prime_pkg: constants and types shared by the trial-division custom
// instruction and the many-core top.
//
// The operand width follows the 32-bit data path of the soft-core the
// custom instruction is attached to (dataa / result are 32-bit words).  The
// extension field "n" is 8 bits wide, as on that soft-core's custom
// instruction port.  The default unit count (10), divider depth (5) and core
// count (8) are the figures of the design this RTL describes.
package prime_pkg;

  localparam int unsigned XLEN       = 32;  // data word width
  localparam int unsigned N_WIDTH    = 8;   // custom-instruction extension field
  localparam int unsigned DEF_UNITS  = 10;  // divider units per custom instruction
  localparam int unsigned DEF_STAGES = 5;   // pipeline depth of one divider
  localparam int unsigned DEF_CORES  = 8;   // cores in the multiprocessor

  typedef logic [XLEN-1:0] word_t;

  // Controller states of the custom instruction.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // waiting for start
    ST_ISSUE = 2'd1,  // a block of M divisors enters the dividers this cycle
    ST_WAIT  = 2'd2,  // non-pipelined mode: waiting for the block's remainders
    ST_DRAIN = 2'd3   // pipelined mode: bound reached, draining the dividers
  } ci_state_e;

endpackage
