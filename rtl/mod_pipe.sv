// mod_pipe: pipelined remainder unit (the "%" node of the iteration data-flow
// graph).
//
// Computes remainder = dividend mod divisor for unsigned W-bit operands by
// restoring division, one quotient bit per step, W steps in all.  The steps are
// spread over STAGES register stages (ceil(W/STAGES) steps per stage), so a new
// operand pair can enter every cycle and its remainder leaves STAGES cycles
// later together with out_valid.  A 5-stage pipelined divider with a new
// operation every cycle is what the design calls for; the restoring algorithm
// and the even split of steps across stages are this implementation's choice.
//
// Interface: in_valid/dividend/divisor are sampled on the rising clock edge;
// out_valid/remainder are registered.  flush (or rst) clears every in-flight
// valid bit in the same edge, so nothing issued before it ever comes out.
// A divisor of zero is not used by the design; it yields remainder = dividend.
module mod_pipe #(
  parameter int unsigned W      = prime_pkg::XLEN,
  parameter int unsigned STAGES = prime_pkg::DEF_STAGES
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         flush,
  input  logic         in_valid,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         out_valid,
  output logic [W-1:0] remainder
);

  localparam int unsigned STEPS = (W + STAGES - 1) / STAGES;  // steps per stage

  // Per-stage pipeline registers: partial remainder, dividend bits still to
  // shift in, divisor and valid.
  logic [W-1:0] rem_q [STAGES];
  logic [W-1:0] dvd_q [STAGES];
  logic [W-1:0] dvs_q [STAGES];
  logic         vld_q [STAGES];

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic [W-1:0] rem_in, dvd_in, dvs_in;
    logic         vld_in;
    logic [W-1:0] rem_nx, dvd_nx;

    if (s == 0) begin : g_first
      assign rem_in = '0;
      assign dvd_in = dividend;
      assign dvs_in = divisor;
      assign vld_in = in_valid;
    end else begin : g_next
      assign rem_in = rem_q[s-1];
      assign dvd_in = dvd_q[s-1];
      assign dvs_in = dvs_q[s-1];
      assign vld_in = vld_q[s-1];
    end

    // STEPS restoring steps; steps past the W-th are skipped.
    always_comb begin
      logic [W:0] trial;
      rem_nx = rem_in;
      dvd_nx = dvd_in;
      for (int unsigned k = 0; k < STEPS; k++) begin
        if (s * STEPS + k < W) begin
          trial  = {rem_nx, dvd_nx[W-1]};
          dvd_nx = {dvd_nx[W-2:0], 1'b0};
          if (trial >= {1'b0, dvs_in}) trial = trial - {1'b0, dvs_in};
          rem_nx = trial[W-1:0];
        end
      end
    end

    always_ff @(posedge clk) begin
      if (rst || flush) vld_q[s] <= 1'b0;
      else              vld_q[s] <= vld_in;
      rem_q[s] <= rem_nx;
      dvd_q[s] <= dvd_nx;
      dvs_q[s] <= dvs_in;
    end
  end

  assign out_valid = vld_q[STAGES-1];
  assign remainder = rem_q[STAGES-1];

endmodule
