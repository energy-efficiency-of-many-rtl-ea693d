// tb_mod_pipe: self-checking test of the pipelined remainder unit.
//
// Issues random operand pairs (random divisors, small divisors, divisors
// larger than the dividend, all-ones values) with in_valid raised in most
// cycles, and checks that exactly STAGES cycles later out_valid is raised and
// remainder equals the % of the two operands.  A flush in mid-stream must
// suppress everything in flight.  The expected values come from the
// simulator's own % operator.
module tb_mod_pipe;
  localparam int unsigned W      = 32;
  localparam int unsigned STAGES = 5;

  logic         clk = 1'b0;
  logic         rst, flush, in_valid, out_valid;
  logic [W-1:0] dividend, divisor, remainder;
  int           checks = 0, failures = 0;

  // Reference pipeline: what must leave the unit STAGES cycles after issue.
  logic         exp_v   [STAGES];
  logic [W-1:0] exp_rem [STAGES];

  mod_pipe #(.W(W), .STAGES(STAGES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pick_divisor(int kind, logic [W-1:0] d);
    case (kind)
      0: return W'($urandom_range(1, 50));
      1: return (d == '1) ? d : d + W'($urandom_range(0, 1));
      2: return '1;
      default: return (($urandom() | 32'h1) >> $urandom_range(0, 31)) | 32'h1;
    endcase
  endfunction

  initial begin
    rst = 1'b1; flush = 1'b0; in_valid = 1'b0; dividend = '0; divisor = 1;
    for (int s = 0; s < STAGES; s++) begin exp_v[s] = 1'b0; exp_rem[s] = '0; end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // Drive new operands just after the edge.
      in_valid = ($urandom_range(0, 9) != 0);
      dividend = ($urandom_range(0, 7) == 0) ? '1 : $urandom() >> $urandom_range(0, 16);
      divisor  = pick_divisor($urandom_range(0, 5), dividend);
      flush    = (cyc == 1500);
      @(posedge clk);
      // Shift the reference model on the same edge.
      for (int s = STAGES - 1; s > 0; s--) begin
        exp_v[s]   = flush ? 1'b0 : exp_v[s-1];
        exp_rem[s] = exp_rem[s-1];
      end
      exp_v[0]   = in_valid && !flush;
      exp_rem[0] = dividend % divisor;
      #1;
      checks++;
      if (out_valid !== exp_v[STAGES-1]) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", cyc, out_valid, exp_v[STAGES-1]);
      end else if (out_valid) begin
        checks++;
        if (remainder !== exp_rem[STAGES-1]) begin
          failures++;
          $display("cycle %0d: remainder=%0d expected %0d", cyc, remainder, exp_rem[STAGES-1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
