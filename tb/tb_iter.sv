// tb_iter: self-checking test of the iter trial-division unit.
//
// Presents a new (v, i, inc) triple every cycle.  The combinational outputs,
// i_next = i + inc and the bound test loop = (v >= i*i), checked against a 64-bit product, are checked in the same cycle; is_prime, the
// zero-remainder flag, is checked STAGES cycles later against v % i == 0
// worked out by the testbench.  Small v and divisors that divide v are mixed
// in so that both values of each flag occur.
module tb_iter;
  localparam int unsigned W      = 32;
  localparam int unsigned STAGES = 5;

  logic         clk = 1'b0;
  logic         rst, flush, in_valid, out_valid, is_prime;
  logic         loop;
  logic [W-1:0] v, i, inc, i_next;
  int           checks = 0, failures = 0, n_hit = 0, n_loop = 0;

  logic         exp_v   [STAGES];
  logic         exp_hit [STAGES];

  iter #(.W(W), .STAGES(STAGES)) dut (
    .clk, .rst, .flush, .in_valid, .v, .i, .inc, .i_next,
    .loop,
    .out_valid, .is_prime
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; flush = 1'b0; in_valid = 1'b0; v = '0; i = 2; inc = 1;
    for (int s = 0; s < STAGES; s++) begin exp_v[s] = 1'b0; exp_hit[s] = 1'b0; end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      in_valid = 1'b1;
      case ($urandom_range(0, 3))
        0: begin i = W'($urandom_range(2, 300)); v = i * W'($urandom_range(1, 300)); end
        1: begin i = W'($urandom_range(2, 70000)); v = $urandom(); end
        2: begin v = W'($urandom_range(0, 2000)); i = W'($urandom_range(1, 60)); end
        default: begin i = W'($urandom_range(2, 1000)); v = i * i + W'($urandom_range(0, 2)) - 1; end
      endcase
      inc = W'($urandom_range(1, 12));
      #1;
      checks++;
      if (i_next !== i + inc) begin
        failures++; $display("i=%0d inc=%0d: i_next=%0d", i, inc, i_next);
      end
      checks++;
      if (loop !== ({32'd0, v} >= {32'd0, i} * {32'd0, i})) begin
        failures++; $display("v=%0d i=%0d: loop=%0b", v, i, loop);
      end else if (loop) n_loop++;
      @(posedge clk);
      for (int s = STAGES - 1; s > 0; s--) begin
        exp_v[s] = exp_v[s-1]; exp_hit[s] = exp_hit[s-1];
      end
      exp_v[0] = 1'b1; exp_hit[0] = (v % i == 0);
      #1;
      checks++;
      if (out_valid !== exp_v[STAGES-1] || (out_valid && is_prime !== exp_hit[STAGES-1])) begin
        failures++;
        $display("cycle %0d: out_valid=%0b is_prime=%0b expected %0b/%0b", cyc, out_valid,
                 is_prime, exp_v[STAGES-1], exp_hit[STAGES-1]);
      end
      if (out_valid && is_prime) n_hit++;
    end
    checks++;
    if (n_hit == 0) begin failures++; $display("no zero remainder seen"); end
    checks++;
    if (n_loop == 0 || n_loop == 4000) begin failures++; $display("loop never changed"); end
    $display("zero remainders: %0d, loop true: %0d", n_hit, n_loop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
