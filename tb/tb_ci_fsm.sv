// tb_ci_fsm: self-checking test of the custom-instruction controller, in both
// issue modes.
//
// Two controllers run side by side, one pipelined and one not.  Around each, a
// small model of the data path stands in for the dividers: for every test it
// draws K, the block whose bound test fails, and J, the block that holds a
// factor (0 for none).  loop is low while block K sits in the divisor
// registers; found is raised STAGES cycles after block J was issued.  The
// testbench expects result = (1 <= J <= K) and a start-to-done time of
//   pipelined:      min(J,K) + STAGES + 1 cycles (J = 0 counts as K),
//   non-pipelined:  min(J,K) * (STAGES + 1) + 1 cycles,
// and checks that load comes with start, flush with the finish, and that
// done is a single-cycle pulse.
module tb_ci_fsm;
  import prime_pkg::*;
  localparam int unsigned STAGES = 5;

  logic clk = 1'b0;
  logic rst = 1'b1;
  int   checks = 0, failures = 0;
  bit   fin [2];

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar p = 0; p < 2; p++) begin : g_mode
    logic start, loop, found, load, issue, flush, busy, done, result;
    logic [N_WIDTH-1:0] n;
    int   issued, K, J;
    logic pend [STAGES];   // 1 where the issued block is block J

    ci_fsm #(.STAGES(STAGES), .PIPELINED(p == 1)) dut (.*);

    // Data-path model: loop follows the block in the registers, found follows
    // the block J through a STAGES-deep pipeline.
    always_comb begin
      loop  = (issued + 1 < K);
      found = pend[STAGES-1];
    end
    always_ff @(posedge clk) begin
      if (rst || load) issued <= 0;
      else if (issue) issued <= issued + 1;
      for (int s = STAGES - 1; s > 0; s--) pend[s] <= (rst || flush) ? 1'b0 : pend[s-1];
      pend[0] <= !rst && issue && !flush && (issued + 1 == J);
    end

    initial begin
      int t, exp_t, jj, n_found, n_bound;
      bit exp_r, saw_flush;
      n_found = 0; n_bound = 0;
      start = 1'b0; n = '0; K = 1; J = 0;
      wait (rst === 1'b0);
      @(posedge clk);
      for (int test = 0; test < 300; test++) begin
        K = $urandom_range(1, 12);
        J = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 14);
        jj    = (J >= 1 && J <= K) ? J : K;
        exp_r = (J >= 1 && J <= K);
        exp_t = (p == 1) ? jj + STAGES + 1 : jj * (STAGES + 1) + 1;
        #1 start = 1'b1; n = N_WIDTH'($urandom());
        #1;
        checks++;
        if (!load) begin failures++; $display("mode %0d: no load with start", p); end
        @(posedge clk);
        #1 start = 1'b0;
        t = 1; saw_flush = 1'b0;
        while (!done && t < 400) begin
          if (flush) saw_flush = 1'b1;
          @(posedge clk); #1; t++;
        end
        checks++;
        if (t != exp_t || result !== exp_r || !saw_flush) begin
          failures++;
          $display("mode %0d K=%0d J=%0d: done after %0d (exp %0d) result %0b (exp %0b) flush %0b",
                   p, K, J, t, exp_t, result, exp_r, saw_flush);
        end
        if (exp_r) n_found++; else n_bound++;
        @(posedge clk); #1;
        checks++;
        if (done || busy) begin failures++; $display("mode %0d: done not a pulse", p); end
        repeat ($urandom_range(0, 3)) @(posedge clk);
      end
      checks++;
      if (n_found == 0 || n_bound == 0) begin failures++; $display("mode %0d: an exit never taken", p); end
      $display("mode %0d: %0d factor exits, %0d bound exits", p, n_found, n_bound);
      fin[p] = 1'b1;
    end
  end

  initial begin
    fin[0] = 1'b0; fin[1] = 1'b0;
    rst = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    wait (fin[0] && fin[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
