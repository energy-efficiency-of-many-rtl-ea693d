// tb_prime_ci: self-checking test of the trial-division custom instruction.
//
// Three instances are tested one after the other with the same candidates:
//   cfg 0: 10 units, pipelined issue   (the default configuration)
//   cfg 1: 10 units, one block at a time
//   cfg 2: 1 unit, one divisor at a time (the single-unit instruction)
// For each candidate v the testbench works out, by its own trial division, the
// number of blocks K the search must cover (the first K with (K*M+1)^2 > v),
// the block j holding the smallest divisor d in 2..K*M+1, the expected result
// bit (d exists) and the expected start-to-done time (min(j,K) + 6 cycles when
// pipelined, min(j,K) * 6 + 1 otherwise, with 5-stage dividers).  For v above
// M+1 it also checks the result against the true primality of v.
module tb_prime_ci;
  import prime_pkg::*;
  localparam int unsigned STAGES = 5;
  localparam int NCFG = 3;
  localparam int UN [NCFG] = '{10, 10, 1};

  logic clk = 1'b0;
  logic rst = 1'b1;
  int   checks = 0, failures = 0;

  logic               start [NCFG];
  logic [N_WIDTH-1:0] n;
  word_t              a;
  logic               done  [NCFG];
  word_t              result[NCFG];

  prime_ci #(.UNITS(10), .STAGES(STAGES), .PIPELINED(1'b1)) dut0 (
    .clk, .rst, .start(start[0]), .n, .a, .done(done[0]), .result(result[0]));
  prime_ci #(.UNITS(10), .STAGES(STAGES), .PIPELINED(1'b0)) dut1 (
    .clk, .rst, .start(start[1]), .n, .a, .done(done[1]), .result(result[1]));
  prime_ci #(.UNITS(1), .STAGES(STAGES), .PIPELINED(1'b0)) dut2 (
    .clk, .rst, .start(start[2]), .n, .a, .done(done[2]), .result(result[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_prime_ref(longint unsigned v);
    if (v < 2) return 1'b0;
    for (longint unsigned d = 2; d * d <= v; d++) if (v % d == 0) return 1'b0;
    return 1'b1;
  endfunction

  int n_early, n_bound;

  task automatic run_one(int cfg, word_t v);
    longint unsigned m, kk, d, top, j, vl;
    int  t, exp_t;
    bit  exp_r;
    vl = {32'd0, v};
    m  = longint'(UN[cfg]);
    kk = 1;
    while ((kk * m + 1) * (kk * m + 1) <= vl) kk++;
    top = kk * m + 1;
    exp_r = 1'b0; j = kk;
    for (d = 2; d <= top; d++) if (vl % d == 0) begin exp_r = 1'b1; j = (d - 2) / m + 1; break; end
    exp_t = (cfg == 0) ? int'(j) + STAGES + 1 : int'(j) * (STAGES + 1) + 1;
    @(posedge clk);
    #1 start[cfg] = 1'b1; a = v; n = N_WIDTH'($urandom());
    @(posedge clk);
    #1 start[cfg] = 1'b0; a = $urandom();
    t = 1;
    while (!done[cfg] && t < 500000) begin @(posedge clk); #1; t++; end
    checks++;
    if (result[cfg] !== word_t'(exp_r) || t != exp_t) begin
      failures++;
      $display("cfg %0d v=%0d: result %0d after %0d cycles, expected %0b after %0d",
               cfg, v, result[cfg], t, exp_r, exp_t);
    end
    if (vl > m + 1) begin
      checks++;
      if (result[cfg][0] == is_prime_ref(vl)) begin
        failures++; $display("cfg %0d v=%0d: primality wrong", cfg, v);
      end
    end
    if (cfg == 0) begin
      if (exp_r && j < kk) n_early++;
      else n_bound++;
    end
  endtask

  word_t vals[$];

  initial begin
    n_early = 0; n_bound = 0;
    for (int c = 0; c < NCFG; c++) start[c] = 1'b0;
    a = '0; n = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int v = 0; v < 400; v++) vals.push_back(word_t'(v));
    vals.push_back(word_t'(961));          // 31^2
    vals.push_back(word_t'(10201));        // 101^2
    vals.push_back(word_t'(999983));       // largest prime below 10^6
    vals.push_back(word_t'(1000000));
    vals.push_back(word_t'(4293001441));   // 65521^2, square of the largest 16-bit prime
    vals.push_back(word_t'(2147483647));   // 2^31 - 1, prime
    for (int r = 0; r < 150; r++) vals.push_back(word_t'($urandom_range(2, 1000000)));
    for (int c = 0; c < NCFG; c++)
      foreach (vals[k]) if (c != 2 || vals[k] <= 2000000) run_one(c, vals[k]);
    checks++;
    if (n_early == 0 || n_bound == 0) begin failures++; $display("an exit path never taken"); end
    $display("pipelined: %0d early factor exits, %0d bound exits", n_early, n_bound);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
