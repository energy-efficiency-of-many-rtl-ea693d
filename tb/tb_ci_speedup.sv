// tb_ci_speedup: the three single-processor versions of the custom instruction
// counting the primes below LIMIT, side by side.
//
//   cfg 0: one unit, one divisor at a time            (UNITS=1,  PIPELINED=0)
//   cfg 1: ten units, one block at a time             (UNITS=10, PIPELINED=0)
//   cfg 2: ten units, one block per cycle (default)   (UNITS=10, PIPELINED=1)
//
// Each configuration gets its own thread model, which walks through all of
// [2, LIMIT) like the host software (v <= 3 prime, even v composite, odd
// v <= M+1 tested in software, the rest by the custom instruction) and counts
// the cycles spent in custom-instruction calls.  Checks: each prime count
// against a sieve run here (and 9592, the known count below 10^5), and the
// speed-ups between the versions: ten units should gain close to, but not
// more than, a factor 10 over one unit; pipelined issue can gain at most a
// factor 6 over one block at a time (the ISSUE + 5 WAIT cycles per block it
// removes), but the 6-cycle start and drain of every call, and the many
// composites that end in the first block, hold it near 3 on this range.  The
// lower bounds, 8 and 2.5, are this testbench's margins.
module tb_ci_speedup;
  import prime_pkg::*;
  localparam int LIMIT  = 100000;
  localparam int KNOWN  = 9592;       // primes below 10^5
  localparam int NCFG   = 3;
  localparam int UN [NCFG] = '{1, 10, 10};

  logic clk = 1'b0;
  logic rst = 1'b1;
  int   checks = 0, failures = 0;

  logic               start  [NCFG];
  logic [N_WIDTH-1:0] n      [NCFG];
  word_t              a      [NCFG];
  logic               done   [NCFG];
  word_t              result [NCFG];

  prime_ci #(.UNITS(1),  .PIPELINED(1'b0)) dut0 (
    .clk, .rst, .start(start[0]), .n(n[0]), .a(a[0]), .done(done[0]), .result(result[0]));
  prime_ci #(.UNITS(10), .PIPELINED(1'b0)) dut1 (
    .clk, .rst, .start(start[1]), .n(n[1]), .a(a[1]), .done(done[1]), .result(result[1]));
  prime_ci #(.UNITS(10), .PIPELINED(1'b1)) dut2 (
    .clk, .rst, .start(start[2]), .n(n[2]), .a(a[2]), .done(done[2]), .result(result[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int     primes [NCFG];
  longint ci_cyc [NCFG];
  bit     fin    [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_thread
    initial begin
      int  t;
      bit  p;
      primes[c] = 0; ci_cyc[c] = 0; fin[c] = 1'b0;
      start[c] = 1'b0; n[c] = '0; a[c] = '0;
      wait (rst === 1'b0);
      @(posedge clk);
      for (int v = 2; v < LIMIT; v++) begin
        if (v <= 3) p = 1'b1;
        else if (v % 2 == 0) p = 1'b0;
        else if (v <= UN[c] + 1) begin
          p = 1'b1;
          for (int q = 3; q * q <= v; q += 2) if (v % q == 0) p = 1'b0;
        end else begin
          #1 start[c] = 1'b1; a[c] = word_t'(v);
          @(posedge clk);
          #1 start[c] = 1'b0;
          t = 1;
          while (!done[c] && t < 1000000) begin @(posedge clk); #1; t++; end
          ci_cyc[c] += longint'(t);
          p = (result[c] == '0);
        end
        if (p) primes[c]++;
      end
      fin[c] = 1'b1;
    end
  end

  bit composite [LIMIT];

  initial begin
    int ref_count;
    real s10, spipe;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    ref_count = 0;
    for (int v = 2; v < LIMIT; v++) composite[v] = 1'b0;
    for (int v = 2; v * v < LIMIT; v++)
      if (!composite[v]) for (int w = v * v; w < LIMIT; w += v) composite[w] = 1'b1;
    for (int v = 2; v < LIMIT; v++) if (!composite[v]) ref_count++;
    wait (fin[0] && fin[1] && fin[2]);
    checks++;
    if (ref_count != KNOWN) begin failures++; $display("sieve gives %0d", ref_count); end
    for (int c = 0; c < NCFG; c++) begin
      checks++;
      if (primes[c] != ref_count) begin
        failures++; $display("cfg %0d: %0d primes, expected %0d", c, primes[c], ref_count);
      end
      $display("cfg %0d: %0d primes, %0d cycles in the custom instruction", c, primes[c], ci_cyc[c]);
    end
    s10   = real'(ci_cyc[0]) / real'(ci_cyc[1]);
    spipe = real'(ci_cyc[1]) / real'(ci_cyc[2]);
    $display("speed-up of 10 units over 1 unit: %0.2f; of pipelined over non-pipelined: %0.2f", s10, spipe);
    checks += 2;
    if (s10 < 8.0 || s10 > 10.0)  begin failures++; $display("10-unit speed-up out of range"); end
    if (spipe < 2.5 || spipe > 6.0) begin failures++; $display("pipelining speed-up out of range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
