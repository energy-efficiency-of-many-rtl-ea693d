// tb_manycore_top: end-to-end run of the 8-core prime-counting system at its
// default size, counting the primes below LIMIT.
//
// Each core's thread is modelled by a process that works through a contiguous
// chunk of the range [2, LIMIT), split evenly over the cores as a static
// parallel-for schedule would.  For every candidate v the thread does what the
// host software does: v <= 3 is prime, an even v is composite, an odd v up to
// M+1 is tested by the thread itself (the custom instruction would find v as
// its own divisor), and every other v is sent to the core's custom instruction
// and counted as prime when the result is 0.
//
// Checks: each custom-instruction result against a factor search of the
// testbench's own, each start-to-done time against K + 6 (or j + 6 when the
// first factor lies in block j), and the final prime count against a sieve of
// Eratosthenes run by the testbench and against the known count (78498 below
// 10^6).  It also counts how often each mechanism occurred, and fails if one
// never did: early exit on a factor, exit on the bound after draining,
// several blocks in flight at once, and all cores busy at the same time.
module tb_manycore_top;
  import prime_pkg::*;
  localparam int CORES  = DEF_CORES;
  localparam int M      = DEF_UNITS;
  localparam int STAGES = DEF_STAGES;
  localparam int LIMIT  = 1000000;
  localparam int KNOWN  = 78498;      // primes below 10^6

  logic clk = 1'b0;
  logic rst = 1'b1;

  logic               start  [CORES];
  logic [N_WIDTH-1:0] n      [CORES];
  word_t              a      [CORES];
  logic               done   [CORES];
  word_t              result [CORES];

  manycore_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int primes = 0, ci_calls = 0;
  int n_early = 0, n_bound = 0, n_multi = 0, n_allbusy = 0;
  longint cycles = 0;
  bit busy [CORES];
  bit fin  [CORES];

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    int nb;
    nb = 0;
    foreach (busy[c]) nb += int'(busy[c]);
    if (nb == CORES) n_allbusy++;
    cycles++;
  end

  for (genvar c = 0; c < CORES; c++) begin : g_thread
    initial begin
      int lo, hi, chunk, t, exp_t;
      longint unsigned vl, kk, d, j;
      bit exp_r, p;
      chunk = (LIMIT - 2 + CORES - 1) / CORES;
      lo = 2 + c * chunk;
      hi = (lo + chunk < LIMIT) ? lo + chunk : LIMIT;
      start[c] = 1'b0; n[c] = '0; a[c] = '0; busy[c] = 1'b0; fin[c] = 1'b0;
      wait (rst === 1'b0);
      @(posedge clk);
      for (int v = lo; v < hi; v++) begin
        if (v <= 3) p = 1'b1;
        else if (v % 2 == 0) p = 1'b0;
        else if (v <= M + 1) begin
          p = 1'b1;
          for (int q = 3; q * q <= v; q += 2) if (v % q == 0) p = 1'b0;
        end else begin
          // Expected custom-instruction behaviour, worked out here.
          vl = longint'(v);
          kk = 1;
          while ((kk * M + 1) * (kk * M + 1) <= vl) kk++;
          exp_r = 1'b0; j = kk;
          for (d = 3; d <= kk * M + 1; d += 2)
            if (vl % d == 0) begin exp_r = 1'b1; j = (d - 2) / longint'(M) + 1; break; end
          exp_t = int'(j) + STAGES + 1;
          #1 start[c] = 1'b1; a[c] = word_t'(v); n[c] = 8'd0; busy[c] = 1'b1;
          @(posedge clk);
          #1 start[c] = 1'b0;
          t = 1;
          while (!done[c] && t < 100000) begin @(posedge clk); #1; t++; end
          busy[c] = 1'b0;
          ci_calls++;
          checks++;
          if (result[c] !== word_t'(exp_r) || t != exp_t) begin
            failures++;
            if (failures < 20)
              $display("core %0d v=%0d: result %0d after %0d cycles, expected %0b after %0d",
                       c, v, result[c], t, exp_r, exp_t);
          end
          if (exp_r && j < kk) n_early++; else n_bound++;
          if (j > 1) n_multi++;
          p = (result[c] == '0);
        end
        if (p) primes++;
      end
      fin[c] = 1'b1;
    end
  end

  bit composite [LIMIT];

  initial begin
    int ref_count;
    bit all_fin;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // Reference: sieve of Eratosthenes.
    ref_count = 0;
    for (int v = 2; v < LIMIT; v++) composite[v] = 1'b0;
    for (int v = 2; v * v < LIMIT; v++)
      if (!composite[v]) for (int w = v * v; w < LIMIT; w += v) composite[w] = 1'b1;
    for (int v = 2; v < LIMIT; v++) if (!composite[v]) ref_count++;
    do begin
      @(posedge clk);
      all_fin = 1'b1;
      foreach (fin[c]) all_fin &= fin[c];
    end while (!all_fin);
    checks++;
    if (primes != ref_count) begin
      failures++; $display("prime count %0d, sieve says %0d", primes, ref_count);
    end
    checks++;
    if (LIMIT == 1000000 && ref_count != KNOWN) begin
      failures++; $display("sieve count %0d, expected %0d", ref_count, KNOWN);
    end
    $display("primes below %0d: %0d (%0d custom-instruction calls, %0d cycles)",
             LIMIT, primes, ci_calls, cycles);
    $display("early factor exits %0d, bound exits %0d, multi-block searches %0d, all-cores-busy cycles %0d",
             n_early, n_bound, n_multi, n_allbusy);
    checks += 4;
    if (n_early == 0)   begin failures++; $display("no early factor exit"); end
    if (n_bound == 0)   begin failures++; $display("no bound exit"); end
    if (n_multi == 0)   begin failures++; $display("no search with several blocks in flight"); end
    if (n_allbusy == 0) begin failures++; $display("cores never all busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
