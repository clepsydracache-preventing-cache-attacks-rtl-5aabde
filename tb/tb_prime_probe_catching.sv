// tb_prime_probe_catching -- the first step of a Prime+Prune+Probe attack,
// run against the cache at reduced size (4 ways x 16 rows = 64 entries).
//
// Each trial resets the cache with fresh random keys, then:
//   prime/prune: accesses K attacker lines in passes until one whole pass
//                causes no conflict. All K lines are then resident.
//   victim:      reads one new line x.
//   probe:       re-reads the K lines and counts misses.
// The tick period is made very long, so lines leave the cache only through
// conflicts. The cache places a miss in an empty entry of the line's dynamic
// set whenever there is one. So:
//   * if the victim access caused no conflict, every probe must hit;
//   * if it caused a conflict, at least one probe must miss.
// The fraction of trials whose victim access conflicts is the "catching
// probability". The testbench prints it next to the closed form
// C(K,w)/C(N,w) (w ways, N entries). It checks that the rate is negligible
// for a small priming set and grows with K.
module tb_prime_probe_catching;
  import clepsydra_pkg::*;

  localparam int WAYS = 4, SETS = 16, LINE_W = 16, N = WAYS * SETS, TRIALS = 60;
  localparam int KS [4] = '{12, 32, 44, 52};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t k0, k1;
  blk_t way_secret [WAYS];
  logic req_valid, req_ready, req_write;
  logic [63:0] req_addr;
  logic [LINE_W-1:0] req_wdata, resp_rdata;
  logic resp_valid, resp_hit;
  logic mem_req_valid, mem_req_ready;
  mem_op_e mem_req_op;
  logic [63:0] mem_req_addr;
  logic [LINE_W-1:0] mem_req_wdata, mem_resp_rdata;
  logic mem_resp_valid;
  cache_events_t events;
  logic [15:0] rttl_interval;

  clepsydra_cache #(
    .WAYS(WAYS), .SETS(SETS), .LINE_W(LINE_W), .TTL_W(6), .TTL_LOW(48), .TTL_HIGH(63),
    .CNT_W(16), .INTERVAL_MIN(60000), .INTERVAL_MAX(60000), .INTERVAL_STEP(1)
  ) dut (.*);

  // memory: returns a function of the address one cycle after the request
  always @(posedge clk) begin
    mem_req_ready  <= 1'b1;
    mem_resp_valid <= mem_req_valid && mem_req_ready && mem_req_op == MEM_READ;
    mem_resp_rdata <= LINE_W'(mem_req_addr >> 6);
  end

  int conflicts = 0;
  always @(posedge clk) if (events.conflict) conflicts++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic hit_q;
  task automatic rd(logic [63:0] a);
    @(negedge clk);
    req_valid = 1; req_write = 0; req_addr = a; req_wdata = '0;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    while (!resp_valid) begin @(posedge clk); #1; end
    hit_q = resp_hit;
    checks++;
    if (resp_rdata !== LINE_W'(a >> 6)) begin failures++; $display("FAIL data of %h", a); end
  endtask

  function automatic real choose(int n, int k);
    real r = 1.0;
    if (k > n) return 0.0;
    for (int i = 0; i < k; i++) r = r * real'(n - i) / real'(i + 1);
    return r;
  endfunction

  real rate [4];

  initial begin
    req_valid = 0; req_write = 0; req_addr = 0; req_wdata = 0;
    foreach (KS[ki]) begin
      int caught, used;
      caught = 0;
      used = 0;
      for (int t = 0; t < TRIALS; t++) begin
        int c0, misses;
        bit settled;
        logic [63:0] base;
        rst_n = 0;
        k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
        for (int w = 0; w < WAYS; w++) way_secret[w] = {$urandom, $urandom};
        base = {$urandom, 20'h0, 12'h0};
        repeat (2) @(posedge clk);
        #1 rst_n = 1;
        // prime and prune
        settled = 0;
        for (int pass = 0; pass < 12 && !settled; pass++) begin
          c0 = conflicts;
          for (int i = 0; i < KS[ki]; i++) rd(base + 64'(i) * 64);
          settled = (conflicts == c0);
        end
        if (!settled) continue;
        used++;
        // victim
        c0 = conflicts;
        rd(base + 64'h10_0000);
        // probe
        misses = 0;
        begin
          bit caught_now;
          caught_now = (conflicts != c0);
          for (int i = 0; i < KS[ki]; i++) begin
            rd(base + 64'(i) * 64);
            if (!hit_q) misses++;
          end
          checks++;
          if (!caught_now && misses != 0) begin
            failures++;
            $display("FAIL K=%0d: victim filled an empty entry but %0d primed lines missed", KS[ki], misses);
          end
          if (caught_now && misses == 0) begin
            failures++;
            $display("FAIL K=%0d: conflict reported but no primed line was evicted", KS[ki]);
          end
          if (caught_now) caught++;
        end
      end
      rate[ki] = (used == 0) ? 0.0 : real'(caught) / real'(used);
      $display("K=%0d: settled trials %0d, caught %0d, rate %0.3f, closed form %0.3f",
               KS[ki], used, caught, rate[ki], choose(KS[ki], WAYS) / choose(N, WAYS));
      checks++;
      if (used < TRIALS / 3) begin failures++; $display("FAIL K=%0d: prime/prune rarely settled", KS[ki]); end
    end
    checks += 2;
    if (rate[0] > 0.05) begin failures++; $display("FAIL small priming set caught too often"); end
    if (rate[3] <= rate[0] || rate[3] < 0.1) begin failures++; $display("FAIL catching rate does not grow with K"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
