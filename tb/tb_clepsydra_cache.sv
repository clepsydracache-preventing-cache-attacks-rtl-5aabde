// tb_clepsydra_cache -- end-to-end test of the cache at reduced size
// (4 ways x 16 rows, 32-bit lines, 4-bit TTLs, short tick periods).
//
// A behavioural main memory answers reads after a random delay and accepts
// writebacks with random back-pressure. The testbench keeps its own golden
// copy of every line it wrote; every read response must carry the golden
// value, whether it hit or missed. At the end the cache is left idle until all
// TTLs have expired and the scanner has written every dirty line back, after
// which main memory must equal the golden copy for every line ever written.
//
// Phases: a small working set (hits, hit latency of 3 cycles), a large working
// set (conflicts, random replacement, dirty-victim writebacks, R_TTL rising),
// and idle time (TTL expiry, expiry writebacks, R_TTL decaying). Every
// mechanism is counted and a mechanism that never happened counts a failure.
module tb_clepsydra_cache;
  import clepsydra_pkg::*;

  localparam int WAYS = 4, SETS = 16, LINE_W = 32, TTL_W = 4, CNT_W = 8;
  localparam int INT_MIN = 4, INT_MAX = 64, INT_STEP = 8;

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
  logic [CNT_W-1:0] rttl_interval;

  clepsydra_cache #(
    .WAYS(WAYS), .SETS(SETS), .LINE_W(LINE_W), .TTL_W(TTL_W), .TTL_LOW(8), .TTL_HIGH(15),
    .CNT_W(CNT_W), .INTERVAL_MIN(INT_MIN), .INTERVAL_MAX(INT_MAX), .INTERVAL_STEP(INT_STEP),
    .SEED(32'h1234_5679)
  ) dut (.*);

  // ------------------------------------------------------------ main memory
  logic [LINE_W-1:0] mem [logic [63:0]];
  logic [LINE_W-1:0] golden [logic [63:0]];

  function automatic logic [LINE_W-1:0] init_val(logic [63:0] a);
    return LINE_W'(a * 32'h9E37_79B9) ^ 32'h5555_AAAA;
  endfunction

  function automatic logic [LINE_W-1:0] mem_rd(logic [63:0] a);
    return mem.exists(a) ? mem[a] : init_val(a);
  endfunction

  int pend_delay = -1;
  logic [63:0] pend_addr;
  int n_reads = 0, n_wbs = 0;

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (pend_delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= mem_rd(pend_addr);
      pend_delay     <= -1;
    end else if (pend_delay > 0) pend_delay <= pend_delay - 1;
    if (mem_req_valid && mem_req_ready) begin
      checks++;
      if (mem_req_addr[5:0] != 0) begin failures++; $display("FAIL unaligned memory address %h", mem_req_addr); end
      if (mem_req_op == MEM_WRITEBACK) begin
        mem[mem_req_addr] = mem_req_wdata;
        n_wbs++;
      end else begin
        pend_addr  <= mem_req_addr;
        pend_delay <= int'($urandom % 6);
        n_reads++;
      end
    end
    mem_req_ready <= ($urandom % 4) != 0;
  end

  // --------------------------------------------------------- event counters
  int c_hit = 0, c_miss = 0, c_free = 0, c_conf = 0, c_vwb = 0, c_ewb = 0, c_tick = 0;
  int c_rise = 0, c_fall = 0, c_expired_miss = 0;
  logic [CNT_W-1:0] last_int;
  always @(posedge clk) if (rst_n) begin
    c_hit  += int'(events.hit);
    c_miss += int'(events.miss);
    c_free += int'(events.fill_free);
    c_conf += int'(events.conflict);
    c_vwb  += int'(events.victim_wb);
    c_ewb  += int'(events.expiry_wb);
    c_tick += int'(events.tick);
    if (rttl_interval < last_int) c_rise++;       // shorter period = faster R_TTL
    if (rttl_interval > last_int) c_fall++;
    last_int <= rttl_interval;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------------- transactions
  int lat;
  logic last_hit;
  logic [LINE_W-1:0] last_data;

  task automatic access(logic wr, logic [63:0] a, logic [LINE_W-1:0] d);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a | 64'($urandom % 64); req_wdata = d;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    last_hit = resp_hit; last_data = resp_rdata;
    if (wr) golden[a] = d;
    else begin
      checks++;
      if (resp_rdata !== (golden.exists(a) ? golden[a] : init_val(a))) begin
        failures++;
        $display("FAIL read %h: got %h expected %h (hit=%0d)", a, resp_rdata,
                 golden.exists(a) ? golden[a] : init_val(a), resp_hit);
      end
    end
    if (resp_hit) begin
      checks++;
      if (lat != 2) begin failures++; $display("FAIL hit latency %0d", lat + 1); end
    end
  endtask

  function automatic logic [63:0] line(int n);
    return 64'(n) << 6 | 64'h4000_0000;
  endfunction

  initial begin
    k0 = 64'h0123_4567_89ab_cdef; k1 = 64'hfedc_ba98_7654_3210;
    for (int w = 0; w < WAYS; w++) way_secret[w] = {$urandom, $urandom};
    req_valid = 0; req_write = 0; req_addr = 0; req_wdata = 0;
    mem_resp_valid = 0; mem_resp_rdata = 0; mem_req_ready = 0; last_int = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // Phase 1: small working set, mostly hits.
    for (int i = 0; i < 300; i++) access($urandom % 3 == 0, line($urandom % 6), $urandom);
    // Re-read right after a miss must hit (TTL freshly set): miss, then hit.
    access(0, line(500), 0);
    access(0, line(500), 0);
    checks++;
    if (!last_hit) begin failures++; $display("FAIL immediate re-read missed"); end

    // Phase 2: large working set, many conflicts.
    for (int i = 0; i < 3000; i++) access($urandom % 2 == 0, line($urandom % 120), $urandom);

    // Phase 3: idle until everything expired and has been written back.
    repeat (20000) @(posedge clk);
    begin
      int expired_miss = 0;
      for (int i = 0; i < 6; i++) begin
        access(0, line(i), 0);
        if (!last_hit) expired_miss++;
      end
      c_expired_miss = expired_miss;
    end
    repeat (20000) @(posedge clk);
    foreach (golden[a]) begin
      checks++;
      if (mem_rd(a) !== golden[a]) begin
        failures++;
        $display("FAIL memory %h holds %h, last written %h", a, mem_rd(a), golden[a]);
      end
    end

    $display("events: hit=%0d miss=%0d fill_free=%0d conflict=%0d victim_wb=%0d expiry_wb=%0d tick=%0d rttl_up=%0d rttl_down=%0d expired_miss=%0d mem_reads=%0d mem_wbs=%0d",
             c_hit, c_miss, c_free, c_conf, c_vwb, c_ewb, c_tick, c_rise, c_fall, c_expired_miss, n_reads, n_wbs);
    begin
      int cnt [10];
      cnt = '{c_hit, c_miss, c_free, c_conf, c_vwb, c_ewb, c_tick, c_rise, c_fall, c_expired_miss};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
