// tb_ttl_store -- random writes and ticks against a reference array of
// counters; every read port is compared every cycle. Checks that counters
// stop at zero, that a write beats a tick on the same entry, and that reset
// empties the store.
module tb_ttl_store;
  localparam int WAYS = 4, SETS = 8, TTL_W = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, wr_en;
  logic [2:0] lookup_idx [WAYS];
  logic [3:0] lookup_ttl [WAYS];
  logic [2:0] scan_idx;
  logic [3:0] scan_ttl [WAYS];
  logic [1:0] wr_way;
  logic [2:0] wr_idx;
  logic [3:0] wr_ttl;

  ttl_store #(.WAYS(WAYS), .SETS(SETS), .TTL_W(TTL_W)) dut (.*);

  int model [WAYS][SETS];
  int zero_hold = 0, write_vs_tick = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int w = 0; w < WAYS; w++) begin
      checks += 2;
      if (lookup_ttl[w] != 4'(model[w][lookup_idx[w]])) begin
        failures++;
        $display("FAIL lookup way %0d row %0d: %0d vs %0d", w, lookup_idx[w], lookup_ttl[w], model[w][lookup_idx[w]]);
      end
      if (scan_ttl[w] != 4'(model[w][scan_idx])) begin
        failures++;
        $display("FAIL scan way %0d row %0d: %0d vs %0d", w, scan_idx, scan_ttl[w], model[w][scan_idx]);
      end
    end
  endtask

  initial begin
    tick = 0; wr_en = 0; wr_way = 0; wr_idx = 0; wr_ttl = 0; scan_idx = 0;
    for (int w = 0; w < WAYS; w++) lookup_idx[w] = 0;
    foreach (model[w, s]) model[w][s] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // after reset every counter reads zero
    for (int s = 0; s < SETS; s++) begin
      scan_idx = 3'(s); #1; compare();
    end
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      tick   = ($urandom % 3) == 0;
      wr_en  = ($urandom % 4) == 0;
      wr_way = 2'($urandom);
      wr_idx = 3'($urandom);
      wr_ttl = 4'($urandom);
      for (int w = 0; w < WAYS; w++) lookup_idx[w] = 3'($urandom);
      scan_idx = 3'($urandom);
      #1 compare();
      @(posedge clk);
      for (int w = 0; w < WAYS; w++)
        for (int s = 0; s < SETS; s++) begin
          if (wr_en && wr_way == 2'(w) && wr_idx == 3'(s)) begin
            if (tick && model[w][s] != 0) write_vs_tick++;
            model[w][s] = wr_ttl;
          end else if (tick) begin
            if (model[w][s] == 0) zero_hold++;
            else model[w][s]--;
          end
        end
    end
    checks++;
    if (zero_hold == 0 || write_vs_tick == 0) begin
      failures++;
      $display("FAIL corner cases not reached: zero_hold=%0d write_vs_tick=%0d", zero_hold, write_vs_tick);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
