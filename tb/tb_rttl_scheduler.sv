// tb_rttl_scheduler -- compares the tick and the tick period with a cycle
// model of the rule: a conflict fires a tick in the next cycle and quarters
// the period (floor INTERVAL_MIN); a tick without conflict adds INTERVAL_STEP
// (ceiling INTERVAL_MAX). Also checks that, without conflicts, ticks come
// exactly `interval` cycles apart and the period climbs to INTERVAL_MAX.
module tb_rttl_scheduler;
  localparam int MIN = 4, MAX = 60, STEP = 5, INIT = 4, CNT_W = 8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic conflict, tick;
  logic [CNT_W-1:0] interval;

  rttl_scheduler #(.CNT_W(CNT_W), .INTERVAL_MIN(MIN), .INTERVAL_MAX(MAX),
                   .INTERVAL_STEP(STEP), .INTERVAL_INIT(INIT)) dut (.*);

  int m_count, m_interval, m_tick;
  int quarters = 0, grows = 0, at_max = 0, gap_checks = 0;
  int last_tick_cyc, cyc;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step_model(bit c);
    if (c) begin
      m_count = 0; m_tick = 1;
      m_interval = (m_interval / 4 < MIN) ? MIN : m_interval / 4;
      quarters++;
    end else if (m_count + 1 >= m_interval) begin
      m_count = 0; m_tick = 1;
      m_interval = (m_interval + STEP > MAX) ? MAX : m_interval + STEP;
      grows++;
    end else begin
      m_count++; m_tick = 0;
    end
  endtask

  task automatic run(int n, int conflict_pct);
    last_tick_cyc = -1;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      conflict = ($urandom % 100) < conflict_pct;
      @(posedge clk);
      step_model(conflict);
      cyc++;
      #1;
      checks += 2;
      if (tick != m_tick[0]) begin failures++; $display("FAIL tick %0d vs %0d at %0d", tick, m_tick, cyc); end
      if (interval != CNT_W'(m_interval)) begin failures++; $display("FAIL interval %0d vs %0d", interval, m_interval); end
      if (conflict_pct == 0 && tick) begin
        if (last_tick_cyc >= 0 && cyc - last_tick_cyc != m_interval - STEP && m_interval != MAX) begin
          failures++; $display("FAIL tick gap %0d", cyc - last_tick_cyc);
        end
        gap_checks++;
        last_tick_cyc = cyc;
      end
      if (interval == CNT_W'(MAX)) at_max++;
    end
  endtask

  initial begin
    conflict = 0; cyc = 0; last_tick_cyc = -1;
    m_count = 0; m_interval = INIT; m_tick = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (interval != CNT_W'(INIT)) begin failures++; $display("FAIL reset interval"); end
    run(2500, 0);      // decay to R_MIN
    run(3000, 2);      // sparse conflicts: shark fins
    run(200, 40);      // conflict storm: pinned at R_MAX
    run(2000, 0);
    checks++;
    if (quarters == 0 || grows == 0 || at_max == 0 || gap_checks == 0) begin
      failures++;
      $display("FAIL mechanism not seen: quarters=%0d grows=%0d at_max=%0d", quarters, grows, at_max);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
