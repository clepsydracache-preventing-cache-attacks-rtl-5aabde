// rttl_scheduler -- dynamic control of the global TTL reduction rate R_TTL.
//
// The scheduler emits a one-cycle tick; every tick lowers the TTL of every
// cache entry by one, so the tick period P sets R_TTL = 1/P. Following the
// cache proposal's event scheme:
//   * a conflict (a miss whose randomized set has no empty entry) fires a
//     tick at once and quarters P (never below INTERVAL_MIN, i.e. R_MAX);
//   * each tick that fires without a conflict lengthens P by the constant
//     INTERVAL_STEP (never above INTERVAL_MAX, i.e. R_MIN).
// The result is the "shark fin" of R_TTL over time: a jump at every conflict
// followed by a slow decay towards R_MIN. P starts at INTERVAL_INIT; starting
// at the fastest rate follows the proposal's rate-over-time plot, which begins
// at R_MAX. INTERVAL_MAX is chosen so that the largest TTL (255 ticks) lasts
// 50 ms at 2 GHz; INTERVAL_MIN, INTERVAL_STEP and the counter width are this
// design's choices.
//
// Interface: conflict is sampled every cycle; tick and interval are registered.
// Timing: a conflict in cycle t gives tick in cycle t+1.
module rttl_scheduler #(
  parameter int unsigned CNT_W         = 20,
  parameter int unsigned INTERVAL_MIN  = 256,      // cycles between ticks at R_MAX
  parameter int unsigned INTERVAL_MAX  = 392157,   // 50 ms / 255 at 2 GHz, R_MIN
  parameter int unsigned INTERVAL_STEP = 1024,     // added after each conflict-free tick
  parameter int unsigned INTERVAL_INIT = INTERVAL_MIN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             conflict,               // one pulse per conflict
  output logic             tick,                   // TTL decrement event
  output logic [CNT_W-1:0] interval                // current tick period in cycles
);

  logic [CNT_W-1:0] count;
  logic [CNT_W:0]   grown;

  assign grown = {1'b0, interval} + (CNT_W+1)'(INTERVAL_STEP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      interval <= CNT_W'(INTERVAL_INIT);
      tick     <= 1'b0;
    end else if (conflict) begin
      count    <= '0;
      tick     <= 1'b1;
      interval <= ((interval >> 2) < CNT_W'(INTERVAL_MIN)) ? CNT_W'(INTERVAL_MIN) : (interval >> 2);
    end else if (count + 1'b1 >= interval) begin
      count    <= '0;
      tick     <= 1'b1;
      interval <= (grown > (CNT_W+1)'(INTERVAL_MAX)) ? CNT_W'(INTERVAL_MAX) : grown[CNT_W-1:0];
    end else begin
      count    <= count + 1'b1;
      tick     <= 1'b0;
    end
  end

  // The period always stays between R_MAX and R_MIN.
  a_interval_range: assert property (@(posedge clk) disable iff (!rst_n)
    interval >= CNT_W'(INTERVAL_MIN) && interval <= CNT_W'(INTERVAL_MAX));

endmodule
