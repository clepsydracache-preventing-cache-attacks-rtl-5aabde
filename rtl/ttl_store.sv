// ttl_store -- one time-to-live counter per cache entry.
//
// Each of the WAYS x SETS entries owns a TTL_W-bit counter. A non-zero counter
// means the entry is live; zero means it is empty (or expired), so the counter
// takes the place of a valid bit. On every tick from the R_TTL scheduler all
// counters that are above zero decrease by one at the same time, which is the
// digital form of the per-entry decay in the cache proposal (its analog
// delay cell is replaced here by a counter, an option the proposal names).
// A write loads a new TTL into one entry; when a write and a tick hit the same
// entry in the same cycle the write wins.
//
// Interface: WAYS lookup read ports (one row per way, combinational), one
// scan read port (the same row in every way, combinational) and one write
// port. Timing: writes and ticks take effect at the next clock edge.
// All counters clear on reset, so the cache starts empty.
module ttl_store #(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned SETS  = 2048,
  parameter int unsigned TTL_W = 8,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tick,                    // global decrement event
  input  logic [IDX_W-1:0]      lookup_idx [WAYS],       // row looked up in each way
  output logic [TTL_W-1:0]      lookup_ttl [WAYS],
  input  logic [IDX_W-1:0]      scan_idx,                // row read in all ways
  output logic [TTL_W-1:0]      scan_ttl   [WAYS],
  input  logic                  wr_en,
  input  logic [WAY_W-1:0]      wr_way,
  input  logic [IDX_W-1:0]      wr_idx,
  input  logic [TTL_W-1:0]      wr_ttl                   // 0 invalidates the entry
);

  logic [TTL_W-1:0] ttl [WAYS][SETS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < int'(WAYS); w++)
        for (int s = 0; s < int'(SETS); s++) ttl[w][s] <= '0;
    end else begin
      for (int w = 0; w < int'(WAYS); w++)
        for (int s = 0; s < int'(SETS); s++) begin
          if (wr_en && wr_way == WAY_W'(w) && wr_idx == IDX_W'(s)) ttl[w][s] <= wr_ttl;
          else if (tick && ttl[w][s] != '0)                      ttl[w][s] <= ttl[w][s] - 1'b1;
        end
    end
  end

  always_comb begin
    for (int w = 0; w < int'(WAYS); w++) begin
      lookup_ttl[w] = ttl[w][lookup_idx[w]];
      scan_ttl[w]   = ttl[w][scan_idx];
    end
  end

endmodule
