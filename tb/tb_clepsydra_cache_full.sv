// tb_clepsydra_cache_full -- the cache at its default size (8 ways x 2048
// rows of 64-byte lines, 8-bit TTLs, 2 GHz tick periods) taken through one
// complete sequence of operations: a read miss that fills an empty entry from
// memory, a read hit of the same line (3-cycle latency), a full-line write hit
// that makes the entry dirty, and a read of a second line. Read data is
// compared with the memory model and the written value; the dirty line must
// not be written back while its TTL is live.
module tb_clepsydra_cache_full;
  import clepsydra_pkg::*;

  localparam int WAYS = 8, LINE_W = 512;

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
  logic [19:0] rttl_interval;

  clepsydra_cache dut (.*);

  function automatic logic [LINE_W-1:0] init_val(logic [63:0] a);
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 64; i++) v[64*i +: 64] = a * 64'h9E37_79B9_7F4A_7C15 + 64'(i);
    return v;
  endfunction

  int n_wb = 0;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= 1'b1;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_op == MEM_READ) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= init_val(mem_req_addr);
      end else n_wb++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat;
  task automatic access(logic wr, logic [63:0] a, logic [LINE_W-1:0] d, logic exp_hit, logic [LINE_W-1:0] exp_data);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = d;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    checks++;
    if (resp_hit !== exp_hit) begin failures++; $display("FAIL %h hit=%0d expected %0d", a, resp_hit, exp_hit); end
    if (!wr) begin
      checks++;
      if (resp_rdata !== exp_data) begin failures++; $display("FAIL read data of %h", a); end
    end
    if (exp_hit) begin
      checks++;
      if (lat != 3) begin failures++; $display("FAIL hit latency %0d", lat); end
    end
  endtask

  logic [LINE_W-1:0] wval;
  initial begin
    k0 = 64'h0f1e_2d3c_4b5a_6978; k1 = 64'h8796_a5b4_c3d2_e1f0;
    for (int w = 0; w < WAYS; w++) way_secret[w] = {$urandom, $urandom};
    req_valid = 0; req_write = 0; req_addr = 0; req_wdata = 0;
    mem_resp_valid = 0; mem_resp_rdata = 0; mem_req_ready = 0;
    wval = {16{32'hC0FF_EE00}};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    access(0, 64'h0000_7f00_1234_5640, '0,   0, init_val(64'h0000_7f00_1234_5640));
    access(0, 64'h0000_7f00_1234_5640, '0,   1, init_val(64'h0000_7f00_1234_5640));
    access(1, 64'h0000_7f00_1234_5640, wval, 1, '0);
    access(0, 64'h0000_7f00_1234_5640, '0,   1, wval);
    access(0, 64'h0000_0000_0000_0080, '0,   0, init_val(64'h80));
    checks++;
    if (n_wb != 0) begin failures++; $display("FAIL live dirty line written back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
