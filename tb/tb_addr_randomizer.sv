// tb_addr_randomizer -- self-checking test of the per-way address mapping.
//
// 1. Known-answer test of the PRINCE layers: full 12-round PRINCE is built from
//    the shared package layers and compared with the five published test
//    vectors of the PRINCE specification.
// 2. The block's index and tag are compared with a reference that computes the
//    reduced cipher and splits its output bit by bit in the testbench.
// 3. Offset bits must not matter, the way secret must matter, and the index
//    must spread evenly over the rows (16 rows, 4096 addresses).
module tb_addr_randomizer;
  import clepsydra_pkg::*;

  localparam int unsigned IDX_W = 4;
  localparam int unsigned TAG_W = 64 - IDX_W;

  int checks = 0, failures = 0;

  logic [63:0] addr;
  blk_t k0, k1, ws;
  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;

  addr_randomizer #(.IDX_W(IDX_W)) dut (.addr, .k0, .k1, .way_secret(ws), .idx, .tag);

  function automatic blk_t full_prince(blk_t pt, blk_t a, blk_t b);
    blk_t s;
    s = pt ^ a ^ b ^ RC[0];
    for (int i = 1; i <= 5; i++) s = shift_rows(m_prime(s_layer(s))) ^ RC[i] ^ b;
    s = s_inv_layer(m_prime(s_layer(s)));
    for (int i = 6; i <= 10; i++) s = s_inv_layer(m_prime(shift_rows_inv(s ^ RC[i] ^ b)));
    return s ^ RC[11] ^ b ^ k0_prime(a);
  endfunction

  task automatic check(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Reference split: index bits at 63-(4j + j%4), tag = remaining bits MSB first.
  task automatic ref_map(logic [63:0] a, output logic [IDX_W-1:0] ri, output logic [TAG_W-1:0] rt);
    blk_t c;
    int t;
    c  = prince_reduced_enc({a[63:6], 6'b0} ^ ws, k0, k1);
    ri = '0;
    rt = '0;
    t  = TAG_W - 1;
    for (int j = 0; j < IDX_W; j++) ri[IDX_W-1-j] = c[63 - (4*j + j%4)];
    for (int p = 63; p >= 0; p--) begin
      bit is_idx = 0;
      for (int j = 0; j < IDX_W; j++) if (p == 63 - (4*j + j%4)) is_idx = 1;
      if (!is_idx) begin rt[t] = c[p]; t--; end
    end
  endtask

  int hist [16];
  logic [IDX_W-1:0] ri, i0, i1;
  logic [TAG_W-1:0] rt, t0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check("kat0", 128'(full_prince(64'h0, 64'h0, 64'h0)), 128'h818665aa0d02dfda);
    check("kat1", 128'(full_prince('1, 64'h0, 64'h0)), 128'h604ae6ca03c20ada);
    check("kat2", 128'(full_prince(64'h0, '1, 64'h0)), 128'h9fb51935fc3df524);
    check("kat3", 128'(full_prince(64'h0, 64'h0, '1)), 128'h78a54cbe737bb7ef);
    check("kat4", 128'(full_prince(64'h0123456789abcdef, 64'h0, 64'hfedcba9876543210)), 128'hae25ad3ca8fa9ccf);

    k0 = 64'h0011223344556677; k1 = 64'h8899aabbccddeeff; ws = 64'h5a5a_1234_dead_beef;
    for (int n = 0; n < 200; n++) begin
      addr = {$urandom, $urandom};
      #1;
      ref_map(addr, ri, rt);
      check("idx", 128'(idx), 128'(ri));
      check("tag", 128'(tag), 128'(rt));
      // offset bits ignored
      i0 = idx; t0 = tag;
      addr[5:0] = ~addr[5:0];
      #1;
      check("offset_idx", 128'(idx), 128'(i0));
      check("offset_tag", 128'(tag), 128'(t0));
    end

    // a different way secret gives a different mapping (ways are independent)
    begin
      int same = 0;
      for (int n = 0; n < 256; n++) begin
        addr = {$urandom, $urandom};
        ws = 64'h1; #1; i0 = idx;
        ws = 64'h2; #1; i1 = idx;
        if (i0 == i1) same++;
      end
      checks++;
      if (same > 40) begin failures++; $display("FAIL ways not independent: %0d/256 equal", same); end
    end

    // index spread over consecutive line addresses
    ws = 64'h77;
    for (int n = 0; n < 4096; n++) begin
      addr = 64'(n) << 6;
      #1;
      hist[idx]++;
    end
    for (int b = 0; b < 16; b++) begin
      checks++;
      if (hist[b] < 190 || hist[b] > 330) begin
        failures++;
        $display("FAIL row %0d got %0d of 4096 addresses", b, hist[b]);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
