// tb_addr_derandomizer -- checks that the inverse mapping recovers the line
// address from (way secret, row, stored tag) for random addresses and keys,
// and that a wrong row or way secret does not give the address back.
module tb_addr_derandomizer;
  import clepsydra_pkg::*;

  localparam int unsigned IDX_W = 11;
  localparam int unsigned TAG_W = 64 - IDX_W;

  int checks = 0, failures = 0;

  logic [63:0] addr, back;
  blk_t k0, k1, ws, ws_d;
  logic [IDX_W-1:0] idx, idx_d;
  logic [TAG_W-1:0] tag;

  addr_randomizer   #(.IDX_W(IDX_W)) u_fwd (.addr, .k0, .k1, .way_secret(ws), .idx, .tag);
  addr_derandomizer #(.IDX_W(IDX_W)) dut   (.idx(idx_d), .tag, .k0, .k1, .way_secret(ws_d), .addr(back));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom}; ws = {$urandom, $urandom};
      addr = {$urandom, $urandom};
      #1;
      idx_d = idx; ws_d = ws;
      #1;
      checks++;
      if (back !== {addr[63:6], 6'b0}) begin
        failures++;
        $display("FAIL addr %h recovered as %h", addr, back);
      end
      idx_d = idx ^ 11'h1;
      #1;
      checks++;
      if (back === {addr[63:6], 6'b0}) begin failures++; $display("FAIL wrong row still maps back"); end
      idx_d = idx; ws_d = ws ^ 64'h100;
      #1;
      checks++;
      if (back === {addr[63:6], 6'b0}) begin failures++; $display("FAIL wrong secret still maps back"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
