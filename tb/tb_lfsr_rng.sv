// tb_lfsr_rng -- compares the generator with a bit-serial model of the
// polynomial x^32 + x^22 + x^2 + x + 1, checks it never reaches zero, does not
// repeat within 20000 steps and gives balanced low bits.
module tb_lfsr_rng;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] rnd;

  lfsr_rng #(.SEED(32'h0000_0001)) dut (.clk, .rst_n, .rnd);

  bit seen [logic [31:0]];
  logic [31:0] m;
  int ones = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = 32'h1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      checks++;
      if (rnd !== m || rnd == 0 || seen.exists(rnd)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: %h vs %h", n, rnd, m);
      end
      seen[rnd] = 1;
      ones += int'(rnd[3]);
      // model: shift right; a 1 leaving bit 0 feeds back into the tap bits
      begin
        bit fb;
        fb = m[0];
        m = m >> 1;
        if (fb) begin m[31] = 1; m[21] = ~m[21]; m[1] = ~m[1]; m[0] = ~m[0]; end
      end
      @(posedge clk); #1;
    end
    checks++;
    if (ones < 9000 || ones > 11000) begin failures++; $display("FAIL bias %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
