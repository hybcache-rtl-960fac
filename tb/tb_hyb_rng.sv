// tb_hyb_rng: checks hyb_rng against an independent xorshift64 model:
// reset value, 300 successive outputs, reseeding, the zero-seed substitute,
// and a coarse uniformity test on the top 3 bits of 8192 draws.
module tb_hyb_rng;
  logic        clk = 0, rst_n = 0, seed_load = 0;
  logic [63:0] seed = '0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  hyb_rng dut (.*);

  always #5 clk = ~clk;

  function automatic logic [63:0] xs(logic [63:0] x);
    x ^= x << 13; x ^= x >> 7; x ^= x << 17;
    return x;
  endfunction

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] m;
    int bucket [8];
    m = 64'h9E37_79B9_7F4A_7C15;
    #12 rst_n = 1;
    check(rnd == m[63:32], "reset value");
    for (int i = 0; i < 300; i++) begin
      @(posedge clk); #1;
      m = xs(m);
      check(rnd == m[63:32], $sformatf("step %0d", i));
    end
    seed = 64'h0123_4567_89AB_CDEF; seed_load = 1;
    @(posedge clk); #1; seed_load = 0;
    m = seed;
    check(rnd == m[63:32], "reseed");
    for (int i = 0; i < 50; i++) begin
      @(posedge clk); #1; m = xs(m);
      check(rnd == m[63:32], "after reseed");
    end
    seed = '0; seed_load = 1;
    @(posedge clk); #1; seed_load = 0;
    check(rnd == 32'h9E37_79B9, "zero seed replaced");
    for (int b = 0; b < 8; b++) bucket[b] = 0;
    for (int i = 0; i < 8192; i++) begin
      @(posedge clk); #1; bucket[rnd[31:29]]++;
    end
    for (int b = 0; b < 8; b++)
      check(bucket[b] > 900 && bucket[b] < 1150, $sformatf("bucket %0d = %0d", b, bucket[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
