// tb_coupon_eviction: the eviction experiment of the security analysis.
//
// An isolated attacker that wants to evict an isolated victim's lines can
// only fill the whole subcache with lines of its own, and because victims
// are picked uniformly at random this is a coupon-collector problem: for n
// entries it needs n*H(n) accesses on average (695 for n = 128) with a
// variance of about (pi^2/6)*n^2 (about 26,951).
//
// A hybcache with 64 sets and 2 subcache ways (n = 128) is used. Each trial
// first lets victim domain 1 read fresh lines until it owns all 128 entries,
// then lets attacker domain 2 read fresh lines until domain 1 owns none, and
// records the attacker's access count. Over 40 trials the mean must lie
// within 695 +- 4 standard errors and the sample variance within a factor
// of two of 26,951.
module tb_coupon_eviction;
  import hyb_pkg::*;
  localparam int SETS = 64, WAYS = 4, ISO = 2, N = SETS * ISO, TRIALS = 40;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  req_t req = '0;
  rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  req_t mem_req;
  rsp_t mem_rsp;
  logic seed_load = 0;
  logic [63:0] seed = '0;
  ev_t ev;
  int checks = 0, failures = 0;

  hybcache #(.SETS(SETS), .WAYS(WAYS), .ISO_WAYS(ISO)) dut (.*);

  tb_main_memory #(.LATENCY(1)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req (mem_req),
    .rsp_valid (mem_rsp_valid), .rsp (mem_rsp)
  );

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  laddr_t next_line = 40'h100000;

  task automatic read_fresh(idid_t id);
    @(negedge clk);
    req = tb_pkg::mk_req(OP_READ, {next_line, 6'b0}, id, '0);
    next_line++;
    req_valid = 1;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    do @(posedge clk); while (!rsp_valid);
    checks++;
    if (rsp.hit || rsp.rdata != mem.peek(next_line - 1)) begin
      failures++; $display("FAIL fresh line");
    end
  endtask

  function automatic int owned(idid_t id);
    int n = 0;
    for (int e = 0; e < N; e++) if (dut.sub_valid[e] && dut.sub_idid[e] == id) n++;
    return n;
  endfunction

  initial begin
    real sum = 0, sumsq = 0, mean, var_s, expect_mean, hn;
    hn = 0;
    for (int i = 1; i <= N; i++) hn += 1.0 / i;
    expect_mean = N * hn;
    #22 rst_n = 1;
    for (int t = 0; t < TRIALS; t++) begin
      int acc;
      acc = 0;
      while (owned(1) < N) read_fresh(1);
      while (owned(1) > 0) begin read_fresh(2); acc++; end
      sum += acc; sumsq += real'(acc) * acc;
    end
    mean  = sum / TRIALS;
    var_s = (sumsq - sum * sum / TRIALS) / (TRIALS - 1);
    $display("n=%0d: mean accesses %0.1f (expected %0.1f), variance %0.0f (expected ~%0.0f)",
             N, mean, expect_mean, var_s, 3.14159265 * 3.14159265 / 6.0 * N * N);
    check(mean > expect_mean - 4.0 * $sqrt(26951.0 / TRIALS) &&
          mean < expect_mean + 4.0 * $sqrt(26951.0 / TRIALS), "mean eviction effort");
    check(var_s > 26951.0 / 2.0 && var_s < 26951.0 * 2.0, "variance of eviction effort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
