// tb_four_process: the four-process configuration, run on the full-size
// hierarchy. Four cores share the two L1/L2 pairs two by two and all share
// the L3: in front of each instruction and data port of hybcache_top a
// hyb_arb2 merges the requests of the two cores of that pair. The cores are
// replaced by four synthetic processes:
//   process 0: pair 0, non-isolated (IDID 0)
//   process 1: pair 0, isolated domain 1
//   process 2: pair 1, non-isolated (IDID 0)
//   process 3: pair 1, isolated domain 2
// Each process loops three times over its own data working set (512 lines
// for a non-isolated process, 128 for an isolated one) and its own code
// lines, one request at a time, alternating instruction fetches and data
// reads, with a write-through every 16th data access. The four run at once.
//
// Checked: every READ returns the memory's current contents, every write
// reaches memory, an L1 hit takes 2 cycles, the non-isolated processes hit
// in L1 on at least 3/4 of their repeat passes and the isolated ones on some
// of theirs; afterwards domain 2 never hits on domain 1's lines, a
// non-isolated process never hits on domain 2's lines sharing its L1, and a
// domain flush removes domain 1 everywhere. Hit rates are printed per
// process, the way a process mix would be reported.
module tb_four_process;
  import hyb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ic_req_valid [2], ic_req_ready [2], ic_rsp_valid [2];
  req_t ic_req [2];
  rsp_t ic_rsp [2];
  logic dc_req_valid [2], dc_req_ready [2], dc_rsp_valid [2];
  req_t dc_req [2];
  rsp_t dc_rsp [2];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  req_t mem_req;
  rsp_t mem_rsp;
  logic seed_load = 0;
  logic [63:0] seed = '0;
  ev_t ev_l1i [2], ev_l1d [2], ev_l2 [2], ev_l3;
  int checks = 0, failures = 0;

  hybcache_top dut (.*);

  tb_main_memory #(.LATENCY(20)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req (mem_req),
    .rsp_valid (mem_rsp_valid), .rsp (mem_rsp)
  );

  // core-side ports: [pair][d: 0 instruction, 1 data][slot]
  logic p_valid [2][2][2], p_ready [2][2][2], p_rvld [2][2][2];
  req_t p_req   [2][2][2];
  rsp_t p_rsp   [2][2][2];

  for (genvar g = 0; g < 2; g++) begin : g_pair
    hyb_arb2 u_share_i (
      .clk, .rst_n,
      .up_req_valid (p_valid[g][0]), .up_req_ready (p_ready[g][0]), .up_req (p_req[g][0]),
      .up_rsp_valid (p_rvld[g][0]),  .up_rsp (p_rsp[g][0]),
      .dn_req_valid (ic_req_valid[g]), .dn_req_ready (ic_req_ready[g]), .dn_req (ic_req[g]),
      .dn_rsp_valid (ic_rsp_valid[g]), .dn_rsp (ic_rsp[g])
    );
    hyb_arb2 u_share_d (
      .clk, .rst_n,
      .up_req_valid (p_valid[g][1]), .up_req_ready (p_ready[g][1]), .up_req (p_req[g][1]),
      .up_rsp_valid (p_rvld[g][1]),  .up_rsp (p_rsp[g][1]),
      .dn_req_valid (dc_req_valid[g]), .dn_req_ready (dc_req_ready[g]), .dn_req (dc_req[g]),
      .dn_rsp_valid (dc_rsp_valid[g]), .dn_rsp (dc_rsp[g])
    );
  end

  always #5 clk = ~clk;

  initial begin
    #80000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // one request of process p on port d (0 instruction, 1 data)
  task automatic access(int p, int d, op_e op, laddr_t la, idid_t id, word_t wd,
                        output rsp_t r, output int lat);
    int g, s;
    g = p / 2;
    s = p % 2;
    @(negedge clk);
    p_req[g][d][s]   = tb_pkg::mk_req(op, {la, 6'b0}, id, wd);
    p_valid[g][d][s] = 1;
    do @(posedge clk); while (!p_ready[g][d][s]);
    #1 p_valid[g][d][s] = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!p_rvld[g][d][s]);
    r = p_rsp[g][d][s];
  endtask

  task automatic rd(int p, int d, laddr_t la, idid_t id, output bit hit);
    rsp_t r; int lat;
    access(p, d, OP_READ, la, id, '0, r, lat);
    check(r.rdata == mem.peek(la), $sformatf("data process %0d port %0d la=%0h", p, d, la));
    if (r.hit) check(lat == 2, $sformatf("L1 hit latency %0d", lat));
    hit = r.hit;
  endtask

  localparam idid_t PID [4] = '{4'd0, 4'd1, 4'd0, 4'd2};
  localparam int    WS  [4] = '{512, 128, 512, 128};
  localparam int    PASSES = 3;

  function automatic laddr_t data_line(int p, int i);
    return laddr_t'(40'h100000 * (p + 1) + i);
  endfunction
  function automatic laddr_t code_line(int p, int i);
    return laddr_t'(40'h800000 + 40'h10000 * p + (i % 32));
  endfunction

  int acc_rep [4], hit_rep [4], acc_all [4], hit_all [4];

  task automatic run_process(int p);
    bit h;
    rsp_t r; int lat;
    word_t w;
    for (int pass = 0; pass < PASSES; pass++)
      for (int i = 0; i < WS[p]; i++) begin
        rd(p, 0, code_line(p, i), PID[p], h);
        rd(p, 1, data_line(p, i), PID[p], h);
        acc_all[p]++;
        if (h) hit_all[p]++;
        if (pass > 0) begin
          acc_rep[p]++;
          if (h) hit_rep[p]++;
        end
        if (i % 16 == 0) begin
          w = {32'(p), 8'(pass), 24'(i)};
          access(p, 1, OP_WRITE, data_line(p, i), PID[p], w, r, lat);
          check(mem.peek(data_line(p, i))[63:0] == w, $sformatf("process %0d write reached memory", p));
        end
      end
  endtask

  // subcache entries of domain id in the L3
  function automatic int l3_dom(idid_t id);
    int n = 0;
    for (int e = 0; e < 8192; e++)
      if (dut.u_l3.sub_valid[e] && dut.u_l3.sub_idid[e] == id) n++;
    return n;
  endfunction

  initial begin
    bit h;
    rsp_t r; int lat;
    int n;
    for (int g = 0; g < 2; g++)
      for (int d = 0; d < 2; d++)
        for (int s = 0; s < 2; s++) begin p_valid[g][d][s] = 0; p_req[g][d][s] = '0; end
    for (int p = 0; p < 4; p++) begin
      acc_rep[p] = 0; hit_rep[p] = 0; acc_all[p] = 0; hit_all[p] = 0;
    end
    #22 rst_n = 1;

    fork
      run_process(0);
      run_process(1);
      run_process(2);
      run_process(3);
    join

    for (int p = 0; p < 4; p++) begin
      $display("process %0d (IDID %0d, %0d lines): L1D hit rate %0d/%0d, repeat passes %0d/%0d",
               p, PID[p], WS[p], hit_all[p], acc_all[p], hit_rep[p], acc_rep[p]);
      if (PID[p] == IDID_NID)
        check(hit_rep[p] * 4 >= acc_rep[p] * 3, $sformatf("non-isolated process %0d reuses L1", p));
      else
        check(hit_rep[p] > 0, $sformatf("isolated process %0d reuses L1", p));
    end

    // domain 2 (pair 1) reads domain 1's lines: it shares only the L3
    for (int i = 0; i < WS[1]; i++) begin
      rd(3, 1, data_line(1, i), 4'd2, h);
      check(!h, "domain 2 never hits on domain 1's lines");
    end
    // process 2 shares its L1 with domain 2 and never read its lines
    for (int i = 0; i < WS[3]; i++) begin
      rd(2, 1, data_line(3, i), 4'd0, h);
      check(!h, "non-isolated process never hits on domain 2's lines");
    end

    // context switch of domain 1 on pair 0
    check(l3_dom(1) > 0, "domain 1 present in L3 before its flush");
    access(1, 1, OP_FLUSH_DOM, '0, 4'd1, '0, r, lat);
    check(l3_dom(1) == 0, "domain 1 gone from L3");
    check(l3_dom(2) > 0, "domain 2 still in L3");
    n = 0;
    for (int i = 0; i < WS[1]; i++) begin
      rd(1, 1, data_line(1, i), 4'd1, h);
      if (h) n++;
    end
    check(n == 0, $sformatf("domain 1 hit %0d times after its flush", n));

    $display("memory reads %0d writes %0d, time %0t", mem.n_reads, mem.n_writes, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
