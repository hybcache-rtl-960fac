// tb_hybcache_top: end-to-end test of the two-core hierarchy at its default
// sizes (L1 128x8, L2 512x8, L3 4096x16, 2 subcache ways per set) with the
// behavioural main memory. Both cores run concurrently through their
// instruction and data ports, as the non-isolated domain and as isolated
// domains 1 and 2. Every READ is checked against memory, an L1 hit must
// take 2 cycles, and the isolation rules are checked across the hierarchy.
// Each controller mechanism is counted from the caches' event outputs (and
// arbitration contention from the arbiters' inputs); a mechanism that never
// happened counts as a failure.
module tb_hybcache_top;
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

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------- drivers
  // port: core c, d = 0 instruction port, 1 data port
  task automatic access(int c, int d, op_e op, laddr_t la, idid_t id, word_t wd,
                        output rsp_t r, output int lat);
    req_t q;
    q = tb_pkg::mk_req(op, {la, 6'b0}, id, wd);
    @(negedge clk);
    if (d == 0) begin ic_req[c] = q; ic_req_valid[c] = 1; end
    else        begin dc_req[c] = q; dc_req_valid[c] = 1; end
    do @(posedge clk); while (!(d == 0 ? ic_req_ready[c] : dc_req_ready[c]));
    #1;
    if (d == 0) ic_req_valid[c] = 0; else dc_req_valid[c] = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!(d == 0 ? ic_rsp_valid[c] : dc_rsp_valid[c]));
    r = (d == 0) ? ic_rsp[c] : dc_rsp[c];
  endtask

  task automatic rd(int c, int d, laddr_t la, idid_t id, output bit hit);
    rsp_t r; int lat;
    access(c, d, OP_READ, la, id, '0, r, lat);
    check(r.rdata == mem.peek(la), $sformatf("data core%0d port%0d la=%0h id=%0d", c, d, la, id));
    if (r.hit) check(lat == 2, $sformatf("L1 hit latency %0d", lat));
    hit = r.hit;
  endtask

  // ------------------------------------------------------ mechanism counts
  typedef enum int {M_NID_HIT, M_NID_MISS, M_NID_REF, M_NID_SUB, M_ISO_HIT, M_ISO_MISS,
                    M_ISO_REF, M_EVICT_NID, M_EVICT_OTH, M_FLUSH, M_FLUSH_DOM,
                    M_ARB_L2, M_ARB_L3, M_WRITE_THROUGH, M_RESEED, M_NUM} mech_e;
  int cnt [M_NUM];
  string mname [M_NUM] = '{"non-isolated hit", "non-isolated miss (LRU fill)",
    "non-isolated match refused by line-IDID", "non-isolated fill into subcache way",
    "isolated hit", "isolated miss (random fill)", "isolated match refused by line-IDID",
    "random fill evicted non-isolated line", "random fill evicted other domain's line",
    "line flush", "domain flush", "L2 arbitration contention", "L3 arbitration contention",
    "write-through to memory", "reseed"};

  task automatic count_ev(ev_t e);
    cnt[M_NID_HIT]   += int'(e.nid_hit);
    cnt[M_NID_MISS]  += int'(e.nid_miss);
    cnt[M_NID_REF]   += int'(e.nid_refused);
    cnt[M_NID_SUB]   += int'(e.nid_fill_sub);
    cnt[M_ISO_HIT]   += int'(e.iso_hit);
    cnt[M_ISO_MISS]  += int'(e.iso_miss);
    cnt[M_ISO_REF]   += int'(e.iso_refused);
    cnt[M_EVICT_NID] += int'(e.iso_evict_nid);
    cnt[M_EVICT_OTH] += int'(e.iso_evict_oth);
    cnt[M_FLUSH]     += int'(e.flush_line);
    cnt[M_FLUSH_DOM] += int'(e.flush_dom);
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) begin
      count_ev(ev_l1i[c]); count_ev(ev_l1d[c]); count_ev(ev_l2[c]);
    end
    count_ev(ev_l3);
    if (dut.g_core[0].u_arb_l2.up_req_valid[0] && dut.g_core[0].u_arb_l2.up_req_valid[1]
        && !dut.g_core[0].u_arb_l2.busy_q) cnt[M_ARB_L2]++;
    if (dut.g_core[1].u_arb_l2.up_req_valid[0] && dut.g_core[1].u_arb_l2.up_req_valid[1]
        && !dut.g_core[1].u_arb_l2.busy_q) cnt[M_ARB_L2]++;
    if (dut.u_arb_l3.up_req_valid[0] && dut.u_arb_l3.up_req_valid[1] && !dut.u_arb_l3.busy_q)
      cnt[M_ARB_L3]++;
    if (mem_req_valid && mem_req_ready && mem_req.op == OP_WRITE) cnt[M_WRITE_THROUGH]++;
    if (seed_load) cnt[M_RESEED]++;
  end

  // number of valid subcache entries of domain id in core 0's L1D
  function automatic int l1d0_dom(idid_t id);
    int n = 0;
    for (int e = 0; e < 256; e++)
      if (dut.g_core[0].u_l1d.sub_valid[e] && dut.g_core[0].u_l1d.sub_idid[e] == id) n++;
    return n;
  endfunction
  function automatic int l3_dom(idid_t id);
    int n = 0;
    for (int e = 0; e < 8192; e++)
      if (dut.u_l3.sub_valid[e] && dut.u_l3.sub_idid[e] == id) n++;
    return n;
  endfunction

  localparam int N_ISO_LINES = 300;

  initial begin
    bit h;
    rsp_t r; int lat;
    for (int m = 0; m < M_NUM; m++) cnt[m] = 0;
    for (int c = 0; c < 2; c++) begin
      ic_req_valid[c] = 0; dc_req_valid[c] = 0; ic_req[c] = '0; dc_req[c] = '0;
    end
    #22 rst_n = 1;

    // ---- phase 1: non-isolated traffic on all four ports at once.
    // Core 0 data: 8 lines in each of 16 L1 sets (stride 128 lines) fill the
    // 6 main ways and then the 2 subcache ways of those sets.
    fork
      for (int s = 0; s < 16; s++)
        for (int k = 0; k < 8; k++) begin bit hh; rd(0, 1, 40'h10000 + k * 128 + s, 0, hh); end
      for (int i = 0; i < 64; i++) begin bit hh; rd(0, 0, 40'h20000 + i, 0, hh); end
      for (int i = 0; i < 64; i++) begin bit hh; rd(1, 0, 40'h30000 + i, 0, hh); end
      for (int i = 0; i < 64; i++) begin bit hh; rd(1, 1, 40'h40000 + i, 0, hh); end
    join

    // ---- phase 2: all 128 core-0 data lines must now hit in L1
    for (int s = 0; s < 16; s++)
      for (int k = 0; k < 8; k++) begin
        rd(0, 1, 40'h10000 + k * 128 + s, 0, h);
        check(h, "non-isolated re-read hits in L1 (8 lines fit an 8-way set)");
      end

    // ---- phase 3: isolated domain 1 on core 0 data port, fresh lines
    for (int i = 0; i < N_ISO_LINES; i++) begin
      rd(0, 1, 40'h50000 + i * 3, 1, h);
      check(!h, "isolated first access misses");
    end
    rd(0, 1, 40'h50000 + (N_ISO_LINES - 1) * 3, 1, h);
    check(h, "isolated re-read of the last line hits");

    // ---- phase 4: domain 2 on core 1 reads domain 1's lines; it shares
    // only the L3 with core 0 and must never hit on domain 1's copies
    for (int i = 0; i < N_ISO_LINES; i++) begin
      rd(1, 1, 40'h50000 + i * 3, 2, h);
      check(!h, "domain 2 never hits on domain 1's lines");
    end

    // ---- phase 5: the non-isolated domain asks for tag+set combinations
    // that match domain 1 entries by their set-associative tag
    begin
      int found = 0;
      for (int e = 0; e < 256 && found < 4; e++) begin
        if (dut.g_core[0].u_l1d.sub_valid[e] && dut.g_core[0].u_l1d.sub_idid[e] == 1) begin
          laddr_t k;
          k = dut.g_core[0].u_l1d.sub_key[e];
          rd(0, 1, {k[39:7], 7'(e / 2)}, 0, h);
          found++;
        end
      end
      check(found > 0, "domain 1 owns subcache entries in core 0 L1D");
    end

    // ---- phase 6: flushes. Domain 2 flushing a domain-1 line leaves it;
    // domain 1 flushing it removes it.
    rd(0, 1, 40'h50000 + 5 * 3, 1, h);     // make sure domain 1 has it
    access(0, 1, OP_FLUSH, 40'h50000 + 5 * 3, 2, '0, r, lat);
    rd(0, 1, 40'h50000 + 5 * 3, 1, h);
    check(h, "foreign flush did not remove domain 1's line");
    access(0, 1, OP_FLUSH, 40'h50000 + 5 * 3, 1, '0, r, lat);
    check(r.hit, "owner flush found its line");
    rd(0, 1, 40'h50000 + 5 * 3, 1, h);
    check(!h, "owner flush removed the line");

    // ---- phase 7: write-through from core 1 (non-isolated)
    access(1, 1, OP_WRITE, 40'h40005, 0, 64'hCAFE_F00D_1234_5678, r, lat);
    check(mem.peek(40'h40005)[63:0] == 64'hCAFE_F00D_1234_5678, "write reached memory");
    rd(1, 1, 40'h40005, 0, h);
    check(h, "written line still hits in L1");

    // ---- phase 8: isolated instruction fetches on both cores
    fork
      for (int i = 0; i < 40; i++) begin bit hh; rd(0, 0, 40'h60000 + i, 1, hh); rd(0, 0, 40'h60000 + i, 1, hh);
        check(hh, "isolated fetch re-read hits"); end
      for (int i = 0; i < 40; i++) begin bit hh; rd(1, 0, 40'h60000 + i, 2, hh); end
    join

    // ---- phase 9: reseed, then lines are still there
    @(negedge clk); seed = 64'hFEED_0000_BEEF_0001; seed_load = 1;
    @(negedge clk); seed_load = 0;
    rd(0, 1, 40'h50000 + (N_ISO_LINES - 2) * 3, 1, h);
    check(h, "reseeding keeps cached lines");

    // ---- phase 10: context switch flush of domain 1 via core 0 data port
    begin
      int l3_2;
      l3_2 = l3_dom(2);
      check(l1d0_dom(1) > 0 && l3_dom(1) > 0, "domain 1 present before flush");
      access(0, 1, OP_FLUSH_DOM, '0, 1, '0, r, lat);
      check(l1d0_dom(1) == 0, "domain 1 gone from core 0 L1D");
      check(l3_dom(1) == 0, "domain 1 gone from L3");
      check(l3_dom(2) == l3_2, "domain 2 untouched in L3");
    end

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-42s : %0d", mname[m], cnt[m]);
      check(cnt[m] > 0, $sformatf("mechanism never happened: %s", mname[m]));
    end
    $display("memory reads %0d writes %0d, time %0t", mem.n_reads, mem.n_writes, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
