// tb_hybcache: one hybcache level (8 sets, 4 ways, 2 subcache ways, so a
// 16-entry subcache) in front of the behavioural memory. Expected values
// come from the memory model and from the rules of the controller, not from
// the cache. Checked:
//   * data of every READ equals memory; hits take exactly 2 cycles for both
//     domains, misses take the same time for both domains;
//   * non-isolated: miss then hit; LRU eviction order; fills spill into the
//     subcache ways once the main ways of a set are full;
//   * isolated: a domain never hits on a non-isolated line or on another
//     domain's line (each gets its own copy), but hits its own;
//   * non-isolated never hits on an isolated line;
//   * FLUSH by another domain leaves a line in place, FLUSH by the owner
//     removes it; FLUSH_DOMAIN removes all lines of one domain only;
//   * write-through: a WRITE updates the cached line and memory;
//   * random fills use every subcache entry, roughly evenly (25 fills per
//     entry on average, each entry between 10 and 45).
module tb_hybcache;
  import hyb_pkg::*;
  localparam int SETS = 8, WAYS = 4, ISO = 2, N_ISO = SETS * ISO;

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

  tb_main_memory #(.LATENCY(6)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req (mem_req),
    .rsp_valid (mem_rsp_valid), .rsp (mem_rsp)
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // one transaction; lat = clock edges from acceptance to the response
  task automatic access(op_e op, laddr_t la, idid_t id, word_t wd, output rsp_t r, output int lat,
                        input int word = 0);
    @(negedge clk);
    req = tb_pkg::mk_req(op, {la, 3'(word), 3'b0}, id, wd);
    req_valid = 1;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rsp_valid);
    r = rsp;
  endtask

  // read and check the data; returns hit flag and latency
  int hit_lat_nid = -1, hit_lat_iso = -1, miss_lat_nid = -1, miss_lat_iso = -1;
  task automatic rd(laddr_t la, idid_t id, output bit hit, input string tag = "");
    rsp_t r; int lat;
    access(OP_READ, la, id, '0, r, lat);
    check(r.rdata == mem.peek(la), $sformatf("data %s la=%0h id=%0d", tag, la, id));
    hit = r.hit;
    if (hit) check(lat == 2, $sformatf("hit latency %0d", lat));
    if (id == 0 && hit)  hit_lat_nid  = lat;
    if (id != 0 && hit)  hit_lat_iso  = lat;
    if (id == 0 && !hit) miss_lat_nid = lat;
    if (id != 0 && !hit) miss_lat_iso = lat;
  endtask

  function automatic int count_dom(idid_t id);
    int n = 0;
    for (int e = 0; e < N_ISO; e++) if (dut.sub_valid[e] && dut.sub_idid[e] == id) n++;
    return n;
  endfunction

  // placement histogram of isolated fills
  int place [N_ISO];
  int ev_nid_fill_sub = 0, ev_iso_ref = 0, ev_nid_ref = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.mem_rsp_valid && dut.r_q.op == OP_READ && dut.r_q.idid != 0) place[dut.fill_e]++;
    if (ev.nid_fill_sub) ev_nid_fill_sub++;
    if (ev.iso_refused)  ev_iso_ref++;
    if (ev.nid_refused)  ev_nid_ref++;
  end

  initial begin
    bit h;
    rsp_t r; int lat;
    laddr_t A, B;
    foreach (place[i]) place[i] = 0;
    #22 rst_n = 1;

    // --- non-isolated miss then hit
    A = 40'h12340;                 // set 0
    rd(A, 0, h, "A1"); check(!h, "NID first access misses");
    rd(A, 0, h, "A2"); check(h,  "NID second access hits");

    // --- isolated domains get their own copy
    rd(A, 1, h, "A id1"); check(!h, "ID1 cannot hit on NID line");
    rd(A, 1, h, "A id1b"); check(h, "ID1 hits own copy");
    rd(A, 2, h, "A id2"); check(!h, "ID2 cannot hit on ID1/NID copy");
    rd(A, 2, h, "A id2b"); check(h, "ID2 hits own copy");
    check(hit_lat_nid == hit_lat_iso, "hit latency equal across domains");
    check(miss_lat_nid == miss_lat_iso, $sformatf("miss latency equal (%0d vs %0d)", miss_lat_nid, miss_lat_iso));

    // --- NID never hits on an isolated line
    B = 40'h55551;                 // set 1
    rd(B, 3, h, "B id3"); check(!h, "ID3 miss");
    rd(B, 0, h, "B nid"); check(!h, "NID cannot hit on ID3 line");

    // --- FLUSH from another domain does not touch ID3's line
    access(OP_FLUSH, B, 4, '0, r, lat);
    access(OP_FLUSH, B, 0, '0, r, lat);     // removes only the NID copy
    rd(B, 3, h, "B id3 after foreign flush"); check(h, "foreign flush left ID3 line");
    access(OP_FLUSH, B, 3, '0, r, lat);
    check(r.hit, "owner flush found its line");
    rd(B, 3, h, "B id3 after own flush"); check(!h, "owner flush removed line");

    // --- write-through
    access(OP_WRITE, A, 0, 64'hDEAD_BEEF_0123_4567, r, lat, 3);
    check(r.hit, "write hit");
    check(mem.peek(A)[3*64 +: 64] == 64'hDEAD_BEEF_0123_4567, "write reached memory");
    rd(A, 0, h, "A after write"); check(h, "line still cached after write");

    // --- LRU: five NID lines in set 2 of a 4-way set
    for (int i = 0; i < 4; i++) begin
      rd(40'h100 * (i + 1) + 2, 0, h, "lru fill"); check(!h, "lru fill miss");
    end
    check(ev_nid_fill_sub >= 2, "NID fills used the subcache ways");
    rd(40'h102, 0, h, "touch"); check(h, "touch oldest");
    rd(40'h502, 0, h, "5th");   check(!h, "5th line misses");
    rd(40'h202, 0, h, "evicted?"); check(!h, "LRU line (2nd filled) was evicted");
    rd(40'h102, 0, h, "kept");  check(h, "recently touched line kept");

    // --- random placement over all 16 entries
    for (int i = 0; i < 25 * N_ISO; i++) begin
      rd(40'h8000 + i, 5, h, "rand fill");
      check(!h, "fresh line misses");
    end
    for (int e = 0; e < N_ISO; e++)
      check(place[e] >= 10 && place[e] <= 45, $sformatf("entry %0d chosen %0d times", e, place[e]));

    // --- FLUSH_DOMAIN
    for (int i = 0; i < 4; i++) rd(40'h9000 + i, 6, h, "dom6");
    for (int i = 0; i < 4; i++) rd(40'hA000 + i, 7, h, "dom7");
    begin
      int n7;
      n7 = count_dom(7);
      check(count_dom(6) > 0, "domain 6 has lines");
      access(OP_FLUSH_DOM, '0, 6, '0, r, lat);
      check(count_dom(6) == 0, "domain 6 flushed");
      check(count_dom(7) == n7, "domain 7 untouched");
    end
    check(ev_iso_ref > 0, "isolated tag match refused by line-IDID observed");

    // --- reseed: no flush needed, lines stay
    seed = 64'h1234; seed_load = 1; @(posedge clk); #1 seed_load = 0;
    rd(A, 0, h, "A after reseed"); check(h, "reseed keeps lines");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
