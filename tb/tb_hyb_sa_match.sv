// tb_hyb_sa_match: random vectors for an 8-way set with 2 subcache ways.
// Expected: a valid tag match hits in ways 0..5; in ways 6..7 only when the
// line-IDID is 0; otherwise the match is reported as refused.
module tb_hyb_sa_match;
  import hyb_pkg::*;
  localparam int WAYS = 8, ISO = 2, TW = 6;
  logic [TW-1:0] req_tag;
  logic [TW-1:0] way_tag [WAYS];
  logic [WAYS-1:0] way_valid;
  idid_t sub_idid [ISO];
  logic hit, refused;
  logic [2:0] hit_way;
  int checks = 0, failures = 0;

  hyb_sa_match #(.WAYS(WAYS), .ISO_WAYS(ISO), .TAG_W(TW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_hit = 0, n_ref = 0;
    for (int i = 0; i < 3000; i++) begin
      bit e_hit, e_ref;
      int e_way;
      req_tag = TW'($urandom % 8);
      for (int w = 0; w < WAYS; w++) way_tag[w] = TW'($urandom % 8);
      way_valid = 8'($urandom);
      for (int k = 0; k < ISO; k++) sub_idid[k] = ($urandom % 2) ? '0 : idid_t'($urandom);
      // if several ways match, keep only the first: a cache never holds duplicates
      e_hit = 0; e_ref = 0; e_way = 0;
      for (int w = 0; w < WAYS; w++) begin
        if (way_valid[w] && way_tag[w] == req_tag) begin
          if (w < WAYS - ISO || sub_idid[w - (WAYS - ISO)] == 0) begin
            if (!e_hit) e_way = w;
            e_hit = 1;
          end else e_ref = 1;
        end
      end
      e_ref = e_ref && !e_hit;
      #1;
      checks++;
      if (hit !== e_hit || refused !== e_ref || (e_hit && int'(hit_way) != e_way)) begin
        failures++;
        $display("FAIL vec %0d: hit %0d/%0d way %0d/%0d refused %0d/%0d", i, hit, e_hit, hit_way, e_way, refused, e_ref);
      end
      n_hit += e_hit; n_ref += e_ref;
    end
    checks++;
    if (n_hit < 100 || n_ref < 50) begin failures++; $display("FAIL coverage %0d %0d", n_hit, n_ref); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
