// tb_hyb_fa_match: random vectors for a 16-entry subcache CAM. Expected: an
// entry hits only if valid, its extended tag equals the key and its
// line-IDID equals the request IDID; a tag match with another IDID (another
// isolated domain, or a non-isolated line) is refused.
module tb_hyb_fa_match;
  import hyb_pkg::*;
  localparam int N = 16, KW = 8;
  logic [KW-1:0] key;
  idid_t         idid;
  logic [KW-1:0] ent_key  [N];
  idid_t         ent_idid [N];
  logic [N-1:0]  ent_valid;
  logic          hit, refused;
  logic [3:0]    hit_idx;
  int checks = 0, failures = 0;

  hyb_fa_match #(.N(N), .KEY_W(KW)) dut (.*);

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
      bit e_hit, e_tag;
      int e_idx;
      key  = KW'($urandom % 16);
      idid = idid_t'(1 + $urandom % 3);
      for (int e = 0; e < N; e++) begin
        ent_key[e]  = KW'($urandom % 16);
        ent_idid[e] = idid_t'($urandom % 4);
      end
      ent_valid = 16'($urandom);
      e_hit = 0; e_tag = 0; e_idx = 0;
      for (int e = 0; e < N; e++) begin
        if (ent_valid[e] && ent_key[e] == key) begin
          e_tag = 1;
          if (ent_idid[e] == idid) begin
            if (!e_hit) e_idx = e;
            e_hit = 1;
          end
        end
      end
      #1;
      checks++;
      if (hit !== e_hit || refused !== (e_tag && !e_hit) || (e_hit && int'(hit_idx) != e_idx)) begin
        failures++;
        $display("FAIL vec %0d: hit %0d/%0d idx %0d/%0d refused %0d", i, hit, e_hit, hit_idx, e_idx, refused);
      end
      n_hit += e_hit; n_ref += (e_tag && !e_hit);
    end
    checks++;
    if (n_hit < 100 || n_ref < 100) begin failures++; $display("FAIL coverage %0d %0d", n_hit, n_ref); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
