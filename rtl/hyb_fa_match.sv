// hyb_fa_match: fully-associative (CAM) lookup of the subcache.
//
// This is the paper's path G-H-I for requests from an isolated domain. The
// subcache is the union of the ISO_WAYS subcache ways of every set, N
// entries in all. Each entry holds an extended tag, i.e. the whole line
// address (address minus the 6 offset bits), and the line-IDID of the domain
// that placed it. An entry hits when it is valid, its extended tag equals
// the request's line address (H) and its line-IDID equals the request IDID
// (I). A domain therefore never hits on a line of another domain, nor on a
// non-isolated line, even when the same memory is cached there: each domain
// gets its own copy. All N comparisons run in parallel.
//
// Purely combinational. hit_idx is the lowest hitting entry (a line is only
// ever filled after a miss, so at most one entry can hit). refused reports a
// tag match rejected because of the line-IDID (statistics only).
module hyb_fa_match #(
  parameter int unsigned N     = 256,
  parameter int unsigned KEY_W = hyb_pkg::LADDR_W,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [KEY_W-1:0]  key,
  input  hyb_pkg::idid_t    idid,
  input  logic [KEY_W-1:0]  ent_key   [N],
  input  hyb_pkg::idid_t    ent_idid  [N],
  input  logic [N-1:0]      ent_valid,
  output logic              hit,
  output logic [IDX_W-1:0]  hit_idx,
  output logic              refused
);

  always_comb begin
    logic tag_any;
    hit     = 1'b0;
    hit_idx = '0;
    tag_any = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (ent_valid[i] && ent_key[i] == key) begin
        tag_any = 1'b1;
        if (ent_idid[i] == idid) begin
          hit     = 1'b1;
          hit_idx = IDX_W'(i);
        end
      end
    end
    refused = tag_any && !hit;
  end

endmodule
