// hyb_sa_match: set-associative lookup of one set for non-isolated requests.
//
// This is the paper's path B-C-D-E for requests with IDID 0. The request
// tag is compared with the (non-extended) tag of every way of the indexed
// set. A way in the main part of the set hits on a tag match. A way that
// belongs to the subcache (the top ISO_WAYS ways, as the paper's figures
// draw them) hits only if, in addition, the line in it was placed by the
// non-isolated domain (line-IDID 0): non-isolated code may never hit on a
// line an isolated domain brought in. All checks run in parallel so that
// every hit and every miss takes the same time.
//
// Purely combinational. hit_way is the lowest hitting way. tag_match reports
// a tag match that was refused because of the line-IDID (statistics only).
module hyb_sa_match #(
  parameter int unsigned WAYS     = 8,
  parameter int unsigned ISO_WAYS = 2,
  parameter int unsigned TAG_W    = 33,
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned MAIN_WAYS = WAYS - ISO_WAYS
) (
  input  logic [TAG_W-1:0]     req_tag,
  input  logic [TAG_W-1:0]     way_tag   [WAYS],
  input  logic [WAYS-1:0]      way_valid,
  input  hyb_pkg::idid_t       sub_idid  [ISO_WAYS],
  output logic                 hit,
  output logic [WAY_W-1:0]     hit_way,
  output logic                 refused
);

  logic [WAYS-1:0] match;   // C: tag found
  logic [WAYS-1:0] allow;   // D/E: main way, or subcache way with line-IDID 0

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      match[w] = way_valid[w] && (way_tag[w] == req_tag);
      if (w < MAIN_WAYS) allow[w] = 1'b1;
      else               allow[w] = (sub_idid[w - MAIN_WAYS] == hyb_pkg::IDID_NID);
    end
  end

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (match[w] && allow[w]) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    refused = !hit && |(match & ~allow);
  end

endmodule
