// hybcache_top: two-core, three-level HybCache hierarchy.
//
// Each core has a private L1 instruction cache, a private L1 data cache and
// a private L2; both cores share the L3, which talks to main memory. Every
// level is a hybcache: ISO_WAYS ways of each set double as a fully
// associative, randomly replaced subcache for isolated domains, while the
// non-isolated domain (IDID 0) sees an ordinary LRU set-associative cache.
// The IDID that comes with a core's request travels with it down every
// level, so each level applies the same policy. Sizes default to the
// evaluated hierarchy: L1 64 KB 8-way 128 sets, L2 256 KB 8-way 512 sets,
// L3 4 MB 16-way 4096 sets, 64-byte lines, 2 isolated ways per set.
//
// The cores and main memory are outside: their ports are the ports of this
// module. Arbitration between L1I/L1D and between the two L2s is done by
// hyb_arb2. All levels are blocking and write-through, so a core write
// travels to memory before it is acknowledged. One seed input reseeds all
// seven random generators at once; each level XORs it with its own constant
// so that the levels draw different streams (this design's choice).
//
// Lint note: rst_n resets the flops asynchronously and also disables the
// handshake assertions of hybcache and hyb_arb2 (disable iff), so a linter
// may report it as used both asynchronously and synchronously. The
// assertions are not logic; the warning stands on purpose.
module hybcache_top #(
  parameter int unsigned L1_SETS  = 128,
  parameter int unsigned L1_WAYS  = 8,
  parameter int unsigned L2_SETS  = 512,
  parameter int unsigned L2_WAYS  = 8,
  parameter int unsigned L3_SETS  = 4096,
  parameter int unsigned L3_WAYS  = 16,
  parameter int unsigned ISO_WAYS = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // core instruction ports
  input  logic          ic_req_valid [2],
  output logic          ic_req_ready [2],
  input  hyb_pkg::req_t ic_req       [2],
  output logic          ic_rsp_valid [2],
  output hyb_pkg::rsp_t ic_rsp       [2],
  // core data ports
  input  logic          dc_req_valid [2],
  output logic          dc_req_ready [2],
  input  hyb_pkg::req_t dc_req       [2],
  output logic          dc_rsp_valid [2],
  output hyb_pkg::rsp_t dc_rsp       [2],
  // main memory port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output hyb_pkg::req_t mem_req,
  input  logic          mem_rsp_valid,
  input  hyb_pkg::rsp_t mem_rsp,
  // reseeding of the replacement generators
  input  logic          seed_load,
  input  logic [63:0]   seed,
  // event pulses per cache
  output hyb_pkg::ev_t  ev_l1i [2],
  output hyb_pkg::ev_t  ev_l1d [2],
  output hyb_pkg::ev_t  ev_l2  [2],
  output hyb_pkg::ev_t  ev_l3
);
  import hyb_pkg::*;

  // L1 -> L2 arbiter inputs, per core: [0] = L1I, [1] = L1D
  logic l1_dn_valid [2][2];
  logic l1_dn_ready [2][2];
  req_t l1_dn_req   [2][2];
  logic l1_dn_rvld  [2][2];
  rsp_t l1_dn_rsp   [2][2];

  // L2 -> L3 arbiter inputs, per core
  logic l2_dn_valid [2];
  logic l2_dn_ready [2];
  req_t l2_dn_req   [2];
  logic l2_dn_rvld  [2];
  rsp_t l2_dn_rsp   [2];

  for (genvar c = 0; c < 2; c++) begin : g_core
    logic l2_req_valid, l2_req_ready, l2_rsp_valid;
    req_t l2_req;
    rsp_t l2_rsp;

    hybcache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .ISO_WAYS(ISO_WAYS)) u_l1i (
      .clk, .rst_n,
      .req_valid     (ic_req_valid[c]),
      .req_ready     (ic_req_ready[c]),
      .req           (ic_req[c]),
      .rsp_valid     (ic_rsp_valid[c]),
      .rsp           (ic_rsp[c]),
      .mem_req_valid (l1_dn_valid[c][0]),
      .mem_req_ready (l1_dn_ready[c][0]),
      .mem_req       (l1_dn_req[c][0]),
      .mem_rsp_valid (l1_dn_rvld[c][0]),
      .mem_rsp       (l1_dn_rsp[c][0]),
      .seed_load,
      .seed          (seed ^ (64'h1111_0000_0000_0001 << c)),
      .ev            (ev_l1i[c])
    );

    hybcache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .ISO_WAYS(ISO_WAYS)) u_l1d (
      .clk, .rst_n,
      .req_valid     (dc_req_valid[c]),
      .req_ready     (dc_req_ready[c]),
      .req           (dc_req[c]),
      .rsp_valid     (dc_rsp_valid[c]),
      .rsp           (dc_rsp[c]),
      .mem_req_valid (l1_dn_valid[c][1]),
      .mem_req_ready (l1_dn_ready[c][1]),
      .mem_req       (l1_dn_req[c][1]),
      .mem_rsp_valid (l1_dn_rvld[c][1]),
      .mem_rsp       (l1_dn_rsp[c][1]),
      .seed_load,
      .seed          (seed ^ (64'h2222_0000_0000_0003 << c)),
      .ev            (ev_l1d[c])
    );

    hyb_arb2 u_arb_l2 (
      .clk, .rst_n,
      .up_req_valid (l1_dn_valid[c]),
      .up_req_ready (l1_dn_ready[c]),
      .up_req       (l1_dn_req[c]),
      .up_rsp_valid (l1_dn_rvld[c]),
      .up_rsp       (l1_dn_rsp[c]),
      .dn_req_valid (l2_req_valid),
      .dn_req_ready (l2_req_ready),
      .dn_req       (l2_req),
      .dn_rsp_valid (l2_rsp_valid),
      .dn_rsp       (l2_rsp)
    );

    hybcache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .ISO_WAYS(ISO_WAYS)) u_l2 (
      .clk, .rst_n,
      .req_valid     (l2_req_valid),
      .req_ready     (l2_req_ready),
      .req           (l2_req),
      .rsp_valid     (l2_rsp_valid),
      .rsp           (l2_rsp),
      .mem_req_valid (l2_dn_valid[c]),
      .mem_req_ready (l2_dn_ready[c]),
      .mem_req       (l2_dn_req[c]),
      .mem_rsp_valid (l2_dn_rvld[c]),
      .mem_rsp       (l2_dn_rsp[c]),
      .seed_load,
      .seed          (seed ^ (64'h4444_0000_0000_0005 << c)),
      .ev            (ev_l2[c])
    );
  end

  logic l3_req_valid, l3_req_ready, l3_rsp_valid;
  req_t l3_req;
  rsp_t l3_rsp;

  hyb_arb2 u_arb_l3 (
    .clk, .rst_n,
    .up_req_valid (l2_dn_valid),
    .up_req_ready (l2_dn_ready),
    .up_req       (l2_dn_req),
    .up_rsp_valid (l2_dn_rvld),
    .up_rsp       (l2_dn_rsp),
    .dn_req_valid (l3_req_valid),
    .dn_req_ready (l3_req_ready),
    .dn_req       (l3_req),
    .dn_rsp_valid (l3_rsp_valid),
    .dn_rsp       (l3_rsp)
  );

  hybcache #(.SETS(L3_SETS), .WAYS(L3_WAYS), .ISO_WAYS(ISO_WAYS)) u_l3 (
    .clk, .rst_n,
    .req_valid     (l3_req_valid),
    .req_ready     (l3_req_ready),
    .req           (l3_req),
    .rsp_valid     (l3_rsp_valid),
    .rsp           (l3_rsp),
    .mem_req_valid,
    .mem_req_ready,
    .mem_req,
    .mem_rsp_valid,
    .mem_rsp,
    .seed_load,
    .seed          (seed ^ 64'h8888_0000_0000_0007),
    .ev            (ev_l3)
  );

endmodule
