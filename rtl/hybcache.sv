// hybcache: one level of the HybCache hybrid side-channel-resilient cache.
//
// A conventional SETS x WAYS set-associative cache in which the top ISO_WAYS
// ways of every set also form a second, fully-associative cache, the
// subcache, of N_ISO = SETS*ISO_WAYS entries. Every request carries the IDID
// of the issuing process and the controller (the paper's Fig. 1) dispatches
// on it:
//   * IDID 0 (non-isolated): ordinary set-associative lookup of all ways of
//     the indexed set with the normal tag (hyb_sa_match); a hit in a subcache
//     way counts only if that line was placed by the non-isolated domain. A
//     miss fills the LRU way of the set (hyb_lru), which may be a subcache
//     way, so this domain keeps the full capacity of the cache.
//   * IDID != 0 (isolated): only the subcache is searched, fully
//     associatively, with the 40-bit line address as extended tag and the
//     line-IDID (hyb_fa_match). A miss fills an entry chosen uniformly at
//     random among all N_ISO entries (hyb_rng), whoever owns it, so which
//     line gets evicted says nothing about the address.
// Subcache ways store the full line address (extended tag) and a 4-bit
// line-IDID; main ways store only the set-associative tag. Subcache entry e
// is way WAYS-ISO_WAYS + e%ISO_WAYS of set e/ISO_WAYS.
//
// Both paths are evaluated in the same cycle; a hit is answered 2 cycles
// after the request is accepted whatever the domain, and every miss issues
// its downstream request after the same 2 cycles (the paper gives the 2-cycle
// lookup; the pipeline split is this design's). Other choices of this
// design, not of the paper: blocking (one request in flight), write-through
// without write-allocate, FLUSH invalidates only the line the requester
// itself could hit on and is then passed down, FLUSH_DOMAIN invalidates in
// one cycle every subcache line of the given IDID and is passed down; ID hits
// and fills also refresh the LRU state of their set, as the paper asks.
//
// Upstream: req_valid/req_ready/req; rsp_valid is a one-cycle pulse with rsp,
// the requester must take it. Downstream: the same protocol towards the next
// level or memory (mem_*); READs go down line-aligned. A request must stay
// stable while valid and not ready. seed_load/seed reseed the generator; no
// flush is needed afterwards.
//
// Lint note: rst_n resets the flops asynchronously and also disables the
// handshake assertions (disable iff), so a linter may report it as used both
// asynchronously and synchronously. The assertions are not logic; the warning
// stands on purpose.
module hybcache #(
  parameter int unsigned SETS     = 128,
  parameter int unsigned WAYS     = 8,
  parameter int unsigned ISO_WAYS = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  // upstream (towards the core)
  input  logic            req_valid,
  output logic            req_ready,
  input  hyb_pkg::req_t   req,
  output logic            rsp_valid,
  output hyb_pkg::rsp_t   rsp,
  // downstream (towards the next level / memory)
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output hyb_pkg::req_t   mem_req,
  input  logic            mem_rsp_valid,
  input  hyb_pkg::rsp_t   mem_rsp,
  // random generator seed
  input  logic            seed_load,
  input  logic [63:0]     seed,
  // event pulses
  output hyb_pkg::ev_t    ev
);
  import hyb_pkg::*;

  localparam int unsigned SET_W     = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W     = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W     = LADDR_W - SET_W;
  localparam int unsigned MAIN_WAYS = WAYS - ISO_WAYS;
  localparam int unsigned N_ISO     = SETS * ISO_WAYS;
  localparam int unsigned IDX_W     = (N_ISO > 1) ? $clog2(N_ISO) : 1;
  localparam int unsigned WSEL_W    = $clog2(WORDS);

  // ---------------------------------------------------------------- storage
  logic [TAG_W-1:0]     main_tag   [SETS][MAIN_WAYS];
  logic [MAIN_WAYS-1:0] main_valid [SETS];
  laddr_t               sub_key    [N_ISO];   // extended tag = line address
  idid_t                sub_idid   [N_ISO];   // line-IDID
  logic [N_ISO-1:0]     sub_valid;
  line_t                data       [SETS][WAYS];

  // ------------------------------------------------------------ controller
  typedef enum logic [2:0] {S_IDLE, S_TAG, S_MREQ, S_MWAIT, S_RSP} state_e;
  state_e state_q;

  req_t             r_q;         // request being served
  logic             hit_q;
  logic [SET_W-1:0] vset_q;
  logic [WAY_W-1:0] vway_q;
  line_t            rdata_q;

  laddr_t           la;
  logic [SET_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  logic             iso;          // A: isolated request?

  assign la  = line_addr(r_q.addr);
  assign idx = la[SET_W-1:0];
  assign tag = la[LADDR_W-1:SET_W];
  assign iso = (r_q.idid != IDID_NID);

  // entry number of way w (w >= MAIN_WAYS) of set s
  function automatic logic [IDX_W-1:0] ent_of(logic [SET_W-1:0] s, logic [WAY_W-1:0] w);
    return IDX_W'(s * ISO_WAYS + (int'(w) - MAIN_WAYS));
  endfunction
  function automatic logic [SET_W-1:0] set_of(logic [IDX_W-1:0] e);
    return SET_W'(e / ISO_WAYS);
  endfunction
  function automatic logic [WAY_W-1:0] way_of(logic [IDX_W-1:0] e);
    return WAY_W'(MAIN_WAYS + int'(e) % ISO_WAYS);
  endfunction

  // --------------------------------------------- set-associative path (B-E)
  logic [TAG_W-1:0] set_tag   [WAYS];
  logic [WAYS-1:0]  set_valid;
  idid_t            set_idid  [ISO_WAYS];
  logic             sa_hit, sa_refused;
  logic [WAY_W-1:0] sa_way;

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (w < MAIN_WAYS) begin
        set_tag[w]   = main_tag[idx][w];
        set_valid[w] = main_valid[idx][w];
      end else begin
        set_tag[w]   = sub_key[ent_of(idx, WAY_W'(w))][LADDR_W-1:SET_W];
        set_valid[w] = sub_valid[ent_of(idx, WAY_W'(w))];
      end
    end
    for (int unsigned k = 0; k < ISO_WAYS; k++)
      set_idid[k] = sub_idid[ent_of(idx, WAY_W'(MAIN_WAYS + k))];
  end

  hyb_sa_match #(.WAYS(WAYS), .ISO_WAYS(ISO_WAYS), .TAG_W(TAG_W)) u_sa (
    .req_tag   (tag),
    .way_tag   (set_tag),
    .way_valid (set_valid),
    .sub_idid  (set_idid),
    .hit       (sa_hit),
    .hit_way   (sa_way),
    .refused   (sa_refused)
  );

  // --------------------------------------------- fully-associative path (G-I)
  logic             fa_hit, fa_refused;
  logic [IDX_W-1:0] fa_idx;

  hyb_fa_match #(.N(N_ISO), .KEY_W(LADDR_W)) u_fa (
    .key       (la),
    .idid      (r_q.idid),
    .ent_key   (sub_key),
    .ent_idid  (sub_idid),
    .ent_valid (sub_valid),
    .hit       (fa_hit),
    .hit_idx   (fa_idx),
    .refused   (fa_refused)
  );

  // ------------------------------------------------ replacement (F and J)
  logic [WAY_W-1:0] lru_victim;
  logic             lru_touch;
  logic [SET_W-1:0] lru_tset;
  logic [WAY_W-1:0] lru_tway;

  hyb_lru #(.SETS(SETS), .WAYS(WAYS)) u_lru (
    .clk, .rst_n,
    .rd_set    (idx),
    .valid     (set_valid),
    .victim    (lru_victim),
    .touch     (lru_touch),
    .touch_set (lru_tset),
    .touch_way (lru_tway)
  );

  logic [31:0]      rnd;
  logic [IDX_W-1:0] rnd_idx;

  hyb_rng u_rng (.clk, .rst_n, .seed_load, .seed, .rnd);

  // uniform index in [0, N_ISO): high half of rnd * N_ISO
  always_comb begin
    logic [63:0] prod;
    prod    = 64'(rnd) * 64'(N_ISO);
    rnd_idx = IDX_W'(prod[63:32]);
  end

  // ---------------------------------------------------- lookup decision
  logic             lk_hit;
  logic [SET_W-1:0] lk_hset, lk_vset;
  logic [WAY_W-1:0] lk_hway, lk_vway;

  always_comb begin
    if (iso) begin
      lk_hit  = fa_hit;
      lk_hset = set_of(fa_idx);
      lk_hway = way_of(fa_idx);
      lk_vset = set_of(rnd_idx);
      lk_vway = way_of(rnd_idx);
    end else begin
      lk_hit  = sa_hit;
      lk_hset = idx;
      lk_hway = sa_way;
      lk_vset = idx;
      lk_vway = lru_victim;
    end
  end

  // LRU touches: read/write hits in S_TAG, fills in S_MWAIT
  always_comb begin
    lru_touch = 1'b0;
    lru_tset  = lk_hset;
    lru_tway  = lk_hway;
    if (state_q == S_TAG && lk_hit && (r_q.op == OP_READ || r_q.op == OP_WRITE)) begin
      lru_touch = 1'b1;
    end else if (state_q == S_MWAIT && mem_rsp_valid && r_q.op == OP_READ) begin
      lru_touch = 1'b1;
      lru_tset  = vset_q;
      lru_tway  = vway_q;
    end
  end

  // ---------------------------------------------------------- handshakes
  assign req_ready     = (state_q == S_IDLE);
  assign rsp_valid     = (state_q == S_RSP);
  assign rsp.rdata     = rdata_q;
  assign rsp.hit       = hit_q;
  assign mem_req_valid = (state_q == S_MREQ);

  always_comb begin
    mem_req = r_q;
    if (r_q.op == OP_READ) mem_req.addr = {la, OFFSET_W'(0)};
  end

  // -------------------------------------------------- state and storage
  logic [IDX_W-1:0] fill_e;
  assign fill_e = ent_of(vset_q, vway_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      r_q     <= '0;
      hit_q   <= 1'b0;
      vset_q  <= '0;
      vway_q  <= '0;
      rdata_q <= '0;
      sub_valid <= '0;
      for (int unsigned s = 0; s < SETS; s++) main_valid[s] <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          r_q     <= req;
          state_q <= S_TAG;
        end

        S_TAG: begin
          hit_q  <= lk_hit;
          vset_q <= lk_vset;
          vway_q <= lk_vway;
          unique case (r_q.op)
            OP_READ: begin
              if (lk_hit) begin
                rdata_q <= data[lk_hset][lk_hway];
                state_q <= S_RSP;
              end else begin
                state_q <= S_MREQ;
              end
            end
            OP_WRITE: begin
              if (lk_hit)
                data[lk_hset][lk_hway][r_q.addr[OFFSET_W-1 -: WSEL_W]*WORD_W +: WORD_W] <= r_q.wdata;
              state_q <= S_MREQ;
            end
            OP_FLUSH: begin
              if (lk_hit) begin
                if (lk_hway < WAY_W'(MAIN_WAYS)) main_valid[lk_hset][lk_hway] <= 1'b0;
                else                             sub_valid[ent_of(lk_hset, lk_hway)] <= 1'b0;
              end
              state_q <= S_MREQ;
            end
            OP_FLUSH_DOM: begin
              if (iso)
                for (int unsigned e = 0; e < N_ISO; e++)
                  if (sub_idid[e] == r_q.idid) sub_valid[e] <= 1'b0;
              state_q <= S_MREQ;
            end
          endcase
        end

        S_MREQ: if (mem_req_ready) state_q <= S_MWAIT;

        S_MWAIT: if (mem_rsp_valid) begin
          if (r_q.op == OP_READ) begin
            rdata_q <= mem_rsp.rdata;
            data[vset_q][vway_q] <= mem_rsp.rdata;
            if (vway_q < WAY_W'(MAIN_WAYS)) begin
              main_tag[vset_q][vway_q]   <= tag;
              main_valid[vset_q][vway_q] <= 1'b1;
            end else begin
              sub_key[fill_e]   <= la;
              sub_idid[fill_e]  <= r_q.idid;
              sub_valid[fill_e] <= 1'b1;
            end
          end
          state_q <= S_RSP;
        end

        S_RSP: state_q <= S_IDLE;

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------------- events
  always_comb begin
    logic tag_state, rd;
    tag_state = (state_q == S_TAG);
    rd        = (r_q.op == OP_READ);
    ev = '0;
    ev.nid_hit       = tag_state && !iso && (rd || r_q.op == OP_WRITE) && sa_hit;
    ev.nid_miss      = tag_state && !iso && rd && !sa_hit;
    ev.nid_refused   = tag_state && !iso && rd && sa_refused;
    ev.nid_fill_sub  = tag_state && !iso && rd && !sa_hit && (lru_victim >= WAY_W'(MAIN_WAYS));
    ev.iso_hit       = tag_state && iso && (rd || r_q.op == OP_WRITE) && fa_hit;
    ev.iso_miss      = tag_state && iso && rd && !fa_hit;
    ev.iso_refused   = tag_state && iso && rd && fa_refused;
    ev.iso_evict_nid = tag_state && iso && rd && !fa_hit && sub_valid[rnd_idx]
                       && sub_idid[rnd_idx] == IDID_NID;
    ev.iso_evict_oth = tag_state && iso && rd && !fa_hit && sub_valid[rnd_idx]
                       && sub_idid[rnd_idx] != IDID_NID && sub_idid[rnd_idx] != r_q.idid;
    ev.flush_line    = tag_state && r_q.op == OP_FLUSH && lk_hit;
    ev.flush_dom     = 1'b0;
    if (tag_state && r_q.op == OP_FLUSH_DOM && iso)
      for (int unsigned e = 0; e < N_ISO; e++)
        if (sub_valid[e] && sub_idid[e] == r_q.idid) ev.flush_dom = 1'b1;
  end

  // ----------------------------------------------------------- assertions
  initial begin
    assert (ISO_WAYS >= 1 && ISO_WAYS < WAYS)
      else $error("hybcache: need 1 <= ISO_WAYS < WAYS");
    assert (SETS == (1 << SET_W) && WAYS == (1 << WAY_W))
      else $error("hybcache: SETS and WAYS must be powers of two");
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));

endmodule
