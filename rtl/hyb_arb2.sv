// hyb_arb2: two-to-one arbiter between cache levels.
//
// In the hierarchy an L1 instruction cache and an L1 data cache share one
// L2, and the L2s of the two cores share the L3. This arbiter lets two
// upstream requesters share one downstream port using the cache request /
// response protocol of hybcache. Requests are granted round-robin; once a
// request is passed on, the grant is held until the downstream response
// arrives, which is routed back to the requester that owns it (every level
// is blocking, so there is at most one transaction in flight). The paper
// only draws this sharing; the round-robin scheme is this design's choice.
//
// Timing: combinational from request to downstream valid; one request per
// transaction; the response passes through without delay. The response
// data is a plain wire: both requesters see dn_rsp and only the owner's
// up_rsp_valid rises, so most output bits are straight connections by
// intent.
//
// Lint note: rst_n resets the flops asynchronously and also disables the
// handshake assertions (disable iff), so a linter may report it as used both
// asynchronously and synchronously. The assertions are not logic; the warning
// stands on purpose.
module hyb_arb2 (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          up_req_valid [2],
  output logic          up_req_ready [2],
  input  hyb_pkg::req_t up_req       [2],
  output logic          up_rsp_valid [2],
  output hyb_pkg::rsp_t up_rsp       [2],
  output logic          dn_req_valid,
  input  logic          dn_req_ready,
  output hyb_pkg::req_t dn_req,
  input  logic          dn_rsp_valid,
  input  hyb_pkg::rsp_t dn_rsp
);

  logic busy_q;   // a request was passed on and its response is pending
  logic owner_q;  // requester that owns the pending transaction
  logic last_q;   // requester granted last (for round-robin)
  logic sel;      // requester selected this cycle

  always_comb begin
    if (busy_q)                                  sel = owner_q;
    else if (up_req_valid[0] && up_req_valid[1]) sel = !last_q;
    else                                         sel = up_req_valid[1];
  end

  assign dn_req_valid = !busy_q && up_req_valid[sel];
  assign dn_req       = up_req[sel];

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      up_req_ready[i] = !busy_q && (sel == 1'(i)) && dn_req_ready;
      up_rsp_valid[i] = busy_q && (owner_q == 1'(i)) && dn_rsp_valid;
      up_rsp[i]       = dn_rsp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
      last_q  <= 1'b1;
    end else if (!busy_q) begin
      if (dn_req_valid && dn_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= sel;
        last_q  <= sel;
      end
    end else if (dn_rsp_valid) begin
      busy_q <= 1'b0;
    end
  end

  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    dn_rsp_valid |-> busy_q);

endmodule
