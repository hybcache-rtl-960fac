// tb_hyb_arb2: two requesters issue random READs through hyb_arb2 to a
// downstream model that answers after a random delay with a line derived
// from the address. Checks that each requester receives the answer to its
// own request, that the downstream sees one transaction at a time, and that
// simultaneous requests are granted alternately.
module tb_hyb_arb2;
  import hyb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic up_req_valid [2], up_req_ready [2], up_rsp_valid [2];
  req_t up_req [2];
  rsp_t up_rsp [2];
  logic dn_req_valid, dn_req_ready, dn_rsp_valid;
  req_t dn_req;
  rsp_t dn_rsp;
  int checks = 0, failures = 0;

  hyb_arb2 dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // downstream: one outstanding, random latency, rdata = default_line(addr)
  int   dn_cnt;
  logic dn_busy;
  req_t dn_r;
  int   outstanding;
  assign dn_req_ready = !dn_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dn_busy <= 0; dn_rsp_valid <= 0; dn_cnt <= 0; end
    else begin
      dn_rsp_valid <= 0;
      if (!dn_busy && dn_req_valid) begin
        dn_busy <= 1; dn_r <= dn_req; dn_cnt <= 1 + $urandom % 5;
      end else if (dn_busy) begin
        if (dn_cnt == 0) begin
          dn_busy <= 0; dn_rsp_valid <= 1;
          dn_rsp.rdata <= tb_pkg::default_line(line_addr(dn_r.addr));
          dn_rsp.hit   <= 1;
        end else dn_cnt <= dn_cnt - 1;
      end
    end
  end

  int done [2];
  int both_grants, alternations;
  int last_grant = -1;

  // monitor simultaneous requests and grants
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) if (up_req_valid[i] && up_req_ready[i]) begin
      if (up_req_valid[0] && up_req_valid[1]) begin
        both_grants++;
        if (last_grant != i) alternations++;
      end
      last_grant = i;
    end
  end

  for (genvar g = 0; g < 2; g++) begin : g_req
    initial begin
      up_req_valid[g] = 0;
      up_req[g] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 200; n++) begin
        addr_t a;
        int t;
        a = addr_t'({$urandom, $urandom}) & ~addr_t'(63);
        @(posedge clk); #1;
        up_req[g] = tb_pkg::mk_req(OP_READ, a, idid_t'(g), '0);
        up_req_valid[g] = 1;
        do @(posedge clk); while (!up_req_ready[g]);
        #1 up_req_valid[g] = 0;
        t = 0;
        while (!up_rsp_valid[g] && t < 100) begin @(posedge clk); #1; t++; end
        checks++;
        if (!up_rsp_valid[g]) begin
          failures++; $display("FAIL requester %0d got no answer in 100 cycles", g);
        end else if (up_rsp[g].rdata != tb_pkg::default_line(line_addr(a))) begin
          failures++; $display("FAIL requester %0d got a foreign answer", g);
        end
        if ($urandom % 3 == 0) repeat ($urandom % 4) @(posedge clk);
      end
      done[g] = 1;
    end
  end

  initial begin
    done[0] = 0; done[1] = 0; both_grants = 0; alternations = 0;
    #22 rst_n = 1;
    wait (done[0] == 1 && done[1] == 1);
    checks++;
    if (both_grants < 50 || alternations * 10 < both_grants * 9) begin
      failures++; $display("FAIL fairness: %0d contended grants, %0d alternations", both_grants, alternations);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
