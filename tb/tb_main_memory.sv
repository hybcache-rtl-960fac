// tb_main_memory: behavioural main-memory model for the testbenches.
//
// Accepts one request at a time (req_ready is high when idle) and answers
// LATENCY cycles later with a one-cycle rsp_valid pulse. Never-written lines
// read as tb_pkg::default_line(); WRITE stores one 64-bit word; FLUSH and
// FLUSH_DOMAIN are acknowledged without effect. Counts reads and writes.
module tb_main_memory #(
  parameter int unsigned LATENCY = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  hyb_pkg::req_t req,
  output logic          rsp_valid,
  output hyb_pkg::rsp_t rsp
);
  import hyb_pkg::*;

  line_t mem [laddr_t];
  int    n_reads, n_writes;
  int    cnt;
  logic  busy;
  req_t  r;

  function automatic line_t peek(laddr_t a);
    return mem.exists(a) ? mem[a] : tb_pkg::default_line(a);
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
      n_reads   <= 0;
      n_writes  <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        r    <= req;
        cnt  <= LATENCY - 1;
      end else if (busy) begin
        if (cnt == 0) begin
          automatic laddr_t a = line_addr(r.addr);
          automatic line_t  l = peek(a);
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          rsp.hit   <= 1'b1;
          rsp.rdata <= l;
          if (r.op == OP_READ) n_reads <= n_reads + 1;
          if (r.op == OP_WRITE) begin
            l[r.addr[5:3]*WORD_W +: WORD_W] = r.wdata;
            mem[a] = l;
            n_writes <= n_writes + 1;
          end
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
