// tb_pkg: helpers shared by the testbenches.
//
// default_line() defines the contents of never-written memory: word w of the
// line at line address a is {a[31:0], 24'h5A5A5A, 5'b0, w[2:0]} XORed with a
// rotated copy of a, so that every line and every word differs.
package tb_pkg;
  import hyb_pkg::*;

  function automatic line_t default_line(laddr_t a);
    line_t l;
    for (int w = 0; w < int'(WORDS); w++)
      l[w*WORD_W +: WORD_W] = {a[31:0], 24'h5A5A5A, 5'b0, 3'(w)} ^ {a[7:0], a[39:8], 24'h0};
    return l;
  endfunction

  function automatic req_t mk_req(op_e op, addr_t addr, idid_t idid, word_t wdata);
    req_t r;
    r.op    = op;
    r.addr  = addr;
    r.idid  = idid;
    r.wdata = wdata;
    return r;
  endfunction
endpackage
