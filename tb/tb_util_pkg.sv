// tb_util_pkg: helpers shared by the testbenches: packet builders for the
// configuration map and spike format of darwin_pkg, and a reference model
// of one neuron update (leak multiply, add, saturate, threshold).
package tb_util_pkg;
  import darwin_pkg::*;

  function automatic pkt_t mk_cfg(input int dx, input int dy, input logic [3:0] sel,
                                  input int idx, input int data);
    pkt_t p;
    p       = '0;
    p.ptype = PT_CFG_WR;
    p.dx    = OFS_W'(dx);
    p.dy    = OFS_W'(dy);
    p.addr  = {sel, 12'(idx)};
    p.data  = 16'(data);
    return p;
  endfunction

  function automatic pkt_t mk_spike(input int dx, input int dy, input bit parity,
                                    input int nid, input int w);
    pkt_t p;
    p       = '0;
    p.ptype = PT_SPIKE;
    p.dx    = OFS_W'(dx);
    p.dy    = OFS_W'(dy);
    p.addr  = {parity, 3'b000, 12'(nid)};
    p.data  = 16'(w);
    return p;
  endfunction

  function automatic int sat16(input longint x);
    if (x > 32767)  return 32767;
    if (x < -32768) return -32768;
    return int'(x);
  endfunction

  // One update: returns the new potential, sets fire.
  function automatic int lif(input int v, input int in, input int leak, input int th,
                             input int vr, output bit fire);
    longint p;
    int     s;
    p    = (longint'(v) * longint'(leak)) >>> 15;
    s    = sat16(p + longint'(in));
    fire = (s >= th);
    return fire ? vr : s;
  endfunction
endpackage
