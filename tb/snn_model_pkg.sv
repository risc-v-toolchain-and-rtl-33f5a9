// snn_model_pkg: reference model of the SNN datapath used by the testbenches.
//
// Written from the specification in the RTL headers, not from the RTL: the
// 16-bit LFSR (taps 16,14,13,11), the per-lane LTD seeds, the LIF update and
// the binary stochastic STDP rule. The LTD model keeps its own copy of every
// lane's LFSR state, so a testbench can predict each weight bit exactly.
package snn_model_pkg;

  function automatic logic [15:0] m_lfsr_next(logic [15:0] s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  function automatic logic [15:0] m_lane_key(int unsigned i);
    return 16'((i * 40503) % 65536);
  endfunction

  function automatic logic [15:0] m_nz(logic [15:0] v);
    return (v == 0) ? 16'h0001 : v;
  endfunction

  function automatic int unsigned m_popcount(logic [63:0] v, int unsigned n);
    int unsigned c = 0;
    for (int unsigned i = 0; i < n; i++) c += v[i];
    return c;
  endfunction

  // LIF update on NW-bit values; returns {spike, v_next}.
  function automatic logic [16:0] m_lif(int unsigned nw, longint unsigned v, longint unsigned cnt,
                                         longint unsigned leak, longint unsigned vth);
    longint unsigned vmax = (64'd1 << nw) - 1;
    longint unsigned vl, vi;
    vl = (v > leak) ? v - leak : 0;
    vi = vl + cnt;
    if (vi > vmax) vi = vmax;
    if (vi >= vth) return {1'b1, 16'd0};
    return {1'b0, 16'(vi)};
  endfunction

  // LTD random lanes.
  class ltd_model;
    int unsigned xlen;
    logic [15:0] lane[];
    function new(int unsigned n);
      xlen = n;
      lane = new[n];
      for (int unsigned i = 0; i < n; i++) lane[i] = m_nz(16'hACE1 ^ m_lane_key(i));
    endfunction
    function void reseed(logic [15:0] seed);
      for (int unsigned i = 0; i < xlen; i++) lane[i] = m_nz(seed ^ m_lane_key(i));
    endfunction
    function void step();
      for (int unsigned i = 0; i < xlen; i++) lane[i] = m_lfsr_next(lane[i]);
    endfunction
    // Weight update with the current lane states (does not step).
    function logic [63:0] stdp(logic [63:0] w, logic [63:0] pre, logic post, logic [9:0] p);
      logic [63:0] r = w;
      if (post)
        for (int unsigned i = 0; i < xlen; i++)
          if (pre[i]) r[i] = 1'b1;
          else if (lane[i][9:0] <= p) r[i] = 1'b0;
      return r;
    endfunction
    function logic [63:0] ltd_only(logic [63:0] w, logic [63:0] pre, logic post, logic [9:0] p);
      logic [63:0] r = w;
      if (post)
        for (int unsigned i = 0; i < xlen; i++)
          if (!pre[i] && lane[i][9:0] <= p) r[i] = 1'b0;
      return r;
    endfunction
  endclass

endpackage
