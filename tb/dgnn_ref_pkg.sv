// dgnn_ref_pkg - reference model used by the testbenches.
//
// Integer (longint) model of the kernel's arithmetic, written independently
// of the RTL: saturation to 16-bit Q7.8, the EdgeConv message
// W concat(x_u, x_v - x_u) + b with one rounding at the end, max pooling at
// the source node with zero for an isolated node, and the node update
// x + BN(m) with BN folded to scale/shift. Also a generator for event graphs:
// particles with random (eta, phi) and an edge u -> v for every ordered pair
// closer than delta in the (eta, phi) plane, as the host does.
package dgnn_ref_pkg;
  localparam int D   = 16;
  localparam int F   = 8;
  localparam int MAXN = 128;
  localparam int MAXE = 1024;

  typedef int vec_t [D];

  function automatic int rsat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // Message of edge (u, v): xu, xv are the two embeddings.
  function automatic vec_t ref_msg(vec_t xu, vec_t xv, int w [D][2*D], vec_t b);
    vec_t m;
    longint acc;
    int c [2*D];
    for (int i = 0; i < D; i++) begin
      c[i] = xu[i];
      c[D+i] = rsat(longint'(xv[i]) - longint'(xu[i]));
    end
    for (int j = 0; j < D; j++) begin
      acc = longint'(b[j]) * 256;
      for (int i = 0; i < 2*D; i++) acc += longint'(w[j][i]) * longint'(c[i]);
      m[j] = rsat(acc >>> F);
    end
    return m;
  endfunction

  function automatic vec_t ref_node(vec_t x, vec_t m, vec_t sc, vec_t sh);
    vec_t y;
    for (int d = 0; d < D; d++)
      y[d] = rsat(longint'(x[d]) + longint'(rsat(((longint'(m[d]) * longint'(sc[d])) >>> F) + longint'(sh[d]))));
    return y;
  endfunction
endpackage
