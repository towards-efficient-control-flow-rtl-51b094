// Routing helper for the Benes network testbenches.
//
// Computes the switch settings for any permutation with the classic looping
// algorithm: the two inputs of every input switch go to different
// sub-networks, the two outputs of every output switch come from different
// sub-networks; the constraint chain is followed around each loop, then
// both sub-networks are routed recursively.  Output layout matches
// benes_network (input column, upper, lower, output column; 2 bits per
// switch).  `route_partial` completes a partial map (-1 = unused input)
// into a full permutation first.
//
// The looping algorithm is the standard one for Benes networks; the paper
// gives no routing procedure, and the bit layout is this design's.
package benes_route_pkg;

  bit cfgbits [8192];

  function automatic int clog2i(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  function automatic int sub_w(int n);
    return n * (2 * clog2i(n) - 1);
  endfunction

  function automatic void route(int n, int perm[], int off);
    int side[], inv[], up[], lo[];
    int h, sw, a, b, s;
    if (n == 2) begin
      cfgbits[off]   = (perm[0] != 0);
      cfgbits[off+1] = (perm[0] != 0);
      return;
    end
    h  = n / 2;
    sw = sub_w(h);
    side = new[n];
    inv  = new[n];
    up   = new[h];
    lo   = new[h];
    foreach (side[i]) side[i] = -1;
    foreach (perm[i]) inv[perm[i]] = i;
    for (int k = 0; k < h; k++) begin
      if (side[2*k] == -1) begin
        a = 2*k; s = 0;
        forever begin
          side[a]   = s;
          side[a^1] = 1 - s;
          b = inv[perm[a^1] ^ 1];
          if (side[b] != -1) break;
          a = b;
        end
      end
    end
    for (int k = 0; k < h; k++) begin
      cfgbits[off + 2*k]   = (side[2*k] != 0);
      cfgbits[off + 2*k+1] = (side[2*k] != 0);
    end
    for (int i = 0; i < n; i++) begin
      if (side[i] == 0) up[i >> 1] = perm[i] >> 1;
      else              lo[i >> 1] = perm[i] >> 1;
    end
    for (int m = 0; m < h; m++) begin
      cfgbits[off + n + 2*sw + 2*m]   = (side[inv[2*m]] != 0);
      cfgbits[off + n + 2*sw + 2*m+1] = (side[inv[2*m]] != 0);
    end
    route(h, up, off + n);
    route(h, lo, off + n + sw);
  endfunction

  // map[i] = destination of input i, or -1
  function automatic void route_partial(int n, int map[]);
    int perm[];
    bit used[];
    int nxt = 0;
    perm = new[n];
    used = new[n];
    foreach (map[i]) if (map[i] >= 0) used[map[i]] = 1'b1;
    for (int i = 0; i < n; i++) begin
      if (map[i] >= 0) perm[i] = map[i];
      else begin
        while (used[nxt]) nxt++;
        perm[i] = nxt;
        used[nxt] = 1'b1;
      end
    end
    route(n, perm, 0);
  endfunction

endpackage
