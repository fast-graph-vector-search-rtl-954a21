// falcon_tb_pkg: reference functions shared by the testbenches: MurmurHash2,
// the Bloom-filter bit positions, distances, and a bounded best-first search
// used as the golden model of the traversal.
package falcon_tb_pkg;
  import falcon_pkg::*;

  function automatic logic [31:0] ref_murmur2(logic [31:0] key, logic [31:0] seed);
    logic [31:0] m, h, kk;
    m  = 32'h5bd1e995;
    h  = seed ^ 32'd4;
    kk = key * m;
    kk = kk ^ (kk >> 24);
    kk = kk * m;
    h  = h * m;
    h  = h ^ kk;
    h  = h ^ (h >> 13);
    h  = h * m;
    h  = h ^ (h >> 15);
    return h;
  endfunction

  // squared L2 distance of two vectors stored as lines of 16-bit elements
  function automatic longint ref_l2(line_t a [], line_t b []);
    longint s;
    s = 0;
    foreach (a[i])
      for (int e = 0; e < ELEMS_PER_LINE; e++) begin
        longint x, y;
        x = longint'($signed(a[i][e*16 +: 16]));
        y = longint'($signed(b[i][e*16 +: 16]));
        s += (x - y) * (x - y);
      end
    return s;
  endfunction

  function automatic longint ref_ip(line_t a [], line_t b []);
    longint s;
    s = 0;
    foreach (a[i])
      for (int e = 0; e < ELEMS_PER_LINE; e++)
        s += longint'($signed(a[i][e*16 +: 16])) * longint'($signed(b[i][e*16 +: 16]));
    return (longint'(1) <<< 47) - s;
  endfunction

  // insert into a bounded ascending list, dropping the farthest when full
  function automatic void bounded_insert(ref longint ds[$], ref int ids[$], input longint d,
                                         input int id, input int cap);
    int pos;
    if (ds.size() == cap && d >= ds[cap-1]) return;
    pos = 0;
    while (pos < ds.size() && ds[pos] <= d) pos++;
    ds.insert(pos, d); ids.insert(pos, id);
    if (ds.size() > cap) begin void'(ds.pop_back()); void'(ids.pop_back()); end
  endfunction
endpackage
