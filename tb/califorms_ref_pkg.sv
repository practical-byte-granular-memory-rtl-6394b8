// califorms_ref_pkg: reference models used by the testbenches, written independently of
// the RTL (plain loops over bytes instead of find-index chains).
//
//   ref_encode  bitvector line -> sentinel line (what the spill path must produce)
//   ref_decode  sentinel line  -> data + bitvector (what the fill path must produce)
//   rand_line / rand_meta  random stimulus; rand_meta picks 0..n security bytes
// Sentinel header, as the RTL: bytes 0..3 as a little-endian word, [1:0] count code
// (count-1, 3 for 4+), [2+6k +: 6] location of the k-th security byte, [31:26] sentinel.
package califorms_ref_pkg;
  import califorms_pkg::*;

  function automatic int popc(meta_t m);
    int n = 0;
    for (int i = 0; i < LINE_BYTES; i++) n += m[i];
    return n;
  endfunction

  function automatic void ref_encode(input line_t d, input meta_t m,
                                     output line_t o, output logic cf);
    int sec[$];
    int normals_in_hdr[$];
    int outside[$];
    int h, n, sent;
    bit used[64];
    logic [31:0] hdr;
    o  = d;
    cf = (m != '0);
    if (!cf) return;
    for (int i = 0; i < 64; i++) if (m[i]) sec.push_back(i);
    n = sec.size();
    h = (n >= 4) ? 4 : n;
    for (int v = 0; v < 64; v++) used[v] = 0;
    for (int i = 0; i < 64; i++) if (!m[i]) used[d[8*i +: 6]] = 1;
    sent = -1;
    for (int v = 63; v >= 0; v--) if (!used[v]) sent = v;
    for (int j = 0; j < h; j++) if (!m[j]) normals_in_hdr.push_back(j);
    for (int k = 0; k < h; k++) if (sec[k] >= h) outside.push_back(sec[k]);
    for (int k = 4; k < n; k++) o[8*sec[k] +: 8] = 8'(sent);
    foreach (normals_in_hdr[q]) o[8*outside[q] +: 8] = d[8*normals_in_hdr[q] +: 8];
    hdr = 32'(n >= 4 ? 3 : n - 1);
    for (int k = 0; k < h; k++) hdr |= 32'(sec[k]) << (2 + 6*k);
    if (n >= 4) hdr |= 32'(sent) << 26;
    for (int j = 0; j < h; j++) o[8*j +: 8] = hdr[8*j +: 8];
  endfunction

  function automatic void ref_decode(input line_t l, input logic cf,
                                     output line_t d, output meta_t m);
    int h, code;
    int loc[4];
    int normals_in_hdr[$];
    int outside[$];
    d = l;
    m = '0;
    if (!cf) return;
    code = l[1:0];
    h = code + 1;
    for (int k = 0; k < h; k++) begin
      loc[k] = l[2+6*k +: 6];
      m[loc[k]] = 1'b1;
    end
    if (code == 3)
      for (int i = 4; i < 64; i++) if (l[8*i +: 6] == l[31:26]) m[i] = 1'b1;
    for (int j = 0; j < h; j++) if (!m[j]) normals_in_hdr.push_back(j);
    for (int k = 0; k < h; k++) if (loc[k] >= h) outside.push_back(loc[k]);
    foreach (normals_in_hdr[q]) d[8*normals_in_hdr[q] +: 8] = l[8*outside[q] +: 8];
    for (int i = 0; i < 64; i++) if (m[i]) d[8*i +: 8] = 8'h00;
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  // 0..maxn distinct security bytes; with prob. 1/4 they cluster in bytes 0..7
  function automatic meta_t rand_meta(int maxn);
    meta_t m = '0;
    int n = $urandom_range(maxn, 0);
    bit low = ($urandom_range(3, 0) == 0);
    for (int k = 0; k < n; k++) m[low ? $urandom_range(7, 0) : $urandom_range(63, 0)] = 1'b1;
    return m;
  endfunction
endpackage
