// califorms_checker: the security-byte check on the L1 hit path.
//
// Given the security-byte vector of the line being accessed (read from the metadata array
// in parallel with the tag array) and the offset and size of a load or store, it forms
// the set of bytes the access touches, reports a violation if any of them is a security
// byte, and gives the offset of the lowest such byte for the faulting-address register.
// The cache uses hit_bytes to force those bytes of load data to zero and to keep a store
// from writing them.
// The check and the zero value follow the paper; the access sizes (1, 2, 4, 8 bytes,
// naturally aligned) are this design's choice. Purely combinational.
module califorms_checker
  import califorms_pkg::*;
(
  input  meta_t            meta,
  input  logic [OFF_W-1:0] offset,
  input  logic [1:0]       size_log2,
  output meta_t            acc_bytes,
  output meta_t            hit_bytes,
  output logic             violation,
  output logic [OFF_W-1:0] first_bad
);
  always_comb begin
    logic [7:0] len;
    len       = 8'(1) << size_log2;
    acc_bytes = '0;
    for (int i = 0; i < LINE_BYTES; i++)
      acc_bytes[i] = (i >= int'(offset)) && (i < int'(offset) + int'(len));
    hit_bytes = acc_bytes & meta;
    violation = |hit_bytes;
    first_bad = '0;
    for (int i = LINE_BYTES - 1; i >= 0; i--)
      if (hit_bytes[i]) first_bad = OFF_W'(i);
  end

endmodule
