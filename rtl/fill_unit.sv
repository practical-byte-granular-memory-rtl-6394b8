// fill_unit: converts a line arriving from L2 in the sentinel format back to the L1
// bitvector format (inverse of spill_unit).
//
// If the califormed bit is 0 the data is taken as is and no byte is a security byte.
// Otherwise the count code in bits [1:0] of byte 0 gives H = code+1 header bytes and the
// 6-bit locations Addr0..Addr(H-1) in bytes 0..3; each of these locations is a security
// byte. Only when the code is 11 the sentinel is read from bits [7:2] of byte 3 and
// compared, in parallel, with the low 6 bits of bytes 4..63 (60 comparators); every match
// is a security byte too. The original data of the header bytes that are normal bytes is
// fetched from the security locations outside the header (same ascending mapping as
// spill_unit) and every security byte is then set to zero.
// Header layout, the 11-only sentinel compare and the 60 comparators follow the paper.
// The paper's fill diagram derives the metadata of bytes 0..3 from the count code alone,
// while its fill algorithm marks the bytes at Addr0..3; the algorithm is followed, since
// only it restores lines whose security bytes are not bytes 0..H-1. Zeroing all security
// bytes, not only Addr0..3, is this design's choice. Purely combinational.
module fill_unit
  import califorms_pkg::*;
(
  input  line_t l2_data,
  input  logic  l2_cf,
  output line_t l1_data,
  output meta_t l1_meta
);
  logic [31:0] hdr;
  logic [1:0]  code;
  logic [2:0]  hlen;
  logic [5:0]  loc [4];
  logic [5:0]  sentinel;

  assign hdr      = l2_data[31:0];
  assign code     = hdr[HDR_CODE_LSB +: 2];
  assign hlen     = 3'(code) + 3'd1;
  assign sentinel = hdr[HDR_SENT_LSB +: 6];
  for (genvar k = 0; k < 4; k++) begin : g_loc
    assign loc[k] = hdr[HDR_ADDR_LSB + 6*k +: 6];
  end

  always_comb begin
    logic [2:0] nsec_in_hdr;
    logic [2:0] rank;
    logic [1:0] slot;
    nsec_in_hdr = '0;
    rank    = '0;
    slot    = '0;
    l1_meta = '0;
    l1_data = l2_data;
    if (l2_cf) begin
      for (int k = 0; k < 4; k++)
        if (k < int'(hlen)) l1_meta[loc[k]] = 1'b1;
      if (code == CNT_4PLUS)
        for (int i = 4; i < LINE_BYTES; i++)
          if (l2_data[8*i +: 6] == sentinel) l1_meta[i] = 1'b1;
      for (int k = 0; k < 4; k++)
        if (k < int'(hlen) && loc[k] < 6'(hlen)) nsec_in_hdr = nsec_in_hdr + 3'd1;
      for (int j = 0; j < 4; j++) begin
        if (j < int'(hlen) && !l1_meta[j]) begin
          slot = 2'(nsec_in_hdr + rank);
          l1_data[8*j +: 8] = l2_data[8*loc[slot] +: 8];
          rank = rank + 3'd1;
        end
      end
      for (int i = 0; i < LINE_BYTES; i++)
        if (l1_meta[i]) l1_data[8*i +: 8] = 8'h00;
    end
  end
endmodule
