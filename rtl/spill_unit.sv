// spill_unit: converts an evicted L1 line from the bitvector format (64 data bytes plus
// one security bit per byte) to the sentinel format used by L2 and beyond (64 data bytes
// plus one "califormed" bit).
//
// Steps (numbers as in the paper's spill algorithm):
//   1  califormed bit = OR of the 64 metadata bits. If 0 the line leaves unchanged.
//   7  sentinel: decode the low 6 bits of every normal byte into a 64-bit used-values
//      vector and take the first unused value. A line with 4+ security bytes has at most
//      60 normal bytes, so a free value always exists.
//   8  locate the first four security bytes with four chained find-index blocks.
//   9  move the data of the header bytes into security-byte locations and write the
//      header over bytes 0..H-1, where H = min(#security bytes, 4):
//        header word (bytes 0..3, little endian): [1:0] count code (00:1 01:2 10:3 11:4+),
//        [7:2] Addr0, [13:8] Addr1, [19:14] Addr2, [25:20] Addr3, [31:26] sentinel.
//      Header bits that the count does not use are written as zero.
//  11  every security byte after the fourth is overwritten with the sentinel (upper two
//      bits zero).
// The format, the count codes and the steps follow the paper. Two points are this
// design's own: only normal bytes feed the used-values vector, and the header bytes that
// hold normal data are moved, in ascending order, to the first-four security locations
// that lie outside the header, in ascending order. The paper's literal rule (byte j to the
// j-th security location) gives the same result whenever it does not overwrite data, and
// loses a byte when a security byte inside the header is preceded by a normal one.
// Purely combinational, one cycle, as in the paper's evaluated spill module.
module spill_unit
  import califorms_pkg::*;
(
  input  line_t l1_data,
  input  meta_t l1_meta,
  output line_t l2_data,
  output logic  l2_cf
);
  // ---- step 8: first four security bytes ----
  meta_t       fi_vec  [4];
  meta_t       fi_mask [4];
  logic        fi_found[4];
  logic [5:0]  loc     [4];

  assign fi_vec[0] = l1_meta;
  for (genvar g = 0; g < 4; g++) begin : g_find
    find_index #(.W(LINE_BYTES), .VALUE(1'b1)) u_find (
      .vec(fi_vec[g]), .found(fi_found[g]), .index(loc[g]), .mask(fi_mask[g]));
    if (g < 3) begin : g_chain
      assign fi_vec[g+1] = fi_vec[g] & fi_mask[g];
    end
  end

  // ---- step 7: sentinel ----
  meta_t      used;
  logic [5:0] sentinel;
  logic       sent_found;
  meta_t      sent_mask_unused;

  always_comb begin
    used = '0;
    for (int i = 0; i < LINE_BYTES; i++)
      if (!l1_meta[i]) used[l1_data[8*i +: 6]] = 1'b1;
  end

  find_index #(.W(LINE_BYTES), .VALUE(1'b0)) u_sentinel (
    .vec(used), .found(sent_found), .index(sentinel), .mask(sent_mask_unused));

  // ---- steps 1, 9, 11 ----
  logic [6:0]  nsec;       // number of security bytes
  logic [2:0]  hlen;       // header length H in bytes
  logic [1:0]  code;
  logic [31:0] hdr;
  logic [2:0]  nsec_in_hdr;

  always_comb begin
    nsec = '0;
    for (int i = 0; i < LINE_BYTES; i++) nsec = nsec + 7'(l1_meta[i]);
    hlen = (nsec >= 7'd4) ? 3'd4 : nsec[2:0];
    code = (nsec >= 7'd4) ? CNT_4PLUS : 2'(nsec - 7'd1);

    hdr = '0;
    hdr[HDR_CODE_LSB +: 2] = code;
    for (int k = 0; k < 4; k++)
      if (k < int'(hlen)) hdr[HDR_ADDR_LSB + 6*k +: 6] = loc[k];
    if (hlen == 3'd4) hdr[HDR_SENT_LSB +: 6] = sentinel;

    nsec_in_hdr = '0;
    for (int j = 0; j < 4; j++)
      if (j < int'(hlen) && l1_meta[j]) nsec_in_hdr = nsec_in_hdr + 3'd1;
  end

  always_comb begin
    logic [2:0] rank;
    logic [1:0] slot;
    rank    = '0;
    slot    = '0;
    l2_cf   = |l1_meta;
    l2_data = l1_data;
    if (l2_cf) begin
      // 11: mark the security bytes after the first four with the sentinel
      for (int i = 0; i < LINE_BYTES; i++)
        if (l1_meta[i] && (fi_vec[3][i] & fi_mask[3][i]))
          l2_data[8*i +: 8] = {2'b00, sentinel};
      // 9: relocate the normal header bytes
      for (int j = 0; j < 4; j++) begin
        if (j < int'(hlen) && !l1_meta[j]) begin
          slot = 2'(nsec_in_hdr + rank);
          l2_data[8*loc[slot] +: 8] = l1_data[8*j +: 8];
          rank = rank + 3'd1;
        end
      end
      // 10: header
      for (int j = 0; j < 4; j++)
        if (j < int'(hlen)) l2_data[8*j +: 8] = hdr[8*j +: 8];
    end
  end

  // A line with 4+ security bytes always has a free sentinel value.
  always_comb begin
    if (l2_cf && hlen == 3'd4) assert (sent_found && fi_found[3]);
  end
endmodule
