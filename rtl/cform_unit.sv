// cform_unit: the metadata update of the CFORM instruction, one 64-byte line at a time.
//
// CFORM R1, R2, R3 sets or clears security bytes in the line R1 points to. For every byte
// R3 says whether it may change (1 = allowed) and R2 says the new state (1 = security
// byte, 0 = normal byte). Per byte the K-map of the paper gives:
//   not allowed              -> state unchanged
//   allowed, set,   normal   -> becomes a security byte
//   allowed, unset, security -> becomes a normal byte
//   allowed, set,   security -> exception (setting an existing security byte)
//   allowed, unset, normal   -> exception (clearing a byte that is not a security byte)
// The K-map is the paper's. Making the exception precise, so that a faulting CFORM
// leaves every byte of the line unchanged, is this design's choice.
// Purely combinational; the L1 cache applies it in the cycle it reads the line's metadata.
module cform_unit
  import califorms_pkg::*;
(
  input  meta_t meta_in,
  input  meta_t r2_attr,
  input  meta_t r3_mask,
  output meta_t meta_out,
  output logic  exc,
  output meta_t exc_bytes
);
  meta_t updated;

  always_comb begin
    for (int i = 0; i < LINE_BYTES; i++) begin
      exc_bytes[i] = r3_mask[i] & (r2_attr[i] == meta_in[i]);
      updated[i]   = r3_mask[i] ? r2_attr[i] : meta_in[i];
    end
    exc      = |exc_bytes;
    meta_out = exc ? meta_in : updated;
  end
endmodule
