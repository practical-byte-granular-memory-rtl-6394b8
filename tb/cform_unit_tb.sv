// cform_unit_tb: every K-map cell of the CFORM instruction, per byte, plus random lines.
// The expected next state and exception come from a case table written from the K-map.
module cform_unit_tb;
  import califorms_pkg::*;
  int checks = 0, failures = 0;
  meta_t meta_in, r2, r3, meta_out, exc_bytes;
  logic  exc;

  cform_unit dut (.meta_in, .r2_attr(r2), .r3_mask(r3), .meta_out, .exc, .exc_bytes);

  task automatic check_one(meta_t mi, meta_t a, meta_t k);
    meta_t exp_next, exp_excb;
    logic  exp_exc;
    meta_in = mi; r2 = a; r3 = k;
    #1;
    for (int i = 0; i < 64; i++) begin
      case ({k[i], a[i], mi[i]})               // allow, set, initial
        3'b000, 3'b010: begin exp_next[i] = 1'b0; exp_excb[i] = 1'b0; end // regular stays
        3'b001, 3'b011: begin exp_next[i] = 1'b1; exp_excb[i] = 1'b0; end // security stays
        3'b100:         begin exp_next[i] = 1'b0; exp_excb[i] = 1'b1; end // unset regular
        3'b101:         begin exp_next[i] = 1'b0; exp_excb[i] = 1'b0; end // unset security
        3'b110:         begin exp_next[i] = 1'b1; exp_excb[i] = 1'b0; end // set regular
        default:        begin exp_next[i] = 1'b1; exp_excb[i] = 1'b1; end // set security
      endcase
    end
    exp_exc = (exp_excb != '0);
    if (exp_exc) exp_next = mi;                // faulting CFORM changes nothing
    checks++;
    if (meta_out !== exp_next || exc !== exp_exc || exc_bytes !== exp_excb) begin
      failures++;
      $display("FAIL mi=%h r2=%h r3=%h out=%h exp=%h exc=%b", mi, a, k, meta_out, exp_next, exc);
    end
  endtask

  initial begin
    // each of the 8 cells alone at every byte position
    for (int c = 0; c < 8; c++)
      for (int i = 0; i < 64; i += 7)
        check_one(meta_t'(c[0]) << i, meta_t'(c[1]) << i, meta_t'(c[2]) << i);
    // legal set and unset of whole fields
    check_one('0, 64'h0000_00FF_0000_F00F, 64'h0000_00FF_0000_F00F);
    check_one(64'h0000_00FF_0000_F00F, '0, 64'h0000_00FF_0000_F00F);
    for (int n = 0; n < 3000; n++) begin
      automatic meta_t mi = {$urandom, $urandom};
      automatic meta_t k  = {$urandom, $urandom};
      automatic meta_t a  = (n % 2) ? (~mi & k) | (mi & ~k & {$urandom, $urandom}) : {$urandom, $urandom};
      if (n % 4 == 1) a = a & ~(mi & k);       // mostly legal
      check_one(mi, a, k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
