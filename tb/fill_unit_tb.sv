// fill_unit_tb: sentinel-format lines built by the reference encoder (and a few built by
// hand) are converted by fill_unit; the security-byte vector must equal the original one,
// every normal byte its original value, and every security byte must read zero.
module fill_unit_tb;
  import califorms_pkg::*;
  import califorms_ref_pkg::*;
  int checks = 0, failures = 0;
  line_t l2, d, orig;
  meta_t m, om;
  logic  cf;

  fill_unit dut (.l2_data(l2), .l2_cf(cf), .l1_data(d), .l1_meta(m));

  task automatic check_against(line_t od, meta_t omm, string what);
    line_t exp_d;
    exp_d = od;
    for (int i = 0; i < 64; i++) if (omm[i]) exp_d[8*i +: 8] = 8'h00;
    checks++;
    if (m !== omm || d !== exp_d) begin
      failures++;
      $display("FAIL %s meta=%h got_meta=%h\n  got %h\n  exp %h", what, omm, m, d, exp_d);
    end
  endtask

  initial begin
    // plain line: bit 0, nothing changes even if byte 0 looks like a header
    orig = rand_line(); orig[1:0] = 2'b11; l2 = orig; cf = 0; #1;
    check_against(orig, '0, "plain");
    // hand-built: one security byte at 63, original byte 0 = 8'hA5 stored there
    orig = rand_line(); l2 = orig; l2[7:0] = 8'((63 << 2) | 0); l2[511:504] = 8'hA5; cf = 1; #1;
    orig[7:0] = 8'hA5; check_against(orig, 64'd1 << 63, "one-at-63");
    // random lines through the reference encoder
    for (int n = 0; n < 3000; n++) begin
      orig = rand_line();
      om   = rand_meta(n % 10 == 0 ? 64 : 12);
      ref_encode(orig, om, l2, cf);
      #1;
      check_against(orig, om, "random");
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
