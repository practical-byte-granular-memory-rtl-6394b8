// spill_unit_tb: directed lines with the header laid out by hand (one, two, three, four
// and more security bytes, security bytes inside the header) and random lines checked
// against the reference encoder. Every random line is also decoded back and compared
// with the original normal bytes, so the conversion is checked to be lossless.
module spill_unit_tb;
  import califorms_pkg::*;
  import califorms_ref_pkg::*;
  int checks = 0, failures = 0;
  line_t d, o, exp_o, back;
  meta_t m, back_m;
  logic  cf, exp_cf;

  spill_unit dut (.l1_data(d), .l1_meta(m), .l2_data(o), .l2_cf(cf));

  task automatic compare(string what);
    checks++;
    if (o !== exp_o || cf !== exp_cf) begin
      failures++;
      $display("FAIL %s meta=%h\n  got %h\n  exp %h", what, m, o, exp_o);
    end
  endtask

  initial begin
    // no security byte: line unchanged, bit 0
    d = rand_line(); m = '0; exp_o = d; exp_cf = 0; #1; compare("plain");
    // one security byte at 5: byte0 = {Addr0=5, 00}, byte 5 = old byte 0
    d = rand_line(); m = 64'h20; #1;
    exp_o = d; exp_cf = 1; exp_o[7:0] = 8'h14; exp_o[47:40] = d[7:0]; compare("one");
    // two security bytes at 10 and 20: header 14 bits in bytes 0-1
    d = rand_line(); m = (64'd1 << 10) | (64'd1 << 20); #1;
    exp_o = d; exp_cf = 1;
    exp_o[15:0] = 16'(1 | (10 << 2) | (20 << 8));
    exp_o[87:80] = d[7:0]; exp_o[167:160] = d[15:8]; compare("two");
    // four security bytes at 0,1,2,3 (the header sits on security bytes)
    d = '0; m = 64'hF; #1;   // all normal bytes are 0 -> sentinel is 1
    exp_o = d; exp_cf = 1;
    exp_o[31:0] = 3 | (0 << 2) | (1 << 8) | (2 << 14) | (3 << 20) | (1 << 26);
    compare("four-in-header");
    // six security bytes 1,5,6,7,40,41 : byte 0 is normal and must move to 5
    d = rand_line(); m = (64'd1 << 1) | (64'hE0) | (64'd3 << 40); #1;
    ref_encode(d, m, exp_o, exp_cf); compare("non-prefix");
    checks++;
    if (o[47:40] !== d[7:0] || o[55:48] !== d[23:16] || o[63:56] !== d[31:24]) begin
      failures++; $display("FAIL relocation of header bytes");
    end
    // random lines
    for (int n = 0; n < 3000; n++) begin
      d = rand_line();
      m = rand_meta(n % 10 == 0 ? 64 : 12);
      if (n % 10 == 0) for (int i = 0; i < 64; i++) d[8*i +: 8] = 8'($urandom_range(3, 0)) << 6 | 8'(i % 50);
      #1;
      ref_encode(d, m, exp_o, exp_cf);
      compare("random");
      ref_decode(o, cf, back, back_m);
      checks++;
      if (back_m !== m) begin failures++; $display("FAIL roundtrip meta %h -> %h", m, back_m); end
      for (int i = 0; i < 64; i++)
        if (!m[i] && back[8*i +: 8] !== d[8*i +: 8]) begin
          failures++; $display("FAIL roundtrip byte %0d meta=%h", i, m); break;
        end
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
