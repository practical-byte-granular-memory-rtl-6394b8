// califorms_checker_tb: every aligned offset and size against random and directed
// security-byte vectors; touched bytes, violation and first offending offset are
// compared with a reference loop.
module califorms_checker_tb;
  import califorms_pkg::*;
  int checks = 0, failures = 0;
  meta_t meta, acc, hitb;
  logic [5:0] off, first;
  logic [1:0] sz;
  logic viol;

  califorms_checker dut (.meta, .offset(off), .size_log2(sz), .acc_bytes(acc),
                         .hit_bytes(hitb), .violation(viol), .first_bad(first));

  initial begin
    for (int n = 0; n < 400; n++) begin
      meta = (n < 64) ? (64'd1 << n) : {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      for (int s = 0; s < 4; s++)
        for (int o = 0; o < 64; o += (1 << s)) begin
          meta_t ea;
          int ef;
          logic ev;
          off = 6'(o); sz = 2'(s);
          #1;
          ea = '0; ev = 0; ef = 0;
          for (int b = 0; b < (1 << s); b++) ea[o + b] = 1'b1;
          for (int b = (1 << s) - 1; b >= 0; b--) if (meta[o + b]) begin ev = 1; ef = o + b; end
          checks++;
          if (acc !== ea || hitb !== (ea & meta) || viol !== ev || (ev && first !== 6'(ef))) begin
            failures++;
            $display("FAIL meta=%h off=%0d size=%0d viol=%b first=%0d", meta, o, 1 << s, viol, first);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
