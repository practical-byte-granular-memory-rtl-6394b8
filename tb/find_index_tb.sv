// find_index_tb: random and directed vectors through both flavours of find_index
// (first 1, first 0); index, found and mask are compared with a loop-based reference.
module find_index_tb;
  int checks = 0, failures = 0;
  logic [63:0] vec, mask1, mask0;
  logic        found1, found0;
  logic [5:0]  idx1, idx0;

  find_index #(.W(64), .VALUE(1'b1)) dut1 (.vec, .found(found1), .index(idx1), .mask(mask1));
  find_index #(.W(64), .VALUE(1'b0)) dut0 (.vec, .found(found0), .index(idx0), .mask(mask0));

  task automatic check_one(logic [63:0] v);
    int e1, e0;
    logic [63:0] m1, m0;
    vec = v;
    #1;
    e1 = -1; e0 = -1;
    for (int i = 0; i < 64; i++) begin
      if (e1 < 0 && v[i])  e1 = i;
      if (e0 < 0 && !v[i]) e0 = i;
    end
    m1 = '1; if (e1 >= 0) m1[e1] = 1'b0;
    m0 = '1; if (e0 >= 0) m0[e0] = 1'b0;
    checks++;
    if (found1 != (e1 >= 0) || (e1 >= 0 && idx1 != 6'(e1)) || mask1 != m1) begin
      failures++; $display("FAIL first-1 vec=%h idx=%0d exp=%0d", v, idx1, e1);
    end
    checks++;
    if (found0 != (e0 >= 0) || (e0 >= 0 && idx0 != 6'(e0)) || mask0 != m0) begin
      failures++; $display("FAIL first-0 vec=%h idx=%0d exp=%0d", v, idx0, e0);
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    for (int i = 0; i < 64; i++) begin
      check_one(64'd1 << i);
      check_one(~(64'd1 << i));
      check_one(~64'd0 << i);
    end
    for (int n = 0; n < 2000; n++) begin
      automatic logic [63:0] v = {$urandom, $urandom};
      if (n % 3 == 0) v = v & {$urandom, $urandom} & {$urandom, $urandom};
      if (n % 3 == 1) v = v | {$urandom, $urandom} | {$urandom, $urandom};
      check_one(v);
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
