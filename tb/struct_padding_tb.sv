// struct_padding_tb: runs the software usage pattern the design exists for on the whole
// slice (califorms_top at its default parameters, behavioural L2 behind it).
// Two layouts are placed in memory:
//  * the "intelligent" layout: char c; int i; 3 security bytes; char buf[64];
//    2 security bytes; void (*fp)(); with the C alignment padding (bytes 1-3 and 77-79)
//    also blacklisted, 88 bytes in all;
//  * the "full" layout: eight 8-byte fields with p security bytes after each, for every
//    p from 1 to 7.
// Instances are put at several start offsets so that structs straddle line boundaries.
// For each instance the test (1) allocates it with one CFORM per touched line, (2) writes
// and reads every field, which must succeed, (3) overflows the first array field with
// byte stores and checks that the first store past its end faults with that byte's
// address and that the earlier ones did not, (4) evicts the lines by touching addresses
// one cache size away, so they go to the L2 in the one-bit-per-line format and come
// back, and repeats the field reads and the overflow, (5) repeats the overflow with the
// exception mask set, as a whitelisted copy routine would, where the violation is still
// reported but no exception is raised, and (6) frees the instance with unsetting CFORMs,
// after which every byte is accessible and the freed security bytes read 0.
// Expected results come from a byte map of security bytes and a byte shadow of memory,
// kept in the testbench. Counted and required: detections before and after a round
// trip through the L2, masked detections, califormed write-backs (also in the 4+
// sentinel format) and califormed fills.
module struct_padding_tb;
  import califorms_pkg::*;

  localparam int unsigned CACHE = 32768;
  int checks = 0, failures = 0;
  int n_det = 0, n_det_after_l2 = 0, n_masked = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     req_valid, req_ready, rsp_valid, rsp_exc, rsp_marked, excmask_we, excmask_wdata, excmask;
  mem_req_t req;
  mem_rsp_t rsp;
  logic     l2_req_valid, l2_req_ready, l2_rsp_valid;
  l2_req_t  l2_req;
  l2_rsp_t  l2_rsp;

  califorms_top dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp, .rsp_exc,
                     .rsp_marked, .excmask_we, .excmask_wdata, .excmask,
                     .l2_req_valid, .l2_req_ready, .l2_req, .l2_rsp_valid, .l2_rsp);
  l2_mem_model #(.LAT(6), .STALL(1'b1)) l2 (.clk, .rst_n, .req_valid(l2_req_valid),
                 .req_ready(l2_req_ready), .req(l2_req), .rsp_valid(l2_rsp_valid), .rsp(l2_rsp));

  bit         sec [addr_t];      // security bytes
  logic [7:0] mem [addr_t];      // byte shadow
  bit         mask_now = 0;

  function automatic logic [7:0] rd(addr_t a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction

  function automatic bit is_sec(addr_t a);
    return sec.exists(a) ? sec[a] : 1'b0;
  endfunction

  // one operation, issued alone; returns the response
  task automatic do_op(mem_op_e op, addr_t a, int sz, logic [63:0] wd, meta_t r2, meta_t r3,
                       output mem_rsp_t r, output logic exc);
    @(negedge clk);
    req_valid = 1;
    req = '0; req.op = op; req.addr = a; req.size_log2 = 2'(sz); req.wdata = wd;
    req.r2_attr = r2; req.r3_mask = r3;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    #1;
    while (!rsp_valid) begin @(negedge clk); #1; end
    r = rsp; exc = rsp_exc;
  endtask

  // set (set=1) or clear the security bytes [a, a+n) with one CFORM per line
  task automatic cform_range(addr_t a, int n, bit set);
    meta_t    m [laddr_t];
    mem_rsp_t r;
    logic     e;
    for (int i = 0; i < n; i++) begin
      laddr_t la = laddr_t'((a + i) >> 6);
      if (!m.exists(la)) m[la] = '0;
      m[la][(a + i) & 63] = 1'b1;
    end
    foreach (m[la]) begin
      do_op(OP_CFORM, {la, 6'd0}, 0, '0, set ? m[la] : '0, m[la], r, e);
      checks++;
      if (r.violation) begin failures++; $display("FAIL CFORM faulted on line %h", la); end
    end
    for (int i = 0; i < n; i++) begin sec[a + i] = set; mem[a + i] = 8'h00; end
  endtask

  // byte-wise write then read back of a field
  task automatic field_rw(addr_t a, int n);
    mem_rsp_t r;
    logic     e;
    for (int i = 0; i < n; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      do_op(OP_STORE, a + i, 0, {56'd0, v}, '0, '0, r, e);
      checks++;
      if (r.violation) begin failures++; $display("FAIL store to field byte %h faulted", a + i); end
      mem[a + i] = v;
    end
    for (int i = 0; i < n; i++) begin
      do_op(OP_LOAD, a + i, 0, '0, '0, '0, r, e);
      checks++;
      if (r.violation || r.rdata[7:0] !== rd(a + i)) begin
        failures++; $display("FAIL load of field byte %h: %h, expected %h", a + i, r.rdata[7:0], rd(a + i));
      end
    end
  endtask

  // byte stores from a until the first fault; the fault must be at the first security byte
  task automatic overflow(addr_t a, output bit detected);
    mem_rsp_t r;
    logic     e;
    addr_t    p;
    p = a;
    detected = 0;
    for (int i = 0; i < 80 && !detected; i++) begin
      do_op(OP_STORE, p, 0, 64'h41, '0, '0, r, e);
      checks++;
      if (r.violation !== is_sec(p) || e !== (is_sec(p) && !mask_now) ||
          (is_sec(p) && r.fault_addr !== p)) begin
        failures++;
        $display("FAIL overflow store %h: violation=%b exc=%b fault=%h", p, r.violation, e, r.fault_addr);
      end
      if (r.violation) detected = 1; else mem[p] = 8'h41;
      p++;
    end
    checks++;
    if (!detected) begin failures++; $display("FAIL overflow from %h never detected", a); end
  endtask

  // touch the addresses one cache size away so that the lines of [a, a+n) are evicted
  task automatic evict(addr_t a, int n);
    mem_rsp_t r;
    logic     e;
    for (addr_t x = a & ~addr_t'(63); x < a + addr_t'(n); x += 64)
      do_op(OP_LOAD, x + CACHE, 3, '0, '0, '0, r, e);
  endtask

  task automatic set_mask(bit v);
    @(negedge clk); excmask_we = 1; excmask_wdata = v;
    @(negedge clk); excmask_we = 0; mask_now = v;
  endtask

  // one struct instance, given as (offset, length, is-security) segments
  typedef struct { int off; int len; bit secb; } seg_t;

  task automatic run_instance(addr_t base, seg_t segs [$], int arr_off, int size);
    bit       d;
    mem_rsp_t r;
    logic     e;
    foreach (segs[i]) if (segs[i].secb) cform_range(base + segs[i].off, segs[i].len, 1);
    foreach (segs[i]) if (!segs[i].secb) field_rw(base + segs[i].off, segs[i].len);
    overflow(base + arr_off, d); if (d) n_det++;
    evict(base, size);
    foreach (segs[i]) if (!segs[i].secb) begin
      for (int b = 0; b < segs[i].len; b++) begin
        do_op(OP_LOAD, base + segs[i].off + b, 0, '0, '0, '0, r, e);
        checks++;
        if (r.violation || r.rdata[7:0] !== rd(base + segs[i].off + b)) begin
          failures++; $display("FAIL field byte %h after L2 round trip", base + segs[i].off + b);
        end
      end
    end
    overflow(base + arr_off, d); if (d) n_det_after_l2++;
    set_mask(1);
    overflow(base + arr_off, d); if (d) n_masked++;
    set_mask(0);
    // reading a security byte: fault and value 0
    foreach (segs[i]) if (segs[i].secb) begin
      do_op(OP_LOAD, base + segs[i].off, 0, '0, '0, '0, r, e);
      checks++;
      if (!r.violation || !e || r.rdata[7:0] !== 8'h00) begin
        failures++; $display("FAIL load of security byte %h", base + segs[i].off);
      end
    end
    foreach (segs[i]) if (segs[i].secb) cform_range(base + segs[i].off, segs[i].len, 0);
    evict(base, size);
    for (int b = 0; b < size; b++) begin
      do_op(OP_LOAD, base + b, 0, '0, '0, '0, r, e);
      checks++;
      if (r.violation || r.rdata[7:0] !== rd(base + b)) begin
        failures++; $display("FAIL freed byte %h: viol=%b %h/%h", base + b, r.violation, r.rdata[7:0], rd(base + b));
      end
    end
  endtask

  initial begin
    seg_t  segs [$];
    addr_t base;
    base = 48'h0001_0000;
    req_valid = 0; req = '0; excmask_we = 0; excmask_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // intelligent layout, at several start offsets
    segs = '{'{0, 1, 0}, '{1, 3, 1}, '{4, 4, 0}, '{8, 3, 1}, '{11, 64, 0}, '{75, 2, 1},
             '{77, 3, 1}, '{80, 8, 0}};
    for (int k = 0; k < 4; k++) begin
      run_instance(base + addr_t'(24 * k), segs, 11, 88);
      base += 256;
    end
    // full layout with 1..7 security bytes after each of eight 8-byte fields
    for (int p = 1; p <= 7; p++) begin
      int off;
      off = 0;
      segs = {};
      for (int f = 0; f < 8; f++) begin
        segs.push_back('{off, 8, 1'b0});
        segs.push_back('{off + 8, p, 1'b1});
        off += 8 + p;
      end
      run_instance(base + addr_t'(8 * p), segs, 0, off);
      base += 256;
    end
    $display("detections=%0d after_l2_round_trip=%0d masked=%0d califormed_writebacks=%0d sentinel_writebacks=%0d califormed_fills=%0d",
             n_det, n_det_after_l2, n_masked, l2.cf_writes, l2.sentinel_writes, l2.cf_reads);
    begin
      automatic int counts[6] = '{n_det, n_det_after_l2, n_masked, l2.cf_writes, l2.sentinel_writes, l2.cf_reads};
      foreach (counts[i]) begin
        checks++;
        if (counts[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    checks++;
    if (n_det != 11 || n_det_after_l2 != 11 || n_masked != 11) begin
      failures++; $display("FAIL expected 11 detections of each kind");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
