// l1_dcache_tb: random loads, stores and CFORMs on 16 lines that share 4 cache sets,
// against a byte-level shadow memory (data + security bit per byte).
// Checks: load data (security bytes read zero), violations and faulting addresses of
// loads, stores and CFORMs, the 4-cycle hit latency, and, at the end, that every line
// held by the L2 model is exactly the sentinel-format image of the shadow line.
// The L2 model stalls its request ready at random. Runs at the default 32KB size.
module l1_dcache_tb;
  import califorms_pkg::*;
  import califorms_ref_pkg::*;

  localparam int SETS = 32768 / 64;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_viol = 0, n_cform_exc = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic     req_valid, req_ready, rsp_valid;
  mem_req_t req;
  mem_rsp_t rsp;
  logic     l2_req_valid, l2_req_ready, l2_rsp_valid;
  l2_req_t  l2_req;
  l2_rsp_t  l2_rsp;

  l1_dcache dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp,
                 .l2_req_valid, .l2_req_ready, .l2_req, .l2_rsp_valid, .l2_rsp);
  l2_mem_model #(.LAT(3), .STALL(1'b1)) l2 (.clk, .rst_n, .req_valid(l2_req_valid),
                 .req_ready(l2_req_ready), .req(l2_req), .rsp_valid(l2_rsp_valid), .rsp(l2_rsp));

  // shadow memory, per line
  line_t  sh_data [laddr_t];
  meta_t  sh_meta [laddr_t];
  // which tag the tb expects in each set
  logic [47:0] resident [int];

  function automatic laddr_t pick_line();
    int set = $urandom_range(3, 0) * 37;
    int tg  = $urandom_range(3, 0);
    return laddr_t'(tg * SETS + set);
  endfunction

  task automatic ensure(laddr_t la);
    if (!sh_data.exists(la)) begin sh_data[la] = '0; sh_meta[la] = '0; end
  endtask

  task automatic issue(mem_req_t r, output mem_rsp_t got, output int lat, output bit was_hit);
    int set;
    laddr_t la;
    longint t0;
    la  = r.addr[ADDR_W-1:OFF_W];
    set = int'(la) % SETS;
    was_hit = resident.exists(set) && resident[set] == 48'(la);
    @(negedge clk);
    req_valid = 1; req = r;
    do @(posedge clk); while (!req_ready);
    t0 = cycle;
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    got = rsp;
    lat = int'(cycle - t0);
    resident[set] = 48'(la);
  endtask

  task automatic check_latency(bit was_hit, int lat);
    checks++;
    if (was_hit) begin
      n_hit++;
      if (lat != 4) begin failures++; $display("FAIL hit latency %0d", lat); end
    end else begin
      n_miss++;
      if (lat <= 4) begin failures++; $display("FAIL miss latency %0d", lat); end
    end
  endtask

  task automatic do_load_store(bit is_store);
    mem_req_t r;
    mem_rsp_t got;
    int lat, s, off, ef;
    bit h, ev;
    laddr_t la;
    logic [63:0] exp, lmask;
    la = pick_line(); ensure(la);
    s = $urandom_range(3, 0);
    lmask = (s == 3) ? '1 : ((64'd1 << (8 << s)) - 1);
    off = $urandom_range(63, 0) & ~((1 << s) - 1);
    r = '0;
    r.op = is_store ? OP_STORE : OP_LOAD;
    r.addr = {la, 6'(off)};
    r.size_log2 = 2'(s);
    r.wdata = {$urandom, $urandom};
    issue(r, got, lat, h);
    check_latency(h, lat);
    ev = 0; ef = 0; exp = '0;
    for (int b = (1 << s) - 1; b >= 0; b--) begin
      if (sh_meta[la][off + b]) begin ev = 1; ef = off + b; end
      else begin
        exp[8*b +: 8] = sh_data[la][8*(off + b) +: 8];
        if (is_store) sh_data[la][8*(off + b) +: 8] = r.wdata[8*b +: 8];
      end
    end
    if (ev) n_viol++;
    checks++;
    if (got.violation !== ev || (ev && got.fault_addr !== {la, 6'(ef)}) ||
        (!is_store && (got.rdata & lmask) !== exp)) begin
      failures++;
      $display("FAIL %s la=%h off=%0d size=%0d viol=%b/%b data=%h exp=%h", is_store ? "store" : "load",
               la, off, 1 << s, got.violation, ev, got.rdata, exp);
    end
  endtask

  task automatic do_cform(int n);
    mem_req_t r;
    mem_rsp_t got;
    int lat, ef;
    bit h, ev;
    laddr_t la;
    meta_t k, a, m;
    la = pick_line(); ensure(la);
    m = sh_meta[la];
    k = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
    a = ~m;                                       // legal toggle of allowed bytes
    if ($urandom_range(4, 0) == 0) a = {$urandom, $urandom};   // often illegal
    if ($urandom_range(1, 0) == 0) a = a | ~k;    // don't-care bits
    r = '0;
    r.op = OP_CFORM;
    r.addr = {la, 6'($urandom_range(63, 0))};
    r.r2_attr = a; r.r3_mask = k;
    issue(r, got, lat, h);
    check_latency(h, lat);
    ev = 0; ef = 0;
    for (int i = 63; i >= 0; i--) if (k[i] && a[i] == m[i]) begin ev = 1; ef = i; end
    if (ev) n_cform_exc++;
    else begin
      sh_meta[la] = (m & ~k) | (a & k);
      for (int i = 0; i < 64; i++) if (sh_meta[la][i] != m[i]) sh_data[la][8*i +: 8] = 8'h00;
    end
    checks++;
    if (got.violation !== ev || (ev && got.fault_addr !== {la, 6'(ef)})) begin
      failures++; $display("FAIL cform la=%h viol=%b exp=%b", la, got.violation, ev);
    end
  endtask

  initial begin
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      automatic int c = $urandom_range(9, 0);
      if (c < 3) do_cform(n);
      else if (c < 6) do_load_store(1);
      else do_load_store(0);
    end
    // flush every set by touching a line that is never otherwise used, then compare L2
    for (int s = 0; s < 4; s++) begin
      mem_req_t r; mem_rsp_t got; int lat; bit h;
      r = '0; r.op = OP_LOAD; r.addr = {laddr_t'(9 * SETS + s * 37), 6'd0};
      issue(r, got, lat, h);
    end
    foreach (sh_data[la]) begin
      line_t enc;
      logic  cf;
      logic [LINE_BITS:0] e;
      ref_encode(sh_data[la], sh_meta[la], enc, cf);
      e = l2.peek(la);
      checks++;
      if (e !== {cf, enc}) begin
        failures++; $display("FAIL L2 image of line %h meta=%h", la, sh_meta[la]);
      end
    end
    $display("hits=%0d misses=%0d violations=%0d cform_exc=%0d l2_reads=%0d l2_writes=%0d califormed_writes=%0d",
             n_hit, n_miss, n_viol, n_cform_exc, l2.reads, l2.writes, l2.cf_writes);
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_viol == 0 || n_cform_exc == 0 || l2.cf_writes == 0) begin
      failures++; $display("FAIL some mechanism never exercised");
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
