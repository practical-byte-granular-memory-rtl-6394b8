// califorms_top_tb: end-to-end run of the whole slice at its default parameters (32KB
// L1, 8-entry queue) with the behavioural L2 model.
// A stream of loads, stores and CFORMs on 24 lines (sharing 4 cache sets) is pushed into
// the queue in bursts; a byte-level shadow memory, executed in program order, predicts
// every response, including the zero load value and exception mark the queue gives an
// operation that follows an in-flight CFORM on the same bytes. Between phases the queue
// is drained and the exception mask register toggled; exc must equal violation AND NOT
// mask. At the end every line in the L2 model must be the sentinel image of the shadow.
// Each mechanism is counted and must occur: L1 hit, miss, dirty write-back, califormed
// write-back, write-back in the 4+ (sentinel) format, califormed fill, load and store
// violations, CFORM misuse, queue mark, masked exception, queue full.
module califorms_top_tb;
  import califorms_pkg::*;
  import califorms_ref_pkg::*;

  localparam int SETS = 32768 / 64;
  int checks = 0, failures = 0;
  int n_ld_viol = 0, n_st_viol = 0, n_cf_exc = 0, n_mark = 0, n_masked = 0, n_full = 0;
  int n_hit = 0, n_miss = 0;

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
  l2_mem_model #(.LAT(4), .STALL(1'b1)) l2 (.clk, .rst_n, .req_valid(l2_req_valid),
                 .req_ready(l2_req_ready), .req(l2_req), .rsp_valid(l2_rsp_valid), .rsp(l2_rsp));

  line_t sh_data [laddr_t];
  meta_t sh_meta [laddr_t];

  typedef struct {
    mem_rsp_t r;
    logic     marked;
    mem_op_e  op;
    int       size_log2;
  } exp_t;
  exp_t     exp_q [$];
  mem_req_t pend_q [$];        // in the queue, not yet taken by the L1
  bit       mask_now = 0;

  function automatic laddr_t pick_line();
    return laddr_t'($urandom_range(5, 0) * SETS + $urandom_range(3, 0) * 101);
  endfunction

  function automatic mem_req_t gen();
    mem_req_t r = '0;
    laddr_t la = pick_line();
    int c = $urandom_range(9, 0);
    int s = $urandom_range(3, 0);
    meta_t m;
    if (!sh_meta.exists(la)) begin sh_data[la] = '0; sh_meta[la] = '0; end
    m = sh_meta[la];
    r.addr = {la, 6'($urandom_range(63, 0) & ~((1 << s) - 1))};
    r.size_log2 = 2'(s);
    r.wdata = {$urandom, $urandom};
    if (c < 3) begin
      r.op = OP_CFORM;
      r.r3_mask = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      r.r2_attr = ($urandom_range(7, 0) == 0) ? {$urandom, $urandom} : ~m;
      if (c == 0) r.r2_attr = r.r3_mask & ~m;      // set only, free bytes
    end else r.op = (c < 6) ? OP_STORE : OP_LOAD;
    return r;
  endfunction

  // execute one operation on the shadow in program order; returns the expected response
  function automatic exp_t model(mem_req_t r);
    exp_t e;
    laddr_t la = r.addr[47:6];
    int off = r.addr[5:0];
    bit mark = 0;
    if (!sh_meta.exists(la)) begin sh_data[la] = '0; sh_meta[la] = '0; end
    e.r = '0; e.op = r.op; e.size_log2 = r.size_log2;
    foreach (pend_q[i])
      if (r.op != OP_CFORM && pend_q[i].op == OP_CFORM && pend_q[i].addr[47:6] == la)
        for (int b = 0; b < (1 << r.size_log2); b++)
          if (pend_q[i].r2_attr[off + b] && pend_q[i].r3_mask[off + b]) mark = 1;
    if (r.op == OP_CFORM) begin
      meta_t m = sh_meta[la], k = r.r3_mask, a = r.r2_attr;
      for (int i = 63; i >= 0; i--) if (k[i] && a[i] == m[i]) begin
        e.r.violation = 1; e.r.fault_addr = {la, 6'(i)};
      end
      if (!e.r.violation) begin
        sh_meta[la] = (m & ~k) | (a & k);
        for (int i = 0; i < 64; i++) if (sh_meta[la][i] != m[i]) sh_data[la][8*i +: 8] = 8'h00;
      end
    end else begin
      for (int b = (1 << r.size_log2) - 1; b >= 0; b--) begin
        if (sh_meta[la][off + b]) begin e.r.violation = 1; e.r.fault_addr = {la, 6'(off + b)}; end
        else begin
          e.r.rdata[8*b +: 8] = sh_data[la][8*(off + b) +: 8];
          if (r.op == OP_STORE) sh_data[la][8*(off + b) +: 8] = r.wdata[8*b +: 8];
        end
      end
      if (r.op == OP_STORE) e.r.rdata = '0;
    end
    if (mark) begin
      if (!e.r.violation) e.r.fault_addr = r.addr;
      e.r.violation = 1;
      e.r.rdata = '0;
    end
    e.marked = mark;
    return e;
  endfunction

  task automatic check_rsp();
    exp_t e;
    logic [63:0] lm;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected response"); return; end
    e = exp_q.pop_front();
    lm = (e.size_log2 == 3) ? '1 : ((64'd1 << (8 << e.size_log2)) - 1);
    checks++;
    if (rsp.violation !== e.r.violation || rsp_marked !== e.marked ||
        (e.r.violation && rsp.fault_addr !== e.r.fault_addr) ||
        (e.op == OP_LOAD && (rsp.rdata & lm) !== e.r.rdata) ||
        rsp_exc !== (e.r.violation && !mask_now)) begin
      failures++;
      $display("FAIL op=%0d viol=%b/%b mark=%b/%b fa=%h/%h data=%h/%h exc=%b",
               e.op, rsp.violation, e.r.violation, rsp_marked, e.marked,
               rsp.fault_addr, e.r.fault_addr, rsp.rdata & lm, e.r.rdata, rsp_exc);
    end
    if (e.op == OP_LOAD && e.r.violation) n_ld_viol++;
    if (e.op == OP_STORE && e.r.violation) n_st_viol++;
    if (e.op == OP_CFORM && e.r.violation) n_cf_exc++;
    if (e.marked) n_mark++;
    if (e.r.violation && mask_now) n_masked++;
  endtask

  // one clock of traffic; everything is judged on the settled state before the edge
  bit fired = 0;
  task automatic cycle_step(bit offer);
    @(negedge clk);
    if (fired) begin req_valid = 0; fired = 0; end
    if (!req_valid && offer) begin req_valid = 1; req = gen(); end
    #1;
    if (rsp_valid) check_rsp();
    if (req_valid && !req_ready) n_full++;
    if (dut.u_l1.state == dut.u_l1.S_TAG) begin
      if (dut.u_l1.hit) n_hit++; else n_miss++;
    end
    if (dut.q_valid && dut.q_ready) void'(pend_q.pop_front());
    if (req_valid && req_ready) begin
      exp_q.push_back(model(req));
      pend_q.push_back(req);
      fired = 1;
    end
  endtask

  task automatic drain();
    int guard = 0;
    while ((exp_q.size() != 0 || (req_valid && !fired)) && guard < 5000) begin cycle_step(0); guard++; end
    @(negedge clk);
    if (fired) begin req_valid = 0; fired = 0; end
  endtask

  initial begin
    req_valid = 0; req = '0; excmask_we = 0; excmask_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 8; phase++) begin
      for (int n = 0; n < 3000; n++) cycle_step(($urandom_range(3, 0) != 0));
      drain();
      @(negedge clk); excmask_we = 1; excmask_wdata = (phase % 2 == 0);
      @(negedge clk); excmask_we = 0; mask_now = excmask_wdata;
      checks++;
      if (excmask !== mask_now) begin failures++; $display("FAIL mask register"); end
    end
    // push every line out of the L1 and compare the L2 images
    for (int s = 0; s < 4; s++) begin
      @(negedge clk);
      req_valid = 1; req = '0; req.op = OP_LOAD; req.addr = {laddr_t'(20 * SETS + s * 101), 6'd0};
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      exp_q.push_back(model(req));
      fired = 1;
      drain();
    end
    foreach (sh_data[la]) begin
      line_t enc; logic cf;
      ref_encode(sh_data[la], sh_meta[la], enc, cf);
      checks++;
      if (l2.peek(la) !== {cf, enc}) begin failures++; $display("FAIL L2 image of line %h", la); end
    end
    $display("hits=%0d misses=%0d l2_writes=%0d califormed_writes=%0d sentinel_writes=%0d califormed_fills=%0d",
             n_hit, n_miss, l2.writes, l2.cf_writes, l2.sentinel_writes, l2.cf_reads);
    $display("load_violations=%0d store_violations=%0d cform_exceptions=%0d queue_marks=%0d masked=%0d queue_full_cycles=%0d",
             n_ld_viol, n_st_viol, n_cf_exc, n_mark, n_masked, n_full);
    begin
      automatic int counts[12] = '{n_hit, n_miss, l2.writes, l2.cf_writes, l2.sentinel_writes, l2.cf_reads,
                         n_ld_viol, n_st_viol, n_cf_exc, n_mark, n_masked, n_full};
      foreach (counts[i]) begin
        checks++;
        if (counts[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
