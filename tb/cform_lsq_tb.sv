// cform_lsq_tb: random loads, stores and CFORMs on three lines pushed through the queue
// with random back-pressure. A queue in the testbench predicts, for every load and store,
// whether an older CFORM still in the queue sets one of its bytes; the dequeued order,
// contents and match marks are compared, and the queue-full condition must occur.
module cform_lsq_tb;
  import califorms_pkg::*;
  int checks = 0, failures = 0, n_match = 0, n_full = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     enq_valid, enq_ready, deq_valid, deq_ready, deq_match;
  mem_req_t enq_req, deq_req;

  cform_lsq #(.DEPTH(8)) dut (.clk, .rst_n, .enq_valid, .enq_ready, .enq_req,
                              .deq_valid, .deq_ready, .deq_req, .deq_cform_match(deq_match));

  mem_req_t ref_q [$];
  bit       ref_m [$];

  function automatic mem_req_t rand_req();
    mem_req_t r = '0;
    int s = $urandom_range(3, 0);
    r.op = mem_op_e'($urandom_range(2, 0));
    r.addr = {laddr_t'($urandom_range(2, 0)), 6'($urandom_range(63, 0) & ~((1 << s) - 1))};
    r.size_log2 = 2'(s);
    r.wdata = {$urandom, $urandom};
    r.r2_attr = {$urandom, $urandom} & {$urandom, $urandom};
    r.r3_mask = {$urandom, $urandom};
    return r;
  endfunction

  function automatic bit predict(mem_req_t r);
    if (r.op == OP_CFORM) return 0;
    foreach (ref_q[i]) begin
      if (ref_q[i].op == OP_CFORM && ref_q[i].addr[47:6] == r.addr[47:6])
        for (int b = 0; b < (1 << r.size_log2); b++)
          if (ref_q[i].r2_attr[r.addr[5:0] + b] && ref_q[i].r3_mask[r.addr[5:0] + b]) return 1;
    end
    return 0;
  endfunction

  initial begin
    enq_valid = 0; enq_req = '0; deq_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      enq_valid = ($urandom_range(3, 0) != 0);
      enq_req   = rand_req();
      deq_ready = (n < 2500) ? ($urandom_range(2, 0) == 0) : ($urandom_range(3, 0) != 0);
      #1;
      // both handshakes are judged on the settled state just before the clock edge
      if (!enq_ready) n_full++;
      if (deq_valid && deq_ready) begin
        checks++;
        if (ref_q.size() == 0 || deq_req !== ref_q[0] || deq_match !== ref_m[0]) begin
          failures++; $display("FAIL dequeue mismatch match=%b", deq_match);
        end
      end
      if (enq_valid && enq_ready) begin
        bit m;
        m = predict(enq_req);
        if (m) n_match++;
        ref_q.push_back(enq_req);
        ref_m.push_back(m);
      end
      if (deq_valid && deq_ready && ref_q.size() != 0) begin
        void'(ref_q.pop_front()); void'(ref_m.pop_front());
      end
    end
    checks++;
    if (n_match == 0 || n_full == 0) begin failures++; $display("FAIL match or full never seen"); end
    $display("matches=%0d full_cycles=%0d", n_match, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
