// cform_lsq: in-order memory-operation queue with the CFORM match of the paper's
// load/store-queue change.
//
// Every entry carries its operation, so an is-CFORM bit is kept per entry. When a load or
// store enters, it is compared with every older entry still in the queue that is a CFORM:
// first on the 64-byte line address, then on the bytes that CFORM sets (R2 AND R3)
// against the bytes the access touches. On a match the new entry is marked
// (cform_match): it must raise the Califorms exception when it completes, and a load
// must see zero instead of any value a store-to-load path would forward. The queue
// hands entries to the L1 cache in program order.
// Marking on address match and the use of the CFORM's to-be-set bytes follow the paper.
// The queue depth, matching within the enqueue cycle, and the plain FIFO organisation
// (no speculative squash, no store-to-load forwarding of normal stores) are this design's
// choices.
// Handshakes: enq_valid/enq_ready, deq_valid/deq_ready; both may fire in one cycle.
module cform_lsq
  import califorms_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     enq_valid,
  output logic     enq_ready,
  input  mem_req_t enq_req,
  output logic     deq_valid,
  input  logic     deq_ready,
  output mem_req_t deq_req,
  output logic     deq_cform_match
);
  localparam int unsigned PTR_W = $clog2(DEPTH);

  mem_req_t         q_req   [DEPTH];
  logic             q_match [DEPTH];
  logic [DEPTH-1:0] q_valid;
  logic [PTR_W-1:0] head, tail;

  function automatic meta_t access_bytes(logic [OFF_W-1:0] off, logic [1:0] size_log2);
    meta_t m;
    for (int i = 0; i < LINE_BYTES; i++)
      m[i] = (i >= int'(off)) && (i < int'(off) + (1 << size_log2));
    return m;
  endfunction

  logic enq_fire, deq_fire, new_match;
  assign enq_ready = !q_valid[tail];
  assign deq_valid = q_valid[head];
  assign deq_req   = q_req[head];
  assign deq_cform_match = q_match[head];
  assign enq_fire  = enq_valid && enq_ready;
  assign deq_fire  = deq_valid && deq_ready;

  always_comb begin
    meta_t acc;
    acc = access_bytes(enq_req.addr[OFF_W-1:0], enq_req.size_log2);
    new_match = 1'b0;
    if (enq_req.op != OP_CFORM)
      for (int e = 0; e < DEPTH; e++)
        if (q_valid[e] && q_req[e].op == OP_CFORM &&
            q_req[e].addr[ADDR_W-1:OFF_W] == enq_req.addr[ADDR_W-1:OFF_W] &&
            (q_req[e].r2_attr & q_req[e].r3_mask & acc) != '0)
          new_match = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= '0;
      head    <= '0;
      tail    <= '0;
      for (int e = 0; e < DEPTH; e++) begin
        q_req[e]   <= '0;
        q_match[e] <= 1'b0;
      end
    end else begin
      if (deq_fire) begin
        q_valid[head] <= 1'b0;
        head          <= (head == PTR_W'(DEPTH - 1)) ? '0 : head + 1'b1;
      end
      if (enq_fire) begin
        q_valid[tail] <= 1'b1;
        q_req[tail]   <= enq_req;
        q_match[tail] <= new_match;
        tail          <= (tail == PTR_W'(DEPTH - 1)) ? '0 : tail + 1'b1;
      end
    end
  end

  a_deq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    deq_valid && !deq_ready |=> deq_valid && deq_req == $past(deq_req));
endmodule
