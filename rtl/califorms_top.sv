// califorms_top: the core-side memory slice of a Califorms system.
//
// Memory operations from the core (load, store, CFORM) enter cform_lsq, which marks
// loads and stores that hit the to-be-set bytes of an older in-flight CFORM. They then
// execute one at a time in the Califorms L1 data cache (l1_dcache), whose metadata array
// holds one security bit per byte and whose fill and spill paths convert lines to and
// from the one-bit-per-line sentinel format that the L2 port carries. The L2 cache and
// everything beyond it are outside this module; its port is brought out as is.
//
// Each response reports violation (the access touched a security byte, the CFORM was
// misused, or the operation was marked by the queue) and exc, the privileged exception
// actually raised: exc = violation AND NOT exception-mask. The one-bit exception mask
// register is written by a privileged store (excmask_we); software sets it around
// whitelisted copy routines. A marked load returns zero.
// The structure (queue, L1 with fill/spill conversion, mask register, one bit per line
// beyond L1) follows the paper; the one-bit mask register, the queue depth and the
// blocking L1 are this design's choices.
// Timing: a load or store that hits the L1 answers 4 cycles after the L1 accepts it, plus
// one cycle through the queue.
module califorms_top
  import califorms_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned LSQ_DEPTH   = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  output logic     rsp_exc,
  output logic     rsp_marked,
  input  logic     excmask_we,
  input  logic     excmask_wdata,
  output logic     excmask,
  output logic     l2_req_valid,
  input  logic     l2_req_ready,
  output l2_req_t  l2_req,
  input  logic     l2_rsp_valid,
  input  l2_rsp_t  l2_rsp
);
  logic     q_valid, q_ready, q_match;
  mem_req_t q_req;

  cform_lsq #(.DEPTH(LSQ_DEPTH)) u_lsq (
    .clk, .rst_n,
    .enq_valid(req_valid), .enq_ready(req_ready), .enq_req(req),
    .deq_valid(q_valid), .deq_ready(q_ready), .deq_req(q_req), .deq_cform_match(q_match));

  logic     l1_rsp_valid;
  mem_rsp_t l1_rsp;

  l1_dcache #(.CACHE_BYTES(CACHE_BYTES)) u_l1 (
    .clk, .rst_n,
    .req_valid(q_valid), .req_ready(q_ready), .req(q_req),
    .rsp_valid(l1_rsp_valid), .rsp(l1_rsp),
    .l2_req_valid, .l2_req_ready, .l2_req, .l2_rsp_valid, .l2_rsp);

  // mark and address of the operation inside the (blocking) L1
  logic  cur_match, cur_load;
  addr_t cur_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_match <= 1'b0;
      cur_load  <= 1'b0;
      cur_addr  <= '0;
      excmask   <= 1'b0;
    end else begin
      if (q_valid && q_ready) begin
        cur_match <= q_match;
        cur_load  <= (q_req.op == OP_LOAD);
        cur_addr  <= q_req.addr;
      end
      if (excmask_we) excmask <= excmask_wdata;
    end
  end

  always_comb begin
    rsp_valid  = l1_rsp_valid;
    rsp        = l1_rsp;
    rsp_marked = cur_match;
    if (cur_match) begin
      rsp.violation = 1'b1;
      if (cur_load) rsp.rdata = '0;
      if (!l1_rsp.violation) rsp.fault_addr = cur_addr;
    end
    rsp_exc = rsp.violation && !excmask;
  end
endmodule
