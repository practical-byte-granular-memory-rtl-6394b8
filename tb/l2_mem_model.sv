// l2_mem_model: behavioural stand-in for the L2 cache and everything beyond it, as seen
// from the L1's L2 port. It stores whole lines in the sentinel format together with
// their califormed bit (the one bit per line the levels beyond L1 keep) in an
// associative array; lines never written read as zero with the bit clear.
// A read request is answered with FLITS response beats after LAT cycles; a write takes
// FLITS request beats. Counters: reads, writes, califormed writes, writes in the 4+
// (sentinel) format and reads of califormed lines. The request ready toggles pseudo-randomly when STALL is set, to
// exercise the L1's handshake.
module l2_mem_model
  import califorms_pkg::*;
#(
  parameter int LAT   = 3,
  parameter bit STALL = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    req_valid,
  output logic    req_ready,
  input  l2_req_t req,
  output logic    rsp_valid,
  output l2_rsp_t rsp
);
  logic [LINE_BITS:0] mem [laddr_t];     // {cf, line}
  int reads = 0, writes = 0, cf_writes = 0, sentinel_writes = 0, cf_reads = 0;
  line_t wbuf;
  int    wbeat = 0;

  // pending read
  bit     rd_pend = 0;
  laddr_t rd_addr;
  int     rd_wait, rd_beat;

  function automatic logic [LINE_BITS:0] peek(laddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(laddr_t a, logic cf, line_t l);
    mem[a] = {cf, l};
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b0;
    else        req_ready <= STALL ? ($urandom_range(3, 0) != 0) : 1'b1;
  end

  always_ff @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        if (req.write) begin
          wbuf[FLIT_BITS*wbeat +: FLIT_BITS] = req.flit;
          if (req.last) begin
            line_t full;
            full = wbuf;
            full[FLIT_BITS*wbeat +: FLIT_BITS] = req.flit;
            mem[req.laddr] = {req.cf, full};
            writes++;
            if (req.cf) cf_writes++;
            if (req.cf && full[1:0] == 2'b11) sentinel_writes++;
            wbeat = 0;
          end else wbeat++;
        end else begin
          rd_pend = 1; rd_addr = req.laddr; rd_wait = LAT; rd_beat = 0; reads++;
          if (peek(req.laddr) >> LINE_BITS) cf_reads++;
        end
      end
      if (rd_pend) begin
        if (rd_wait > 0) rd_wait--;
        else begin
          logic [LINE_BITS:0] e;
          e = peek(rd_addr);
          rsp_valid <= 1'b1;
          rsp.cf    <= e[LINE_BITS];
          rsp.flit  <= e[FLIT_BITS*rd_beat +: FLIT_BITS];
          rsp.last  <= (rd_beat == FLITS - 1);
          rd_beat++;
          if (rd_beat == FLITS) rd_pend = 0;
        end
      end
    end
  end
endmodule
