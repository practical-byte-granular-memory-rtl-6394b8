// l1_dcache: Califorms L1 data cache.
//
// A direct-mapped, write-back, write-allocate cache of CACHE_BYTES (32KB) with 64-byte
// lines. Beside the tag and data arrays it has a metadata array holding one bit per data
// byte (8 bytes per line) that marks security bytes. Lines are kept in this bit-vector
// form inside the L1 so that hits need no address arithmetic; a line is converted to the
// sentinel form by spill_unit when it is written back, and back by fill_unit when it is
// filled.
//
// Operations (req.op):
//   load   returns 8 bytes aligned to the low end of rdata; security bytes read as zero and
//          raise a violation.
//   store  writes its bytes except security bytes; touching one raises a violation.
//   cform  applies R2/R3 to the line's metadata (cform_unit) and zeroes the data of every
//          byte whose state changes; misuse raises a violation and changes nothing. Like a
//          store, it allocates the line on a miss. Security bytes therefore always hold
//          zero in the L1 (fills zero them too), and a byte that is cleared reads zero.
// fault_addr is the address of the lowest offending byte.
//
// Timing: blocking, one request at a time. A hit accepted (req_valid & req_ready) in cycle
// t answers with rsp_valid in cycle t+4, one cycle per stage of the hit path: address
// decode, tag + metadata read, compare + data access + check, align. A miss first writes
// back a dirty victim (one request beat per 16-byte flit, FLITS beats), then reads the line
// (one request beat, FLITS response beats), converts it and replays the hit path. The L2
// side uses valid/ready on requests; responses are always accepted.
// The cache size, direct mapping, metadata array, zero-on-security-byte loads, CFORM as a
// write-allocating store, conversion at fill/spill and 16-byte flits follow the paper. The
// blocking controller, write-back policy, in-order flits, the 4-cycle stage split and the
// zeroing of bytes a CFORM changes are this design's choices.
module l1_dcache
  import califorms_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  // core side
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  // L2 side (sentinel format)
  output logic     l2_req_valid,
  input  logic     l2_req_ready,
  output l2_req_t  l2_req,
  input  logic     l2_rsp_valid,
  input  l2_rsp_t  l2_rsp
);
  localparam int unsigned SETS  = CACHE_BYTES / LINE_BYTES;
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - OFF_W - IDX_W;
  localparam int unsigned BEAT_W = $clog2(FLITS);

  typedef enum logic [3:0] {
    S_IDLE, S_DEC, S_TAG, S_DATA, S_ALIGN,
    S_WB_RD, S_WB_SEND, S_FILL_REQ, S_FILL_WAIT, S_FILL_WR
  } state_e;

  state_e state;
  mem_req_t r;                       // request being served
  logic [SETS-1:0] valid_q, dirty_q;
  logic [BEAT_W-1:0] beat;
  line_t wb_buf, fill_buf;
  logic  wb_cf, fill_cf;
  logic [TAG_W-1:0] victim_tag;

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  logic [OFF_W-1:0] off;
  assign idx = r.addr[OFF_W +: IDX_W];
  assign tag = r.addr[OFF_W + IDX_W +: TAG_W];
  assign off = r.addr[OFF_W-1:0];

  // ---------------- arrays ----------------
  logic             tag_en, meta_en, data_en;
  logic [TAG_W-1:0] tag_we, tag_wdata, tag_rdata;
  meta_t            meta_we, meta_wdata, meta_rdata;
  line_t            data_we, data_wdata, data_rdata;

  sram_sp #(.DEPTH(SETS), .WIDTH(TAG_W)) u_tag (
    .clk, .en(tag_en), .we(tag_we), .addr(idx), .wdata(tag_wdata), .rdata(tag_rdata));
  sram_sp #(.DEPTH(SETS), .WIDTH(LINE_BYTES)) u_meta (
    .clk, .en(meta_en), .we(meta_we), .addr(idx), .wdata(meta_wdata), .rdata(meta_rdata));
  sram_sp #(.DEPTH(SETS), .WIDTH(LINE_BITS)) u_data (
    .clk, .en(data_en), .we(data_we), .addr(idx), .wdata(data_wdata), .rdata(data_rdata));

  // ---------------- hit-path logic ----------------
  logic hit;
  assign hit = valid_q[idx] && (tag_rdata == tag);

  meta_t            acc_bytes, hit_bytes;
  logic             chk_violation;
  logic [OFF_W-1:0] chk_first;
  califorms_checker u_chk (
    .meta(meta_rdata), .offset(off), .size_log2(r.size_log2),
    .acc_bytes, .hit_bytes, .violation(chk_violation), .first_bad(chk_first));

  meta_t cf_meta_out, cf_exc_bytes;
  logic  cf_exc;
  cform_unit u_cform (
    .meta_in(meta_rdata), .r2_attr(r.r2_attr), .r3_mask(r.r3_mask),
    .meta_out(cf_meta_out), .exc(cf_exc), .exc_bytes(cf_exc_bytes));

  logic [OFF_W-1:0] cf_first;
  always_comb begin
    cf_first = '0;
    for (int i = LINE_BYTES - 1; i >= 0; i--)
      if (cf_exc_bytes[i]) cf_first = OFF_W'(i);
  end

  // a CFORM zeroes the data of every byte whose state it changes
  line_t cf_zero_bits;
  always_comb
    for (int i = 0; i < LINE_BYTES; i++)
      cf_zero_bits[8*i +: 8] = {8{cf_meta_out[i] ^ meta_rdata[i]}};

  // store data and byte enables placed at the access offset
  line_t st_line, st_bits;
  always_comb begin
    st_line = line_t'(r.wdata) << (8 * off);
    for (int i = 0; i < LINE_BYTES; i++)
      st_bits[8*i +: 8] = {8{acc_bytes[i] & ~meta_rdata[i]}};
  end

  // ---------------- conversion ----------------
  line_t spill_data;
  logic  spill_cf;
  spill_unit u_spill (.l1_data(data_rdata), .l1_meta(meta_rdata),
                      .l2_data(spill_data), .l2_cf(spill_cf));

  line_t fill_data;
  meta_t fill_meta;
  fill_unit u_fill (.l2_data(fill_buf), .l2_cf(fill_cf),
                    .l1_data(fill_data), .l1_meta(fill_meta));

  // ---------------- array control ----------------
  always_comb begin
    tag_en = 1'b0;  tag_we = '0;  tag_wdata = tag;
    meta_en = 1'b0; meta_we = '0; meta_wdata = cf_meta_out;
    data_en = 1'b0; data_we = '0; data_wdata = st_line;
    unique case (state)
      S_DEC: begin
        tag_en  = 1'b1;
        meta_en = 1'b1;
      end
      S_TAG: begin
        if (hit) begin
          unique case (r.op)
            OP_LOAD:  data_en = 1'b1;
            OP_STORE: begin data_en = 1'b1; data_we = st_bits; end
            OP_CFORM: if (!cf_exc) begin
              meta_en = 1'b1; meta_we = '1;
              data_en = 1'b1; data_we = cf_zero_bits; data_wdata = '0;
            end
            default: ;
          endcase
        end else if (valid_q[idx] && dirty_q[idx]) begin
          data_en = 1'b1;                       // read the victim for write-back
        end
      end
      S_FILL_WR: begin
        tag_en  = 1'b1; tag_we  = '1;
        meta_en = 1'b1; meta_we = '1; meta_wdata = fill_meta;
        data_en = 1'b1; data_we = '1; data_wdata = fill_data;
      end
      default: ;
    endcase
  end

  // ---------------- controller ----------------
  assign req_ready = (state == S_IDLE);
  assign rsp_valid = (state == S_ALIGN);

  always_comb begin
    l2_req_valid = 1'b0;
    l2_req       = '0;
    unique case (state)
      S_WB_SEND: begin
        l2_req_valid = 1'b1;
        l2_req.write = 1'b1;
        l2_req.laddr = {victim_tag, idx};
        l2_req.cf    = wb_cf;
        l2_req.flit  = wb_buf[FLIT_BITS*beat +: FLIT_BITS];
        l2_req.last  = (beat == BEAT_W'(FLITS - 1));
      end
      S_FILL_REQ: begin
        l2_req_valid = 1'b1;
        l2_req.laddr = {tag, idx};
        l2_req.last  = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      r          <= '0;
      valid_q    <= '0;
      dirty_q    <= '0;
      beat       <= '0;
      rsp        <= '0;
      wb_buf     <= '0;
      wb_cf      <= 1'b0;
      fill_buf   <= '0;
      fill_cf    <= 1'b0;
      victim_tag <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          r     <= req;
          state <= S_DEC;
        end
        S_DEC: state <= S_TAG;
        S_TAG: begin
          if (hit) begin
            rsp <= '0;
            unique case (r.op)
              OP_LOAD, OP_STORE: begin
                rsp.violation  <= chk_violation;
                rsp.fault_addr <= {r.addr[ADDR_W-1:OFF_W], chk_first};
                if (r.op == OP_STORE && chk_violation == 1'b0) dirty_q[idx] <= 1'b1;
                if (r.op == OP_STORE && (acc_bytes & ~meta_rdata) != '0) dirty_q[idx] <= 1'b1;
              end
              OP_CFORM: begin
                rsp.violation  <= cf_exc;
                rsp.fault_addr <= {r.addr[ADDR_W-1:OFF_W], cf_first};
                if (!cf_exc) dirty_q[idx] <= 1'b1;
              end
              default: ;
            endcase
            state <= S_DATA;
          end else begin
            victim_tag <= tag_rdata;
            beat       <= '0;
            state      <= (valid_q[idx] && dirty_q[idx]) ? S_WB_RD : S_FILL_REQ;
          end
        end
        S_DATA: begin
          if (r.op == OP_LOAD) begin
            for (int b = 0; b < WORD_BYTES; b++)
              rsp.rdata[8*b +: 8] <= hit_bytes[int'(off) + b] ? 8'h00
                                                               : data_rdata[8*(int'(off) + b) +: 8];
          end
          state <= S_ALIGN;
        end
        S_ALIGN: state <= S_IDLE;
        S_WB_RD: begin
          wb_buf <= spill_data;
          wb_cf  <= spill_cf;
          state  <= S_WB_SEND;
        end
        S_WB_SEND: if (l2_req_ready) begin
          beat <= beat + 1'b1;
          if (l2_req.last) state <= S_FILL_REQ;
        end
        S_FILL_REQ: if (l2_req_ready) begin
          beat  <= '0;
          state <= S_FILL_WAIT;
        end
        S_FILL_WAIT: if (l2_rsp_valid) begin
          fill_buf[FLIT_BITS*beat +: FLIT_BITS] <= l2_rsp.flit;
          fill_cf <= l2_rsp.cf;
          beat    <= beat + 1'b1;
          if (l2_rsp.last) state <= S_FILL_WR;
        end
        S_FILL_WR: begin
          valid_q[idx] <= 1'b1;
          dirty_q[idx] <= 1'b0;
          state        <= S_DEC;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // L2 request handshake: a beat that is not accepted stays unchanged.
  a_l2_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    l2_req_valid && !l2_req_ready |=> l2_req_valid && $stable(l2_req));
  // Loads and stores are naturally aligned, so they never cross a line.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && req_ready && req.op != OP_CFORM |->
      (req.addr[2:0] & 3'((4'd1 << req.size_log2) - 4'd1)) == 3'd0);
  // Responses only come while a fill is outstanding.
  a_l2_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    l2_rsp_valid |-> state == S_FILL_WAIT);
endmodule
