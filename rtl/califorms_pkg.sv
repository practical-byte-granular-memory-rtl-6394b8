// califorms_pkg: types and constants shared by the Califorms memory-safety blocks.
//
// A cache line is 64 bytes. In the L1 data cache every byte has one extra bit that says
// whether it is a "security byte" (a blacklisted byte the program must never touch).
// Beyond the L1 a line carries a single "califormed" bit and, when that bit is set, a
// header in its first bytes that locates the security bytes (the sentinel format).
//
// Byte i of a line is always bits [8*i+7 : 8*i] of a 512-bit vector; bit i of a 64-bit
// metadata vector belongs to byte i. The line size, the header layout and the 16-byte
// L1-L2 flit follow the paper; the address width (48 bits, the x86-64 virtual address
// width) and the 64-bit core data port are this design's choices.
package califorms_pkg;

  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);   // 6
  localparam int unsigned ADDR_W     = 48;
  localparam int unsigned LADDR_W    = ADDR_W - OFF_W;       // line address width
  localparam int unsigned WORD_BYTES = 8;                    // widest scalar access
  localparam int unsigned FLIT_BYTES = 16;
  localparam int unsigned FLIT_BITS  = FLIT_BYTES * 8;
  localparam int unsigned FLITS      = LINE_BYTES / FLIT_BYTES;

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] meta_t;
  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [LADDR_W-1:0]    laddr_t;
  typedef logic [FLIT_BITS-1:0]  flit_t;

  // Number-of-security-bytes code held in bits [1:0] of byte 0 of a califormed L2 line.
  typedef enum logic [1:0] {
    CNT_1     = 2'b00,
    CNT_2     = 2'b01,
    CNT_3     = 2'b10,
    CNT_4PLUS = 2'b11
  } cnt_code_e;

  // Header word bit positions (bytes 0..3 read as a little-endian 32-bit word).
  localparam int unsigned HDR_CODE_LSB = 0;
  localparam int unsigned HDR_ADDR_LSB = 2;   // AddrK at bits [2+6K +: 6]
  localparam int unsigned HDR_SENT_LSB = 26;  // sentinel at [31:26], inside byte 3

  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,
    OP_STORE = 2'd1,
    OP_CFORM = 2'd2
  } mem_op_e;

  // Core-side memory request. For OP_CFORM addr is the line address (offset ignored),
  // r2_attr is the set(1)/unset(0) vector and r3_mask the allow mask of the instruction.
  typedef struct packed {
    mem_op_e                 op;
    addr_t                   addr;
    logic [1:0]              size_log2;  // 1, 2, 4 or 8 bytes
    logic [WORD_BYTES*8-1:0] wdata;
    meta_t                   r2_attr;
    meta_t                   r3_mask;
  } mem_req_t;

  typedef struct packed {
    logic [WORD_BYTES*8-1:0] rdata;      // security bytes read as zero
    logic                    violation;  // touched a security byte / misused CFORM
    addr_t                   fault_addr; // lowest offending byte (line address for CFORM)
  } mem_rsp_t;

  // L1 -> L2 request beat. A read is one beat; a write is FLITS beats, flit k on beat k.
  typedef struct packed {
    logic   write;
    laddr_t laddr;
    logic   cf;       // califormed bit of the written line
    flit_t  flit;
    logic   last;
  } l2_req_t;

  // L2 -> L1 read data beat, flits in order 0..FLITS-1.
  typedef struct packed {
    logic  cf;
    flit_t flit;
    logic  last;
  } l2_rsp_t;

  function automatic logic [7:0] get_byte(line_t l, int unsigned i);
    return l[8*i +: 8];
  endfunction

endpackage
