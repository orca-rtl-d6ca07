// orca_pkg: constants and record types shared by the ORCA cc-accelerator.
//
// The accelerator sees host memory through one coherent request/response
// channel whose unit is a 64-byte cache line. Every request carries a tag that
// comes back with its response, so responses may return in any order. Each
// request buffer is a ring of 1024 entries and the application processing
// unit keeps up to 256 requests in flight; both numbers are the paper's. The
// field widths (48-bit addresses, 64-bit keys, 384-bit values) and the
// encodings below are this design's own choices, sized so that one request,
// one key-value item and one hash bucket each fill exactly one line.
package orca_pkg;

  localparam int unsigned LINE_BITS       = 512;   // 64-byte cache line
  localparam int unsigned ADDR_W          = 48;    // byte address
  localparam int unsigned TAG_W           = 9;     // MSB = source port, low 8 = ORT tag
  localparam int unsigned RING_ENTRIES    = 1024;  // entries per request buffer
  localparam int unsigned RING_W          = $clog2(RING_ENTRIES);
  localparam int unsigned MAX_OUTSTANDING = 256;   // in-flight requests in the APU
  localparam int unsigned ORT_W           = $clog2(MAX_OUTSTANDING);
  localparam int unsigned PTR_ENTRY_BYTES = 4;     // pointer-buffer entry size
  localparam int unsigned KEY_W           = 64;
  localparam int unsigned VAL_W           = 384;
  localparam int unsigned BUF_ID_W        = 8;     // room for up to 256 request buffers

  // Memory request kinds on the coherent channel. SFENCE orders earlier
  // writes before later ones; MMIO_WR is an uncached write (the doorbell).
  typedef enum logic [1:0] {
    MEM_RD      = 2'd0,
    MEM_WR      = 2'd1,
    MEM_MMIO_WR = 2'd2,
    MEM_SFENCE  = 2'd3
  } mem_op_e;

  typedef struct packed {
    mem_op_e               op;
    logic [ADDR_W-1:0]     addr;   // line-aligned for RD/WR, 8-byte aligned for MMIO
    logic [LINE_BITS-1:0]  data;   // write data (MMIO uses [63:0])
    logic [TAG_W-1:0]      tag;
  } mem_req_t;

  // Reads return data; writes, MMIO writes and fences return an ack (data 0).
  typedef struct packed {
    logic [LINE_BITS-1:0]  data;
    logic [TAG_W-1:0]      tag;
  } mem_rsp_t;

  // Ring-tracker notification: 'count' new requests in buffer 'buf',
  // the first at index 'start'.
  typedef struct packed {
    logic [BUF_ID_W-1:0]   buf_id;
    logic [RING_W-1:0]     start;
    logic [RING_W:0]       count;
  } notif_t;

  // Key-value operations (request op byte).
  typedef enum logic [7:0] {
    KV_GET = 8'd1,
    KV_PUT = 8'd2
  } kv_op_e;

  typedef enum logic [7:0] {
    ST_OK        = 8'd0,
    ST_NOT_FOUND = 8'd1,
    ST_NO_SPACE  = 8'd2,
    ST_BAD_OP    = 8'd3
  } kv_status_e;

  // Response record handed from the APU to the RDMA SQ handler.
  typedef struct packed {
    logic [BUF_ID_W-1:0]   conn;    // connection = request buffer = QP index
    kv_op_e                op;
    kv_status_e            status;
    logic [KEY_W-1:0]      key;
    logic [VAL_W-1:0]      value;
  } kv_resp_t;

  // One hash-bucket slot: valid, 15-bit key tag, 48-bit item pointer.
  typedef struct packed {
    logic                  valid;
    logic [14:0]           ktag;
    logic [ADDR_W-1:0]     ptr;
  } slot_t;

  localparam int unsigned SLOTS_PER_BUCKET = 7;   // slot 7 holds the chain link

  // Accelerator configuration, written by host software at initialization.
  localparam int unsigned MAX_BUFS = 16;
  typedef struct packed {
    logic                  enable;
    logic                  ptr_mode;        // 1: pointer buffer is the cpoll region (Fig. 2b)
    logic [ADDR_W-1:0]     cpoll_base;      // physical
    logic [ADDR_W-1:0]     cpoll_bytes;
    logic [ADDR_W-1:0]     req_base;        // virtual, NUM_BUFS rings of 1024 x 64 B
    logic [ADDR_W-1:0]     table_base;      // virtual, hash table of buckets
    logic [31:0]           bucket_mask;     // number of buckets - 1
    logic [ADDR_W-1:0]     slab_base;       // virtual, item/bucket pool
    logic [ADDR_W-1:0]     slab_bytes;
    logic [ADDR_W-1:0]     sq_base;         // virtual, NUM_BUFS send queues
    logic [ADDR_W-1:0]     db_addr;         // physical, RNIC doorbell in its BAR
  } cfg_t;

  // Line layouts (this design's choice).
  function automatic logic [7:0] req_op(input logic [LINE_BITS-1:0] l);
    return l[7:0];
  endfunction
  function automatic logic [KEY_W-1:0] req_key(input logic [LINE_BITS-1:0] l);
    return l[71:8];
  endfunction
  function automatic logic [VAL_W-1:0] req_val(input logic [LINE_BITS-1:0] l);
    return l[455:72];
  endfunction
  function automatic logic [14:0] key_tag(input logic [63:0] h);
    return h[63:49];
  endfunction

endpackage
