// fox_pkg -- types and constants shared by the FOX memory-controller blocks.
//
// FOX marks every physical address that belongs to a monitored, DAX-mapped
// file with a 9-bit "Metabits" field in otherwise unused high address bits.
// The Metabits value is the index of an Open Monitor File Table (OMFT) entry
// that describes the process-file pair (PID, inode, UID, GID, monitor flag).
// Address layout (bit 63 down to 0):
//   [63:52] sign extension (12 bits, unused by FOX)
//   [51:43] Metabits (9 bits, 0 = not monitored)
//   [42:0]  memory address (43 bits)
// The 9-bit field and the 43-bit memory space follow the address-layout
// figure of the FOX description; the exact encodings of the operation bit,
// the 114-bit table entry and the 32-byte log record are this design's own
// choices, made from the field widths listed for a monitor log.
package fox_pkg;

  localparam int unsigned PADDR_W      = 64;  // request address width
  localparam int unsigned META_W       = 9;   // Metabits
  localparam int unsigned META_LSB     = 43;  // lowest Metabit
  localparam int unsigned MEM_ADDR_W   = 43;  // real memory address
  localparam int unsigned OMFT_ENTRIES = 1 << META_W;
  localparam int unsigned LINE_BYTES   = 64;
  localparam int unsigned LINE_W       = LINE_BYTES * 8;
  localparam int unsigned TS_W         = 64;
  localparam int unsigned LOG_REC_BYTES = 32; // one monitor record
  localparam int unsigned LOG_REC_W    = LOG_REC_BYTES * 8;

  typedef logic [PADDR_W-1:0]    paddr_t;
  typedef logic [MEM_ADDR_W-1:0] maddr_t;
  typedef logic [META_W-1:0]     meta_t;
  typedef logic [LINE_W-1:0]     line_t;
  typedef logic [TS_W-1:0]       ts_t;

  // Memory operation carried in bit O.
  typedef enum logic {
    OP_READ  = 1'b0,
    OP_WRITE = 1'b1
  } op_e;

  // Monitor flag: bit 0 monitors reads, bit 1 monitors writes.
  typedef logic [1:0] mflag_t;
  localparam mflag_t MF_NONE  = 2'b00;
  localparam mflag_t MF_READ  = 2'b01;
  localparam mflag_t MF_WRITE = 2'b10;
  localparam mflag_t MF_RW    = 2'b11;

  // One OMFT line (also the content of register S).
  typedef struct packed {
    logic        valid;
    logic [15:0] pid;
    logic [31:0] inode;
    mflag_t      mflag;
    logic [31:0] uid;
    logic [30:0] gid;
  } omft_entry_t;

  // Request entering the Counter Request Queue.
  typedef struct packed {
    paddr_t addr;
    op_e    op;
  } mem_req_t;

  // Pre-monitor request: registers A, O, S and the timestamp.
  typedef struct packed {
    paddr_t      addr;
    op_e         op;
    omft_entry_t s;
    ts_t         ts;
  } pre_mon_t;

  // 32-byte monitor log record, two per 64-byte log block.
  typedef struct packed {
    logic [15:0] rsvd;
    logic [15:0] pid;
    logic [31:0] inode;
    ts_t         ts;
    op_e         op;
    logic [30:0] gid;
    logic [31:0] uid;
    paddr_t      blk_addr;
  } log_rec_t;

  // Line write leaving the Write Buffer Queue.
  typedef struct packed {
    paddr_t addr;
    line_t  data;
  } wb_req_t;

  function automatic meta_t meta_of(paddr_t a);
    return a[META_LSB +: META_W];
  endfunction

  function automatic maddr_t trim(paddr_t a);
    return a[MEM_ADDR_W-1:0];
  endfunction

  function automatic log_rec_t make_record(pre_mon_t p);
    log_rec_t r;
    r.rsvd     = '0;
    r.pid      = p.s.pid;
    r.inode    = p.s.inode;
    r.ts       = p.ts;
    r.op       = p.op;
    r.gid      = p.s.gid;
    r.uid      = p.s.uid;
    r.blk_addr = p.addr;
    return r;
  endfunction

endpackage
