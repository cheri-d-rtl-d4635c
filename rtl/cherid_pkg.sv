// cherid_pkg -- types and constants shared by the CHERI-D load/store extension.
//
// CHERI-D adds three fields to a CHERI capability: an 8-bit object ID (the
// lifetime the capability may access), a 1-bit IDMODE (inline: the ID sits in
// the same 64-byte line as the allocation; in-page: the ID sits in a 64-byte
// table at the top of the 4 KiB page) and a 6-bit IDLOC (offset of the ID in
// that region). The field widths, the 64-byte line, the 4 KiB page, the
// quarantine value 255 and the 64-entry, 4-way, 16-IDs-per-entry ID buffer
// follow the paper. The bit placement of the fields inside a compressed
// capability is not modelled: the capability is carried here as an unpacked
// record (tag, base, top, cursor, ID fields), which is this design's choice.
package cherid_pkg;

  localparam int unsigned XLEN        = 64;   // virtual and physical address width
  localparam int unsigned ID_W        = 8;    // object ID width
  localparam int unsigned IDLOC_W     = 6;    // IDLOC field width
  localparam int unsigned LINE_BYTES  = 64;   // cache line (inline-ID region)
  localparam int unsigned LINE_OFF_W  = 6;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned PAGE_BYTES  = 4096; // page (in-page-ID region)
  localparam int unsigned PAGE_OFF_W  = 12;

  // Memory ID values with a fixed meaning.
  localparam logic [ID_W-1:0] ID_NONE       = 8'd0;    // privileged: no ID check
  localparam logic [ID_W-1:0] ID_LAST_USE   = 8'd254;  // last ID a slot may be issued under
  localparam logic [ID_W-1:0] ID_QUARANTINE = 8'd255;  // slot quarantined / exhausted

  typedef logic [XLEN-1:0]       addr_t;
  typedef logic [ID_W-1:0]       objid_t;
  typedef logic [IDLOC_W-1:0]    idloc_t;
  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] line_be_t;

  typedef enum logic {
    IDMODE_INLINE = 1'b0,   // ID address = line base + IDLOC - 1
    IDMODE_INPAGE = 1'b1    // ID address = page base + PAGE_SIZE - IDLOC - 1
  } idmode_e;

  // Capability as seen by the load/store path. top is exclusive.
  typedef struct packed {
    logic    tag;
    addr_t   base;
    addr_t   top;
    addr_t   cursor;
    objid_t  id;
    idmode_e idmode;
    idloc_t  idloc;
  } cap_t;

  // Capability-field instructions (executed by cherid_cap_ops).
  typedef enum logic [1:0] {
    CAPOP_SETCAPID = 2'd0,  // csetcapID
    CAPOP_GETCAPID = 2'd1,  // cgetcapID
    CAPOP_SETIDLOC = 2'd2,  // csetIDloc (privileged)
    CAPOP_GETIDLOC = 2'd3   // cgetIDloc
  } capop_e;

  // Memory operations (executed by cherid_lsu).
  typedef enum logic [2:0] {
    MOP_LOAD     = 3'd0,
    MOP_STORE    = 3'd1,
    MOP_SETMEMID = 3'd2,    // csetmemID: write the object ID byte
    MOP_GETMEMID = 3'd3,    // cgetmemID: read the object ID byte
    MOP_FENCE    = 3'd4     // fence: drains stores, flushes the ID buffer
  } mop_e;

  typedef enum logic [2:0] {
    EXC_NONE      = 3'd0,
    EXC_TAG       = 3'd1,   // untagged capability
    EXC_BOUNDS    = 3'd2,   // access outside capability bounds
    EXC_ALIGN     = 3'd3,   // misaligned access
    EXC_ID        = 3'd4,   // capability ID differs from memory ID
    EXC_ID_PERM   = 3'd5    // csetmemID through a non-zero-ID capability
  } exc_e;

  // Core-side memory request.
  typedef struct packed {
    mop_e        op;
    cap_t        cap;
    addr_t       offset;    // VA = cap.cursor + offset
    logic [1:0]  size;      // log2 of access bytes (1..8)
    logic [63:0] wdata;     // store data, or the new ID for csetmemID
  } mreq_t;

  typedef struct packed {
    exc_e        exc;
    logic [63:0] rdata;     // load data, or the memory ID for cgetmemID
  } mresp_t;

  // Line-wide request towards the data cache.
  typedef struct packed {
    logic     we;
    addr_t    addr;         // line-aligned physical address
    line_t    wdata;
    line_be_t be;
  } lreq_t;

endpackage
