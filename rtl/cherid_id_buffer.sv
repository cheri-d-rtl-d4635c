// cherid_id_buffer -- small set-associative buffer of in-page object IDs.
//
// Holds chunks of the 64-byte ID tables that sit at the top of each page. Per
// the paper it has 64 entries, is 4-way set-associative, each entry holds 16
// object IDs, it is looked up with the *virtual* address of the ID (so the
// check can run before address translation) and all entries are invalidated on
// a fence. Choices of this design: the 16 sets are indexed by the chunk number
// inside the table (ID address bits [5:4]) concatenated with the two lowest
// page-number bits (bits [13:12]), because bits [11:6] are the same for every
// in-page ID; the tag is the whole chunk address; a set is refilled in
// round-robin order; a fill of a chunk that is already present overwrites it.
//
// Interface and timing: the lookup is combinational (lk_hit / lk_id follow
// lk_addr in the same cycle); a fill and a flush take effect at the next clock
// edge, flush winning over a fill in the same cycle.
module cherid_id_buffer
  import cherid_pkg::*;
#(
  parameter int unsigned ENTRIES       = 64,
  parameter int unsigned WAYS          = 4,
  parameter int unsigned IDS_PER_ENTRY = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  // lookup
  input  addr_t  lk_addr,                         // virtual ID address
  output logic   lk_hit,
  output objid_t lk_id,
  // fill with the chunk that contains fill_addr
  input  logic   fill_valid,
  input  addr_t  fill_addr,
  input  logic [IDS_PER_ENTRY*ID_W-1:0] fill_data, // byte i = ID at chunk base + i
  // fence
  input  logic   flush
);

  localparam int unsigned SETS     = ENTRIES / WAYS;
  localparam int unsigned SET_W    = $clog2(SETS);
  localparam int unsigned CHUNK_W  = $clog2(IDS_PER_ENTRY);          // byte-in-entry bits
  localparam int unsigned TCHUNK_W = $clog2(LINE_BYTES / IDS_PER_ENTRY); // chunks per ID table
  localparam int unsigned PSET_W   = SET_W - TCHUNK_W;                // page-number index bits
  localparam int unsigned TAG_W    = XLEN - CHUNK_W;
  localparam int unsigned WAY_W    = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [SET_W-1:0] set_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [IDS_PER_ENTRY*ID_W-1:0] chunk_t;

  logic   valid_q [SETS][WAYS];
  tag_t   tag_q   [SETS][WAYS];
  chunk_t data_q  [SETS][WAYS];
  logic [WAY_W-1:0] rr_q [SETS];

  function automatic set_t set_of(addr_t a);
    return set_t'({a[PAGE_OFF_W +: PSET_W], a[CHUNK_W +: TCHUNK_W]});
  endfunction

  // ---------------- lookup ----------------
  set_t lk_set;
  tag_t lk_tag;
  logic [CHUNK_W-1:0] lk_byte;

  always_comb begin
    lk_set  = set_of(lk_addr);
    lk_tag  = lk_addr[XLEN-1:CHUNK_W];
    lk_byte = lk_addr[CHUNK_W-1:0];
    lk_hit  = 1'b0;
    lk_id   = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lk_set][w] && tag_q[lk_set][w] == lk_tag) begin
        lk_hit = 1'b1;
        lk_id  = data_q[lk_set][w][lk_byte*ID_W +: ID_W];
      end
    end
  end

  // ---------------- fill ----------------
  set_t fl_set;
  tag_t fl_tag;
  logic fl_present;
  logic [WAY_W-1:0] fl_way;

  always_comb begin
    fl_set     = set_of(fill_addr);
    fl_tag     = fill_addr[XLEN-1:CHUNK_W];
    fl_present = 1'b0;
    fl_way     = rr_q[fl_set];
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[fl_set][w] && tag_q[fl_set][w] == fl_tag) begin
        fl_present = 1'b1;
        fl_way     = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
    end else if (fill_valid) begin
      valid_q[fl_set][fl_way] <= 1'b1;
      if (!fl_present) rr_q[fl_set] <= WAY_W'((int'(rr_q[fl_set]) + 1) % WAYS);
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid && !flush) begin
      tag_q[fl_set][fl_way]  <= fl_tag;
      data_q[fl_set][fl_way] <= fill_data;
    end
  end

endmodule
