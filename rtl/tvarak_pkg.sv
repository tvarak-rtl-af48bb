// tvarak_pkg: types, geometry constants and checksum arithmetic shared by the
// Tvarak redundancy controller.
//
// Geometry. Lines are 64 B, pages 4 KB and checksums 4 B, so one line holds 16
// checksums and one page holds 64 lines (these numbers are the paper's). A NVM
// line address (LINE_ADDR_W bits) is laid out as
//     { row, dimm, line-in-page }
// i.e. consecutive 4 KB pages are striped over the NVM DIMMs, so one "row" of
// pages across all DIMMs is one RAID-5 parity stripe. This address map is a
// choice of this design; the paper only says that parity uses page striping.
//
// Checksums. All checksums are CRC-32C (Castagnoli polynomial 0x1EDC6F41) over
// the bytes of a line or page, byte 0 first and, within a byte, bit 7 first
// (non-reflected), initial value 0xFFFFFFFF, final XOR 0xFFFFFFFF. The bit order
// is this design's choice: it makes the "shift by N zero bits" needed for the
// incremental page-checksum update a plain GF(2) multiplication by x^N mod P.
// Because CRC is affine, for two messages of equal length
//     crc(new) = crc(old) ^ lin(new ^ old)
// where lin() is the CRC with zero initial value and zero final XOR. That is
// what lets the controller update checksums from a data diff alone.
package tvarak_pkg;

  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned PAGE_BYTES  = 4096;
  localparam int unsigned LINES_PER_PAGE = PAGE_BYTES / LINE_BYTES;  // 64
  localparam int unsigned LIP_W       = $clog2(LINES_PER_PAGE);      // 6
  localparam int unsigned CSUM_W      = 32;
  localparam int unsigned CSUMS_PER_LINE = LINE_BITS / CSUM_W;       // 16
  localparam int unsigned SLOT_W      = $clog2(CSUMS_PER_LINE);      // 4

  localparam int unsigned LINE_ADDR_W = 34;  // 1 TB of NVM in 64 B lines
  localparam int unsigned DIMM_W      = 2;   // 4 NVM DIMMs
  localparam int unsigned NUM_DIMMS   = 1 << DIMM_W;
  localparam int unsigned ROW_W       = LINE_ADDR_W - DIMM_W - LIP_W;
  localparam int unsigned PAGE_W      = LINE_ADDR_W - LIP_W;

  localparam logic [31:0] CRC32C_POLY = 32'h1EDC6F41;

  typedef logic [LINE_BITS-1:0]   line_t;
  typedef logic [LINE_ADDR_W-1:0] laddr_t;
  typedef logic [PAGE_W-1:0]      page_t;
  typedef logic [CSUM_W-1:0]      csum_t;

  // Requests from the LLC bank controller.
  typedef enum logic [1:0] {
    REQ_FILL = 2'd0,  // NVM -> LLC read of a line
    REQ_WB   = 2'd1,  // LLC -> NVM write-back of a dirty line
    REQ_L2WB = 2'd2   // dirty line from L2 lands in LLC: old and new value
  } req_kind_e;

  // Operations of a redundancy / data-diff line store (red_cache).
  typedef enum logic [1:0] {
    OP_LOOKUP = 2'd0,  // read a line if present, update LRU
    OP_WRITE  = 2'd1,  // update a present line or insert it, evicting a victim
    OP_TAKE   = 2'd2   // read a line if present and invalidate it
  } cache_op_e;

  // One DAX-mapped range, written by the file system.
  typedef struct packed {
    logic   valid;
    page_t  start_page;   // first physical page of the range
    page_t  num_pages;    // number of pages
    laddr_t clbuf_base;   // line address of its DAX-CL-checksum buffer
  } range_cfg_t;

  // Redundancy locations of one DAX line.
  typedef struct packed {
    laddr_t               sys_addr;   // line holding the page system-checksum
    logic [SLOT_W-1:0]    sys_slot;
    laddr_t               cl_addr;    // line holding the DAX-CL-checksum
    logic [SLOT_W-1:0]    cl_slot;
    laddr_t               par_addr;   // parity line of the stripe
    logic [LIP_W-1:0]     line_idx;   // position of the line in its page
  } red_loc_t;

  // One-cycle event pulses of the controller, for performance counters.
  typedef struct packed {
    logic nondax;         // request outside every DAX range
    logic dax_fill;       // DAX line read from NVM and verified
    logic dax_wb;         // DAX line written back with redundancy update
    logic verify_fail;    // DAX-CL-checksum mismatch (interrupt raised)
    logic oc_hit;         // redundancy line found in the on-controller cache
    logic oc_miss;
    logic llc_hit;        // ... found in the LLC redundancy partition
    logic llc_miss;       // ... read from NVM
    logic oc_evict;       // on-controller victim moved to the LLC partition
    logic llc_evict_wb;   // dirty LLC-partition victim written to NVM
    logic diff_new;       // data diff stored on an L2 write-back
    logic diff_merge;     // data diff merged with an existing one
    logic diff_hit;       // write-back found its data diff
    logic diff_fallback;  // write-back without data diff: old data read from NVM
    logic diff_evict;     // data diff evicted: line cleaned and written back
  } tvarak_ev_t;

  // One step of CRC over a single message bit.
  function automatic csum_t crc_step(csum_t r, logic b);
    logic fb;
    fb = r[31] ^ b;
    return fb ? ((r << 1) ^ CRC32C_POLY) : (r << 1);
  endfunction

  // CRC over one line starting from register value r (byte 0 first, MSB first).
  function automatic csum_t crc_line_from(csum_t r, line_t d);
    csum_t c;
    c = r;
    for (int i = 0; i < LINE_BYTES; i++)
      for (int b = 7; b >= 0; b--)
        c = crc_step(c, d[8*i + b]);
    return c;
  endfunction

  // lin(): CRC with zero init and no final XOR, i.e. M(x) * x^32 mod P.
  function automatic csum_t crc_lin_line(line_t d);
    return crc_line_from('0, d);
  endfunction

  // Full CRC-32C of one line.
  function automatic csum_t crc_full_line(line_t d);
    return crc_line_from('1, d) ^ 32'hFFFF_FFFF;
  endfunction

  // a * b mod P in GF(2)[x], a and b already reduced.
  function automatic csum_t gf_mulmod(csum_t a, csum_t b);
    csum_t r;
    r = '0;
    for (int i = CSUM_W - 1; i >= 0; i--) begin
      r = r[31] ? ((r << 1) ^ CRC32C_POLY) : (r << 1);
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  // x^(LINE_BITS * j) mod P for j = 0 .. LINES_PER_PAGE-1.
  function automatic logic [LINES_PER_PAGE-1:0][CSUM_W-1:0] line_shift_table();
    logic [LINES_PER_PAGE-1:0][CSUM_W-1:0] t;
    csum_t xl;
    xl = 32'd1;
    for (int i = 0; i < LINE_BITS; i++) xl = xl[31] ? ((xl << 1) ^ CRC32C_POLY) : (xl << 1);
    t[0] = 32'd1;
    for (int j = 1; j < LINES_PER_PAGE; j++) t[j] = gf_mulmod(t[j-1], xl);
    return t;
  endfunction

endpackage
