// red_cache: set-associative write-back store of 64 B lines with true LRU.
//
// This is the Tvarak on-controller redundancy cache: with the default
// SETS = 16 and WAYS = 4 it holds 64 lines = 4 KB, the size the paper gives.
// The same module holds the LLC way-partitions (see llc_partition), where
// SETS is the number of LLC sets and WAYS the number of reserved ways.
//
// Interface: one request per cycle (req_valid, req_op, req_addr, req_data,
// req_dirty). The line address is split into set index (low bits) and tag.
//   OP_LOOKUP  returns hit, data and dirty bit; a hit becomes most recently used.
//   OP_WRITE   overwrites the line if present (dirty bits are ORed), otherwise
//              installs it in an invalid way or else the LRU way; the displaced
//              line is returned on evict_* (evict_valid only if it was valid).
//   OP_TAKE    returns the line like OP_LOOKUP and invalidates it.
// Timing: all rsp_* and evict_* outputs are registered and valid in the cycle
// after the request (the paper's 1-cycle on-controller cache latency).
// After reset the tag array is cleared one set per cycle; `ready` rises after
// SETS cycles and requests are ignored before that.
// Structure: one tag-array word per set (valid, dirty, LRU age and tag of every
// way), read and rewritten by each request, and a line data array, both
// without reset so that they map onto SRAM.
// Paper: size 4 KB and 1-cycle latency. Own choices: associativity (4 ways),
// LRU replacement (the LLC and private caches of the paper use LRU) and this
// request/response interface.
module red_cache
  import tvarak_pkg::*;
#(
  parameter int unsigned SETS = 16,
  parameter int unsigned WAYS = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      ready,
  input  logic      req_valid,
  input  cache_op_e req_op,
  input  laddr_t    req_addr,
  input  line_t     req_data,
  input  logic      req_dirty,
  output logic      rsp_valid,
  output logic      rsp_hit,
  output line_t     rsp_data,
  output logic      rsp_dirty,
  output logic      evict_valid,
  output laddr_t    evict_addr,
  output line_t     evict_data,
  output logic      evict_dirty
);

  localparam int unsigned SET_W   = $clog2(SETS);
  localparam int unsigned TAG_W   = LINE_ADDR_W - SET_W;
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned ENTRIES = SETS * WAYS;
  localparam int unsigned IDX_W   = $clog2(ENTRIES);

  // Per-way state; one word of WAYS of these per set (the tag array row).
  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [WAY_W-1:0] age;    // 0 = most recently used, WAYS-1 = least
    logic [TAG_W-1:0] tag;
  } way_meta_t;
  typedef way_meta_t [WAYS-1:0] set_meta_t;

  set_meta_t meta_q [SETS];
  line_t     data_q [ENTRIES];

  logic [SET_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  set_meta_t        cur, nxt, init_row;
  logic [WAYS-1:0]  hit_vec;
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim_way, use_way;
  logic             found_inv;
  logic             do_req;

  // after reset the tag array is cleared one set per cycle
  logic             init_done_q;
  logic [SET_W-1:0] init_set_q;

  assign ready   = init_done_q;
  assign do_req  = req_valid && init_done_q;
  assign set_idx = req_addr[SET_W-1:0];
  assign tag     = req_addr[LINE_ADDR_W-1:SET_W];

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      init_row[w]       = '0;
      init_row[w].age   = WAY_W'(w);
    end
  end

  // LRU ages of a set after way w is used
  function automatic set_meta_t touch(input set_meta_t m, input logic [WAY_W-1:0] w);
    set_meta_t r;
    r = m;
    for (int v = 0; v < WAYS; v++)
      if (m[v].age < m[w].age) r[v].age = m[v].age + 1'b1;
    r[w].age = '0;
    return r;
  endfunction

  always_comb begin
    cur        = meta_q[set_idx];
    hit_vec    = '0;
    hit_way    = '0;
    victim_way = '0;
    found_inv  = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      hit_vec[w] = cur[w].valid && (cur[w].tag == tag);
      if (hit_vec[w]) hit_way = WAY_W'(w);
    end
    // victim: first invalid way, otherwise the least recently used way
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!cur[w].valid) begin
        victim_way = WAY_W'(w);
        found_inv  = 1'b1;
      end
    end
    if (!found_inv)
      for (int w = 0; w < WAYS; w++)
        if (cur[w].age == WAY_W'(WAYS - 1)) victim_way = WAY_W'(w);
    hit     = |hit_vec;
    use_way = hit ? hit_way : victim_way;

    nxt = cur;
    unique case (req_op)
      OP_LOOKUP: if (hit) nxt = touch(cur, hit_way);
      OP_WRITE: begin
        nxt = touch(cur, use_way);
        nxt[use_way].valid = 1'b1;
        nxt[use_way].tag   = tag;
        nxt[use_way].dirty = hit ? (cur[use_way].dirty | req_dirty) : req_dirty;
      end
      OP_TAKE: if (hit) nxt[hit_way].valid = 1'b0;
      default: ;
    endcase
  end

  logic [IDX_W-1:0] hit_i, use_i;
  assign hit_i = IDX_W'(set_idx) * IDX_W'(WAYS) + IDX_W'(hit_way);
  assign use_i = IDX_W'(set_idx) * IDX_W'(WAYS) + IDX_W'(use_way);

  // Control state with reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done_q <= 1'b0;
      init_set_q  <= '0;
      rsp_valid   <= 1'b0;
      rsp_hit     <= 1'b0;
      rsp_dirty   <= 1'b0;
      evict_valid <= 1'b0;
      evict_dirty <= 1'b0;
      evict_addr  <= '0;
    end else begin
      if (!init_done_q) begin
        init_set_q <= init_set_q + 1'b1;
        if (init_set_q == SET_W'(SETS - 1)) init_done_q <= 1'b1;
      end
      rsp_valid   <= do_req;
      evict_valid <= 1'b0;
      if (do_req) begin
        rsp_hit     <= hit;
        rsp_dirty   <= hit && cur[hit_way].dirty;
        evict_valid <= (req_op == OP_WRITE) && !hit && cur[use_way].valid;
        evict_addr  <= {cur[use_way].tag, set_idx};
        evict_dirty <= cur[use_way].dirty;
      end
    end
  end

  // Tag array and line data: no reset, written and read like SRAM arrays.
  always_ff @(posedge clk) begin
    if (!init_done_q) meta_q[init_set_q] <= init_row;
    else if (do_req)  meta_q[set_idx]    <= nxt;
    if (do_req) begin
      rsp_data   <= data_q[hit_i];
      evict_data <= data_q[use_i];
      if (req_op == OP_WRITE) data_q[use_i] <= req_data;
    end
  end

  // A line is never present in two ways of a set.
  a_no_dup_tags: assert property (@(posedge clk) disable iff (!rst_n) do_req |-> $onehot0(hit_vec));

endmodule
