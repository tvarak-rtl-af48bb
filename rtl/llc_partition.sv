// llc_partition: a way-partition of one LLC bank reserved for Tvarak.
//
// Tvarak reserves some ways of every set of its LLC bank: 2 of the 16 ways for
// redundancy lines (system-checksums, DAX-CL-checksums, parity) that overflow
// the on-controller cache, and 1 of the 16 ways for data diffs. The
// application never looks up these ways, and Tvarak never looks up the
// application ways, so the partition behaves as a separate cache with the
// bank's set count and WAYS ways. It is built on red_cache (same operations
// and LRU replacement) and adds the LLC access latency.
//
// Interface: req_valid / req_ready handshake, one request in flight. An
// accepted request is answered LAT cycles later by a one-cycle rsp_valid pulse
// with rsp_hit / rsp_data / rsp_dirty and, for OP_WRITE, the displaced line on
// evict_*. req_ready is low while a request is in flight and, after reset,
// until the tag array has been cleared (one set per cycle, SETS cycles).
// Paper: 2 MB banks, 16 ways, 64 B lines, 27-cycle LLC latency, 2 redundancy
// ways and 1 data-diff way. Own choice: the handshake and one request in flight.
module llc_partition
  import tvarak_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 2 * 1024 * 1024,
  parameter int unsigned LLC_WAYS   = 16,
  parameter int unsigned WAYS       = 2,
  parameter int unsigned LAT        = 27
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
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

  localparam int unsigned SETS  = BANK_BYTES / LINE_BYTES / LLC_WAYS;
  localparam int unsigned CNT_W = $clog2(LAT + 1);

  logic             busy_q;
  logic [CNT_W-1:0] cnt_q;
  logic             accept;
  logic             store_ready;

  logic   c_rsp_valid, c_rsp_hit, c_rsp_dirty, c_ev_valid, c_ev_dirty;
  line_t  c_rsp_data, c_ev_data;
  laddr_t c_ev_addr;

  assign req_ready = !busy_q && store_ready;
  assign accept    = req_valid && req_ready;

  red_cache #(.SETS(SETS), .WAYS(WAYS)) u_store (
    .clk, .rst_n,
    .ready      (store_ready),
    .req_valid  (accept),
    .req_op, .req_addr, .req_data, .req_dirty,
    .rsp_valid  (c_rsp_valid),
    .rsp_hit    (c_rsp_hit),
    .rsp_data   (c_rsp_data),
    .rsp_dirty  (c_rsp_dirty),
    .evict_valid(c_ev_valid),
    .evict_addr (c_ev_addr),
    .evict_data (c_ev_data),
    .evict_dirty(c_ev_dirty)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      cnt_q       <= '0;
      rsp_valid   <= 1'b0;
      rsp_hit     <= 1'b0;
      rsp_dirty   <= 1'b0;
      evict_valid <= 1'b0;
      evict_dirty <= 1'b0;
      evict_addr  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (accept) begin
        busy_q <= 1'b1;
        cnt_q  <= CNT_W'(LAT - 1);
      end else if (busy_q) begin
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CNT_W'(1)) begin
          busy_q    <= 1'b0;
          rsp_valid <= 1'b1;
        end
      end
      // the store answers one cycle after the request; hold it until rsp_valid
      if (c_rsp_valid) begin
        rsp_hit     <= c_rsp_hit;
        rsp_dirty   <= c_rsp_dirty;
        evict_valid <= c_ev_valid;
        evict_dirty <= c_ev_dirty;
        evict_addr  <= c_ev_addr;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (c_rsp_valid) begin
      rsp_data   <= c_rsp_data;
      evict_data <= c_ev_data;
    end
  end

  initial assert (LAT >= 2) else $error("llc_partition: LAT must be at least 2");
  a_no_req_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy_q |-> !accept);

endmodule
