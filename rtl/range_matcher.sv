// range_matcher: the address-range comparators of a Tvarak controller.
//
// The file system tells Tvarak which physical page ranges are DAX-mapped and
// where each range's DAX-CL-checksum buffer lies. This block holds NUM_RANGES
// such entries (written through cfg_we / cfg_idx / cfg_entry) and checks every
// line address the LLC bank reads from or writes back to NVM against all of
// them in parallel. Lines outside every range are not DAX-mapped and get no
// redundancy work from Tvarak.
//
// Pipeline (2 cycles, the paper's address-range-matching latency):
//   stage 1: one "start <= page < start + num" comparator pair per entry,
//            the hit vector is registered;
//   stage 2: the lowest matching entry is selected and registered.
// out_valid / out_hit / out_range / out_addr appear two cycles after in_valid;
// a new lookup may start every cycle. Ranges are expected not to overlap (the
// file system's duty); if they do, the lowest index wins.
// Paper: comparators for range matching, 2-cycle latency, ranges and checksum
// buffers given by the file system. Own choices: the number of entries (16),
// the entry format and the configuration port.
module range_matcher
  import tvarak_pkg::*;
#(
  parameter int unsigned NUM_RANGES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_we,
  input  logic [$clog2(NUM_RANGES)-1:0] cfg_idx,
  input  range_cfg_t                    cfg_entry,
  input  logic                          in_valid,
  input  laddr_t                        in_addr,
  output logic                          out_valid,
  output logic                          out_hit,
  output range_cfg_t                    out_range,
  output laddr_t                        out_addr
);

  range_cfg_t tbl_q [NUM_RANGES];

  logic [NUM_RANGES-1:0] hit_d, hit_q;
  logic                  v1_q;
  laddr_t                addr1_q;
  page_t                 page;

  assign page = in_addr[LINE_ADDR_W-1:LIP_W];

  always_comb begin
    for (int i = 0; i < NUM_RANGES; i++)
      hit_d[i] = tbl_q[i].valid && (page >= tbl_q[i].start_page)
                 && ((page - tbl_q[i].start_page) < tbl_q[i].num_pages);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_RANGES; i++) tbl_q[i] <= '0;
      v1_q      <= 1'b0;
      hit_q     <= '0;
      addr1_q   <= '0;
      out_valid <= 1'b0;
      out_hit   <= 1'b0;
      out_range <= '0;
      out_addr  <= '0;
    end else begin
      if (cfg_we) tbl_q[cfg_idx] <= cfg_entry;
      // stage 1
      v1_q    <= in_valid;
      hit_q   <= hit_d;
      addr1_q <= in_addr;
      // stage 2
      out_valid <= v1_q;
      out_addr  <= addr1_q;
      out_hit   <= |hit_q;
      out_range <= '0;
      for (int i = NUM_RANGES - 1; i >= 0; i--)
        if (hit_q[i]) out_range <= tbl_q[i];
    end
  end

endmodule
