// tvarak: one Tvarak redundancy controller, placed beside one LLC bank.
//
// It sits between the LLC bank controller and the memory controller and keeps
// system-level redundancy for DAX-mapped NVM data: a CRC-32C system-checksum
// per 4 KB page (on the page's own DIMM), a RAID-5 parity page per stripe of
// pages across the NVM DIMMs, and, while a file is DAX-mapped, a CRC-32C
// DAX-CL-checksum per 64 B line so that a single line can be verified.
//
// Requests from the bank controller (req_*; one at a time, answered by a
// one-cycle rsp_valid):
//   REQ_FILL  line read NVM -> LLC. Non-DAX: plain read. DAX: fetch the line's
//             DAX-CL-checksum, read the line, compute its CRC (1 cycle) and
//             compare; on mismatch rsp_err and the irq pulse are raised
//             (irq_addr holds the line) and the data is still returned.
//   REQ_WB    dirty line written LLC -> NVM. Non-DAX: plain write. DAX: take
//             the line's data diff from the data-diff partition (if absent,
//             read the old line from NVM and diff it), compute the checksum
//             deltas (1 cycle), update system-checksum, DAX-CL-checksum and
//             parity in the redundancy caches, then write the line.
//   REQ_L2WB  a dirty line from L2 overwrites a line in the LLC; req_old is
//             the LLC's old copy, req_data the new one. For DAX lines the diff
//             old^new is stored in (or XORed into) the data-diff partition. If
//             that evicts another line's diff, that line is cleaned: Tvarak
//             asks the bank controller for it (clean_req_* is held until the
//             one-cycle clean_rsp_valid), which returns its data and marks it
//             clean (clean_rsp_*), and Tvarak writes it back
//             with the evicted diff exactly like a REQ_WB.
// Redundancy lines are looked up in the 4 KB on-controller cache (1 cycle),
// then taken from the LLC redundancy partition (27 cycles), then read from
// NVM; they are then installed in the on-controller cache. Its victims move to
// the LLC partition, whose dirty victims are written to NVM. Because servers
// are assumed to have backup power that flushes caches, updated redundancy may
// stay cached.
// The NVM port (mem_*) issues one request at a time; a request is held until
// mem_req_ready, and a read returns one mem_rsp_valid pulse with the data.
// Configuration by the file system: cfg_range_* writes one DAX range entry,
// cfg_csum_row_* the first page row of the checksum region of every DIMM.
//
// Follows the paper: the three kinds of redundancy, the lookup order on-
// controller cache -> LLC partition -> NVM, data diffs captured when L2
// write-backs reach the LLC and stored in an LLC partition, cleaning on diff
// eviction, sizes and latencies. Own choices: everything is serialised (one
// request and one NVM access at a time), the interfaces, the fallback that
// reads old data when no diff is found, exclusive placement between the
// on-controller cache and the LLC partition, and the order of the updates
// (system-checksum, DAX-CL-checksum, parity, then data).
// Not modelled: MESI coherence of redundancy lines between the controllers of
// different banks; a system with several banks needs it.
module tvarak
  import tvarak_pkg::*;
#(
  parameter int unsigned NUM_RANGES = 16,
  parameter int unsigned OC_SETS    = 16,
  parameter int unsigned OC_WAYS    = 4,
  parameter int unsigned BANK_BYTES = 2 * 1024 * 1024,
  parameter int unsigned LLC_WAYS   = 16,
  parameter int unsigned RED_WAYS   = 2,
  parameter int unsigned DIFF_WAYS  = 1,
  parameter int unsigned LLC_LAT    = 27
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // file-system configuration
  input  logic                          cfg_range_we,
  input  logic [$clog2(NUM_RANGES)-1:0] cfg_range_idx,
  input  range_cfg_t                    cfg_range,
  input  logic                          cfg_csum_row_we,
  input  logic [ROW_W-1:0]              cfg_csum_row_base,
  // LLC bank controller
  input  logic                          req_valid,
  output logic                          req_ready,
  input  req_kind_e                     req_kind,
  input  laddr_t                        req_addr,
  input  line_t                         req_data,
  input  line_t                         req_old,
  output logic                          rsp_valid,
  output line_t                         rsp_data,
  output logic                          rsp_err,
  output logic                          clean_req_valid,
  output laddr_t                        clean_req_addr,
  input  logic                          clean_rsp_valid,
  input  line_t                         clean_rsp_data,
  // interrupt to the OS on a failed verification
  output logic                          irq,
  output laddr_t                        irq_addr,
  // memory controller (NVM)
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output logic                          mem_req_we,
  output laddr_t                        mem_req_addr,
  output line_t                         mem_req_wdata,
  input  logic                          mem_rsp_valid,
  input  line_t                         mem_rsp_data,
  // event pulses
  output tvarak_ev_t                    ev
);

  typedef enum logic [4:0] {
    S_IDLE, S_MATCH, S_NVM_RD, S_NVM_RD_WAIT, S_NVM_WR,
    S_DIFF_REQ, S_DIFF_WAIT, S_DIFF_WR, S_DIFF_WR_WAIT, S_CLEAN,
    S_CSUM, S_CSUM_WAIT,
    S_OC_REQ, S_OC_WAIT, S_LLC_REQ, S_LLC_WAIT, S_RNVM_REQ, S_RNVM_WAIT,
    S_MOD, S_OC_WR, S_OC_WR_WAIT, S_VIC_LLC_REQ, S_VIC_LLC_WAIT, S_VIC_NVM,
    S_RESP
  } state_e;

  typedef enum logic [1:0] { R_SYS = 2'd0, R_CL = 2'd1, R_PAR = 2'd2 } red_kind_e;

  state_e     state_q;
  req_kind_e  kind_q;
  laddr_t     addr_q;
  line_t      new_q, old_q, data_q, diff_q;
  logic       flush_q;          // writing back a line whose diff was evicted
  red_loc_t   loc_q, loc_d;
  red_kind_e  step_q;
  laddr_t     red_addr;
  line_t      red_line_q;
  logic       red_dirty_q;
  csum_t      cl_word_q;        // stored DAX-CL-checksum of a filled line
  csum_t      page_delta_q, cl_delta_q;
  laddr_t     vic_addr_q, dvic_addr_q;
  line_t      vic_data_q, dvic_data_q;
  logic       vic_dirty_q;
  logic       err_q;
  logic [ROW_W-1:0] csum_row_base_q;
  logic       m_busy_q;         // the matcher is started once per visit of S_MATCH
  logic       m_out_hit_q;      // hit flag of the current request, kept after S_MATCH

  // ---------------------------------------------------------------- blocks
  logic       m_in_valid, m_out_valid, m_out_hit;
  range_cfg_t m_out_range;
  laddr_t     m_out_addr;

  range_matcher #(.NUM_RANGES(NUM_RANGES)) u_match (
    .clk, .rst_n,
    .cfg_we   (cfg_range_we),
    .cfg_idx  (cfg_range_idx),
    .cfg_entry(cfg_range),
    .in_valid (m_in_valid),
    .in_addr  (addr_q),
    .out_valid(m_out_valid),
    .out_hit  (m_out_hit),
    .out_range(m_out_range),
    .out_addr (m_out_addr)
  );

  redundancy_addr_gen u_agen (
    .addr         (m_out_addr),
    .range_i      (m_out_range),
    .csum_row_base(csum_row_base_q),
    .loc          (loc_d)
  );

  logic  cs_in_valid, cs_out_valid;
  csum_t cs_line_csum, cs_cl_delta, cs_page_delta;

  csum_unit u_csum (
    .clk, .rst_n,
    .in_valid  (cs_in_valid),
    .data      (data_q),
    .diff      (diff_q),
    .line_idx  (loc_q.line_idx),
    .out_valid (cs_out_valid),
    .line_csum (cs_line_csum),
    .cl_delta  (cs_cl_delta),
    .page_delta(cs_page_delta)
  );

  // on-controller redundancy cache
  logic      oc_ready, oc_req_valid, oc_rsp_valid, oc_rsp_hit, oc_rsp_dirty;
  logic      oc_ev_valid, oc_ev_dirty;
  cache_op_e oc_op;
  line_t     oc_rsp_data, oc_ev_data;
  laddr_t    oc_ev_addr;

  red_cache #(.SETS(OC_SETS), .WAYS(OC_WAYS)) u_oc (
    .clk, .rst_n,
    .ready      (oc_ready),
    .req_valid  (oc_req_valid),
    .req_op     (oc_op),
    .req_addr   (red_addr),
    .req_data   (red_line_q),
    .req_dirty  (red_dirty_q),
    .rsp_valid  (oc_rsp_valid),
    .rsp_hit    (oc_rsp_hit),
    .rsp_data   (oc_rsp_data),
    .rsp_dirty  (oc_rsp_dirty),
    .evict_valid(oc_ev_valid),
    .evict_addr (oc_ev_addr),
    .evict_data (oc_ev_data),
    .evict_dirty(oc_ev_dirty)
  );

  // LLC redundancy partition
  logic      rp_req_valid, rp_req_ready, rp_rsp_valid, rp_rsp_hit, rp_rsp_dirty;
  logic      rp_ev_valid, rp_ev_dirty;
  cache_op_e rp_op;
  laddr_t    rp_addr;
  line_t     rp_data, rp_rsp_data, rp_ev_data;
  logic      rp_dirty;
  laddr_t    rp_ev_addr;

  llc_partition #(.BANK_BYTES(BANK_BYTES), .LLC_WAYS(LLC_WAYS), .WAYS(RED_WAYS), .LAT(LLC_LAT)) u_red_part (
    .clk, .rst_n,
    .req_valid  (rp_req_valid),
    .req_ready  (rp_req_ready),
    .req_op     (rp_op),
    .req_addr   (rp_addr),
    .req_data   (rp_data),
    .req_dirty  (rp_dirty),
    .rsp_valid  (rp_rsp_valid),
    .rsp_hit    (rp_rsp_hit),
    .rsp_data   (rp_rsp_data),
    .rsp_dirty  (rp_rsp_dirty),
    .evict_valid(rp_ev_valid),
    .evict_addr (rp_ev_addr),
    .evict_data (rp_ev_data),
    .evict_dirty(rp_ev_dirty)
  );

  // LLC data-diff partition
  logic      dp_req_valid, dp_req_ready, dp_rsp_valid, dp_rsp_hit, dp_rsp_dirty;
  logic      dp_ev_valid, dp_ev_dirty;
  cache_op_e dp_op;
  line_t     dp_data, dp_rsp_data, dp_ev_data;
  laddr_t    dp_ev_addr;

  llc_partition #(.BANK_BYTES(BANK_BYTES), .LLC_WAYS(LLC_WAYS), .WAYS(DIFF_WAYS), .LAT(LLC_LAT)) u_diff_part (
    .clk, .rst_n,
    .req_valid  (dp_req_valid),
    .req_ready  (dp_req_ready),
    .req_op     (dp_op),
    .req_addr   (addr_q),
    .req_data   (dp_data),
    .req_dirty  (1'b1),
    .rsp_valid  (dp_rsp_valid),
    .rsp_hit    (dp_rsp_hit),
    .rsp_data   (dp_rsp_data),
    .rsp_dirty  (dp_rsp_dirty),
    .evict_valid(dp_ev_valid),
    .evict_addr (dp_ev_addr),
    .evict_data (dp_ev_data),
    .evict_dirty(dp_ev_dirty)
  );

  // ------------------------------------------------------ combinational I/O
  always_comb begin
    unique case (step_q)
      R_SYS:   red_addr = loc_q.sys_addr;
      R_CL:    red_addr = loc_q.cl_addr;
      default: red_addr = loc_q.par_addr;
    endcase
  end

  assign req_ready  = (state_q == S_IDLE) && oc_ready && rp_req_ready && dp_req_ready;
  assign m_in_valid = (state_q == S_MATCH) && !m_out_valid && !m_busy_q;
  assign cs_in_valid = (state_q == S_CSUM);

  assign oc_req_valid = (state_q == S_OC_REQ) || (state_q == S_OC_WR);
  assign oc_op        = (state_q == S_OC_WR) ? OP_WRITE : OP_LOOKUP;

  always_comb begin
    rp_req_valid = 1'b0;
    rp_op        = OP_TAKE;
    rp_addr      = red_addr;
    rp_data      = vic_data_q;
    rp_dirty     = vic_dirty_q;
    if (state_q == S_LLC_REQ) rp_req_valid = 1'b1;
    if (state_q == S_VIC_LLC_REQ) begin
      rp_req_valid = 1'b1;
      rp_op        = OP_WRITE;
      rp_addr      = vic_addr_q;
    end
  end

  always_comb begin
    dp_req_valid = (state_q == S_DIFF_REQ) || (state_q == S_DIFF_WR);
    dp_op        = (state_q == S_DIFF_WR) ? OP_WRITE : ((kind_q == REQ_WB) ? OP_TAKE : OP_LOOKUP);
    dp_data      = diff_q;
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = addr_q;
    mem_req_wdata = new_q;
    unique case (state_q)
      S_NVM_RD:   mem_req_valid = 1'b1;
      S_NVM_WR:   begin mem_req_valid = 1'b1; mem_req_we = 1'b1; end
      S_RNVM_REQ: begin mem_req_valid = 1'b1; mem_req_addr = red_addr; end
      S_VIC_NVM:  begin
        mem_req_valid = 1'b1; mem_req_we = 1'b1;
        mem_req_addr  = vic_addr_q; mem_req_wdata = vic_data_q;
      end
      default: ;
    endcase
  end

  assign clean_req_valid = (state_q == S_CLEAN);
  assign clean_req_addr  = dvic_addr_q;

  // line with one 32-bit word XORed
  function automatic line_t xor_word(input line_t l, input logic [SLOT_W-1:0] slot, input csum_t d);
    line_t r;
    r = l;
    r[CSUM_W*slot +: CSUM_W] = l[CSUM_W*slot +: CSUM_W] ^ d;
    return r;
  endfunction

  // state after the redundancy line of step_q has been handled
  function automatic state_e after_red(input req_kind_e k, input red_kind_e s);
    if (k == REQ_FILL) return S_NVM_RD;
    if (s == R_PAR)    return S_NVM_WR;
    return S_OC_REQ;
  endfunction

  // -------------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= S_IDLE;
      kind_q          <= REQ_FILL;
      addr_q          <= '0;
      flush_q         <= 1'b0;
      loc_q           <= '0;
      step_q          <= R_SYS;
      red_dirty_q     <= 1'b0;
      cl_word_q       <= '0;
      page_delta_q    <= '0;
      cl_delta_q      <= '0;
      vic_addr_q      <= '0;
      vic_dirty_q     <= 1'b0;
      dvic_addr_q     <= '0;
      err_q           <= 1'b0;
      m_busy_q        <= 1'b0;
      m_out_hit_q     <= 1'b0;
      new_q           <= '0;
      old_q           <= '0;
      data_q          <= '0;
      diff_q          <= '0;
      red_line_q      <= '0;
      vic_data_q      <= '0;
      dvic_data_q     <= '0;
      csum_row_base_q <= '0;
      rsp_valid       <= 1'b0;
      rsp_err         <= 1'b0;
      irq             <= 1'b0;
      irq_addr        <= '0;
      ev              <= '0;
    end else begin
      rsp_valid <= 1'b0;
      irq       <= 1'b0;
      ev        <= '0;
      if (cfg_csum_row_we) csum_row_base_q <= cfg_csum_row_base;
      if (m_in_valid) m_busy_q <= 1'b1;

      unique case (state_q)
        S_IDLE: if (req_valid && req_ready) begin
          kind_q  <= req_kind;
          addr_q  <= req_addr;
          new_q   <= req_data;
          old_q   <= req_old;
          flush_q <= 1'b0;
          err_q   <= 1'b0;
          state_q <= S_MATCH;
        end

        S_MATCH: if (m_out_valid) begin
          m_busy_q    <= 1'b0;
          m_out_hit_q <= m_out_hit;
          loc_q    <= loc_d;
          if (!m_out_hit) begin
            ev.nondax <= !flush_q;
            unique case (kind_q)
              REQ_FILL: state_q <= S_NVM_RD;
              REQ_WB:   state_q <= S_NVM_WR;
              default:  state_q <= flush_q ? S_NVM_WR : S_RESP;
            endcase
          end else if (flush_q) begin
            state_q <= S_CSUM;                    // diff already known
          end else begin
            unique case (kind_q)
              REQ_FILL: begin step_q <= R_CL; state_q <= S_OC_REQ; end
              default:  state_q <= S_DIFF_REQ;
            endcase
          end
        end

        // ---- data line from NVM: fill data, or old data when no diff
        S_NVM_RD: if (mem_req_ready) state_q <= S_NVM_RD_WAIT;
        S_NVM_RD_WAIT: if (mem_rsp_valid) begin
          if (kind_q == REQ_FILL) begin
            data_q  <= mem_rsp_data;
            state_q <= m_out_hit_q ? S_CSUM : S_RESP;
          end else begin
            diff_q  <= mem_rsp_data ^ new_q;
            state_q <= S_CSUM;
          end
        end

        S_NVM_WR: if (mem_req_ready) begin
          if (flush_q) begin
            ev.diff_evict <= 1'b1;
          end else if (m_out_hit_q) ev.dax_wb <= 1'b1;
          state_q <= S_RESP;
        end

        // ---- data-diff partition
        S_DIFF_REQ: if (dp_req_ready) state_q <= S_DIFF_WAIT;
        S_DIFF_WAIT: if (dp_rsp_valid) begin
          if (kind_q == REQ_WB) begin
            if (dp_rsp_hit) begin
              diff_q  <= dp_rsp_data;
              ev.diff_hit <= 1'b1;
              state_q <= S_CSUM;
            end else begin
              ev.diff_fallback <= 1'b1;
              state_q <= S_NVM_RD;
            end
          end else begin
            diff_q  <= (dp_rsp_hit ? dp_rsp_data : '0) ^ old_q ^ new_q;
            ev.diff_merge <= dp_rsp_hit;
            ev.diff_new   <= !dp_rsp_hit;
            state_q <= S_DIFF_WR;
          end
        end
        S_DIFF_WR: if (dp_req_ready) state_q <= S_DIFF_WR_WAIT;
        S_DIFF_WR_WAIT: if (dp_rsp_valid) begin
          if (dp_ev_valid) begin
            dvic_addr_q <= dp_ev_addr;
            dvic_data_q <= dp_ev_data;
            state_q     <= S_CLEAN;
          end else begin
            state_q <= S_RESP;
          end
        end

        // ---- cleaning the line whose diff was evicted
        S_CLEAN: if (clean_rsp_valid) begin
          new_q   <= clean_rsp_data;
          diff_q  <= dvic_data_q;
          addr_q  <= dvic_addr_q;
          flush_q <= 1'b1;
          state_q <= S_MATCH;
        end

        // ---- checksum unit
        S_CSUM: state_q <= S_CSUM_WAIT;
        S_CSUM_WAIT: if (cs_out_valid) begin
          cl_delta_q   <= cs_cl_delta;
          page_delta_q <= cs_page_delta;
          if (kind_q == REQ_FILL) begin
            err_q   <= (cs_line_csum != cl_word_q);
            ev.dax_fill    <= 1'b1;
            ev.verify_fail <= (cs_line_csum != cl_word_q);
            state_q <= S_RESP;
          end else begin
            step_q  <= R_SYS;
            state_q <= S_OC_REQ;
          end
        end

        // ---- fetch one redundancy line
        S_OC_REQ: state_q <= S_OC_WAIT;
        S_OC_WAIT: if (oc_rsp_valid) begin
          if (oc_rsp_hit) begin
            red_line_q  <= oc_rsp_data;
            red_dirty_q <= oc_rsp_dirty;
            ev.oc_hit   <= 1'b1;
            state_q     <= S_MOD;
          end else begin
            ev.oc_miss  <= 1'b1;
            state_q     <= S_LLC_REQ;
          end
        end
        S_LLC_REQ: if (rp_req_ready) state_q <= S_LLC_WAIT;
        S_LLC_WAIT: if (rp_rsp_valid) begin
          if (rp_rsp_hit) begin
            red_line_q  <= rp_rsp_data;
            red_dirty_q <= rp_rsp_dirty;
            ev.llc_hit  <= 1'b1;
            state_q     <= S_MOD;
          end else begin
            ev.llc_miss <= 1'b1;
            state_q     <= S_RNVM_REQ;
          end
        end
        S_RNVM_REQ: if (mem_req_ready) state_q <= S_RNVM_WAIT;
        S_RNVM_WAIT: if (mem_rsp_valid) begin
          red_line_q  <= mem_rsp_data;
          red_dirty_q <= 1'b0;
          state_q     <= S_MOD;
        end

        // ---- update it (the checksum/parity "adder") and put it in the cache
        S_MOD: begin
          unique case (step_q)
            R_SYS: begin
              red_line_q  <= xor_word(red_line_q, loc_q.sys_slot, page_delta_q);
              red_dirty_q <= 1'b1;
            end
            R_CL: begin
              if (kind_q == REQ_FILL) begin
                cl_word_q <= red_line_q[CSUM_W*loc_q.cl_slot +: CSUM_W];
              end else begin
                red_line_q  <= xor_word(red_line_q, loc_q.cl_slot, cl_delta_q);
                red_dirty_q <= 1'b1;
              end
            end
            default: begin
              red_line_q  <= red_line_q ^ diff_q;
              red_dirty_q <= 1'b1;
            end
          endcase
          state_q <= S_OC_WR;
        end
        S_OC_WR: state_q <= S_OC_WR_WAIT;
        S_OC_WR_WAIT: if (oc_rsp_valid) begin
          if (oc_ev_valid) begin
            vic_addr_q  <= oc_ev_addr;
            vic_data_q  <= oc_ev_data;
            vic_dirty_q <= oc_ev_dirty;
            ev.oc_evict <= 1'b1;
            state_q     <= S_VIC_LLC_REQ;
          end else begin
            step_q  <= red_kind_e'(step_q + 1'b1);
            state_q <= after_red(kind_q, step_q);
          end
        end
        S_VIC_LLC_REQ: if (rp_req_ready) state_q <= S_VIC_LLC_WAIT;
        S_VIC_LLC_WAIT: if (rp_rsp_valid) begin
          if (rp_ev_valid && rp_ev_dirty) begin
            vic_addr_q <= rp_ev_addr;
            vic_data_q <= rp_ev_data;
            state_q    <= S_VIC_NVM;
          end else begin
            step_q  <= red_kind_e'(step_q + 1'b1);
            state_q <= after_red(kind_q, step_q);
          end
        end
        S_VIC_NVM: if (mem_req_ready) begin
          ev.llc_evict_wb <= 1'b1;
          step_q  <= red_kind_e'(step_q + 1'b1);
          state_q <= after_red(kind_q, step_q);
        end

        S_RESP: begin
          rsp_valid <= 1'b1;
          rsp_err   <= err_q;
          irq       <= err_q;
          if (err_q) irq_addr <= addr_q;
          state_q   <= S_IDLE;
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign rsp_data = data_q;

  // NVM requests are held until accepted
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we));

endmodule
