// tvarak_tb_body.svh: end-to-end test body shared by tb_tvarak (small caches)
// and tb_tvarak_full (every parameter at its default).
//
// The including module defines: OC_SETS, OC_WAYS, LLC_SETS (sets of the LLC
// partitions), N_OPS (number of random operations), ALL_EVENTS (1: every
// mechanism must occur; 0: only print the counts, for cache sizes at which a
// short test cannot fill the caches), the DUT instance `dut`
// and the signals declared below it expects.
//
// The test plays the LLC bank controller and the file system:
//  * it lays out one DAX range of 32 pages (8 RAID stripes of 4 pages, one of
//    them parity in each stripe), fills it with random data and writes
//    consistent system-checksums, DAX-CL-checksums and parity into the NVM
//    model, computed here with a byte-serial CRC-32C;
//  * it runs random fills, L2 write-backs and LLC write-backs on DAX lines
//    and on non-DAX lines, keeping its own copy of the LLC contents and of
//    what NVM should hold, and answers the controller's clean requests;
//  * every fill must return the expected data without error; one write is
//    made to get lost in NVM and the following fill must raise the interrupt
//    for that line;
//  * at the end every system-checksum, DAX-CL-checksum and parity word of the
//    range is recomputed from the expected NVM data and compared with the
//    controller's view of it (on-controller cache, else LLC partition, else
//    NVM);
//  * each mechanism of the controller (event outputs) must have occurred.

  localparam int unsigned START_PAGE = 64;       // row 16, DIMM 0
  localparam int unsigned NPAGES     = 32;       // rows 16..23
  localparam int unsigned CLBUF_BASE = 2000 * 64;
  localparam int unsigned CSUM_ROW0  = 1000;

  int checks = 0;
  int failures = 0;
  int ev_count [15];
  string ev_name [15] = '{"nondax", "dax_fill", "dax_wb", "verify_fail", "oc_hit", "oc_miss",
                          "llc_hit", "llc_miss", "oc_evict", "llc_evict_wb", "diff_new",
                          "diff_merge", "diff_hit", "diff_fallback", "diff_evict"};

  line_t truth [laddr_t];     // what NVM should hold for data lines
  line_t cur   [laddr_t];     // current value of a line in the LLC
  logic  dirty [laddr_t];
  laddr_t pool [$];           // DAX data lines used by the random operations

  task automatic chk(input string what, input logic [LINE_BITS-1:0] got, input logic [LINE_BITS-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ---- reference arithmetic, independent of the RTL
  function automatic logic [31:0] crc_upd(input logic [31:0] c, input line_t l);
    for (int i = 0; i < 64; i++) begin
      c = c ^ {l[8*i +: 8], 24'h0};
      for (int k = 0; k < 8; k++) c = c[31] ? ((c << 1) ^ 32'h1EDC6F41) : (c << 1);
    end
    return c;
  endfunction

  function automatic line_t tget(input laddr_t a);
    return truth.exists(a) ? truth[a] : '0;
  endfunction

  function automatic logic [31:0] page_crc(input longint unsigned pg);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int l = 0; l < 64; l++) c = crc_upd(c, tget(laddr_t'(pg * 64 + l)));
    return c ^ 32'hFFFF_FFFF;
  endfunction

  function automatic logic [31:0] line_crc(input line_t l);
    return crc_upd(32'hFFFF_FFFF, l) ^ 32'hFFFF_FFFF;
  endfunction

  function automatic bit is_parity_page(input longint unsigned pg);
    return (pg % 4) == (3 - (pg / 4) % 4);
  endfunction

  // byte offset arithmetic of the layout: sys checksum of page pg
  function automatic void sys_loc(input longint unsigned pg, output laddr_t a, output int slot);
    longint unsigned dimm, row, off;
    dimm = pg % 4; row = pg / 4;
    off  = longint'(CSUM_ROW0) * 4096 + row * 4;
    a    = laddr_t'(((off / 4096) * 4 + dimm) * 64 + (off % 4096) / 64);
    slot = int'((off % 64) / 4);
  endfunction

  function automatic void cl_loc(input laddr_t line, output laddr_t a, output int slot);
    longint unsigned off;
    off  = longint'(CLBUF_BASE) * 64 + (longint'(line) - longint'(START_PAGE) * 64) * 4;
    a    = laddr_t'(off / 64);
    slot = int'((off % 64) / 4);
  endfunction

  function automatic laddr_t par_loc(input laddr_t line);
    longint unsigned pg, row;
    pg = longint'(line) / 64; row = pg / 4;
    return laddr_t'((row * 4 + (3 - row % 4)) * 64 + longint'(line) % 64);
  endfunction

  // the controller's current copy of a redundancy line
  function automatic line_t eff(input laddr_t a);
    int s;
    s = int'(a % OC_SETS);
    for (int w = 0; w < OC_WAYS; w++)
      if (dut.u_oc.meta_q[s][w].valid && dut.u_oc.meta_q[s][w].tag == (a / OC_SETS))
        return dut.u_oc.data_q[s * OC_WAYS + w];
    s = int'(a % LLC_SETS);
    for (int w = 0; w < 2; w++)
      if (dut.u_red_part.u_store.meta_q[s][w].valid && dut.u_red_part.u_store.meta_q[s][w].tag == (a / LLC_SETS))
        return dut.u_red_part.u_store.data_q[s * 2 + w];
    return nvm.peek(a);
  endfunction

  // ---- driving the controller
  task automatic issue(input req_kind_e k, input laddr_t a, input line_t d, input line_t o,
                       output line_t rd, output logic err, output int lat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1; req_kind = k; req_addr = a; req_data = d; req_old = o;
    @(negedge clk);
    req_valid = 1'b0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    rd = rsp_data; err = rsp_err;
  endtask

  // the bank controller answers clean requests with the line and marks it clean
  always @(negedge clk) begin
    clean_rsp_valid <= 1'b0;
    if (clean_req_valid) begin
      laddr_t a;
      a = clean_req_addr;
      clean_rsp_valid <= 1'b1;
      clean_rsp_data  <= cur.exists(a) ? cur[a] : '0;
      checks++;
      if (!(dirty.exists(a) && dirty[a])) begin
        failures++;
        $display("FAIL clean request for a line that is not dirty: %0h", a);
      end
      if (cur.exists(a)) truth[a] = cur[a];
      dirty[a] = 1'b0;
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < 15; i++)
      if (ev[14 - i]) ev_count[i]++;
  end

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  task automatic do_fill(input laddr_t a, input bit expect_err);
    line_t rd; logic err; int lat;
    issue(REQ_FILL, a, '0, '0, rd, err, lat);
    chk("fill data", rd, tget(a));
    chk("fill err", LINE_BITS'(err), LINE_BITS'(expect_err));
    cur[a] = rd; dirty[a] = 1'b0;
  endtask

  task automatic do_l2wb(input laddr_t a);
    line_t rd, nw; logic err; int lat;
    if (!cur.exists(a)) do_fill(a, 1'b0);
    nw = rand_line();
    issue(REQ_L2WB, a, nw, cur[a], rd, err, lat);
    cur[a] = nw; dirty[a] = 1'b1;
  endtask

  task automatic do_wb(input laddr_t a);
    line_t rd; logic err; int lat;
    if (!(dirty.exists(a) && dirty[a])) return;
    truth[a] = cur[a];
    issue(REQ_WB, a, cur[a], '0, rd, err, lat);
    dirty[a] = 1'b0;
    cur.delete(a);
  endtask

  initial begin
    longint unsigned pg;
    laddr_t a, ra;
    int slot, lat;
    line_t rd, l;
    logic err;

    foreach (ev_count[i]) ev_count[i] = 0;
    req_valid = 1'b0; req_kind = REQ_FILL; req_addr = '0; req_data = '0; req_old = '0;
    cfg_range_we = 1'b0; cfg_range_idx = '0; cfg_range = '0;
    cfg_csum_row_we = 1'b0; cfg_csum_row_base = '0;
    lose_en = 1'b0; lose_addr = '0;

    // ---- NVM contents: random data in the range and in some non-DAX pages
    for (pg = START_PAGE; pg < START_PAGE + NPAGES; pg++)
      if (!is_parity_page(pg))
        for (int ln = 0; ln < 64; ln++) truth[laddr_t'(pg * 64 + ln)] = rand_line();
    for (int ln = 0; ln < 64; ln++) truth[laddr_t'(5 * 64 + ln)] = rand_line();
    foreach (truth[x]) nvm.poke(x, truth[x]);
    // consistent redundancy, as the file system keeps it
    for (pg = START_PAGE; pg < START_PAGE + NPAGES; pg++) begin
      if (is_parity_page(pg)) continue;
      sys_loc(pg, a, slot);
      l = nvm.peek(a); l[32*slot +: 32] = page_crc(pg); nvm.poke(a, l);
      for (int ln = 0; ln < 64; ln++) begin
        laddr_t dl;
        dl = laddr_t'(pg * 64 + ln);
        cl_loc(dl, a, slot);
        l = nvm.peek(a); l[32*slot +: 32] = line_crc(tget(dl)); nvm.poke(a, l);
        ra = par_loc(dl);
        nvm.poke(ra, nvm.peek(ra) ^ tget(dl));
      end
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_range_we = 1'b1; cfg_range_idx = '0;
    cfg_range = '{valid: 1'b1, start_page: page_t'(START_PAGE), num_pages: page_t'(NPAGES),
                  clbuf_base: laddr_t'(CLBUF_BASE)};
    cfg_csum_row_we = 1'b1; cfg_csum_row_base = ROW_W'(CSUM_ROW0);
    @(negedge clk);
    cfg_range_we = 1'b0; cfg_csum_row_we = 1'b0;

    // ---- non-DAX fill: exact latency (2-cycle match + NVM read + 5 cycles of control, counted from the accepting edge)
    issue(REQ_FILL, laddr_t'(5 * 64 + 3), '0, '0, rd, err, lat);
    chk("non-DAX fill data", rd, tget(laddr_t'(5 * 64 + 3)));
    chk("non-DAX fill latency", LINE_BITS'(lat), LINE_BITS'(NVM_RD + 7));
    // non-DAX write-back goes straight to NVM
    l = rand_line();
    issue(REQ_WB, laddr_t'(5 * 64 + 4), l, '0, rd, err, lat);
    truth[laddr_t'(5 * 64 + 4)] = l;
    repeat (NVM_WR + 2) @(negedge clk);
    chk("non-DAX write reached NVM", nvm.peek(laddr_t'(5 * 64 + 4)), l);

    // ---- DAX fill, then again with its DAX-CL-checksum line in the on-controller cache
    a = laddr_t'(START_PAGE * 64 + 7);
    do_fill(a, 1'b0);
    issue(REQ_FILL, a, '0, '0, rd, err, lat);
    chk("DAX fill (cached checksum) latency", LINE_BITS'(lat), LINE_BITS'(NVM_RD + 14));

    // ---- pool of DAX data lines with locality
    for (int i = 0; i < 24; i++) begin
      do pg = START_PAGE + $urandom_range(0, NPAGES - 1); while (is_parity_page(pg));
      pool.push_back(laddr_t'(pg * 64 + $urandom_range(0, 63)));
    end

    // a write-back with no captured diff (old data is read from NVM)
    a = pool[0];
    do_fill(a, 1'b0);
    cur[a] = rand_line(); dirty[a] = 1'b1;
    do_wb(a);
    // two L2 write-backs of one line: the second merges into the captured diff
    a = pool[2];
    do_l2wb(a);
    do_l2wb(a);

    // ---- random operations
    for (int it = 0; it < N_OPS; it++) begin
      int r;
      a = pool[$urandom_range(0, pool.size() - 1)];
      r = $urandom_range(0, 9);
      if (r < 3) begin
        // the LLC fetches only lines it does not hold: write back or drop first
        if (cur.exists(a)) begin
          if (dirty[a]) do_wb(a);
          else cur.delete(a);
        end
        do_fill(a, 1'b0);
      end
      else if (r < 7) do_l2wb(a);
      else            do_wb(a);
      if (it % 16 == 0) do_fill(laddr_t'(5 * 64 + $urandom_range(0, 63)), 1'b0);
    end

    // ---- a lost write must be detected by the next fill
    a = pool[1];
    do_l2wb(a);
    lose_en = 1'b1; lose_addr = a;
    do_wb(a);
    repeat (NVM_WR + 2) @(negedge clk);
    lose_en = 1'b0;
    truth[a] = nvm.peek(a);           // NVM still holds the old data
    @(negedge clk);
    fork
      begin
        line_t rd2; logic err2; int lat2;
        issue(REQ_FILL, a, '0, '0, rd2, err2, lat2);
        chk("lost write detected", LINE_BITS'(err2), 1);
      end
      begin
        @(posedge irq);
        chk("irq address", LINE_BITS'(irq_addr), LINE_BITS'(a));
      end
    join
    cur.delete(a);

    // ---- write back every dirty line so that NVM holds all data
    foreach (pool[i]) do_wb(pool[i]);

    // ---- redundancy check against a recomputation from the expected data
    for (pg = START_PAGE; pg < START_PAGE + NPAGES; pg++) begin
      if (is_parity_page(pg)) continue;
      if (pg * 64 <= longint'(a) && longint'(a) < pg * 64 + 64) continue;  // repaired page, skip
      sys_loc(pg, ra, slot);
      chk("system-checksum", LINE_BITS'(eff(ra)[32*slot +: 32]), LINE_BITS'(page_crc(pg)));
      for (int ln = 0; ln < 64; ln++) begin
        laddr_t dl;
        dl = laddr_t'(pg * 64 + ln);
        cl_loc(dl, ra, slot);
        chk("DAX-CL-checksum", LINE_BITS'(eff(ra)[32*slot +: 32]), LINE_BITS'(line_crc(tget(dl))));
      end
    end
    for (longint unsigned row = START_PAGE / 4; row < (START_PAGE + NPAGES) / 4; row++) begin
      if (row == (longint'(a) / 256)) continue;                            // stripe of the lost write
      for (int ln = 0; ln < 64; ln++) begin
        line_t x;
        x = '0;
        for (int d = 0; d < 4; d++)
          if (!is_parity_page(row * 4 + d)) x ^= tget(laddr_t'((row * 4 + d) * 64 + ln));
        chk("parity", eff(par_loc(laddr_t'(row * 256 + ln))), x);
      end
    end

    // ---- every mechanism must have happened
    foreach (ev_count[i]) begin
      $display("event %-14s %0d", ev_name[i], ev_count[i]);
      checks++;
      if (ALL_EVENTS && ev_count[i] == 0) begin
        failures++;
        $display("FAIL mechanism %s never happened", ev_name[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
