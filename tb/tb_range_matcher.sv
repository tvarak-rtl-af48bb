// tb_range_matcher: self-checking test of the DAX address-range comparators.
//
// Ranges are programmed with random starts and sizes; lookups include the
// first and last line of each range and the lines just outside it, plus random
// addresses. One lookup is issued every cycle (the pipeline is fully used) and
// each result is checked two cycles later against a reference search of the
// same table: hit flag, matching entry and the returned address.
module tb_range_matcher;
  import tvarak_pkg::*;

  localparam int unsigned NUM_RANGES = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                          cfg_we;
  logic [$clog2(NUM_RANGES)-1:0] cfg_idx;
  range_cfg_t                    cfg_entry;
  logic                          in_valid;
  laddr_t                        in_addr;
  logic                          out_valid, out_hit;
  range_cfg_t                    out_range;
  laddr_t                        out_addr;

  range_matcher dut (.*);

  range_cfg_t ref_tbl [NUM_RANGES];
  laddr_t     sent [$];
  int checks = 0;
  int failures = 0;
  int n_hit = 0, n_miss = 0;

  task automatic chk(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // reference: result for an address, lowest matching entry
  function automatic range_cfg_t ref_lookup(input laddr_t a, output logic hit);
    page_t p;
    p = a[LINE_ADDR_W-1:LIP_W];
    hit = 1'b0;
    ref_lookup = '0;
    for (int i = 0; i < NUM_RANGES; i++)
      if (!hit && ref_tbl[i].valid && p >= ref_tbl[i].start_page &&
          p < ref_tbl[i].start_page + ref_tbl[i].num_pages) begin
        hit = 1'b1;
        ref_lookup = ref_tbl[i];
      end
  endfunction

  // checker: every result two cycles after its lookup
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      logic h;
      range_cfg_t e;
      laddr_t a;
      a = sent.pop_front();
      e = ref_lookup(a, h);
      chk("out_addr", 128'(out_addr), 128'(a));
      chk("out_hit", 128'(out_hit), 128'(h));
      if (h) begin
        n_hit++;
        chk("out_range", 128'(out_range), 128'(e));
      end else n_miss++;
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    laddr_t probes [$];
    cfg_we = 1'b0; cfg_idx = '0; cfg_entry = '0; in_valid = 1'b0; in_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // 12 disjoint ranges, every 4th entry left invalid
    for (int i = 0; i < NUM_RANGES; i++) begin
      range_cfg_t e;
      e.valid      = (i % 4) != 3;
      e.start_page = page_t'(i * 100000 + $urandom_range(0, 1000));
      e.num_pages  = page_t'($urandom_range(1, 5000));
      e.clbuf_base = laddr_t'({$urandom, $urandom});
      ref_tbl[i] = e;
      @(negedge clk);
      cfg_we = 1'b1; cfg_idx = 4'(i); cfg_entry = e;
    end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int i = 0; i < NUM_RANGES; i++) begin
      page_t s, n;
      s = ref_tbl[i].start_page; n = ref_tbl[i].num_pages;
      probes.push_back({s, 6'd0});
      probes.push_back({s - 1'b1, 6'd63});
      probes.push_back({s + n - 1'b1, 6'd63});
      probes.push_back({s + n, 6'd0});
      for (int k = 0; k < 6; k++)
        probes.push_back({s + page_t'($urandom_range(0, int'(n) - 1)), 6'($urandom)});
    end
    for (int i = 0; i < 400; i++)
      probes.push_back(laddr_t'({$urandom_range(0, 1700000), 6'($urandom)}));
    // a single lookup: result exactly two cycles later
    @(negedge clk);
    in_valid = 1'b1; in_addr = probes[0];
    sent.push_back(probes[0]);
    @(negedge clk);
    in_valid = 1'b0;
    chk("not yet after 1 cycle", 128'(out_valid), 0);
    @(posedge clk); #1;
    chk("valid after 2 cycles", 128'(out_valid), 1);
    repeat (3) @(negedge clk);
    // back-to-back lookups, one per cycle
    foreach (probes[i]) begin
      @(negedge clk);
      in_valid = 1'b1; in_addr = probes[i];
      sent.push_back(probes[i]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    chk("all answered", 128'(sent.size()), 0);
    checks++;
    if (n_hit < 40 || n_miss < 40) begin
      failures++;
      $display("FAIL hit/miss mix %0d/%0d", n_hit, n_miss);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
