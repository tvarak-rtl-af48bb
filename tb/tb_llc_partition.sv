// tb_llc_partition: self-checking test of the LLC way-partition at the bank
// size of the evaluated system (2 MB, 16 ways -> 2048 sets, 27-cycle latency).
//
// Two instances are tested: the 2-way redundancy partition and the 1-way
// data-diff partition. Checks: every response arrives exactly LAT cycles after
// the request is accepted and req_ready is low in between; lines written can be
// read back; a third line in a 2-way set evicts the least recently used one
// with its data and dirty bit; a second line in a 1-way set evicts the first;
// OP_TAKE returns and removes a line.
module tb_llc_partition;
  import tvarak_pkg::*;

  localparam int unsigned LAT  = 27;
  localparam int unsigned SETS = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // one request bundle drives both instances; sel picks which one is valid
  logic      req_valid [2];
  logic      req_ready [2];
  cache_op_e req_op;
  laddr_t    req_addr;
  line_t     req_data;
  logic      req_dirty;
  logic      rsp_valid [2], rsp_hit [2], rsp_dirty [2], evict_valid [2], evict_dirty [2];
  line_t     rsp_data [2], evict_data [2];
  laddr_t    evict_addr [2];

  llc_partition u_red (
    .clk, .rst_n, .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req_op, .req_addr,
    .req_data, .req_dirty, .rsp_valid(rsp_valid[0]), .rsp_hit(rsp_hit[0]), .rsp_data(rsp_data[0]),
    .rsp_dirty(rsp_dirty[0]), .evict_valid(evict_valid[0]), .evict_addr(evict_addr[0]),
    .evict_data(evict_data[0]), .evict_dirty(evict_dirty[0]));

  llc_partition #(.WAYS(1)) u_diff (
    .clk, .rst_n, .req_valid(req_valid[1]), .req_ready(req_ready[1]), .req_op, .req_addr,
    .req_data, .req_dirty, .rsp_valid(rsp_valid[1]), .rsp_hit(rsp_hit[1]), .rsp_data(rsp_data[1]),
    .rsp_dirty(rsp_dirty[1]), .evict_valid(evict_valid[1]), .evict_addr(evict_addr[1]),
    .evict_data(evict_data[1]), .evict_dirty(evict_dirty[1]));

  int checks = 0;
  int failures = 0;

  task automatic chk(input string what, input logic [LINE_BITS-1:0] got, input logic [LINE_BITS-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // issue one request to instance `sel`, wait for its response, check latency
  task automatic access(input int sel, input cache_op_e op, input laddr_t a, input line_t d, input logic dt);
    int cyc;
    @(negedge clk);
    chk("req_ready idle", LINE_BITS'(req_ready[sel]), 1);
    req_valid[sel] = 1'b1; req_op = op; req_addr = a; req_data = d; req_dirty = dt;
    @(negedge clk);
    req_valid[sel] = 1'b0;
    cyc = 1;
    while (!rsp_valid[sel]) begin
      if (req_ready[sel]) begin failures++; $display("FAIL req_ready high while busy"); end
      @(negedge clk);
      cyc++;
    end
    chk("latency", LINE_BITS'(cyc), LINE_BITS'(LAT));
  endtask

  function automatic line_t pat(input int n);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[32*i +: 32] = 32'(n * 7919 + i);
    return l;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    laddr_t a0, a1, a2;
    req_valid[0] = 1'b0; req_valid[1] = 1'b0;
    req_op = OP_LOOKUP; req_addr = '0; req_data = '0; req_dirty = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (req_ready[0] && req_ready[1]);
    // three addresses of the same set (set 5)
    a0 = laddr_t'(5);
    a1 = laddr_t'(5 + SETS);
    a2 = laddr_t'(5 + 3 * SETS);
    // redundancy partition, 2 ways
    access(0, OP_LOOKUP, a0, '0, 1'b0);
    chk("empty miss", LINE_BITS'(rsp_hit[0]), 0);
    access(0, OP_WRITE, a0, pat(0), 1'b1);
    chk("ins a0 no evict", LINE_BITS'(evict_valid[0]), 0);
    access(0, OP_WRITE, a1, pat(1), 1'b0);
    chk("ins a1 no evict", LINE_BITS'(evict_valid[0]), 0);
    access(0, OP_LOOKUP, a1, '0, 1'b0);
    chk("a1 hit", LINE_BITS'(rsp_hit[0]), 1);
    chk("a1 data", rsp_data[0], pat(1));
    access(0, OP_WRITE, a2, pat(2), 1'b0);
    chk("a2 evicts", LINE_BITS'(evict_valid[0]), 1);
    chk("a2 evicts LRU a0", LINE_BITS'(evict_addr[0]), LINE_BITS'(a0));
    chk("evicted data", evict_data[0], pat(0));
    chk("evicted dirty", LINE_BITS'(evict_dirty[0]), 1);
    access(0, OP_TAKE, a1, '0, 1'b0);
    chk("take a1 hit", LINE_BITS'(rsp_hit[0]), 1);
    chk("take a1 data", rsp_data[0], pat(1));
    access(0, OP_LOOKUP, a1, '0, 1'b0);
    chk("a1 gone", LINE_BITS'(rsp_hit[0]), 0);
    access(0, OP_LOOKUP, a2, '0, 1'b0);
    chk("a2 present", LINE_BITS'(rsp_hit[0]), 1);
    chk("a2 data", rsp_data[0], pat(2));
    // highest set index
    access(0, OP_WRITE, laddr_t'(SETS - 1), pat(9), 1'b1);
    access(0, OP_LOOKUP, laddr_t'(SETS - 1), '0, 1'b0);
    chk("last set data", rsp_data[0], pat(9));
    // data-diff partition, 1 way
    access(1, OP_WRITE, a0, pat(3), 1'b1);
    chk("diff ins", LINE_BITS'(evict_valid[1]), 0);
    access(1, OP_WRITE, a0, pat(4), 1'b1);
    chk("diff update no evict", LINE_BITS'(evict_valid[1]), 0);
    access(1, OP_WRITE, a1, pat(5), 1'b1);
    chk("diff conflict evicts", LINE_BITS'(evict_valid[1]), 1);
    chk("diff evicted addr", LINE_BITS'(evict_addr[1]), LINE_BITS'(a0));
    chk("diff evicted data", evict_data[1], pat(4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
