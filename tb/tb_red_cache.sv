// tb_red_cache: self-checking test of the set-associative line store at its
// default size (16 sets x 4 ways = 4 KB, the on-controller cache).
//
// A reference model keeps, per set, a list of lines ordered from most to least
// recently used. Random LOOKUP / WRITE / TAKE requests over a small pool of
// addresses (so that sets fill up and evict) are applied to both, and every
// response - hit, data, dirty, eviction and the evicted line - is compared one
// cycle after the request.
module tb_red_cache;
  import tvarak_pkg::*;

  localparam int unsigned SETS = 16;
  localparam int unsigned WAYS = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      req_valid;
  cache_op_e req_op;
  laddr_t    req_addr;
  line_t     req_data;
  logic      req_dirty;
  logic      ready;
  logic      rsp_valid, rsp_hit, rsp_dirty, evict_valid, evict_dirty;
  line_t     rsp_data, evict_data;
  laddr_t    evict_addr;

  red_cache dut (.*);

  typedef struct {
    laddr_t addr;
    line_t  data;
    logic   dirty;
  } ent_t;

  ent_t model[SETS][$];

  int checks = 0;
  int failures = 0;
  int n_hits = 0, n_evicts = 0;

  task automatic expect_eq(input string what, input logic [LINE_BITS-1:0] got, input logic [LINE_BITS-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 1'b0; req_op = OP_LOOKUP; req_addr = '0; req_data = '0; req_dirty = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    for (int it = 0; it < 3000; it++) begin
      automatic int s, pos;
      automatic laddr_t a;
      automatic cache_op_e op;
      automatic line_t d;
      automatic logic dt;
      automatic logic exp_hit, exp_dirty, exp_ev, exp_ev_dirty;
      automatic line_t exp_data, exp_ev_data;
      automatic laddr_t exp_ev_addr;
      // 6 tags per set for 4 ways: frequent hits and evictions
      a  = laddr_t'($urandom_range(0, 6 * SETS - 1));
      s  = int'(a) % SETS;
      op = ($urandom_range(0, 3) < 2) ? OP_WRITE : cache_op_e'($urandom_range(0, 2));
      for (int i = 0; i < LINE_BITS / 32; i++) d[32*i +: 32] = $urandom;
      dt = 1'($urandom);
      // reference model
      pos = -1;
      foreach (model[s][i]) if (model[s][i].addr == a) pos = i;
      exp_hit = (pos >= 0);
      exp_data = exp_hit ? model[s][pos].data : '0;
      exp_dirty = exp_hit ? model[s][pos].dirty : 1'b0;
      exp_ev = 1'b0; exp_ev_dirty = 1'b0; exp_ev_data = '0; exp_ev_addr = '0;
      case (op)
        OP_LOOKUP: if (exp_hit) begin
          automatic ent_t e = model[s][pos];
          model[s].delete(pos);
          model[s].push_front(e);
        end
        OP_WRITE: begin
          automatic ent_t e;
          if (exp_hit) begin
            e = model[s][pos];
            model[s].delete(pos);
            e.data = d;
            e.dirty = e.dirty | dt;
          end else begin
            if (model[s].size() == WAYS) begin
              automatic ent_t v = model[s].pop_back();
              exp_ev = 1'b1; exp_ev_addr = v.addr; exp_ev_data = v.data; exp_ev_dirty = v.dirty;
            end
            e.addr = a; e.data = d; e.dirty = dt;
          end
          model[s].push_front(e);
        end
        OP_TAKE: if (exp_hit) model[s].delete(pos);
        default: ;
      endcase
      // drive DUT
      @(negedge clk);
      req_valid = 1'b1; req_op = op; req_addr = a; req_data = d; req_dirty = dt;
      @(negedge clk);
      req_valid = 1'b0;
      expect_eq("rsp_valid", LINE_BITS'(rsp_valid), 1);
      expect_eq("rsp_hit", LINE_BITS'(rsp_hit), LINE_BITS'(exp_hit));
      if (exp_hit) begin
        n_hits++;
        expect_eq("rsp_data", rsp_data, exp_data);
        expect_eq("rsp_dirty", LINE_BITS'(rsp_dirty), LINE_BITS'(exp_dirty));
      end
      expect_eq("evict_valid", LINE_BITS'(evict_valid), LINE_BITS'(exp_ev));
      if (exp_ev) begin
        n_evicts++;
        expect_eq("evict_addr", LINE_BITS'(evict_addr), LINE_BITS'(exp_ev_addr));
        expect_eq("evict_data", evict_data, exp_ev_data);
        expect_eq("evict_dirty", LINE_BITS'(evict_dirty), LINE_BITS'(exp_ev_dirty));
      end
    end
    checks++;
    if (n_hits < 100 || n_evicts < 100) begin
      failures++;
      $display("FAIL too few hits (%0d) or evictions (%0d)", n_hits, n_evicts);
    end
    $display("hits=%0d evictions=%0d", n_hits, n_evicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
