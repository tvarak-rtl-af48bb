// tb_csum_unit: self-checking test of the checksum unit.
//
// A reference CRC-32C (0x1EDC6F41, init and final XOR all ones, MSB first) is
// computed byte by byte over whole byte arrays, independently of the unit's
// line/shift-table arithmetic. For random pages, random lines and random new
// data the test checks that
//   line_csum  == crc(line)
//   crc(new line) == crc(old line) ^ cl_delta
//   crc(new page) == crc(old page) ^ page_delta
// and that results appear exactly one clock after in_valid.
module tb_csum_unit;
  import tvarak_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid;
  line_t            data, diff;
  logic [LIP_W-1:0] line_idx;
  logic             out_valid;
  csum_t            line_csum, cl_delta, page_delta;

  int checks = 0;
  int failures = 0;

  csum_unit dut (.*);

  function automatic logic [31:0] ref_crc_bytes(input byte unsigned b[], input int n);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < n; i++) begin
      c = c ^ {b[i], 24'h0};
      for (int k = 0; k < 8; k++)
        c = c[31] ? ((c << 1) ^ 32'h1EDC6F41) : (c << 1);
    end
    return c ^ 32'hFFFF_FFFF;
  endfunction

  function automatic void line_to_bytes(input line_t l, ref byte unsigned b[], input int off);
    for (int i = 0; i < LINE_BYTES; i++) b[off + i] = l[8*i +: 8];
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned page_old[], page_new[], lb[];
    line_t lines[LINES_PER_PAGE];
    line_t nl;
    int k;
    page_old = new[PAGE_BYTES];
    page_new = new[PAGE_BYTES];
    lb = new[LINE_BYTES];
    in_valid = 1'b0; data = '0; diff = '0; line_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int it = 0; it < 12; it++) begin
      for (int j = 0; j < LINES_PER_PAGE; j++) begin
        lines[j] = (it == 0) ? '0 : rand_line();
        line_to_bytes(lines[j], page_old, j * LINE_BYTES);
      end
      k = (it == 1) ? 0 : (it == 2) ? LINES_PER_PAGE - 1 : int'($urandom_range(0, LINES_PER_PAGE - 1));
      nl = rand_line();
      page_new = new[PAGE_BYTES](page_old);
      line_to_bytes(nl, page_new, k * LINE_BYTES);
      @(negedge clk);
      in_valid = 1'b1;
      data     = lines[k];
      diff     = lines[k] ^ nl;
      line_idx = LIP_W'(k);
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not high 1 cycle after in_valid"); end
      line_to_bytes(lines[k], lb, 0);
      check("line_csum", line_csum, ref_crc_bytes(lb, LINE_BYTES));
      begin
        logic [31:0] old_l;
        old_l = ref_crc_bytes(lb, LINE_BYTES);
        line_to_bytes(nl, lb, 0);
        check("cl_delta", old_l ^ cl_delta, ref_crc_bytes(lb, LINE_BYTES));
      end
      check("page_delta", ref_crc_bytes(page_old, PAGE_BYTES) ^ page_delta,
            ref_crc_bytes(page_new, PAGE_BYTES));
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
