// tb_redundancy_addr_gen: self-checking test of the redundancy address map.
//
// The reference works on byte addresses with integer arithmetic: the byte
// address of the line, its 4 KB page number, the DIMM (page mod 4) and row
// (page / 4); the system-checksum byte at csum_row_base*4 KB + row*4 within the
// same DIMM's page sequence; the DAX-CL-checksum byte at
// clbuf_base*64 + ((page-start)*64 + line)*4; and the parity line in page
// (row, 3 - row mod 4). Besides random cases it checks the layout of the
// first four stripes against the rotating-parity figure (parity on DIMM 3, 2,
// 1, 0 for stripes 0..3).
module tb_redundancy_addr_gen;
  import tvarak_pkg::*;

  laddr_t           addr;
  range_cfg_t       range_i;
  logic [ROW_W-1:0] csum_row_base;
  red_loc_t         loc;

  redundancy_addr_gen dut (.*);

  int checks = 0;
  int failures = 0;

  task automatic chk(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h (addr %0h)", what, got, exp, addr);
    end
  endtask

  task automatic check_one();
    longint unsigned byte_a, pg, dimm, row, lip, sys_byte, sys_page, cl_byte, par_page;
    #1;
    byte_a = longint'(addr) * 64;
    pg     = byte_a / 4096;
    lip    = (byte_a % 4096) / 64;
    dimm   = pg % 4;
    row    = pg / 4;
    // checksum region: rows from csum_row_base on, on the same DIMM
    sys_byte = longint'(csum_row_base) * 4096 + row * 4;      // offset in the DIMM
    sys_page = (sys_byte / 4096) * 4 + dimm;                  // global page number
    chk("sys_addr", loc.sys_addr, sys_page * 64 + (sys_byte % 4096) / 64);
    chk("sys_slot", loc.sys_slot, (sys_byte % 64) / 4);
    cl_byte = longint'(range_i.clbuf_base) * 64 + ((pg - longint'(range_i.start_page)) * 64 + lip) * 4;
    chk("cl_addr", loc.cl_addr, cl_byte / 64);
    chk("cl_slot", loc.cl_slot, (cl_byte % 64) / 4);
    par_page = row * 4 + (3 - row % 4);
    chk("par_addr", loc.par_addr, par_page * 64 + lip);
    chk("line_idx", loc.line_idx, lip);
  endtask

  initial begin
    // stripes 0..3 of the layout figure: parity DIMM 3, 2, 1, 0
    range_i = '{valid: 1'b1, start_page: '0, num_pages: 1000, clbuf_base: 34'h1000};
    csum_row_base = ROW_W'(1 << 20);
    for (int s = 0; s < 4; s++) begin
      addr = laddr_t'(s * 4 * 64);   // row s, DIMM 0, line 0
      #1;
      chk("parity dimm of stripe", loc.par_addr[DIMM_W+LIP_W-1:LIP_W], 3 - s);
      check_one();
    end
    for (int i = 0; i < 2000; i++) begin
      page_t start;
      csum_row_base = ROW_W'($urandom_range(1 << 22, 1 << 24));
      start = page_t'($urandom_range(0, 1 << 26));
      range_i = '{valid: 1'b1, start_page: start, num_pages: page_t'(1 << 20),
                  clbuf_base: laddr_t'($urandom_range(0, 1 << 30))};
      addr = {start + page_t'($urandom_range(0, (1 << 20) - 1)), 6'($urandom)};
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
