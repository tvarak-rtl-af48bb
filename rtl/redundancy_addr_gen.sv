// redundancy_addr_gen: where the redundancy of a DAX line lives.
//
// For a DAX-mapped NVM line address { row, dimm, line-in-page } and its
// matching range entry this combinational block returns (as red_loc_t):
//   * the system-checksum of the line's 4 KB page. Each DIMM keeps the
//     checksums of its own pages in a region that starts at page row
//     csum_row_base of that DIMM; the 4 B checksum of page row r is word r of
//     that region, so 16 consecutive pages of a DIMM share one checksum line;
//   * the DAX-CL-checksum of the line: word (page - start_page) * 64 + line of
//     the range's DAX-CL-checksum buffer, which starts at line clbuf_base;
//   * the parity line: same row and line-in-page on the stripe's parity DIMM,
//     NUM_DIMMS-1 - (row mod NUM_DIMMS), i.e. the parity page rotates from the
//     last DIMM to the first as in the RAID-5 layout figure of the paper.
// It also returns the line's index in its page, used for the page-checksum
// update. Paper: per-page checksums on the page's own DIMM, 16 checksums per
// line, DAX-CL-checksum buffer given by the file system, RAID-5 page striping
// with rotating parity. Own choices: the address map and the region layout.
module redundancy_addr_gen
  import tvarak_pkg::*;
(
  input  laddr_t             addr,
  input  range_cfg_t         range_i,
  input  logic [ROW_W-1:0]   csum_row_base,
  output red_loc_t           loc
);

  logic [ROW_W-1:0]  row;
  logic [DIMM_W-1:0] dimm;
  logic [LIP_W-1:0]  lip;
  page_t             page, rel_page;
  laddr_t            rel_line;
  logic [ROW_W-1:0]  csum_word;

  always_comb begin
    row  = addr[LINE_ADDR_W-1:DIMM_W+LIP_W];
    dimm = addr[DIMM_W+LIP_W-1:LIP_W];
    lip  = addr[LIP_W-1:0];
    page = addr[LINE_ADDR_W-1:LIP_W];

    // system-checksum: word `row` of this DIMM's checksum region
    csum_word    = row;
    loc.sys_slot = csum_word[SLOT_W-1:0];
    loc.sys_addr = {csum_row_base + (csum_word >> (SLOT_W + LIP_W)), dimm,
                    csum_word[SLOT_W+LIP_W-1:SLOT_W]};

    // DAX-CL-checksum: word rel_line of the range's buffer
    rel_page    = page - range_i.start_page;
    rel_line    = {rel_page, lip};
    loc.cl_slot = rel_line[SLOT_W-1:0];
    loc.cl_addr = range_i.clbuf_base + (rel_line >> SLOT_W);

    // parity: same row and line on the stripe's parity DIMM
    loc.par_addr = {row, DIMM_W'(NUM_DIMMS - 1) - row[DIMM_W-1:0], lip};
    loc.line_idx = lip;
  end

endmodule
