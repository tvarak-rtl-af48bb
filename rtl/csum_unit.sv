// csum_unit: the checksum "adder" of a Tvarak controller.
//
// In one clock it produces the three checksum values the controller needs:
//   line_csum  - full CRC-32C of `data`, compared with the stored
//                DAX-CL-checksum when a DAX line is read from NVM;
//   cl_delta   - lin(diff), XORed into the DAX-CL-checksum of a written line;
//   page_delta - lin(diff placed at line `line_idx` of an otherwise zero 4 KB
//                page), XORed into the page's system-checksum.
// The page delta uses lin(D followed by N zero bits) = lin(D) * x^N mod P, with
// N = 512 * (63 - line_idx), and a constant table of x^(512*j) mod P computed at
// elaboration. The new parity is simply old parity XOR diff and is formed by the
// controller, so it is not in this unit.
//
// Timing: inputs are sampled when in_valid is high; results and out_valid
// appear on the next clock edge (the paper's 1 cycle per checksum computation).
// The CRC polynomial and the 1-cycle latency follow the paper; bit order and
// the shift-table method are this design's choices (see tvarak_pkg).
module csum_unit
  import tvarak_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  line_t             data,
  input  line_t             diff,
  input  logic [LIP_W-1:0]  line_idx,
  output logic              out_valid,
  output csum_t             line_csum,
  output csum_t             cl_delta,
  output csum_t             page_delta
);

  localparam logic [LINES_PER_PAGE-1:0][CSUM_W-1:0] SHIFT_TBL = line_shift_table();

  csum_t             lin_d;
  csum_t             full_d;
  csum_t             pg_d;
  logic [LIP_W-1:0]  zeros_after;

  always_comb begin
    full_d      = crc_full_line(data);
    lin_d       = crc_lin_line(diff);
    zeros_after = LIP_W'(LINES_PER_PAGE - 1) - line_idx;
    pg_d        = gf_mulmod(lin_d, SHIFT_TBL[zeros_after]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      line_csum  <= '0;
      cl_delta   <= '0;
      page_delta <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        line_csum  <= full_d;
        cl_delta   <= lin_d;
        page_delta <= pg_d;
      end
    end
  end

endmodule
