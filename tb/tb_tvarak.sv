// tb_tvarak: end-to-end test of one Tvarak controller with small caches
// (on-controller cache 2 sets x 2 ways, LLC partitions of 4 sets) so that every
// eviction path is exercised in a short run; latencies are the defaults (LLC
// 27 cycles, NVM 136/341 cycles). The test itself is in tvarak_tb_body.svh.
module tb_tvarak;
  import tvarak_pkg::*;

  localparam int unsigned OC_SETS  = 2;
  localparam int unsigned OC_WAYS  = 2;
  localparam int unsigned LLC_SETS = 4;
  localparam int unsigned N_OPS    = 60;
  localparam bit          ALL_EVENTS = 1'b1;
  localparam int unsigned NVM_RD = 136;
  localparam int unsigned NVM_WR = 341;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       cfg_range_we;
  logic [3:0] cfg_range_idx;
  range_cfg_t cfg_range;
  logic       cfg_csum_row_we;
  logic [ROW_W-1:0] cfg_csum_row_base;
  logic       req_valid, req_ready;
  req_kind_e  req_kind;
  laddr_t     req_addr;
  line_t      req_data, req_old;
  logic       rsp_valid, rsp_err;
  line_t      rsp_data;
  logic       clean_req_valid;
  laddr_t     clean_req_addr;
  logic       clean_rsp_valid = 1'b0;
  line_t      clean_rsp_data = '0;
  logic       irq;
  laddr_t     irq_addr;
  logic       mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  laddr_t     mem_req_addr;
  line_t      mem_req_wdata, mem_rsp_data;
  tvarak_ev_t ev;
  logic       lose_en, lost;
  laddr_t     lose_addr;

  tvarak #(.OC_SETS(OC_SETS), .OC_WAYS(OC_WAYS), .BANK_BYTES(LLC_SETS * 64 * 16)) dut (.*);

  nvm_model #(.RD_LAT(NVM_RD), .WR_LAT(NVM_WR)) nvm (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .lose_en, .lose_addr, .lost
  );

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired in state %s", dut.state_q.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tvarak_tb_body.svh"

endmodule
