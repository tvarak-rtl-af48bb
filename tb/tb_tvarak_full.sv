// tb_tvarak_full: end-to-end test of one Tvarak controller with every
// parameter at its default: 4 KB on-controller cache (16 sets x 4 ways), LLC
// partitions of a 2 MB 16-way bank (2048 sets; 2 redundancy ways, 1 diff way),
// 16 range entries. With caches this large few lines are evicted in a short
// run, so the operation mix is longer and the counts of the mechanisms are
// printed but not required (the small-cache test requires them). The test is in
// tvarak_tb_body.svh.
module tb_tvarak_full;
  import tvarak_pkg::*;

  localparam int unsigned OC_SETS  = 16;
  localparam int unsigned OC_WAYS  = 4;
  localparam int unsigned LLC_SETS = 2048;
  localparam int unsigned N_OPS    = 300;
  localparam bit          ALL_EVENTS = 1'b0;
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

  tvarak  dut (.*);

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
