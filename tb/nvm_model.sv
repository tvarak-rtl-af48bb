// nvm_model: behavioural model of the NVM DIMMs behind the memory controller,
// for simulation only (not synthesizable: it uses an associative array).
//
// One request at a time on a valid/ready port. A read answers with one
// rsp_valid pulse RD_LAT cycles after it is accepted; a write keeps req_ready
// low for WR_LAT cycles. Defaults are 60 ns reads and 150 ns writes at a
// 2.27 GHz clock (136 and 341 cycles). Lines never written read as zero.
// To model a firmware "lost write", lose_en / lose_addr make the model
// acknowledge the next write to lose_addr without storing it.
module nvm_model
  import tvarak_pkg::*;
#(
  parameter int unsigned RD_LAT = 136,
  parameter int unsigned WR_LAT = 341
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_we,
  input  laddr_t req_addr,
  input  line_t  req_wdata,
  output logic   rsp_valid,
  output line_t  rsp_data,
  input  logic   lose_en,
  input  laddr_t lose_addr,
  output logic   lost
);

  line_t  mem [laddr_t];
  int     busy;
  logic   rd_pend;
  laddr_t rd_addr;

  function automatic line_t peek(input laddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(input laddr_t a, input line_t d);
    mem[a] = d;
  endfunction

  assign req_ready = rst_n && (busy == 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 0;
      rd_pend   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      rd_addr   <= '0;
      lost      <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      lost      <= 1'b0;
      if (busy > 0) begin
        busy <= busy - 1;
        if (busy == 1 && rd_pend) begin
          rsp_valid <= 1'b1;
          rsp_data  <= peek(rd_addr);
          rd_pend   <= 1'b0;
        end
      end else if (req_valid) begin
        if (req_we) begin
          if (lose_en && req_addr == lose_addr) lost <= 1'b1;
          else mem[req_addr] = req_wdata;
          busy <= WR_LAT;
        end else begin
          rd_pend <= 1'b1;
          rd_addr <= req_addr;
          busy    <= RD_LAT;
        end
      end
    end
  end

endmodule
