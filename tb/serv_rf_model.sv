// serv_rf_model: behavioural model of the core's bit-serial register file,
// as seen by the accelerator path. Not synthesizable logic of the design.
//
// A request (i_rreq or i_wreq) is answered with a one-cycle o_ready after a
// latency of 1 cycle, or of 1..lat_max cycles (random) when the testbench
// sets lat_max above 1. After a read's o_ready, the 32 bits of
// regs[i_rs1_addr] and regs[i_rs2_addr] appear on o_rs1/o_rs2 one per cycle,
// LSB first. Write data are taken whenever i_wen is high, LSB first, and the
// word is stored after the 32nd bit (x0 stays zero). Testbenches set and read
// regs[] directly.
module serv_rf_model (
  input  logic       i_clk,
  input  logic       i_rst,
  input  logic       i_rreq,
  input  logic       i_wreq,
  input  logic [4:0] i_rs1_addr,
  input  logic [4:0] i_rs2_addr,
  input  logic [4:0] i_rd_addr,
  input  logic       i_wen,
  input  logic       i_wdata,
  output logic       o_ready,
  output logic       o_rs1,
  output logic       o_rs2
);
  logic [31:0] regs [32];
  int unsigned lat_max = 1;
  int unsigned wait_cnt;
  logic        pend_rd, rd_act;
  logic [4:0]  idx, wcnt;
  logic [31:0] wbuf;

  initial for (int i = 0; i < 32; i++) regs[i] = '0;

  always_ff @(posedge i_clk) begin
    if (i_rst) begin
      o_ready <= 1'b0; wait_cnt <= 0; pend_rd <= 1'b0; rd_act <= 1'b0;
      idx <= '0; wcnt <= '0;
    end else begin
      int unsigned lat;
      o_ready <= 1'b0;
      if (i_rreq || i_wreq) begin
        lat = (lat_max <= 1) ? 1 : $urandom_range(lat_max, 1);
        pend_rd <= i_rreq;
        if (lat == 1) o_ready <= 1'b1;
        else wait_cnt <= lat - 1;
      end else if (wait_cnt != 0) begin
        wait_cnt <= wait_cnt - 1;
        if (wait_cnt == 1) o_ready <= 1'b1;
      end
      if (o_ready && pend_rd) begin
        rd_act <= 1'b1; idx <= '0;
      end else if (rd_act) begin
        idx <= idx + 1'b1;
        if (idx == 5'd31) rd_act <= 1'b0;
      end
      if (i_wen) begin
        wbuf <= {i_wdata, wbuf[31:1]};
        wcnt <= wcnt + 1'b1;
        if (wcnt == 5'd31 && i_rd_addr != 0) regs[i_rd_addr] <= {i_wdata, wbuf[31:1]};
      end
    end
  end

  assign o_rs1 = rd_act & regs[i_rs1_addr][idx];
  assign o_rs2 = rd_act & regs[i_rs2_addr][idx];
endmodule
