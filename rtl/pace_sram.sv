// pace_sram: the SoC's 512KB on-chip SRAM with an AXI4-Lite slave port.
//
// The paper gives the size (512KB) and that the SRAM sits on the system
// interconnect beside the CPU, the SDRAM and the CGRA. The array is 128K words
// of 32 bits with byte write strobes; the port is this design's. A write
// needs AW and W together and is answered on B the next cycle; a read is
// answered on R the cycle after AR. The word index is taken from address bits
// [18:2], so the SRAM repeats across its window.
module pace_sram
  import pace_pkg::*;
#(
  parameter int unsigned BYTES = 524288,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t axi_req,
  output axil_rsp_t axi_rsp
);

  logic [31:0] mem [WORDS];
  logic        b_valid_q, r_valid_q, wr_go, rd_go;
  logic [31:0] r_data_q;
  logic [AW-1:0] widx, ridx;

  assign wr_go = axi_req.aw_valid && axi_req.w_valid && !b_valid_q;
  assign rd_go = axi_req.ar_valid && !r_valid_q;
  assign widx  = axi_req.aw_addr[AW+1:2];
  assign ridx  = axi_req.ar_addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (wr_go)
      for (int b = 0; b < 4; b++)
        if (axi_req.w_strb[b]) mem[widx][8*b +: 8] <= axi_req.w_data[8*b +: 8];
    if (rd_go) r_data_q <= mem[ridx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid_q <= 1'b0;
      r_valid_q <= 1'b0;
    end else begin
      if (b_valid_q && axi_req.b_ready) b_valid_q <= 1'b0;
      if (wr_go) b_valid_q <= 1'b1;
      if (r_valid_q && axi_req.r_ready) r_valid_q <= 1'b0;
      if (rd_go) r_valid_q <= 1'b1;
    end
  end

  always_comb begin
    axi_rsp          = '0;
    axi_rsp.aw_ready = wr_go;
    axi_rsp.w_ready  = wr_go;
    axi_rsp.b_valid  = b_valid_q;
    axi_rsp.b_resp   = RESP_OKAY;
    axi_rsp.ar_ready = rd_go;
    axi_rsp.r_valid  = r_valid_q;
    axi_rsp.r_data   = r_data_q;
    axi_rsp.r_resp   = RESP_OKAY;
  end

endmodule
