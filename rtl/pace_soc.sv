// pace_soc: the PACE system-on-chip around the CGRA.
//
// PACE places an 8x8 CGRA in a small RISC-V system for edge computing. The CPU
// programs the CGRA's configuration and data memories and its control
// registers over the system interconnect and is interrupted when a kernel
// finishes. This top holds the parts of that system the paper describes well
// enough to build: the interconnect (pace_axi_mux), the 512KB on-chip SRAM
// (pace_sram) and the CGRA (pace_cgra). The RISC-V core with its 16KB
// instruction and data caches, the SDRAM controller and the peripheral
// subsystem (UART, SPI, I2C, GPIO, ADC, AES, RNG) are not part of this RTL:
// the CPU's bus is the cpu_* port pair, and the SDRAM and peripheral slots of
// the interconnect are the sdram_* and periph_* port pairs.
//
// Address map (this design's choice):
//   0x1000_0000 - 0x1007_FFFF  on-chip SRAM (512KB)
//   0x2000_0000 - 0x200F_FFFF  CGRA (see pace_pkg for the offsets)
//   0x8000_0000 - 0x81FF_FFFF  SDRAM (32MB), port sdram_*
//   0x4000_0000 - 0x4FFF_FFFF  peripherals, port periph_*
// The CGRA sees addresses relative to its base. All four are AXI4-Lite. Everything runs on one clock with an active-low
// asynchronous reset.
module pace_soc
  import pace_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      test_en,
  input  axil_req_t cpu_req,
  output axil_rsp_t cpu_rsp,
  output logic      cgra_irq,
  output axil_req_t sdram_req,
  input  axil_rsp_t sdram_rsp,
  output axil_req_t periph_req,
  input  axil_rsp_t periph_rsp
);

  axil_req_t [3:0] s_req;
  axil_rsp_t [3:0] s_rsp;

  pace_axi_mux #(.N_SLV(4)) u_xbar (
    .clk(clk), .rst_n(rst_n), .m_req(cpu_req), .m_rsp(cpu_rsp),
    .s_req(s_req), .s_rsp(s_rsp)
  );

  pace_sram u_sram (.clk(clk), .rst_n(rst_n), .axi_req(s_req[0]), .axi_rsp(s_rsp[0]));

  // The CGRA decodes offsets inside its 1MB window.
  axil_req_t cgra_req;
  always_comb begin
    cgra_req         = s_req[1];
    cgra_req.aw_addr = s_req[1].aw_addr & 32'h000F_FFFF;
    cgra_req.ar_addr = s_req[1].ar_addr & 32'h000F_FFFF;
  end

  pace_cgra u_cgra (
    .clk(clk), .rst_n(rst_n), .test_en(test_en),
    .axi_req(cgra_req), .axi_rsp(s_rsp[1]), .irq(cgra_irq),
    .res_o(), .gclk_o(), .run_o()
  );

  assign sdram_req  = s_req[2];
  assign s_rsp[2]   = sdram_rsp;
  assign periph_req = s_req[3];
  assign s_rsp[3]   = periph_rsp;

endmodule
