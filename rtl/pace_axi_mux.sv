// pace_axi_mux: the SoC's shared AXI slave multiplexer.
//
// One master (the CPU) reaches N_SLV slaves through this block: the on-chip
// SRAM, the CGRA, the SDRAM controller and the peripheral subsystem. The paper
// states that these components are reached through a shared AXI4 slave
// multiplexer giving one memory-mapped view; it gives nothing of its insides.
// This is the simplest such mux: AXI4-Lite (single beats, no IDs or bursts),
// one write and one read in flight, chosen by address decoding with
// (addr & MASK[i]) == BASE[i]. An address that matches no slave is completed
// inside the mux with DECERR. The address map is this design's choice.
//
// Timing: an address is decoded in the cycle it appears and forwarded to the
// chosen slave from the next cycle; the response passes back
// combinationally. Writes and reads proceed independently of each other.
module pace_axi_mux
  import pace_pkg::*;
#(
  parameter int unsigned N_SLV = 4,
  parameter logic [N_SLV-1:0][31:0] BASE = {32'h4000_0000, 32'h8000_0000, 32'h2000_0000, 32'h1000_0000},
  parameter logic [N_SLV-1:0][31:0] MASK = {32'hF000_0000, 32'hFE00_0000, 32'hFFF0_0000, 32'hFFF8_0000},
  localparam int unsigned SW = (N_SLV > 1) ? $clog2(N_SLV) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  axil_req_t              m_req,
  output axil_rsp_t              m_rsp,
  output axil_req_t [N_SLV-1:0]  s_req,
  input  axil_rsp_t [N_SLV-1:0]  s_rsp
);

  function automatic logic [SW:0] decode(logic [31:0] a);
    for (int i = 0; i < N_SLV; i++)
      if ((a & MASK[i]) == BASE[i]) return {1'b0, SW'(i)};
    return {1'b1, SW'(0)};  // no slave: error
  endfunction

  // ------------------------------------------------------------- writes
  logic          w_busy_q, w_err_q, aw_done_q, wd_done_q;
  logic [SW-1:0] w_sel_q;
  logic [SW:0]   w_dec;
  logic          aw_hs, wd_hs, b_hs;

  assign w_dec = decode(m_req.aw_addr);
  assign aw_hs = m_req.aw_valid && m_rsp.aw_ready;
  assign wd_hs = m_req.w_valid  && m_rsp.w_ready;
  assign b_hs  = m_rsp.b_valid  && m_req.b_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_busy_q <= 1'b0; w_err_q <= 1'b0; aw_done_q <= 1'b0; wd_done_q <= 1'b0; w_sel_q <= '0;
    end else if (!w_busy_q) begin
      if (m_req.aw_valid) begin
        w_busy_q  <= 1'b1;
        w_err_q   <= w_dec[SW];
        w_sel_q   <= w_dec[SW-1:0];
        aw_done_q <= 1'b0;
        wd_done_q <= 1'b0;
      end
    end else begin
      if (aw_hs) aw_done_q <= 1'b1;
      if (wd_hs) wd_done_q <= 1'b1;
      if (b_hs)  w_busy_q  <= 1'b0;
    end
  end

  // ------------------------------------------------------------- reads
  logic          r_busy_q, r_err_q, ar_done_q;
  logic [SW-1:0] r_sel_q;
  logic [SW:0]   r_dec;
  logic          ar_hs, r_hs;

  assign r_dec = decode(m_req.ar_addr);
  assign ar_hs = m_req.ar_valid && m_rsp.ar_ready;
  assign r_hs  = m_rsp.r_valid  && m_req.r_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy_q <= 1'b0; r_err_q <= 1'b0; ar_done_q <= 1'b0; r_sel_q <= '0;
    end else if (!r_busy_q) begin
      if (m_req.ar_valid) begin
        r_busy_q  <= 1'b1;
        r_err_q   <= r_dec[SW];
        r_sel_q   <= r_dec[SW-1:0];
        ar_done_q <= 1'b0;
      end
    end else begin
      if (ar_hs) ar_done_q <= 1'b1;
      if (r_hs)  r_busy_q  <= 1'b0;
    end
  end

  // ------------------------------------------------------------- routing
  always_comb begin
    m_rsp = '0;
    for (int i = 0; i < N_SLV; i++) begin
      s_req[i] = '0;
      s_req[i].aw_addr = m_req.aw_addr;
      s_req[i].w_data  = m_req.w_data;
      s_req[i].w_strb  = m_req.w_strb;
      s_req[i].ar_addr = m_req.ar_addr;
    end
    // write side
    if (w_busy_q) begin
      if (w_err_q) begin
        m_rsp.aw_ready = !aw_done_q;
        m_rsp.w_ready  = !wd_done_q;
        m_rsp.b_valid  = aw_done_q && wd_done_q;
        m_rsp.b_resp   = RESP_DECERR;
      end else begin
        s_req[w_sel_q].aw_valid = m_req.aw_valid && !aw_done_q;
        s_req[w_sel_q].w_valid  = m_req.w_valid  && !wd_done_q;
        s_req[w_sel_q].b_ready  = m_req.b_ready;
        m_rsp.aw_ready = s_rsp[w_sel_q].aw_ready && !aw_done_q;
        m_rsp.w_ready  = s_rsp[w_sel_q].w_ready  && !wd_done_q;
        m_rsp.b_valid  = s_rsp[w_sel_q].b_valid;
        m_rsp.b_resp   = s_rsp[w_sel_q].b_resp;
      end
    end
    // read side
    if (r_busy_q) begin
      if (r_err_q) begin
        m_rsp.ar_ready = !ar_done_q;
        m_rsp.r_valid  = ar_done_q;
        m_rsp.r_resp   = RESP_DECERR;
      end else begin
        s_req[r_sel_q].ar_valid = m_req.ar_valid && !ar_done_q;
        s_req[r_sel_q].r_ready  = m_req.r_ready;
        m_rsp.ar_ready = s_rsp[r_sel_q].ar_ready && !ar_done_q;
        m_rsp.r_valid  = s_rsp[r_sel_q].r_valid;
        m_rsp.r_data   = s_rsp[r_sel_q].r_data;
        m_rsp.r_resp   = s_rsp[r_sel_q].r_resp;
      end
    end
  end

  // A master must hold an address until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_req.aw_valid && !m_rsp.aw_ready |=> m_req.aw_valid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_req.ar_valid && !m_rsp.ar_ready |=> m_req.ar_valid);

endmodule
