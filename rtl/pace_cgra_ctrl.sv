// pace_cgra_ctrl: the controller of the PACE CGRA.
//
// The host CPU drives the CGRA through this block: it loads the PEs'
// configuration memories and the data memories, sets the control registers,
// starts a run, and is told by an interrupt when the run is over. The paper
// names the controller and gives this division of work; the register set, the
// address map (pace_pkg CGRA_*), the run-for-N-cycles model and the AXI4-Lite
// port are this design's choices.
//
// Bus: AXI4-Lite slave, 32-bit. A write needs AW and W together and is
// answered on B the next cycle. A read is answered on R two cycles after AR
// (memory reads go through the synchronous SRAM ports). One transaction of
// each kind is in flight at a time. Configuration memory words are 64 bits,
// written and read as two 32-bit halves; data memory words are 16 bits, one
// per 32-bit bus word. While the array runs, the memories belong to it and a
// host access to them is answered with SLVERR and has no effect.
//
// Sequencing: writing CTRL[0] = 1 starts a run. One clear cycle resets the
// PEs' registers and fetches slot 0; then CYCLES run cycles follow in which
// the slot counter steps 0, 1, .. II-1, 0, .. and fetch_addr gives the slot
// fetched for the next cycle. All PEs share the slot counter (the paper's
// statically scheduled, modulo-scheduled loop). At the end STATUS.done is set
// and irq rises if CTRL[1] is set; writing 1 to STATUS[1] clears it.
module pace_cgra_ctrl
  import pace_pkg::*;
#(
  parameter int unsigned NPE   = ROWS * COLS,
  parameter int unsigned NBANK = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  axil_req_t                    axi_req,
  output axil_rsp_t                    axi_rsp,
  output logic                         irq,
  // to the array
  output logic                         run,
  output logic                         clear,
  output logic [SLOT_W-1:0]            fetch_addr,
  output logic [NPE-1:0]               static_en,
  output logic [NPE-1:0]               cm_sel,
  output logic                         cm_we,
  output logic [1:0]                   cm_wmask,
  output logic [SLOT_W-1:0]            cm_addr,
  output logic [INSTR_W-1:0]           cm_wdata,
  input  logic [NPE-1:0][INSTR_W-1:0]  cm_rdata,
  output logic [NBANK-1:0]             dm_sel,
  output mem_req_t                     dm_req,
  input  logic [NBANK-1:0][DW-1:0]     dm_rdata
);

  localparam int unsigned PE_W = $clog2(NPE);
  localparam int unsigned BK_W = $clog2(NBANK);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN} state_e;
  typedef enum logic [1:0] {R_REG, R_CM, R_DM, R_ERR} rkind_e;

  state_e              state_q;
  logic                irq_en_q, done_q;
  logic [SLOT_W:0]     ii_q;       // 1..32
  logic [31:0]         cycles_q, cyc_q;
  logic [NPE-1:0]      clken_q;
  logic [SLOT_W-1:0]   slot_q;

  logic                busy;
  assign busy = (state_q != S_IDLE);

  // ---------------------------------------------------------------- decode
  function automatic logic is_cm(logic [31:0] a);
    return a >= CGRA_CM_BASE && a < CGRA_CM_BASE + 32'(NPE * 256);
  endfunction
  function automatic logic is_dm(logic [31:0] a);
    return a >= CGRA_DM_BASE && a < CGRA_DM_BASE + 32'(NBANK * 'h4000);
  endfunction

  logic            wr_go, rd_go, b_valid_q, r_valid_q, r_ph2_q;
  logic [1:0]      b_resp_q, r_resp_q, r_ph2_resp;
  logic [31:0]     r_data_q, waddr, raddr, wdata, reg_rdata, raddr_q;
  rkind_e          rkind, rkind_q;
  logic            start;

  assign waddr = axi_req.aw_addr;
  assign raddr = axi_req.ar_addr;
  assign wdata = axi_req.w_data;
  assign wr_go = axi_req.aw_valid && axi_req.w_valid && !b_valid_q;
  assign rd_go = axi_req.ar_valid && !wr_go && !r_valid_q && !r_ph2_q;

  assign axi_rsp.aw_ready = wr_go;
  assign axi_rsp.w_ready  = wr_go;
  assign axi_rsp.b_valid  = b_valid_q;
  assign axi_rsp.b_resp   = b_resp_q;
  assign axi_rsp.ar_ready = rd_go;
  assign axi_rsp.r_valid  = r_valid_q;
  assign axi_rsp.r_data   = r_data_q;
  assign axi_rsp.r_resp   = r_resp_q;

  // Host ports to the memories. A bus word is one access; a read goes out in
  // the cycle AR is accepted.
  logic [31:0] maddr;
  logic        mwe;
  assign maddr = wr_go ? waddr : raddr;
  assign mwe   = wr_go;

  logic [PE_W-1:0] pe_idx;
  logic [BK_W-1:0] bk_idx;
  assign pe_idx   = PE_W'((maddr - CGRA_CM_BASE) >> 8);
  assign bk_idx   = BK_W'((maddr - CGRA_DM_BASE) >> 14);
  assign cm_addr  = SLOT_W'(maddr[7:3]);
  assign cm_we    = mwe;
  assign cm_wmask = maddr[2] ? 2'b10 : 2'b01;
  assign cm_wdata = {wdata, wdata};
  assign dm_req   = '{en: 1'b0, we: mwe, addr: DM_AW'(maddr[13:2]), wdata: wdata[DW-1:0]};

  always_comb begin
    cm_sel = '0;
    dm_sel = '0;
    if (!busy && ((wr_go || rd_go) && is_cm(maddr))) cm_sel[pe_idx] = 1'b1;
    if (!busy && ((wr_go || rd_go) && is_dm(maddr))) dm_sel[bk_idx] = 1'b1;
  end

  // ---------------------------------------------------------------- registers
  always_comb begin
    unique case (raddr)
      CGRA_REG_CTRL:     reg_rdata = {30'b0, irq_en_q, 1'b0};
      CGRA_REG_STATUS:   reg_rdata = {30'b0, done_q, busy};
      CGRA_REG_II:       reg_rdata = 32'(ii_q);
      CGRA_REG_CYCLES:   reg_rdata = cycles_q;
      CGRA_REG_CLKEN_LO: reg_rdata = 32'(clken_q);
      CGRA_REG_CLKEN_HI: reg_rdata = 32'(clken_q >> 32);
      CGRA_REG_CYCCNT:   reg_rdata = cyc_q;
      default:           reg_rdata = '0;
    endcase
  end

  always_comb begin
    if (raddr < 32'h100)  rkind = R_REG;
    else if (is_cm(raddr)) rkind = busy ? R_ERR : R_CM;
    else if (is_dm(raddr)) rkind = busy ? R_ERR : R_DM;
    else                   rkind = R_ERR;
  end

  assign start = wr_go && waddr == CGRA_REG_CTRL && wdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_en_q  <= 1'b0;
      done_q    <= 1'b0;
      ii_q      <= (SLOT_W+1)'(1);
      cycles_q  <= '0;
      clken_q   <= '1;
      b_valid_q <= 1'b0;
      b_resp_q  <= RESP_OKAY;
    end else begin
      if (b_valid_q && axi_req.b_ready) b_valid_q <= 1'b0;
      if (wr_go) begin
        b_valid_q <= 1'b1;
        b_resp_q  <= RESP_OKAY;
        if (waddr < 32'h100) begin
          unique case (waddr)
            CGRA_REG_CTRL:     irq_en_q <= wdata[1];
            CGRA_REG_STATUS:   if (wdata[1]) done_q <= 1'b0;
            CGRA_REG_II:       if (!busy) ii_q <= (wdata[SLOT_W:0] == '0 || wdata > CM_DEPTH)
                                                  ? (SLOT_W+1)'(CM_DEPTH) : wdata[SLOT_W:0];
            CGRA_REG_CYCLES:   if (!busy) cycles_q <= wdata;
            CGRA_REG_CLKEN_LO: if (!busy) clken_q[31:0] <= wdata;
            CGRA_REG_CLKEN_HI: if (!busy) clken_q[NPE-1:32] <= wdata[NPE-33:0];
            default: b_resp_q <= RESP_SLVERR;
          endcase
        end else if ((is_cm(waddr) || is_dm(waddr)) && !busy) begin
          b_resp_q <= RESP_OKAY;
        end else begin
          b_resp_q <= RESP_SLVERR;
        end
      end
      if (start) done_q <= 1'b0;
      if (state_q == S_RUN && cyc_q + 1 >= cycles_q) done_q <= 1'b1;
      if (state_q == S_CLEAR && cycles_q == '0) done_q <= 1'b1;
    end
  end

  // Read response: phase 1 accepts and reads memories, phase 2 captures.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ph2_q   <= 1'b0;
      r_valid_q <= 1'b0;
      r_data_q  <= '0;
      r_resp_q  <= RESP_OKAY;
      rkind_q   <= R_REG;
      raddr_q   <= '0;
      r_ph2_resp <= RESP_OKAY;
    end else begin
      if (r_valid_q && axi_req.r_ready) r_valid_q <= 1'b0;
      if (rd_go) begin
        r_ph2_q <= 1'b1;
        rkind_q <= rkind;
        raddr_q <= raddr;
        r_data_q <= reg_rdata;
        r_ph2_resp <= (rkind == R_ERR) ? RESP_SLVERR : RESP_OKAY;
      end
      if (r_ph2_q) begin
        r_ph2_q   <= 1'b0;
        r_valid_q <= 1'b1;
        r_resp_q  <= r_ph2_resp;
        unique case (rkind_q)
          R_CM:    r_data_q <= raddr_q[2] ? cm_rdata[PE_W'((raddr_q - CGRA_CM_BASE) >> 8)][63:32]
                                          : cm_rdata[PE_W'((raddr_q - CGRA_CM_BASE) >> 8)][31:0];
          R_DM:    r_data_q <= 32'(dm_rdata[BK_W'((raddr_q - CGRA_DM_BASE) >> 14)]);
          R_ERR:   r_data_q <= '0;
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      slot_q  <= '0;
      cyc_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (start) begin
          state_q <= S_CLEAR;
          cyc_q   <= '0;
        end
        S_CLEAR: begin
          slot_q  <= '0;
          state_q <= (cycles_q == '0) ? S_IDLE : S_RUN;
        end
        S_RUN: begin
          slot_q <= fetch_addr;
          cyc_q  <= cyc_q + 1;
          if (cyc_q + 1 >= cycles_q) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign run        = (state_q == S_RUN);
  assign clear      = (state_q == S_CLEAR);
  assign fetch_addr = ((SLOT_W+1)'(slot_q) + 1 >= ii_q) ? '0 : slot_q + 1'b1;
  assign static_en  = clken_q;
  assign irq        = done_q && irq_en_q;

  // A write response must be held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   axi_rsp.b_valid && !axi_req.b_ready |=> axi_rsp.b_valid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   axi_rsp.r_valid && !axi_req.r_ready |=> axi_rsp.r_valid && $stable(axi_rsp.r_data));

endmodule
