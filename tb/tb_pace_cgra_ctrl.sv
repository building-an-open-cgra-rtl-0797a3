// tb_pace_cgra_ctrl: self-checking test of the CGRA controller.
//
// Acts as the host on the AXI4-Lite port, with simple models of the 64
// configuration memories and 8 data memory banks on the array side. Checks
// register write/read-back, configuration and data memory writes and reads
// (routed to the right PE or bank, right half, two-cycle read latency),
// a run: one clear cycle, exactly CYCLES run cycles, the slot sequence
// 0..II-1 repeating with fetch_addr one slot ahead, the cycle counter, done
// and the interrupt, SLVERR for memory access while running and for unmapped
// offsets, and done clearing on write-1.
module tb_pace_cgra_ctrl;
  import pace_pkg::*;

  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic irq, run, clear;
  logic [4:0] fetch_addr;
  logic [63:0] static_en, cm_sel;
  logic cm_we;
  logic [1:0] cm_wmask;
  logic [4:0] cm_addr;
  logic [63:0] cm_wdata;
  logic [63:0][63:0] cm_rdata;
  logic [7:0] dm_sel;
  mem_req_t dm_req;
  logic [7:0][15:0] dm_rdata;
  logic [63:0] cmm [64][32];
  logic [15:0] dmm [8][4096];
  int checks = 0, failures = 0;

  pace_cgra_ctrl dut (.axi_req(req), .axi_rsp(rsp), .*);

  always #5 clk = ~clk;

  // array-side memory models
  always_ff @(posedge clk) begin
    for (int p = 0; p < 64; p++) if (cm_sel[p]) begin
      if (cm_we) begin
        if (cm_wmask[0]) cmm[p][cm_addr][31:0]  <= cm_wdata[31:0];
        if (cm_wmask[1]) cmm[p][cm_addr][63:32] <= cm_wdata[63:32];
      end else cm_rdata[p] <= cmm[p][cm_addr];
    end
    for (int b = 0; b < 8; b++) if (dm_sel[b]) begin
      if (dm_req.we) dmm[b][dm_req.addr] <= dm_req.wdata;
      else           dm_rdata[b] <= dmm[b][dm_req.addr];
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  task automatic axw(logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    req.aw_valid = 1; req.aw_addr = a; req.w_valid = 1; req.w_data = d; req.w_strb = 4'hf; req.b_ready = 1;
    forever begin
      bit hs;
      #1 hs = rsp.aw_ready;
      @(negedge clk);
      if (hs) break;
    end
    req.aw_valid = 0; req.w_valid = 0;
    while (!rsp.b_valid) @(negedge clk);
    resp = rsp.b_resp;
    @(negedge clk);
  endtask

  task automatic axr(logic [31:0] a, output logic [31:0] d, output logic [1:0] resp, output int lat);
    @(negedge clk);
    req.ar_valid = 1; req.ar_addr = a; req.r_ready = 1;
    forever begin
      bit hs;
      #1 hs = rsp.ar_ready;
      @(negedge clk);
      if (hs) break;
    end
    req.ar_valid = 0;
    lat = 1;
    while (!rsp.r_valid) begin @(negedge clk); lat++; end
    d = rsp.r_data; resp = rsp.r_resp;
    @(negedge clk);
  endtask

  int run_cycles = 0, clear_cycles = 0, slot_errs = 0, exp_slot = 0;
  always @(posedge clk) begin
    if (clear) begin clear_cycles++; exp_slot = 0; end
    if (run) begin
      run_cycles++;
      if (fetch_addr != 5'((exp_slot + 1) % 5)) slot_errs++;
      exp_slot = (exp_slot + 1) % 5;
    end
  end

  initial begin
    logic [1:0] r; logic [31:0] d; int lat;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // registers
    axw(CGRA_REG_II, 5, r);           chk(r == RESP_OKAY, "II write");
    axw(CGRA_REG_CYCLES, 23, r);      chk(r == RESP_OKAY, "CYCLES write");
    axw(CGRA_REG_CLKEN_LO, 32'hA5A5_0F0F, r);
    axw(CGRA_REG_CLKEN_HI, 32'h1234_5678, r);
    axr(CGRA_REG_II, d, r, lat);      chk(d == 5, "II read");
    axr(CGRA_REG_CYCLES, d, r, lat);  chk(d == 23, "CYCLES read");
    chk(static_en == 64'h1234_5678_A5A5_0F0F, "static enables");
    axr(CGRA_REG_CLKEN_HI, d, r, lat); chk(d == 32'h1234_5678, "CLKEN_HI read");
    // configuration memory
    for (int k = 0; k < 40; k++) begin
      int p, s; logic [31:0] lo, hi;
      p = $urandom_range(0, 63); s = $urandom_range(0, 31); lo = $urandom; hi = $urandom;
      axw(CGRA_CM_BASE + 32'(p*256 + s*8), lo, r);
      axw(CGRA_CM_BASE + 32'(p*256 + s*8 + 4), hi, r);
      chk(cmm[p][s] == {hi, lo}, "CM write lands");
      axr(CGRA_CM_BASE + 32'(p*256 + s*8 + 4), d, r, lat);
      chk(d == hi && r == RESP_OKAY && lat == 2, "CM read hi");
      axr(CGRA_CM_BASE + 32'(p*256 + s*8), d, r, lat);
      chk(d == lo, "CM read lo");
    end
    // data memory
    for (int k = 0; k < 40; k++) begin
      int b, w; logic [15:0] v;
      b = $urandom_range(0, 7); w = $urandom_range(0, 4095); v = 16'($urandom);
      axw(CGRA_DM_BASE + 32'(b*'h4000 + w*4), {16'h0, v}, r);
      chk(dmm[b][w] == v, "DM write lands");
      axr(CGRA_DM_BASE + 32'(b*'h4000 + w*4), d, r, lat);
      chk(d == {16'h0, v} && lat == 2, "DM read");
    end
    axr(32'h0003_0000, d, r, lat);   chk(r == RESP_SLVERR, "unmapped read");
    axw(32'h0000_0050, 1, r);        chk(r == RESP_SLVERR, "unmapped register");
    // run
    axw(CGRA_REG_CTRL, 32'h3, r);    // irq enable + start
    chk(run || clear, "running");
    axr(CGRA_REG_STATUS, d, r, lat); chk(d[0] == 1'b1, "busy");
    axw(CGRA_CM_BASE, 1, r);         chk(r == RESP_SLVERR, "CM write while busy");
    axr(CGRA_DM_BASE, d, r, lat);    chk(r == RESP_SLVERR, "DM read while busy");
    while (!irq) @(posedge clk);
    chk(run_cycles == 23 && clear_cycles == 1, "run length");
    chk(slot_errs == 0, "slot sequence");
    axr(CGRA_REG_STATUS, d, r, lat); chk(d == 32'h2, "done");
    axr(CGRA_REG_CYCCNT, d, r, lat); chk(d == 23, "cycle count");
    axw(CGRA_REG_STATUS, 2, r);
    chk(!irq, "irq cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
