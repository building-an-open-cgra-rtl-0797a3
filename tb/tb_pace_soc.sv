// tb_pace_soc: end-to-end test of the PACE SoC at its full size.
//
// The testbench plays the RISC-V host on the CPU bus port. It puts two
// arrays A and B of N = 256 16-bit values into the on-chip SRAM, copies them
// into data memory bank 0 of the CGRA, loads a modulo-scheduled array-add
// kernel C[i] = A[i] + B[i] (II = 4) into the configuration memories of all
// 64 PEs, starts it, waits for the interrupt, copies C back into the SRAM and
// checks every element against its own sum, plus a sentinel past the end.
//
// The kernel (left side, rows 0-1, the memory column is column 0):
//   counter PE(0,HOPS)  slot0 SELECT(own result, -1), slot1 +1: i = 0,1,2..
//                       slot2 sends i toward the memory column
//   PE(0,1..HOPS-1)     pass i through on bypass (single-cycle multi-hop,
//                       crossing the cluster boundary for HOPS > 3);
//                       PE(0,1) also copies it south (multicast)
//   PE(0,0)             slot2 LOAD A[i] (port A of bank 0); the result is
//                       held through a NOP window of 3 cycles routed south
//   PE(1,1)             slot2 i+0x400, keeping i in its ALU operand-A
//                       register; slot0 i+0x800 from that register: the
//                       B address and, an iteration later, the C address
//   PE(1,0)             slot3 LOAD B[i] (port B) and latch A[i] in its north
//                       input register; slot0 ADD; slot1 STORE C[i]
// In the first iteration the operands are absent, their predicate flags are
// clear, and the STORE is suppressed by predication.
//
// Every mechanism is counted and must occur: single-cycle multi-hop and
// multicast transfers, an operand held in an ALU input register, loads and
// stores on both ports of a bank, a store suppressed by predication,
// NOP-gated cycles, statically gated PEs, the interrupt, accesses routed to
// the SDRAM and peripheral ports, a decode error on an unmapped address and
// SLVERR for a memory access while the CGRA runs. The cycle count of the run is checked too:
// one clear cycle plus 4 * (N + 1) run cycles.
module tb_pace_soc;
  import pace_pkg::*;

  localparam int N = 256;
  localparam int HOPS = 5;          // counter column
  localparam int SIDE = 0;          // 0: left memory column
  localparam logic [31:0] CG = 32'h2000_0000;
  localparam logic [31:0] SR = 32'h1000_0000;

  logic clk = 0, rst_n = 0, test_en = 0;
  axil_req_t cpu_req, sdram_req, periph_req;
  axil_rsp_t cpu_rsp, sdram_rsp, periph_rsp;
  logic cgra_irq;
  int checks = 0, failures = 0;

  pace_soc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  // ---------------------------------------------------------------- host bus
  task automatic axw(logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    cpu_req.aw_valid = 1; cpu_req.aw_addr = a; cpu_req.w_valid = 1; cpu_req.w_data = d;
    cpu_req.w_strb = 4'hf; cpu_req.b_ready = 1;
    while (cpu_req.aw_valid || cpu_req.w_valid) begin
      bit ahs, whs;
      #1;
      ahs = cpu_req.aw_valid && cpu_rsp.aw_ready;
      whs = cpu_req.w_valid && cpu_rsp.w_ready;
      @(negedge clk);
      if (ahs) cpu_req.aw_valid = 0;
      if (whs) cpu_req.w_valid = 0;
    end
    while (!cpu_rsp.b_valid) @(negedge clk);
    resp = cpu_rsp.b_resp;
    @(negedge clk);
  endtask

  task automatic axr(logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    cpu_req.ar_valid = 1; cpu_req.ar_addr = a; cpu_req.r_ready = 1;
    forever begin
      bit hs;
      #1 hs = cpu_rsp.ar_ready;
      @(negedge clk);
      if (hs) break;
    end
    cpu_req.ar_valid = 0;
    while (!cpu_rsp.r_valid) @(negedge clk);
    d = cpu_rsp.r_data; resp = cpu_rsp.r_resp;
    @(negedge clk);
  endtask

  // Stand-ins for the SDRAM and peripheral slaves: one register each, so a
  // write followed by a read shows the interconnect reached the right port.
  logic [31:0] sd_reg, pp_reg;
  int c_sd = 0, c_pp = 0;
  always_comb begin
    sdram_rsp = '0;
    sdram_rsp.aw_ready = sdram_req.aw_valid && sdram_req.w_valid && !sd_b;
    sdram_rsp.w_ready  = sdram_rsp.aw_ready;
    sdram_rsp.b_valid  = sd_b;
    sdram_rsp.ar_ready = sdram_req.ar_valid && !sd_r;
    sdram_rsp.r_valid  = sd_r;
    sdram_rsp.r_data   = sd_reg;
    periph_rsp = '0;
    periph_rsp.aw_ready = periph_req.aw_valid && periph_req.w_valid && !pp_b;
    periph_rsp.w_ready  = periph_rsp.aw_ready;
    periph_rsp.b_valid  = pp_b;
    periph_rsp.ar_ready = periph_req.ar_valid && !pp_r;
    periph_rsp.r_valid  = pp_r;
    periph_rsp.r_data   = pp_reg;
  end
  logic sd_b = 0, sd_r = 0, pp_b = 0, pp_r = 0;
  always @(posedge clk) begin
    if (sd_b && sdram_req.b_ready) sd_b <= 0;
    if (sd_r && sdram_req.r_ready) sd_r <= 0;
    if (sdram_rsp.aw_ready) begin sd_b <= 1; sd_reg <= sdram_req.w_data; c_sd++; end
    if (sdram_rsp.ar_ready) begin sd_r <= 1; c_sd++; end
    if (pp_b && periph_req.b_ready) pp_b <= 0;
    if (pp_r && periph_req.r_ready) pp_r <= 0;
    if (periph_rsp.aw_ready) begin pp_b <= 1; pp_reg <= periph_req.w_data; c_pp++; end
    if (periph_rsp.ar_ready) begin pp_r <= 1; c_pp++; end
  end

  // ---------------------------------------------------------------- kernel
  localparam logic [2:0] N_ = 3'd0, E_ = 3'd1, S_ = 3'd2, W_ = 3'd3, ALU = 3'd4, K = 3'd5, NO = 3'd7;
  localparam logic [2:0] TOW = SIDE ? E_ : W_;   // toward the memory column
  localparam logic [2:0] FRM = SIDE ? W_ : E_;   // input from the far side
  localparam int MCOL = SIDE ? 7 : 0;
  localparam int BANK = SIDE ? 4 : 0;

  function automatic int col_of(int k); return SIDE ? 7 - k : k; endfunction

  // route helper: outputs in dir_e order N,E,S,W
  function automatic logic [63:0] ins(opcode_e op, logic [2:0] n, logic [2:0] e, logic [2:0] s, logic [2:0] w,
                                      logic [2:0] a, logic [2:0] b, logic [3:0] rwe = 0, logic [3:0] rsel = 0,
                                      logic [15:0] k = 0, logic [4:0] nc = 0,
                                      logic [2:0] awe = 0, logic [2:0] asel = 0);
    return mk_instr(op, n, e, s, w, a, b, NO, rwe, rsel, k, nc, awe, asel);
  endfunction

  // out toward the memory column carrying `src`
  function automatic logic [63:0] fwd(opcode_e op, logic [2:0] src, logic [2:0] south, logic [2:0] a, logic [2:0] b,
                                      logic [15:0] k = 0);
    return SIDE ? ins(op, NO, src, south, NO, a, b, 0, 0, k) : ins(op, NO, NO, south, src, a, b, 0, 0, k);
  endfunction

  function automatic logic [63:0] kernel_word(int row, int k, int slot);
    logic [63:0] idle;
    idle = ins(OP_NOP, NO, NO, NO, NO, NO, NO);
    if (row == 0 && k == HOPS) begin                       // counter
      case (slot)
        0: return ins(OP_SEL, NO, NO, NO, NO, ALU, K, 0, 0, 16'hFFFF);
        1: return ins(OP_ADD, NO, NO, NO, NO, ALU, K, 0, 0, 16'd1);
        2: return fwd(OP_NOP, ALU, NO, NO, NO);
        default: return idle;
      endcase
    end
    if (row == 0 && k > 0 && k < HOPS) begin               // pass-through
      if (slot == 2) return fwd(OP_NOP, FRM, (k == 1) ? FRM : NO, NO, NO);
      return idle;
    end
    if (row == 0 && k == 0) begin                          // A loader
      case (slot)
        2: return ins(OP_LOAD, NO, NO, NO, NO, FRM, NO);
        3: return ins(OP_NOP, NO, NO, ALU, NO, NO, NO, 0, 0, 0, 5'd3);
        default: return ins(OP_NOP, NO, NO, ALU, NO, NO, NO);
      endcase
    end
    if (row == 1 && k == 1) begin                          // address generator
      case (slot)
        0: return ins(OP_ADD, NO, NO, NO, NO, NO, K, 0, 0, 16'h0800, 0, 0, 3'b001);
        1: return fwd(OP_NOP, ALU, NO, NO, NO);
        2: return ins(OP_ADD, NO, NO, NO, NO, N_, K, 0, 0, 16'h0400, 0, 3'b001, 0);
        3: return fwd(OP_NOP, ALU, NO, NO, NO);
        default: return idle;
      endcase
    end
    if (row == 1 && k == 0) begin                          // B loader, adder, storer
      case (slot)
        3: return ins(OP_LOAD, NO, NO, NO, NO, FRM, NO, 4'b0001, 0);
        0: return ins(OP_ADD, NO, NO, NO, NO, ALU, N_, 0, 4'b0001);
        1: return ins(OP_STORE, NO, NO, NO, NO, FRM, ALU);
        default: return idle;
      endcase
    end
    return idle;
  endfunction

  // ---------------------------------------------------------------- counters
  int c_multihop = 0, c_multicast = 0, c_loads_a = 0, c_loads_b = 0, c_stores = 0;
  int c_alureg = 0, c_pred_off = 0, c_nop_gated = 0, c_run = 0, c_clear = 0, c_irq = 0;
  int gp [64];
  bit cnt_on = 0;
  localparam int PE_CNT = col_of(HOPS);
  localparam int PE_M0  = MCOL;
  localparam int PE_M1  = 8 + MCOL;

  for (genvar i = 0; i < 64; i++) begin : g_gp
    always @(posedge dut.u_cgra.gclk_o[i]) if (cnt_on) gp[i]++;
  end

  always @(posedge clk) if (cnt_on) begin
    if (dut.u_cgra.clear) c_clear++;
    if (dut.u_cgra.run) begin
      c_run++;
      if (dut.u_cgra.u_ctrl.slot_q == 2 && dut.u_cgra.res_o[PE_CNT].p) begin
        // the counter's value reaches the memory PE and, by multicast, PE(1,1) this cycle
        if (dut.u_cgra.g_bank[BANK].pa.en && dut.u_cgra.g_bank[BANK].pa.addr == dut.u_cgra.res_o[PE_CNT].d[11:0])
          c_multihop++;
      end
      if (dut.u_cgra.u_ctrl.slot_q == 1 && dut.u_cgra.res_o[8 + col_of(1)].p &&
          dut.u_cgra.res_o[8 + col_of(1)].d == 16'h0800 + dut.u_cgra.res_o[PE_CNT].d)
        c_alureg++;
      if (dut.u_cgra.u_ctrl.slot_q == 3 && dut.u_cgra.res_o[8 + col_of(1)].p &&
          dut.u_cgra.res_o[8 + col_of(1)].d == 16'h0400 + dut.u_cgra.res_o[PE_CNT].d)
        c_multicast++;
      if (dut.u_cgra.g_bank[BANK].pa.en && !dut.u_cgra.g_bank[BANK].pa.we) c_loads_a++;
      if (dut.u_cgra.g_bank[BANK].pb.en && !dut.u_cgra.g_bank[BANK].pb.we) c_loads_b++;
      if (dut.u_cgra.g_bank[BANK].pb.en && dut.u_cgra.g_bank[BANK].pb.we) c_stores++;
      if (dut.u_cgra.u_ctrl.slot_q == 1 && !dut.u_cgra.g_bank[BANK].pb.en) c_pred_off++;
      if (!dut.u_cgra.gclk_o[PE_M0] && dut.u_cgra.u_ctrl.slot_q != 2) c_nop_gated++;
    end
    if (cgra_irq) c_irq++;
  end

  // ---------------------------------------------------------------- test
  initial begin
    logic [1:0] r; logic [31:0] d;
    logic [15:0] a [N+1], b [N+1];
    int t0, t1;
    cpu_req = '0;
    for (int i = 0; i < 64; i++) gp[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the data starts in the on-chip SRAM
    for (int i = 0; i <= N; i++) begin
      a[i] = 16'($urandom); b[i] = 16'($urandom);
      axw(SR + 32'(i * 4), {b[i], a[i]}, r);
    end
    axw(32'hC000_0000, 0, r);  chk(r == RESP_DECERR, "unmapped write -> DECERR");
    axr(32'h0000_1000, d, r);  chk(r == RESP_DECERR, "unmapped read -> DECERR");
    axw(32'h8000_0040, 32'h1234_5678, r); chk(r == RESP_OKAY, "SDRAM port write");
    axw(32'h4000_0010, 32'h0000_00A5, r); chk(r == RESP_OKAY, "peripheral port write");
    axr(32'h8000_0040, d, r); chk(d == 32'h1234_5678, "SDRAM port read");
    axr(32'h4000_0010, d, r); chk(d == 32'h0000_00A5, "peripheral port read");
    chk(c_sd == 2 && c_pp == 2, "each external port saw its own accesses");
    // host copies A and B into bank BANK, and a sentinel past the end of C
    for (int i = 0; i <= N; i++) begin
      axr(SR + 32'(i * 4), d, r);
      chk(d == {b[i], a[i]} && r == RESP_OKAY, "SRAM read back");
      axw(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + i * 4), {16'h0, d[15:0]}, r);
      axw(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + ('h400 + i) * 4), {16'h0, d[31:16]}, r);
    end
    axw(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + ('h800 + N) * 4), 32'h5A5A, r);
    // configuration of all 64 PEs, 4 slots each
    for (int row = 0; row < 8; row++)
      for (int col = 0; col < 8; col++)
        for (int s = 0; s < 4; s++) begin
          logic [63:0] w;
          int k;
          k = SIDE ? 7 - col : col;
          w = kernel_word(row, k, s);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + s * 8), w[31:0], r);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + s * 8 + 4), w[63:32], r);
        end
    axr(CG + CGRA_CM_BASE + 32'(PE_CNT * 256 + 8), d, r);
    chk(d == kernel_word(0, HOPS, 1)[31:0], "configuration read back");
    // only the four computing PEs keep their clock; the pass-through PEs route
    axw(CG + CGRA_REG_CLKEN_LO, (32'(1) << PE_CNT) | (32'(1) << PE_M0) | (32'(1) << PE_M1) |
                                (32'(1) << (8 + col_of(1))), r);
    axw(CG + CGRA_REG_CLKEN_HI, 0, r);
    axw(CG + CGRA_REG_II, 4, r);
    axw(CG + CGRA_REG_CYCLES, 4 * (N + 1), r);
    cnt_on = 1;
    t0 = $time;
    axw(CG + CGRA_REG_CTRL, 3, r);
    axw(CG + CGRA_DM_BASE, 0, r); chk(r == RESP_SLVERR, "DM write while running -> SLVERR");
    while (!cgra_irq) @(posedge clk);
    t1 = $time;
    @(negedge clk); cnt_on = 0;
    axr(CG + CGRA_REG_CYCCNT, d, r); chk(d == 4 * (N + 1), "cycle counter");
    chk(c_run == 4 * (N + 1) && c_clear == 1, "run length: 1 clear + 4(N+1) cycles");
    axw(CG + CGRA_REG_STATUS, 2, r);
    chk(!cgra_irq, "interrupt cleared");
    // results back to the SRAM, then checked from there
    for (int i = 0; i <= N; i++) begin
      axr(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + ('h800 + i) * 4), d, r);
      axw(SR + 32'h0001_0000 + 32'(i * 4), d, r);
    end
    for (int i = 0; i <= N; i++) begin
      axr(SR + 32'h0001_0000 + 32'(i * 4), d, r);
      if (i < N) begin chk(d[15:0] == 16'(a[i] + b[i]), "C[i] = A[i] + B[i]"); if (d[15:0] != 16'(a[i] + b[i])) $display("i=%0d got %h a %h b %h", i, d[15:0], a[i], b[i]); end
      else       chk(d[15:0] == 16'h5A5A, "sentinel untouched");
    end
    // mechanisms
    $display("alu_operand_register=%0d", c_alureg);
    chk(c_alureg == N, "ALU operand register supplies i one iteration later");
    $display("multihop=%0d multicast=%0d loadsA=%0d loadsB=%0d stores=%0d pred_off=%0d nop_gated=%0d irq=%0d",
             c_multihop, c_multicast, c_loads_a, c_loads_b, c_stores, c_pred_off, c_nop_gated, c_irq);
    chk(c_multihop == N + 1, "single-cycle multi-hop transfers");
    chk(c_multicast == N + 1, "multicast transfers");
    chk(c_loads_a == N + 1 && c_loads_b == N + 1, "loads on both ports");
    chk(c_stores == N, "stores");
    chk(c_pred_off == 1, "store suppressed by predication");
    chk(c_nop_gated == 3 * (N + 1), "NOP-gated cycles of the A loader");
    chk(gp[1] == 1 && gp[63] == 1, "statically gated PEs see only the clear pulse");
    chk(c_irq > 0, "interrupt");
    $display("run took %0d cycles", (t1 - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
