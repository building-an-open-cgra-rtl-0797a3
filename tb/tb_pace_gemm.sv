// tb_pace_gemm: a GeMM workload on the 8x8 CGRA.
//
// Computes C = A x B for 8x8 matrices of 16-bit values (products and sums
// modulo 2^16) with a hand-scheduled multiply-accumulate loop, II = 4, on
// rows 0-1 next to data memory bank 0. The host (this testbench, on the AXI4-
// Lite port) loads the kernel once; for each element C[r][c] it writes row r
// of A to words 0..7 and column c of B to words 0x400..0x407, starts a run of
// 4 * (K + 1) cycles, waits for the interrupt and reads the dot product from
// word 0x800. Every element is compared with a product computed here.
//
// The loop (K = 8 iterations plus one of pipeline fill):
//   counter PE(0,3)   slot0 SELECT(own result, -1), slot1 +1: k = 0,1,2..
//                     slot2 sends k west, two hops in one cycle
//   PE(0,1)           slot2 forwards k west and south (multicast)
//   PE(0,0)           slot2 LOAD A[k]; NOP window of 3 cycles routing it south
//   PE(1,1)           slot2 k+0x400, slot3 sends it west; it also forwards the
//                     product east in slot1 and the sum west in slot2
//   PE(1,0)           slot3 LOAD B[k] and catch A[k] in its north register;
//                     slot0 MUL; slot1 product east; slot2 STORE sum to 0x800
//   PE(1,2)           accumulator: slot0 SELECT(own result, 0) starts the sum
//                     at 0 in the first iteration, slot1 ADD product, slot2
//                     sends the sum west
// The accumulator is a loop-carried dependence through one result register;
// in the fill iteration the product is absent and predication keeps the
// ADD and the STORE from taking effect.
//
// Counted: runs, MAC operations (accumulator updates with a valid product),
// predicated-off stores (one per run) and interrupts; each must occur.
module tb_pace_gemm;
  import pace_pkg::*;

  localparam int M = 8, KD = 8, NC = 8;
  localparam int HOPS = 3;          // counter column
  localparam int SIDE = 0;          // left memory column
  localparam logic [31:0] CG = 32'h0;

  logic clk = 0, rst_n = 0, test_en = 0;
  axil_req_t cpu_req;
  axil_rsp_t cpu_rsp;
  logic cgra_irq, run_o;
  flit_t [63:0] res_o;
  logic [63:0] gclk_o;
  int checks = 0, failures = 0;

  pace_cgra dut (.clk(clk), .rst_n(rst_n), .test_en(test_en), .axi_req(cpu_req), .axi_rsp(cpu_rsp),
                 .irq(cgra_irq), .res_o(res_o), .gclk_o(gclk_o), .run_o(run_o));
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


  // out away from the memory column carrying `src`
  function automatic logic [63:0] away(opcode_e op, logic [2:0] src, logic [2:0] a, logic [2:0] b, logic [15:0] k = 0);
    return SIDE ? ins(op, NO, NO, NO, src, a, b, 0, 0, k) : ins(op, NO, src, NO, NO, a, b, 0, 0, k);
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
    if (row == 0 && k > 0 && k < HOPS)                     // pass-through
      return (slot == 2) ? fwd(OP_NOP, FRM, (k == 1) ? FRM : NO, NO, NO) : idle;
    if (row == 0 && k == 0) begin                          // A loader
      case (slot)
        2: return ins(OP_LOAD, NO, NO, NO, NO, FRM, NO);
        3: return ins(OP_NOP, NO, NO, ALU, NO, NO, NO, 0, 0, 0, 5'd3);
        default: return ins(OP_NOP, NO, NO, ALU, NO, NO, NO);
      endcase
    end
    if (row == 1 && k == 1) begin                          // B address, relay
      case (slot)
        1: return away(OP_NOP, TOW, NO, NO);
        2: return SIDE ? ins(OP_ADD, NO, W_, NO, NO, N_, K, 0, 0, 16'h0400)
                       : ins(OP_ADD, NO, NO, NO, E_, N_, K, 0, 0, 16'h0400);
        3: return fwd(OP_NOP, ALU, NO, NO, NO);
        default: return idle;
      endcase
    end
    if (row == 1 && k == 2) begin                          // accumulator
      case (slot)
        0: return ins(OP_SEL, NO, NO, NO, NO, ALU, K, 0, 0, 16'h0000);
        1: return ins(OP_ADD, NO, NO, NO, NO, TOW, ALU);
        2: return fwd(OP_NOP, ALU, NO, NO, NO);
        default: return idle;
      endcase
    end
    if (row == 1 && k == 0) begin                          // B loader, multiplier, storer
      case (slot)
        3: return ins(OP_LOAD, NO, NO, NO, NO, FRM, NO, 4'b0001, 0);
        0: return ins(OP_MUL, NO, NO, NO, NO, ALU, N_, 0, 4'b0001);
        1: return away(OP_NOP, ALU, NO, NO);
        2: return ins(OP_STORE, NO, NO, NO, NO, K, FRM, 0, 0, 16'h0800);
        default: return idle;
      endcase
    end
    return idle;
  endfunction

  // ---------------------------------------------------------------- counters
  localparam int PE_ACC = 8 + col_of(2);
  localparam int PE_M1  = 8 + MCOL;
  int c_runs = 0, c_mac = 0, c_pred_off = 0, c_irq = 0;
  bit irq_d = 0;
  always @(posedge clk) begin
    if (dut.clear) c_runs++;
    if (dut.run && dut.u_ctrl.slot_q == 1 && dut.res_o[PE_M1].p) c_mac++;
    if (dut.run && dut.u_ctrl.slot_q == 2 && !dut.g_bank[BANK].pb.en) c_pred_off++;
    irq_d <= cgra_irq;
    if (cgra_irq && !irq_d) c_irq++;
  end

  // ---------------------------------------------------------------- test
  initial begin
    logic [1:0] r; logic [31:0] d;
    logic [15:0] a [M][KD], b [KD][NC], c;
    int t0, cyc;
    cpu_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (a[i, j]) a[i][j] = 16'($urandom);
    foreach (b[i, j]) b[i][j] = 16'($urandom);
    for (int row = 0; row < 8; row++)
      for (int col = 0; col < 8; col++)
        for (int s = 0; s < 4; s++) begin
          logic [63:0] w;
          w = kernel_word(row, SIDE ? 7 - col : col, s);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + s * 8), w[31:0], r);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + s * 8 + 4), w[63:32], r);
        end
    axw(CG + CGRA_REG_CLKEN_LO, (32'(1) << col_of(HOPS)) | (32'(1) << MCOL) | (32'(1) << PE_M1) |
                                (32'(1) << (8 + col_of(1))) | (32'(1) << PE_ACC), r);
    axw(CG + CGRA_REG_CLKEN_HI, 0, r);
    axw(CG + CGRA_REG_II, 4, r);
    axw(CG + CGRA_REG_CYCLES, 4 * (KD + 1), r);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < NC; j++) begin
        for (int k = 0; k < KD; k++) begin
          axw(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + k * 4), {16'h0, a[i][k]}, r);
          axw(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + ('h400 + k) * 4), {16'h0, b[k][j]}, r);
        end
        axw(CG + CGRA_REG_CTRL, 3, r);
        t0 = c_runs;
        while (!cgra_irq) @(posedge clk);
        axr(CG + CGRA_REG_CYCCNT, d, r);
        chk(d == 4 * (KD + 1), "run length 4(K+1)");
        axw(CG + CGRA_REG_STATUS, 2, r);
        axr(CG + CGRA_DM_BASE + 32'(BANK * 'h4000 + 'h800 * 4), d, r);
        c = 0;
        for (int k = 0; k < KD; k++) c += 16'(a[i][k] * b[k][j]);
        chk(d[15:0] == c, "C[i][j]");
        if (d[15:0] != c) $display("C[%0d][%0d] got %h exp %h", i, j, d[15:0], c);
      end
    $display("runs=%0d mac=%0d pred_off=%0d irq=%0d", c_runs, c_mac, c_pred_off, c_irq);
    chk(c_runs == M * NC, "runs");
    chk(c_mac == M * NC * KD, "MAC operations");
    chk(c_pred_off == M * NC, "one predicated-off store per run");
    chk(c_irq == M * NC, "interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
