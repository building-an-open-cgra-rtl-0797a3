// tb_pace_disparity: the sum-of-absolute-differences core of a disparity
// (stereo matching) workload, on the 8x8 CGRA.
//
// Computes S = sum |A[i] - B[i]| (modulo 2^16) over N = 200 pairs of 16-bit
// values in one run of a hand-scheduled loop with II = 4 on rows 0-1 next to
// data memory bank 0. The absolute value is formed with predication instead
// of a branch: the difference d is compared with 0, a multiplication by -1 is
// predicated on that comparison, and SELECT takes the negated value when it
// exists and d otherwise, so both control paths are merged in the array. The
// host (this testbench, on the AXI4-Lite port) loads A to words 0.., B to
// words 0x400.., runs 4 * (N + 2) cycles and reads S from word 0x800, which
// the loop rewrites with the running sum every iteration.
//
//   counter PE(0,3)  slot0 SELECT(own result, -1), slot1 +1; slot2 sends i west
//   PE(0,1)          slot2 forwards i west and south; slot0 sends A[i] south
//   PE(0,0)          slot2 LOAD A[i]; NOP window of 3 cycles routing it east
//   PE(1,0)          slot3 LOAD B[i]; slot0 sends it east; slot1 STORE S
//   PE(1,1)          slot0 d = A - B; slot1 sends d east and relays S west;
//                    slot2 i + 0x400, the B address, sent west in slot3
//   PE(1,2)          slot1 flag = (0 > d), keeping d in its operand-B
//                    register; slot2 n = -1 * d predicated on the flag;
//                    slot3 SELECT(n, d) = |d|; slot0 sends |d| east;
//                    slot1 relays S west
//   PE(1,3)          slot3 SELECT(own result, 0) starts the sum at 0;
//                    slot0 S += |d|; slot1 sends S west, three hops to the
//                    storing PE in one cycle
//
// Counted: negations that executed (pairs with A < B), negations that were
// predicated off while d was valid (A >= B), valid absolute values and
// executed stores; the sum is compared with one computed here.
module tb_pace_disparity;
  import pace_pkg::*;

  localparam int N = 200;
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

  localparam int PE_ABS = 10, PE_ACC = 11;

  function automatic logic [63:0] i3(opcode_e op, logic [2:0] n, logic [2:0] e, logic [2:0] s, logic [2:0] w,
                                     logic [2:0] a, logic [2:0] b, logic [2:0] p, logic [15:0] k = 0,
                                     logic [4:0] nc = 0, logic [2:0] awe = 0, logic [2:0] asel = 0);
    return mk_instr(op, n, e, s, w, a, b, p, 0, 0, k, nc, awe, asel);
  endfunction

  function automatic logic [63:0] kernel_word(int row, int k, int slot);
    logic [63:0] idle;
    idle = i3(OP_NOP, NO, NO, NO, NO, NO, NO, NO);
    if (row == 0) begin
      case (k)
        3: case (slot)                                                  // counter
             0: return i3(OP_SEL, NO, NO, NO, NO, ALU, K, NO, 16'hFFFF);
             1: return i3(OP_ADD, NO, NO, NO, NO, ALU, K, NO, 16'd1);
             2: return i3(OP_NOP, NO, NO, NO, ALU, NO, NO, NO);
             default: return idle;
           endcase
        2: return (slot == 2) ? i3(OP_NOP, NO, NO, NO, E_, NO, NO, NO) : idle;
        1: case (slot)
             2: return i3(OP_NOP, NO, NO, E_, E_, NO, NO, NO);
             0: return i3(OP_NOP, NO, NO, W_, NO, NO, NO, NO);
             default: return idle;
           endcase
        0: case (slot)                                                  // A loader
             2: return i3(OP_LOAD, NO, NO, NO, NO, E_, NO, NO);
             3: return i3(OP_NOP, NO, ALU, NO, NO, NO, NO, NO, 0, 5'd3);
             default: return i3(OP_NOP, NO, ALU, NO, NO, NO, NO, NO);
           endcase
        default: return idle;
      endcase
    end
    if (row == 1) begin
      case (k)
        0: case (slot)                                                  // B loader, storer
             3: return i3(OP_LOAD, NO, NO, NO, NO, E_, NO, NO);
             0: return i3(OP_NOP, NO, ALU, NO, NO, NO, NO, NO);
             1: return i3(OP_STORE, NO, NO, NO, NO, K, E_, NO, 16'h0800);
             default: return idle;
           endcase
        1: case (slot)                                                  // difference, B address
             0: return i3(OP_SUB, NO, NO, NO, NO, N_, W_, NO);
             1: return i3(OP_NOP, NO, ALU, NO, E_, NO, NO, NO);
             2: return i3(OP_ADD, NO, NO, NO, NO, N_, K, NO, 16'h0400);
             3: return i3(OP_NOP, NO, NO, NO, ALU, NO, NO, NO);
             default: return idle;
           endcase
        2: case (slot)                                                  // absolute value
             1: return i3(OP_CMPGT, NO, NO, NO, E_, K, W_, NO, 16'h0000, 0, 3'b010, 0);
             2: return i3(OP_MUL, NO, NO, NO, NO, K, NO, ALU, 16'hFFFF, 0, 0, 3'b010);
             3: return i3(OP_SEL, NO, NO, NO, NO, ALU, NO, NO, 0, 0, 0, 3'b010);
             0: return i3(OP_NOP, NO, ALU, NO, NO, NO, NO, NO);
             default: return idle;
           endcase
        3: case (slot)                                                  // accumulator
             3: return i3(OP_SEL, NO, NO, NO, NO, ALU, K, NO, 16'h0000);
             0: return i3(OP_ADD, NO, NO, NO, NO, W_, ALU, NO);
             1: return i3(OP_NOP, NO, NO, NO, ALU, NO, NO, NO);
             default: return idle;
           endcase
        default: return idle;
      endcase
    end
    return idle;
  endfunction

  // ---------------------------------------------------------------- counters
  // PE(1,2) holds n in slot 3 and |d| in slot 0; a valid |d| without a
  // valid n before it means the negation was predicated off.
  int c_neg = 0, c_skip = 0, c_abs = 0, c_stores = 0;
  bit neg_seen = 0;
  always @(posedge clk) if (dut.run) begin
    if (dut.u_ctrl.slot_q == 3 && dut.res_o[PE_ABS].p) c_neg++;
    if (dut.u_ctrl.slot_q == 3) neg_seen <= dut.res_o[PE_ABS].p;
    if (dut.u_ctrl.slot_q == 0 && dut.res_o[PE_ABS].p) begin
      c_abs++;
      if (!neg_seen) c_skip++;
    end
    if (dut.u_ctrl.slot_q == 1 && dut.g_bank[0].pb.en) c_stores++;
  end

  // ---------------------------------------------------------------- test
  initial begin
    logic [1:0] r; logic [31:0] d;
    logic [15:0] a [N + 2], b [N + 2], s;
    int neg;
    cpu_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    s = 0; neg = 0;
    for (int i = 0; i < N + 2; i++) begin
      a[i] = (i < N) ? 16'($urandom_range(16'h3FFF)) : 16'h0;
      b[i] = (i < N) ? 16'($urandom_range(16'h3FFF)) : 16'h0;
      if (i % 17 == 5 && i < N) b[i] = a[i];                      // some equal pairs
      if (i < N) begin
        s += (a[i] >= b[i]) ? a[i] - b[i] : b[i] - a[i];
        if (a[i] < b[i]) neg++;
      end
    end
    for (int row = 0; row < 8; row++)
      for (int col = 0; col < 8; col++)
        for (int sl = 0; sl < 4; sl++) begin
          logic [63:0] w;
          w = kernel_word(row, col, sl);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + sl * 8), w[31:0], r);
          axw(CG + CGRA_CM_BASE + 32'((row * 8 + col) * 256 + sl * 8 + 4), w[63:32], r);
        end
    for (int i = 0; i < N + 2; i++) begin
      axw(CG + CGRA_DM_BASE + 32'(i * 4), {16'h0, a[i]}, r);
      axw(CG + CGRA_DM_BASE + 32'(('h400 + i) * 4), {16'h0, b[i]}, r);
    end
    axw(CG + CGRA_REG_CLKEN_LO, 32'h0000_0F0F, r);
    axw(CG + CGRA_REG_CLKEN_HI, 0, r);
    axw(CG + CGRA_REG_II, 4, r);
    axw(CG + CGRA_REG_CYCLES, 4 * (N + 2), r);
    axw(CG + CGRA_REG_CTRL, 3, r);
    while (!cgra_irq) @(posedge clk);
    axr(CG + CGRA_REG_CYCCNT, d, r);
    chk(d == 4 * (N + 2), "run length 4(N+2)");
    axw(CG + CGRA_REG_STATUS, 2, r);
    axr(CG + CGRA_DM_BASE + 32'('h800 * 4), d, r);
    chk(d[15:0] == s, "sum of absolute differences");
    $display("sad got %h exp %h; neg=%0d (exp %0d) skip=%0d abs=%0d stores=%0d",
             d[15:0], s, c_neg, neg, c_skip, c_abs, c_stores);
    chk(c_neg == neg, "negations executed for A < B");
    chk(c_skip == N - neg, "negations predicated off for A >= B");
    chk(c_abs == N, "one absolute value per pair");
    chk(c_stores == N, "one store per pair");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
