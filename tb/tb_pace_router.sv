// tb_pace_router: self-checking test of the PE router.
//
// Random links, constants and configurations each cycle. The testbench keeps
// its own copy of the four input registers and checks every crossbar output
// against it: direct (bypass) versus registered inputs, ALU and constant
// sources, the "no value" source, the unconditional predicate, the three
// ALU input registers (capture and select), and clear.
// Register capture takes effect at the clock edge (one cycle).
module tb_pace_router;
  import pace_pkg::*;

  logic clk = 0, rst_n = 0, en, clear;
  flit_t [NDIR-1:0] link_in, link_out;
  flit_t alu_res, op_a, op_b, op_p;
  logic [DW-1:0] konst;
  logic [N_XOUT-1:0][2:0] xbar;
  logic [NDIR-1:0] reg_we, reg_sel;
  logic [2:0] alu_we, alu_sel;
  flit_t [NDIR-1:0] mreg;
  flit_t mop [3];
  int checks = 0, failures = 0;

  pace_router dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t model(logic [2:0] s, bit is_pred);
    flit_t e [4];
    for (int d = 0; d < 4; d++) e[d] = reg_sel[d] ? mreg[d] : link_in[d];
    if (s < 4) return e[s];
    if (s == 4) return alu_res;
    if (s == 5) return '{p: 1'b1, d: konst};
    return is_pred ? '{p: 1'b1, d: 16'd1} : '{p: 1'b0, d: 16'd0};
  endfunction

  task automatic chk(flit_t got, flit_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  int bypass_used = 0, reg_used = 0, alu_reg_used = 0;
  flit_t nxt [3];
  initial begin
    en = 0; clear = 0; link_in = '0; alu_res = '0; konst = '0; xbar = '1; reg_we = '0; reg_sel = '0;
    mreg = '0; alu_we = '0; alu_sel = '0; foreach (mop[i]) mop[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      clear = (it % 500 == 250);
      for (int d = 0; d < 4; d++) link_in[d] = flit_t'($urandom);
      alu_res = flit_t'($urandom);
      konst = 16'($urandom);
      for (int o = 0; o < N_XOUT; o++) xbar[o] = 3'($urandom);
      reg_we = 4'($urandom); reg_sel = 4'($urandom);
      alu_we = 3'($urandom); alu_sel = 3'($urandom);
      #1;
      for (int o = 0; o < 4; o++) chk(link_out[o], model(xbar[o], 0), "link out");
      chk(op_a, alu_sel[0] ? mop[0] : model(xbar[XO_A], 0), "op_a");
      chk(op_b, alu_sel[1] ? mop[1] : model(xbar[XO_B], 0), "op_b");
      chk(op_p, alu_sel[2] ? mop[2] : model(xbar[XO_P], 1), "op_p");
      if (alu_sel != 0) alu_reg_used++;
      nxt[0] = model(xbar[XO_A], 0); nxt[1] = model(xbar[XO_B], 0); nxt[2] = model(xbar[XO_P], 1);
      if (reg_sel != 0) reg_used++;
      if (reg_sel != 4'hf) bypass_used++;
      @(posedge clk);
      if (clear) begin mreg = '0; foreach (mop[i]) mop[i] = '0; end
      else if (en) begin
        for (int d = 0; d < 4; d++) if (reg_we[d]) mreg[d] = link_in[d];
        for (int i = 0; i < 3; i++) if (alu_we[i]) mop[i] = nxt[i];
      end
    end
    checks++;
    if (reg_used == 0 || bypass_used == 0 || alu_reg_used == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
