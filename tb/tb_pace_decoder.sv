// tb_pace_decoder: self-checking test of the instruction decoder.
//
// Builds instruction words from random fields with the package's mk_instr
// and checks every decoded field, the NOP and memory classification, the NOP
// length (count 0 counts as 1) and the handling of illegal words.
module tb_pace_decoder;
  import pace_pkg::*;
  logic [63:0] word;
  instr_t instr;
  logic is_nop, is_mem, illegal;
  logic [4:0] nop_len;
  int checks = 0, failures = 0;

  pace_decoder dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s word=%h", w, word); end
  endtask

  initial begin
    logic [2:0] x [7];
    logic [3:0] we, sel;
    logic [15:0] k;
    logic [4:0] nc, op;
    logic [2:0] aw, as;
    for (int it = 0; it < 3000; it++) begin
      op = 5'($urandom_range(0, 17));
      foreach (x[i]) x[i] = 3'($urandom);
      we = 4'($urandom); sel = 4'($urandom); k = 16'($urandom); nc = 5'($urandom);
      aw = 3'($urandom); as = 3'($urandom);
      word = mk_instr(opcode_e'(op), x[0], x[1], x[2], x[3], x[4], x[5], x[6], we, sel, k, nc, aw, as);
      #1;
      chk(!illegal, "legal");
      chk(instr.opc == opcode_e'(op), "opcode");
      for (int i = 0; i < 7; i++) chk(instr.xbar[i] == x[i], "xbar");
      chk(instr.reg_we == we && instr.reg_sel == sel, "reg ctl");
      chk(instr.konst == k, "const");
      chk(instr.alu_we == aw && instr.alu_sel == as, "ALU register ctl");
      chk(is_nop == (op == 0), "is_nop");
      chk(is_mem == (op == 5'h10 || op == 5'h11), "is_mem");
      chk(nop_len == ((op == 0 && nc != 0) ? nc : 5'd1), "nop_len");
      // corrupt it
      if (it % 3 == 0) word[61 + $urandom_range(0, 2)] = 1'b1;
      else             word[4:0] = 5'($urandom_range(18, 31));
      #1;
      chk(illegal && is_nop && instr.xbar[0] == 3'd7 && instr.xbar[6] == 3'd7, "illegal");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
