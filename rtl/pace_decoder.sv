// pace_decoder: decodes a PE's 64-bit configuration word.
//
// Combinational. It splits the instruction read from the configuration memory
// into the fields of instr_t (opcode, the 21-bit router configuration as seven
// 3-bit crossbar selects, input register write enables and bypass selects,
// 16-bit constant, NOP count, ALU input register controls) and classifies it. The 5-bit opcode and the
// 21-bit router field widths are the paper's; where the fields sit and the
// rest of the word are this design's layout (see pace_pkg).
//
// An instruction with an opcode outside the defined set, or with a reserved
// bit (63:61) set, is illegal: it is reported on `illegal` and decoded as a
// NOP of one cycle that routes nothing, so a corrupted word cannot drive the
// links. A NOP with count 0 is treated as a count of 1.
module pace_decoder
  import pace_pkg::*;
(
  input  logic [INSTR_W-1:0]  word,
  output instr_t              instr,
  output logic                is_nop,
  output logic                is_mem,
  output logic                illegal,
  output logic [NOPCNT_W-1:0] nop_len
);

  logic opc_ok;

  always_comb begin
    opc_ok  = (word[OPC_W-1:0] <= OP_STORE);
    illegal = !opc_ok || (word[INSTR_W-1:61] != '0);
    if (illegal) begin
      instr      = '0;
      instr.opc  = OP_NOP;
      for (int i = 0; i < N_XOUT; i++) instr.xbar[i] = SRC_NONE;
    end else begin
      instr = instr_t'(word[60:0]);
    end
    is_nop  = (instr.opc == OP_NOP);
    is_mem  = (instr.opc == OP_LOAD) || (instr.opc == OP_STORE);
    nop_len = (is_nop && instr.nop_cnt != '0) ? instr.nop_cnt : NOPCNT_W'(1);
  end

endmodule
