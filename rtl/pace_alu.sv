// pace_alu: the 16-bit predicated ALU of a PACE processing element.
//
// Purely combinational. It takes the two operand flits A and B and the
// predicate flit P chosen by the PE's crossbar, and produces the result flit
// that the PE registers at the end of the cycle, plus a data memory request
// for LOAD and STORE.
//
// Predication follows the paper: every operand carries a predicate flag, and
// an operation executes only when its operands' flags and the predicate input
// are all set. An operation that does not execute produces a flit with its
// predicate flag clear, so the condition propagates to later operations;
// SELECT then resolves a control path by taking whichever of its two operands
// has its flag set (A first). Opcode numbering, the operation set beyond the
// paper's examples (add, shifts, multiply, select, load/store) and the
// predicate input's truth test (flag set and bit 0 set) are this design's
// choices. NOP (5'h00) is the paper's encoding.
//
// Outputs:
//   res_we  the PE should write res into its result register (all opcodes
//           except NOP and STORE)
//   res     the result; for LOAD only res.p is meaningful, the data arrives
//           from memory one cycle later
//   mem_req request to the data memory bank (only when MEM_CAPABLE)
module pace_alu
  import pace_pkg::*;
#(
  parameter bit MEM_CAPABLE = 1'b1
) (
  input  opcode_e  opc,
  input  flit_t    a,
  input  flit_t    b,
  input  flit_t    pred,
  output logic     res_we,
  output flit_t    res,
  output logic     is_load,
  output mem_req_t mem_req
);

  logic          pred_ok, ex2, ex1, exec;
  logic [DW-1:0] val;
  logic [2*DW-1:0] prod;

  assign pred_ok = pred.p & pred.d[0];
  assign ex2     = pred_ok & a.p & b.p;   // two-operand operations
  assign ex1     = pred_ok & a.p;         // one-operand operations
  assign prod    = a.d * b.d;

  always_comb begin
    val     = '0;
    exec    = 1'b0;
    res_we  = 1'b1;
    is_load = 1'b0;
    mem_req = MEM_REQ_IDLE;
    unique case (opc)
      OP_NOP:   begin res_we = 1'b0; end
      OP_ADD:   begin exec = ex2; val = a.d + b.d; end
      OP_SUB:   begin exec = ex2; val = a.d - b.d; end
      OP_MUL:   begin exec = ex2; val = prod[DW-1:0]; end
      OP_AND:   begin exec = ex2; val = a.d & b.d; end
      OP_OR:    begin exec = ex2; val = a.d | b.d; end
      OP_XOR:   begin exec = ex2; val = a.d ^ b.d; end
      OP_SHL:   begin exec = ex2; val = a.d << b.d[3:0]; end
      OP_SRL:   begin exec = ex2; val = a.d >> b.d[3:0]; end
      OP_SRA:   begin exec = ex2; val = DW'($signed(a.d) >>> b.d[3:0]); end
      OP_CMPEQ: begin exec = ex2; val = DW'(a.d == b.d); end
      OP_CMPNE: begin exec = ex2; val = DW'(a.d != b.d); end
      OP_CMPLT: begin exec = ex2; val = DW'($signed(a.d) < $signed(b.d)); end
      OP_CMPGT: begin exec = ex2; val = DW'($signed(a.d) > $signed(b.d)); end
      OP_SEL:   begin exec = pred_ok & (a.p | b.p); val = a.p ? a.d : b.d; end
      OP_MOV:   begin exec = ex1; val = a.d; end
      OP_LOAD:  begin
        exec    = ex1 & MEM_CAPABLE;
        is_load = 1'b1;
        mem_req = '{en: exec, we: 1'b0, addr: a.d[DM_AW-1:0], wdata: '0};
      end
      OP_STORE: begin
        res_we  = 1'b0;
        exec    = ex2 & MEM_CAPABLE;
        mem_req = '{en: exec, we: exec, addr: a.d[DM_AW-1:0], wdata: b.d};
      end
      default:  begin res_we = 1'b0; end  // unused opcodes behave as NOP
    endcase
    res = '{p: exec, d: val};
  end

endmodule
