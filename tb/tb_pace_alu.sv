// tb_pace_alu: self-checking test of the PE ALU.
//
// Drives random operands, predicate flags and predicate inputs for every
// opcode and compares the result, its predicate flag, the result-write enable
// and the memory request with a reference model written here from the
// operation definitions. Combinational block: no latency to check.
module tb_pace_alu;
  import pace_pkg::*;

  opcode_e  opc;
  flit_t    a, b, p;
  logic     res_we, is_load;
  flit_t    res;
  mem_req_t mreq;
  int checks = 0, failures = 0;

  pace_alu #(.MEM_CAPABLE(1'b1)) dut (.opc(opc), .a(a), .b(b), .pred(p),
    .res_we(res_we), .res(res), .is_load(is_load), .mem_req(mreq));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s opc=%0d a=%h/%b b=%h/%b p=%h/%b -> res=%h/%b we=%b", what, opc,
               a.d, a.p, b.d, b.p, p.d, p.p, res.d, res.p, res_we);
    end
  endtask

  initial begin
    logic [15:0] x, y, ev;
    logic pok, ep, ewe;
    for (int it = 0; it < 4000; it++) begin
      opc = opcode_e'($urandom_range(0, 17));
      x = 16'($urandom); y = 16'($urandom);
      if (it % 4 == 0) y = x;  // exercise equal compares
      a = '{p: ($urandom_range(0, 7) != 0), d: x};
      b = '{p: ($urandom_range(0, 7) != 0), d: y};
      p = '{p: ($urandom_range(0, 7) != 0), d: 16'($urandom_range(0, 1))};
      #1;
      pok = p.p && p.d[0];
      ep = pok && a.p && b.p; ewe = 1; ev = 'x;
      case (opc)
        OP_NOP:   begin ewe = 0; ep = 0; end
        OP_ADD:   ev = x + y;
        OP_SUB:   ev = x - y;
        OP_MUL:   ev = 16'(32'(x) * 32'(y));
        OP_AND:   ev = x & y;
        OP_OR:    ev = x | y;
        OP_XOR:   ev = x ^ y;
        OP_SHL:   ev = x << (y % 16);
        OP_SRL:   ev = x >> (y % 16);
        OP_SRA:   ev = 16'(signed'(x) >>> (y % 16));
        OP_CMPEQ: ev = (x == y) ? 1 : 0;
        OP_CMPNE: ev = (x != y) ? 1 : 0;
        OP_CMPLT: ev = (signed'(x) < signed'(y)) ? 1 : 0;
        OP_CMPGT: ev = (signed'(x) > signed'(y)) ? 1 : 0;
        OP_SEL:   begin ep = pok && (a.p || b.p); ev = a.p ? x : y; end
        OP_MOV:   begin ep = pok && a.p; ev = x; end
        OP_LOAD:  ep = pok && a.p;
        OP_STORE: ewe = 0;
        default:  ;
      endcase
      check(res_we == ewe, "res_we");
      if (opc != OP_NOP && opc != OP_STORE) check(res.p == ep, "pred flag");
      if (ep && opc != OP_LOAD && opc != OP_STORE) check(res.d == ev, "value");
      if (opc == OP_LOAD)
        check(mreq.en == ep && !mreq.we && mreq.addr == x[11:0] && is_load, "load req");
      else if (opc == OP_STORE)
        check(mreq.en == (pok && a.p && b.p) && mreq.we == mreq.en &&
              (!mreq.en || (mreq.addr == x[11:0] && mreq.wdata == y)), "store req");
      else
        check(!mreq.en, "no mem req");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
