// pace_router: the statically scheduled crossbar of a PACE PE.
//
// Each of the four directional inputs (N, E, S, W) has a register. Every cycle
// the instruction chooses, per input, whether the crossbar sees the register
// or the link itself (bypass), and whether the register captures the link at
// the end of the cycle. The crossbar then drives seven outputs, each from a
// 3-bit select: the four outgoing links and the ALU's operand A, operand B and
// predicate inputs (7 x 3 = the paper's 21-bit router configuration). An
// outgoing link can be fed straight from an incoming link, so a value can
// cross several PEs in one cycle without stopping (single-cycle multi-hop),
// and one source can feed several outputs (multicast).
//
// The ALU has three input registers of its own, one each for operand A,
// operand B and the predicate. Each can capture what the crossbar routes to
// its ALU input (`alu_we`), and each ALU input can be taken from its register
// instead of the crossbar (`alu_sel`). An operand that arrives before the
// cycle of its operation waits there without using a PE output or a link.
//
// Follows the paper: registers at each directional input, three ALU input
// registers (operands and predicate), the bypass-or-latch
// choice in front of the crossbar, the 21-bit configuration, routing logic on
// the ungated clock. This design's choices: the source codes (pace_pkg src_e),
// that an unrouted predicate input means "execute unconditionally", and that
// `clear` empties the registers at the start of a run.
//
// Timing: all outputs are combinational from the links, the registers and the
// configuration. Registers update on the rising clock edge when `en` is high.
// Because outputs depend combinationally on inputs, a mesh of routers contains
// combinational loops in its structure (east out -> neighbour's west in ->
// neighbour's west out -> east in). No loop is active unless a configuration
// routes a value back to where it came from within one cycle, which the
// compiler never does; tools will nevertheless report the structural loop.
module pace_router
  import pace_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,        // executing: registers may capture
  input  logic                    clear,
  input  flit_t [NDIR-1:0]        link_in,   // from the neighbours, by dir_e
  input  flit_t                   alu_res,   // this PE's registered result
  input  logic [DW-1:0]           konst,
  input  logic [N_XOUT-1:0][2:0]  xbar,
  input  logic [NDIR-1:0]         reg_we,
  input  logic [NDIR-1:0]         reg_sel,
  input  logic [2:0]              alu_we,    // capture ALU input A, B, P
  input  logic [2:0]              alu_sel,   // ALU input A, B, P from its register
  output flit_t [NDIR-1:0]        link_out,  // to the neighbours, by dir_e
  output flit_t                   op_a,
  output flit_t                   op_b,
  output flit_t                   op_p
);

  flit_t [NDIR-1:0] in_q, eff;
  flit_t [2:0]      op_q, op_x;   // ALU input registers and crossbar values (A, B, P)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q <= '0;
      op_q <= '0;
    end else if (clear) begin
      in_q <= '0;
      op_q <= '0;
    end else if (en) begin
      for (int d = 0; d < NDIR; d++)
        if (reg_we[d]) in_q[d] <= link_in[d];
      for (int i = 0; i < 3; i++)
        if (alu_we[i]) op_q[i] <= op_x[i];
    end
  end

  always_comb begin
    for (int d = 0; d < NDIR; d++) eff[d] = reg_sel[d] ? in_q[d] : link_in[d];
  end

  function automatic flit_t pick(logic [2:0] sel, flit_t [NDIR-1:0] e, flit_t r, logic [DW-1:0] k);
    case (sel)
      SRC_N:     return e[DIR_N];
      SRC_E:     return e[DIR_E];
      SRC_S:     return e[DIR_S];
      SRC_W:     return e[DIR_W];
      SRC_ALU:   return r;
      SRC_CONST: return '{p: 1'b1, d: k};
      default:   return FLIT_NONE;
    endcase
  endfunction

  always_comb begin
    for (int o = 0; o < NDIR; o++) link_out[o] = pick(xbar[o], eff, alu_res, konst);
    op_x[0] = pick(xbar[XO_A], eff, alu_res, konst);
    op_x[1] = pick(xbar[XO_B], eff, alu_res, konst);
    if (xbar[XO_P] == SRC_NONE || xbar[XO_P] == SRC_RSVD) op_x[2] = '{p: 1'b1, d: DW'(1)};
    else                                                  op_x[2] = pick(xbar[XO_P], eff, alu_res, konst);
    op_a = alu_sel[0] ? op_q[0] : op_x[0];
    op_b = alu_sel[1] ? op_q[1] : op_x[1];
    op_p = alu_sel[2] ? op_q[2] : op_x[2];
  end

endmodule
