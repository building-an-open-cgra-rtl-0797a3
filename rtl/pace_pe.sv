// pace_pe: one processing element of the PACE CGRA.
//
// A PE holds its own program: a 32 x 64-bit configuration memory
// (pace_config_mem) with one instruction per cycle of the loop's initiation
// interval (II). Each cycle the instruction register (the memory's read port)
// is decoded (pace_decoder); the router (pace_router) picks the ALU operands
// and drives the four outgoing links; the ALU (pace_alu) computes, and its
// result is registered at the end of the cycle and offered to the router from
// the next cycle on. There is no register file: values wait in the router's
// link input registers, in its three ALU input registers (operand A, operand
// B, predicate) or in the result register. A PE on a memory edge of the
// array (MEM_CAPABLE) also issues loads and stores to its data memory bank;
// a load's data comes from the bank's read register the cycle after, and
// stands in for the result register until the next operation writes it.
//
// Clocking: the configuration memory, the router and the idle counter run on
// clk. The result register sits on a clock gated by pace_idle_ctrl, which
// stops it in NOP cycles, while the array is stopped, and for statically
// disabled PEs. The paper's figure draws the ALU and router both on the gated
// clock, but its text keeps the routing logic running; this design follows
// the text.
//
// Sequencing comes from the controller, shared by all PEs: `clear` (one cycle
// before a run: reset the result and input registers and read slot 0), `run`
// (executing), and `fetch_addr`, the slot whose instruction is read this cycle
// for the next one. Outside a run the configuration memory is open to the host
// port (cm_*), one PE at a time through cm_sel.
module pace_pe
  import pace_pkg::*;
#(
  parameter bit MEM_CAPABLE = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic                clear,
  input  logic [SLOT_W-1:0]   fetch_addr,
  input  logic                static_en,
  input  logic                test_en,
  // host access to the configuration memory
  input  logic                cm_sel,
  input  logic                cm_we,
  input  logic [1:0]          cm_wmask,
  input  logic [SLOT_W-1:0]   cm_addr,
  input  logic [INSTR_W-1:0]  cm_wdata,
  output logic [INSTR_W-1:0]  cm_rdata,
  // mesh links, indexed by dir_e
  input  flit_t [NDIR-1:0]    link_in,
  output flit_t [NDIR-1:0]    link_out,
  // data memory port (used when MEM_CAPABLE)
  output mem_req_t            mem_req,
  input  logic [DW-1:0]       mem_rdata,
  // observation
  output flit_t               res_o,
  output logic                gclk_o,
  output logic                illegal_o
);

  logic [INSTR_W-1:0]  iword;
  instr_t              instr;
  logic                is_nop, is_mem, illegal;
  logic [NOPCNT_W-1:0] nop_len;
  logic                cm_ren, idle, gclk;
  logic                cm_en;
  logic [SLOT_W-1:0]   cm_a;
  flit_t               op_a, op_b, op_p, alu_res, res_q, res_view;
  logic                res_we, is_load, from_mem_q;
  mem_req_t            alu_mem;

  // Configuration memory: execution fetch has the port during clear and run.
  assign cm_en = (clear || run) ? cm_ren : cm_sel;
  assign cm_a  = (clear || run) ? (clear ? '0 : fetch_addr) : cm_addr;

  pace_config_mem #(.DEPTH(CM_DEPTH), .WIDTH(INSTR_W)) u_cm (
    .clk   (clk),
    .en    (cm_en),
    .we    (cm_we && !(clear || run)),
    .wmask (cm_wmask),
    .addr  (cm_a),
    .wdata (cm_wdata),
    .rdata (iword)
  );
  assign cm_rdata = iword;

  pace_decoder u_dec (
    .word(iword), .instr(instr), .is_nop(is_nop), .is_mem(is_mem),
    .illegal(illegal), .nop_len(nop_len)
  );
  assign illegal_o = illegal;

  pace_idle_ctrl u_idle (
    .clk(clk), .rst_n(rst_n), .run(run), .clear(clear), .static_en(static_en),
    .is_nop(is_nop), .nop_len(nop_len), .test_en(test_en),
    .idle(idle), .cm_ren(cm_ren), .gclk(gclk)
  );
  assign gclk_o = gclk;

  pace_router u_rt (
    .clk(clk), .rst_n(rst_n), .en(run), .clear(clear),
    .link_in(link_in), .alu_res(res_view), .konst(instr.konst),
    .xbar(instr.xbar), .reg_we(instr.reg_we), .reg_sel(instr.reg_sel),
    .alu_we(instr.alu_we), .alu_sel(instr.alu_sel),
    .link_out(link_out), .op_a(op_a), .op_b(op_b), .op_p(op_p)
  );

  pace_alu #(.MEM_CAPABLE(MEM_CAPABLE)) u_alu (
    .opc(instr.opc), .a(op_a), .b(op_b), .pred(op_p),
    .res_we(res_we), .res(alu_res), .is_load(is_load), .mem_req(alu_mem)
  );

  // Result register on the gated clock. The gate only opens in run cycles
  // with a non-NOP instruction (or on clear), so no further enable is needed
  // beyond res_we, which is low for STORE and unused opcodes.
  always_ff @(posedge gclk or negedge rst_n) begin
    if (!rst_n) begin
      res_q      <= FLIT_NONE;
      from_mem_q <= 1'b0;
    end else if (clear) begin
      res_q      <= FLIT_NONE;
      from_mem_q <= 1'b0;
    end else if (res_we) begin
      res_q      <= alu_res;
      from_mem_q <= is_load && MEM_CAPABLE;
    end
  end

  assign res_view = from_mem_q ? '{p: res_q.p, d: mem_rdata} : res_q;
  assign res_o    = res_view;
  assign mem_req  = (MEM_CAPABLE && run && static_en) ? alu_mem : MEM_REQ_IDLE;

endmodule
