// tb_pace_pe: self-checking test of one memory-capable processing element.
//
// Loads two small programs into the PE's configuration memory through the
// host port and runs them with random values on the incoming links, checking
// every cycle against a model of the programs written here:
//   program 1 (II = 4): ADD of the west link and a constant while the west
//     link is bypassed straight out east (multi-hop path through the PE);
//     capture of the north link in its input register and a MUL with it one
//     cycle later; a STORE predicated on the east link; a LOAD of the same
//     address whose data is routed out west in the next iteration.
//   program 2 (II = 8): one ADD, then a NOP with count 6 whose route (result
//     out east) must hold for the whole window, then a MOV. The gated clock
//     must pulse only on clear and in the two non-NOP cycles of each
//     iteration.
//   program 1 again with the PE statically disabled: the result register must
//     never be clocked.
// Results are registered: an operation's result is visible from the next cycle.
module tb_pace_pe;
  import pace_pkg::*;

  logic clk = 0, rst_n = 0, run = 0, clear = 0, static_en = 1, test_en = 0;
  logic [4:0] fetch_addr = 0;
  logic cm_sel = 0, cm_we = 0;
  logic [1:0] cm_wmask = 2'b11;
  logic [4:0] cm_addr = 0;
  logic [63:0] cm_wdata = 0, cm_rdata;
  flit_t [3:0] link_in, link_out;
  mem_req_t mem_req;
  logic [15:0] mem_rdata;
  flit_t res_o;
  logic gclk_o, illegal_o;
  int checks = 0, failures = 0, gpulses = 0;
  logic [15:0] mem [4096];

  pace_pe #(.MEM_CAPABLE(1'b1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge gclk_o) gpulses++;
  always_ff @(posedge clk) begin
    if (mem_req.en && !mem_req.we) mem_rdata <= mem[mem_req.addr];
    if (mem_req.en && mem_req.we)  mem[mem_req.addr] <= mem_req.wdata;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w, int c);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s cycle %0d", w, c); end
  endtask

  task automatic load(int slot, logic [63:0] w);
    @(negedge clk); cm_sel = 1; cm_we = 1; cm_addr = 5'(slot); cm_wdata = w;
    @(negedge clk); cm_sel = 0; cm_we = 0;
  endtask

  localparam logic [2:0] N_ = 3'd0, E_ = 3'd1, S_ = 3'd2, W_ = 3'd3, ALU = 3'd4, K = 3'd5, NO = 3'd7;

  // Runs `cycles` cycles of a program with the given II; prog selects the model.
  task automatic exec(int prog, int ii, int cycles);
    flit_t res, view, regn, a, b;
    bit from_mem;
    int slot;
    res = FLIT_NONE; from_mem = 0; regn = FLIT_NONE;
    @(negedge clk); clear = 1; fetch_addr = 0;
    @(negedge clk); clear = 0; run = 1;
    for (int c = 0; c < cycles; c++) begin
      slot = c % ii;
      fetch_addr = 5'((slot + 1) % ii);
      for (int d = 0; d < 4; d++) link_in[d] = '{p: ($urandom_range(0, 5) != 0), d: 16'($urandom)};
      #1;
      view = from_mem ? '{p: res.p, d: mem_rdata} : res;
      if (!static_en) view = FLIT_NONE;
      if (prog == 1) begin
        case (slot)
          0: begin
            chk(link_out[DIR_E] == link_in[DIR_W], "bypass W->E", c);
            chk(link_out[DIR_W] == view, "result out W", c);
            if (static_en) res = '{p: link_in[DIR_W].p, d: link_in[DIR_W].d + 16'd5};
            from_mem = 0;
            regn = link_in[DIR_N];
          end
          1: begin
            chk(link_out[DIR_S] == view, "result out S", c);
            a = view; b = regn;
            if (static_en) res = '{p: a.p & b.p, d: 16'(a.d * b.d)};
          end
          2: begin
            bit go;
            go = static_en && link_in[DIR_E].p && link_in[DIR_E].d[0] && view.p;
            chk(mem_req.en == go && (!go || (mem_req.we && mem_req.addr == 12'h020 &&
                mem_req.wdata == view.d)), "store", c);
          end
          3: begin
            chk(mem_req.en == static_en && (!static_en || (!mem_req.we && mem_req.addr == 12'h020)), "load", c);
            if (static_en) begin res = '{p: 1'b1, d: 16'h0}; from_mem = 1; end
          end
          default: ;
        endcase
      end else begin
        case (slot)
          0: begin res = '{p: link_in[DIR_N].p, d: link_in[DIR_N].d + link_in[DIR_N].d}; from_mem = 0; end
          7: begin chk(link_out[DIR_E] == FLIT_NONE, "no route after window", c);
                   res = '{p: link_in[DIR_S].p, d: link_in[DIR_S].d}; end
          default: chk(link_out[DIR_E] == view, "NOP window keeps route", c);
        endcase
      end
      chk(res_o == (from_mem ? view : view), "res view", c);
      @(posedge clk); #1;
      @(negedge clk);
    end
    run = 0;
  endtask

  initial begin
    int g0;
    link_in = '0;
    for (int i = 0; i < 4096; i++) mem[i] = 16'(i * 7);
    mem_rdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // program 1
    load(0, mk_instr(OP_ADD, NO, W_, NO, ALU, W_, K, NO, 4'b0001, 4'b0000, 16'd5));
    load(1, mk_instr(OP_MUL, NO, NO, ALU, NO, ALU, N_, NO, 4'b0000, 4'b0001));
    load(2, mk_instr(OP_STORE, NO, NO, NO, NO, K, ALU, E_, 4'b0000, 4'b0000, 16'h020));
    load(3, mk_instr(OP_LOAD, NO, NO, NO, NO, K, NO, NO, 4'b0000, 4'b0000, 16'h020));
    // read back one word through the host port
    @(negedge clk); cm_sel = 1; cm_addr = 5'd2;
    @(posedge clk); #1; cm_sel = 0;
    chk(cm_rdata == mk_instr(OP_STORE, NO, NO, NO, NO, K, ALU, E_, 4'b0000, 4'b0000, 16'h020), "cm readback", 0);
    g0 = gpulses;
    exec(1, 4, 64);
    chk(gpulses - g0 == 1 + 64, "gated clock pulses, program 1", 0);
    // program 2: ADD, NOP x6 with route out E, MOV
    load(0, mk_instr(OP_ADD, NO, NO, NO, NO, N_, N_, NO));
    load(1, mk_instr(OP_NOP, NO, ALU, NO, NO, NO, NO, NO, 4'b0, 4'b0, 16'd0, 5'd6));
    for (int s = 2; s < 7; s++) load(s, mk_instr(OP_XOR, NO, NO, NO, NO, N_, N_, NO)); // must be skipped
    load(7, mk_instr(OP_MOV, NO, NO, NO, NO, S_, NO, NO));
    g0 = gpulses;
    exec(2, 8, 64);
    chk(gpulses - g0 == 1 + 16, "gated clock pulses, program 2", 0);
    // program 1 with the PE statically disabled
    load(0, mk_instr(OP_ADD, NO, W_, NO, ALU, W_, K, NO, 4'b0001, 4'b0000, 16'd5));
    load(1, mk_instr(OP_MUL, NO, NO, ALU, NO, ALU, N_, NO, 4'b0000, 4'b0001));
    static_en = 0;
    g0 = gpulses;
    exec(1, 4, 32);
    chk(gpulses - g0 == 1, "static gating", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
