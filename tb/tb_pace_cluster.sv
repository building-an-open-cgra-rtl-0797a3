// tb_pace_cluster: self-checking test of a 4x4 cluster.
//
// Programs the 16 PEs (II = 2) so that PE(0,0) computes west_in[0] + K in
// slot 0, and in slot 1 its result crosses the whole top row east in one
// cycle (PE(0,1) and PE(0,2) bypass their west inputs straight through) and,
// by multicast at PE(0,1), the whole of column 1 south. Checks in the same
// cycle that east_out[0] and south_out[1] carry the result (single-cycle
// multi-hop), that PE(0,3) adds 1 to it and shows it the next cycle, that the
// memory column's PE(1,0) issues its LOAD on mem_req[1], and that statically
// disabled PEs receive no gated clock pulse beyond the clear cycle.
module tb_pace_cluster;
  import pace_pkg::*;

  logic clk = 0, rst_n = 0, run = 0, clear = 0, test_en = 0;
  logic [4:0] fetch_addr = 0;
  logic [15:0] static_en;
  logic [15:0] cm_sel = 0;
  logic cm_we = 0;
  logic [1:0] cm_wmask = 2'b11;
  logic [4:0] cm_addr = 0;
  logic [63:0] cm_wdata = 0;
  logic [15:0][63:0] cm_rdata;
  flit_t [3:0] north_in, north_out, south_in, south_out, west_in, west_out, east_in, east_out;
  mem_req_t [3:0] mem_req;
  logic [3:0][15:0] mem_rdata;
  flit_t [15:0] res_o;
  logic [15:0] gclk_o;
  int checks = 0, failures = 0, hops_seen = 0;
  int gp [16];

  pace_cluster #(.DIM(4), .MEM_SIDE(1'b0)) dut (.*);

  always #5 clk = ~clk;
  for (genvar i = 0; i < 16; i++) begin : g_cnt
    always @(posedge gclk_o[i]) gp[i]++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w, int c);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s cycle %0d", w, c); end
  endtask

  task automatic load(int pe, int slot, logic [63:0] w);
    @(negedge clk); cm_sel = 16'(1) << pe; cm_we = 1; cm_addr = 5'(slot); cm_wdata = w;
    @(negedge clk); cm_sel = 0; cm_we = 0;
  endtask

  localparam logic [2:0] N_ = 3'd0, E_ = 3'd1, S_ = 3'd2, W_ = 3'd3, ALU = 3'd4, K = 3'd5, NO = 3'd7;
  localparam logic [63:0] IDLE = 64'h0000_0000_03FF_FFE0; // NOP routing nothing

  initial begin
    logic [15:0] v, prev;
    north_in = '0; south_in = '0; west_in = '0; east_in = '0; mem_rdata = '0;
    for (int i = 0; i < 16; i++) gp[i] = 0;
    static_en = 16'b0000_0000_0000_0000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pe = 0; pe < 16; pe++) begin load(pe, 0, IDLE); load(pe, 1, IDLE); end
    // PE(0,0): slot 0 add, slot 1 send east
    load(0, 0, mk_instr(OP_ADD, NO, NO, NO, NO, W_, K, NO, 4'b0, 4'b0, 16'h0100));
    load(0, 1, mk_instr(OP_NOP, NO, ALU, NO, NO, NO, NO, NO));
    // PE(0,1): slot 1 W->E and W->S (multicast)
    load(1, 1, mk_instr(OP_NOP, NO, W_, W_, NO, NO, NO, NO));
    // PE(0,2): slot 1 W->E
    load(2, 1, mk_instr(OP_NOP, NO, W_, NO, NO, NO, NO, NO));
    // PE(0,3): slot 1 W->E and ADD W + 1
    load(3, 1, mk_instr(OP_ADD, NO, W_, NO, NO, W_, K, NO, 4'b0, 4'b0, 16'd1));
    // column 1, rows 1..3: N->S in slot 1
    for (int r = 1; r < 4; r++) load(r*4 + 1, 1, mk_instr(OP_NOP, NO, NO, N_, NO, NO, NO, NO));
    // PE(1,0): load from address K in slot 0
    load(4, 0, mk_instr(OP_LOAD, NO, NO, NO, NO, K, NO, NO, 4'b0, 4'b0, 16'h0ABC));
    static_en = 16'b0000_0000_0001_1001;   // PEs 0, 3, 4 compute
    @(negedge clk); clear = 1; fetch_addr = 0;
    @(negedge clk); clear = 0; run = 1;
    prev = 0;
    for (int c = 0; c < 40; c++) begin
      fetch_addr = 5'((c + 1) % 2);
      v = 16'($urandom);
      west_in[0] = '{p: 1'b1, d: v};
      #1;
      if (c % 2 == 0) begin
        chk(mem_req[1].en && !mem_req[1].we && mem_req[1].addr == 12'hABC, "load req", c);
        if (c > 0) chk(res_o[3] == '{p: 1'b1, d: prev + 16'd1}, "PE(0,3) result", c);
        prev = v + 16'h0100;
      end else begin
        chk(east_out[0] == '{p: 1'b1, d: prev}, "4-hop east in one cycle", c);
        chk(south_out[1] == '{p: 1'b1, d: prev}, "multicast south", c);
        if (east_out[0].d == prev && south_out[1].d == prev) hops_seen++;
        chk(!mem_req[1].en, "no load in slot 1", c);
      end
      @(negedge clk);
    end
    run = 0;
    chk(gp[1] == 1 && gp[15] == 1, "static gating of idle PEs", 0);
    chk(gp[0] == 1 + 20 && gp[3] == 1 + 20 && gp[4] == 1 + 20, "gated pulses of active PEs", 0);
    chk(hops_seen == 20, "multi-hop count", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
