// pace_idle_ctrl: NOP idle counter and clock gating of a PE.
//
// PACE saves power in two ways the paper describes. Static gating: the host
// sets a per-PE enable, and a PE left unused by the compiled kernel never
// clocks its ALU state. Dynamic gating: the compiler places NOP instructions
// where a PE has nothing to compute, and a NOP carries a count of idle cycles.
// A local counter tracks the idle window; while it runs the PE does not read
// its configuration memory (the NOP stays in the instruction register, so the
// router keeps the NOP's routes), and in every NOP cycle the clock of the
// ALU-side state is gated. The router stays on the free-running clock.
//
// From the paper's clock-gating figure this block takes: a counter compared
// for equality with the NOP count, the opcode compared with 5'h00, and an
// AND gate producing the gated clock from eno (pace_clock_gate). How the two comparisons
// combine is this design's reading: the opcode test gates the clock, and the
// counter test ends the idle window.
//
// Timing, for a NOP of count c > 1 seen in cycle t: cycles t .. t+c-1 are idle;
// configuration reads are off in cycles t .. t+c-2 and back on in cycle t+c-1,
// so the instruction of cycle t+c is ready in time. The gated clock gclk has
// no pulse at the end of a NOP cycle, nor while not running or statically
// disabled, except on `clear`, which always clocks so that state resets.
module pace_idle_ctrl
  import pace_pkg::*;
#(
  parameter int unsigned CNT_W = NOPCNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,        // array executing this cycle
  input  logic             clear,      // start of a run
  input  logic             static_en,  // static clock enable of this PE
  input  logic             is_nop,     // current instruction's opcode == 5'h00
  input  logic [CNT_W-1:0] nop_len,    // its idle count (>= 1)
  input  logic             test_en,
  output logic             idle,       // inside a multi-cycle idle window
  output logic             cm_ren,     // read the next instruction
  output logic             gclk
);

  logic             active_q;
  logic [CNT_W-1:0] cnt_q, len_q, cnt_nx;
  logic             start, last, next_idle, clk_en;

  assign start  = run && !active_q && is_nop && nop_len > CNT_W'(1);
  assign cnt_nx = cnt_q + CNT_W'(1);
  assign last   = (cnt_nx == len_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      cnt_q    <= '0;
      len_q    <= '0;
    end else if (clear) begin
      active_q <= 1'b0;
      cnt_q    <= '0;
      len_q    <= '0;
    end else if (start) begin
      active_q <= 1'b1;
      cnt_q    <= CNT_W'(1);
      len_q    <= nop_len;
    end else if (run && active_q) begin
      cnt_q <= cnt_nx;
      if (last) active_q <= 1'b0;
    end
  end

  assign idle      = active_q;
  assign next_idle = active_q ? !last : start;
  assign cm_ren    = clear || (run && !next_idle);
  assign clk_en    = clear || (static_en && run && !is_nop);

  pace_clock_gate u_cg (.clk(clk), .en(clk_en), .test_en(test_en), .gclk(gclk));

endmodule
