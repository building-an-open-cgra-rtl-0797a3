// pace_dmem: one 8KB dual-port data memory bank of the CGRA.
//
// 4096 words of 16 bits, two independent synchronous ports. Each bank sits at
// the edge of the array next to two PE rows; port A serves the edge PE of the
// upper row (and the host, through the controller, when the array is not
// running) and port B the edge PE of the lower row. The paper gives the size
// (8KB per bank, eight banks) and that the banks are dual-port SRAMs; the
// port assignment, the 16-bit word and the read-before-write behaviour are
// this design's choices.
//
// Timing: a read returns the addressed word on rdata at the next clock edge
// and rdata holds until the port's next read. A read of an address written in
// the same cycle, by either port, returns the old word. If both ports write
// the same address in the same cycle, port A's data is kept.
module pace_dmem
  import pace_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (b_en && b_we && !(a_en && a_we && a_addr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
  end

endmodule
