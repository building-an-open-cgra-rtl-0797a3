// pace_config_mem: the configuration memory of one PE.
//
// 32 instructions of 64 bits (0.25KB), the sizes the paper gives; on chip it
// is a small SRAM inside each PE. Modelled as a single-port synchronous SRAM:
// when en is high, a write stores the selected 32-bit halves of wdata
// (wmask[0] = bits 31:0, wmask[1] = bits 63:32), and a read puts the word at
// addr on rdata at the next clock edge. rdata holds its value while en is low,
// which the PE relies on: during an idle (NOP) window the read is switched off
// and the NOP instruction stays on rdata. A write does not change rdata.
// The single port and the half-word write mask are this design's choices; the
// host writes it over a 32-bit bus.
module pace_config_mem #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [1:0]       wmask,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        if (wmask[0]) mem[addr][WIDTH/2-1:0]     <= wdata[WIDTH/2-1:0];
        if (wmask[1]) mem[addr][WIDTH-1:WIDTH/2] <= wdata[WIDTH-1:WIDTH/2];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
