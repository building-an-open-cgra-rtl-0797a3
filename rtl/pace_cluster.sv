// pace_cluster: a 4x4 cluster of PACE processing elements.
//
// PACE builds its 8x8 array from four such clusters, each the size of the
// original 4x4 HyCUBE array. Inside the cluster every PE's links connect to
// its four neighbours; the links on the cluster's edges are brought out so
// that the array can join clusters edge to edge, which is how values cross
// cluster boundaries without extra cost. The PEs of one edge column (left when
// MEM_SIDE = 0, right when MEM_SIDE = 1) are memory-capable and their memory
// ports are brought out, one per row; all other PEs are compute-only.
//
// The cluster size follows the paper (four clusters of the 64-PE array). Which
// column carries memory follows the paper's block diagram, where the data
// memories sit on the array's left and right edges.
//
// Tool warning that stands: every router passes its inputs to its outputs
// combinationally (the single-cycle multi-hop bypass), so the mesh of links
// contains structural combinational loops (a PE's east output feeds its
// neighbour's west input, whose west output feeds back into the first PE's
// east input). Linters report them as circular logic (UNOPTFLAT). A loop can
// only become active if a configuration routes a value back to its origin in
// the same cycle; a valid schedule never does, and the hardware relies on it.
//
// PE numbering inside the cluster: index = row * DIM + col, row 0 at the north.
// Edge arrays are indexed by column (north, south) or by row (west, east).
module pace_cluster
  import pace_pkg::*;
#(
  parameter int unsigned DIM      = 4,
  parameter bit          MEM_SIDE = 1'b0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          run,
  input  logic                          clear,
  input  logic [SLOT_W-1:0]             fetch_addr,
  input  logic [DIM*DIM-1:0]            static_en,
  input  logic                          test_en,
  input  logic [DIM*DIM-1:0]            cm_sel,
  input  logic                          cm_we,
  input  logic [1:0]                    cm_wmask,
  input  logic [SLOT_W-1:0]             cm_addr,
  input  logic [INSTR_W-1:0]            cm_wdata,
  output logic [DIM*DIM-1:0][INSTR_W-1:0] cm_rdata,
  input  flit_t [DIM-1:0]               north_in,
  output flit_t [DIM-1:0]               north_out,
  input  flit_t [DIM-1:0]               south_in,
  output flit_t [DIM-1:0]               south_out,
  input  flit_t [DIM-1:0]               west_in,
  output flit_t [DIM-1:0]               west_out,
  input  flit_t [DIM-1:0]               east_in,
  output flit_t [DIM-1:0]               east_out,
  output mem_req_t [DIM-1:0]            mem_req,
  input  logic [DIM-1:0][DW-1:0]        mem_rdata,
  output flit_t [DIM*DIM-1:0]           res_o,
  output logic [DIM*DIM-1:0]            gclk_o
);

  localparam int unsigned MEMCOL = MEM_SIDE ? DIM - 1 : 0;

  flit_t [DIM*DIM-1:0][NDIR-1:0] lin, lout;

  for (genvar r = 0; r < DIM; r++) begin : g_row
    for (genvar c = 0; c < DIM; c++) begin : g_col
      localparam int unsigned I = r * DIM + c;
      localparam bit MEMPE = (c == MEMCOL);
      mem_req_t       req;
      logic [DW-1:0]  rdata;

      assign lin[I][DIR_N] = (r == 0)       ? north_in[c] : lout[I-DIM][DIR_S];
      assign lin[I][DIR_S] = (r == DIM - 1) ? south_in[c] : lout[I+DIM][DIR_N];
      assign lin[I][DIR_W] = (c == 0)       ? west_in[r]  : lout[I-1][DIR_E];
      assign lin[I][DIR_E] = (c == DIM - 1) ? east_in[r]  : lout[I+1][DIR_W];
      assign rdata = MEMPE ? mem_rdata[r] : '0;

      pace_pe #(.MEM_CAPABLE(MEMPE)) u_pe (
        .clk(clk), .rst_n(rst_n), .run(run), .clear(clear), .fetch_addr(fetch_addr),
        .static_en(static_en[I]), .test_en(test_en),
        .cm_sel(cm_sel[I]), .cm_we(cm_we), .cm_wmask(cm_wmask), .cm_addr(cm_addr),
        .cm_wdata(cm_wdata), .cm_rdata(cm_rdata[I]),
        .link_in(lin[I]), .link_out(lout[I]),
        .mem_req(req), .mem_rdata(rdata),
        .res_o(res_o[I]), .gclk_o(gclk_o[I]), .illegal_o()
      );

      if (MEMPE) begin : g_mem
        assign mem_req[r] = req;
      end
      if (r == 0)       begin : g_no assign north_out[c] = lout[I][DIR_N]; end
      if (r == DIM - 1) begin : g_so assign south_out[c] = lout[I][DIR_S]; end
      if (c == 0)       begin : g_wo assign west_out[r]  = lout[I][DIR_W]; end
      if (c == DIM - 1) begin : g_eo assign east_out[r]  = lout[I][DIR_E]; end
    end
  end

endmodule
