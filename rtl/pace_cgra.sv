// pace_cgra: the PACE 8x8 CGRA with its data memories and controller.
//
// Four 4x4 clusters (pace_cluster) are joined edge to edge into one 8x8 mesh;
// the links on the outer edge of the array carry nothing. Eight 8KB
// dual-port data memory banks (pace_dmem) sit on the array's left and right
// edges, four per side; bank k (k = 0..3) on the left serves the column-0 PEs
// of rows 2k (port A) and 2k+1 (port B), bank 4+k on the right the column-7
// PEs of the same rows. The controller (pace_cgra_ctrl) owns the AXI4-Lite
// port and sequences all 64 PEs together; when the array is idle it reaches
// the data memories through port A of each bank.
//
// Follows the paper: 8x8 = 64 PEs in four clusters, 16-bit datapath,
// 8 x 8KB data memory as dual-port SRAM on both edges, memory-capable edge
// tiles, a central controller. This design's choices: which PEs share which
// bank and port, host access through port A, and no links leaving the array.
//
// Global PE index = row * 8 + col (row 0 at the north); it is the index of
// the static clock enable bits and of the configuration memory windows.
module pace_cgra
  import pace_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     test_en,
  input  axil_req_t                axi_req,
  output axil_rsp_t                axi_rsp,
  output logic                     irq,
  // observation
  output flit_t [ROWS*COLS-1:0]    res_o,
  output logic [ROWS*COLS-1:0]     gclk_o,
  output logic                     run_o
);

  localparam int unsigned D = 4;       // cluster size
  localparam int unsigned NPE = ROWS * COLS;
  localparam int unsigned NBANK = 8;

  logic                        run, clear;
  logic [SLOT_W-1:0]           fetch_addr;
  logic [NPE-1:0]              static_en, cm_sel;
  logic                        cm_we;
  logic [1:0]                  cm_wmask;
  logic [SLOT_W-1:0]           cm_addr;
  logic [INSTR_W-1:0]          cm_wdata;
  logic [NPE-1:0][INSTR_W-1:0] cm_rdata;
  logic [NBANK-1:0]            dm_sel;
  mem_req_t                    dm_req;
  logic [NBANK-1:0][DW-1:0]    dm_rdata;

  pace_cgra_ctrl #(.NPE(NPE), .NBANK(NBANK)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .axi_req(axi_req), .axi_rsp(axi_rsp), .irq(irq),
    .run(run), .clear(clear), .fetch_addr(fetch_addr), .static_en(static_en),
    .cm_sel(cm_sel), .cm_we(cm_we), .cm_wmask(cm_wmask), .cm_addr(cm_addr),
    .cm_wdata(cm_wdata), .cm_rdata(cm_rdata),
    .dm_sel(dm_sel), .dm_req(dm_req), .dm_rdata(dm_rdata)
  );
  assign run_o = run;

  // Cluster q: row block q/2, column block q%2; left clusters have memory on
  // their west column, right clusters on their east column.
  flit_t [3:0][D-1:0]          n_in, n_out, s_in, s_out, w_in, w_out, e_in, e_out;
  mem_req_t [3:0][D-1:0]       mreq;
  logic [3:0][D-1:0][DW-1:0]   mrdata;
  logic [3:0][D*D-1:0]         c_static, c_sel, c_gclk;
  logic [3:0][D*D-1:0][INSTR_W-1:0] c_rdata;
  flit_t [3:0][D*D-1:0]        c_res;

  for (genvar q = 0; q < 4; q++) begin : g_cl
    localparam int unsigned RB = (q / 2) * D;
    localparam int unsigned CB = (q % 2) * D;
    for (genvar r = 0; r < D; r++) begin : g_r
      for (genvar c = 0; c < D; c++) begin : g_c
        localparam int unsigned G = (RB + r) * COLS + (CB + c);
        assign c_static[q][r*D+c] = static_en[G];
        assign c_sel[q][r*D+c]    = cm_sel[G];
        assign cm_rdata[G]        = c_rdata[q][r*D+c];
        assign res_o[G]           = c_res[q][r*D+c];
        assign gclk_o[G]          = c_gclk[q][r*D+c];
      end
    end
    pace_cluster #(.DIM(D), .MEM_SIDE(q % 2 == 1)) u_cl (
      .clk(clk), .rst_n(rst_n), .run(run), .clear(clear), .fetch_addr(fetch_addr),
      .static_en(c_static[q]), .test_en(test_en),
      .cm_sel(c_sel[q]), .cm_we(cm_we), .cm_wmask(cm_wmask), .cm_addr(cm_addr),
      .cm_wdata(cm_wdata), .cm_rdata(c_rdata[q]),
      .north_in(n_in[q]), .north_out(n_out[q]), .south_in(s_in[q]), .south_out(s_out[q]),
      .west_in(w_in[q]), .west_out(w_out[q]), .east_in(e_in[q]), .east_out(e_out[q]),
      .mem_req(mreq[q]), .mem_rdata(mrdata[q]),
      .res_o(c_res[q]), .gclk_o(c_gclk[q])
    );
  end

  // Cluster edges: 0 1 / 2 3. Outer edges see no traffic.
  assign n_in[0] = '0;        assign n_in[1] = '0;
  assign s_in[2] = '0;        assign s_in[3] = '0;
  assign w_in[0] = '0;        assign w_in[2] = '0;
  assign e_in[1] = '0;        assign e_in[3] = '0;
  assign e_in[0] = w_out[1];  assign w_in[1] = e_out[0];
  assign e_in[2] = w_out[3];  assign w_in[3] = e_out[2];
  assign s_in[0] = n_out[2];  assign n_in[2] = s_out[0];
  assign s_in[1] = n_out[3];  assign n_in[3] = s_out[1];

  // Data memory banks: bank k < 4 on the left (clusters 0 and 2), bank k >= 4
  // on the right (clusters 1 and 3); rows 2j and 2j+1 of the array.
  for (genvar k = 0; k < NBANK; k++) begin : g_bank
    localparam int unsigned J    = k % 4;              // row pair
    localparam int unsigned Q    = (J / 2) * 2 + k / 4; // cluster
    localparam int unsigned RA   = (2 * J) % D;         // row in cluster, port A
    mem_req_t      pa;
    mem_req_t      pb;
    logic [DW-1:0] ra, rb;

    assign pa = dm_sel[k] ? '{en: 1'b1, we: dm_req.we, addr: dm_req.addr, wdata: dm_req.wdata}
                          : mreq[Q][RA];
    assign pb = mreq[Q][RA+1];

    pace_dmem #(.WORDS(DM_WORDS)) u_dm (
      .clk(clk),
      .a_en(pa.en), .a_we(pa.we), .a_addr(pa.addr), .a_wdata(pa.wdata), .a_rdata(ra),
      .b_en(pb.en), .b_we(pb.we), .b_addr(pb.addr), .b_wdata(pb.wdata), .b_rdata(rb)
    );
    assign mrdata[Q][RA]   = ra;
    assign mrdata[Q][RA+1] = rb;
    assign dm_rdata[k]     = ra;
  end

endmodule
