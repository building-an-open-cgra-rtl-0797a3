// tb_pace_axi_mux: self-checking test of the AXI4-Lite slave multiplexer.
//
// Four simple memory slaves with different response delays sit behind the
// mux at the default address map. Random writes and reads to all four windows
// and to unmapped addresses are checked against a model: data reaches only
// the decoded slave, read data returns from it, unmapped accesses complete
// with DECERR, and slave-side VALIDs are never raised for an unselected slave.
module tb_pace_axi_mux;
  import pace_pkg::*;

  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  axil_req_t [3:0] s_req;
  axil_rsp_t [3:0] s_rsp;
  logic [31:0] smem [4][256];
  int checks = 0, failures = 0, decerrs = 0;
  localparam logic [31:0] BASES [4] = '{32'h1000_0000, 32'h2000_0000, 32'h8000_0000, 32'h4000_0000};

  pace_axi_mux dut (.*);
  always #5 clk = ~clk;

  // slaves: slave i waits i cycles before accepting
  for (genvar i = 0; i < 4; i++) begin : g_s
    int wwait = 0, rwait = 0;
    logic bv = 0, rv = 0;
    logic [31:0] rd;
    always_ff @(posedge clk) begin
      if (bv && s_req[i].b_ready) bv <= 0;
      if (rv && s_req[i].r_ready) rv <= 0;
      if (s_req[i].aw_valid && s_req[i].w_valid && !bv) begin
        if (wwait == i) begin
          smem[i][s_req[i].aw_addr[9:2]] <= s_req[i].w_data; bv <= 1; wwait <= 0;
        end else wwait <= wwait + 1;
      end
      if (s_req[i].ar_valid && !rv) begin
        if (rwait == i) begin rd <= smem[i][s_req[i].ar_addr[9:2]]; rv <= 1; rwait <= 0; end
        else rwait <= rwait + 1;
      end
    end
    always_comb begin
      s_rsp[i] = '0;
      s_rsp[i].aw_ready = s_req[i].aw_valid && s_req[i].w_valid && !bv && wwait == i;
      s_rsp[i].w_ready  = s_rsp[i].aw_ready;
      s_rsp[i].b_valid  = bv;
      s_rsp[i].ar_ready = s_req[i].ar_valid && !rv && rwait == i;
      s_rsp[i].r_valid  = rv;
      s_rsp[i].r_data   = rd;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  int stray = 0;
  always @(posedge clk) begin
    int n;
    n = 0;
    for (int i = 0; i < 4; i++) n += (s_req[i].aw_valid || s_req[i].ar_valid) ? 1 : 0;
    if (n > 2) stray++;
  end

  task automatic axw(logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    m_req.aw_valid = 1; m_req.aw_addr = a; m_req.w_valid = 1; m_req.w_data = d; m_req.w_strb = 4'hf; m_req.b_ready = 1;
    while (m_req.aw_valid || m_req.w_valid) begin
      bit ahs, whs;
      #1;
      ahs = m_req.aw_valid && m_rsp.aw_ready;
      whs = m_req.w_valid && m_rsp.w_ready;
      @(negedge clk);
      if (ahs) m_req.aw_valid = 0;
      if (whs) m_req.w_valid = 0;
    end
    while (!m_rsp.b_valid) @(negedge clk);
    resp = m_rsp.b_resp;
    @(negedge clk);
  endtask

  task automatic axr(logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    m_req.ar_valid = 1; m_req.ar_addr = a; m_req.r_ready = 1;
    forever begin
      bit hs;
      #1 hs = m_rsp.ar_ready;
      @(negedge clk);
      if (hs) break;
    end
    m_req.ar_valid = 0;
    while (!m_rsp.r_valid) @(negedge clk);
    d = m_rsp.r_data; resp = m_rsp.r_resp;
    @(negedge clk);
  endtask

  initial begin
    logic [1:0] r; logic [31:0] d, a;
    logic [31:0] model [4][256];
    m_req = '0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 256; j++) begin smem[i][j] = 0; model[i][j] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      int s, w;
      s = $urandom_range(0, 4); w = $urandom_range(0, 255);
      a = (s == 4) ? 32'hC000_0000 + 32'(w*4) : BASES[s] + 32'(w*4);
      if ($urandom_range(0, 1)) begin
        d = $urandom;
        axw(a, d, r);
        if (s == 4) begin chk(r == RESP_DECERR, "write decerr"); decerrs++; end
        else begin chk(r == RESP_OKAY, "write okay"); model[s][w] = d; end
      end else begin
        axr(a, d, r);
        if (s == 4) begin chk(r == RESP_DECERR, "read decerr"); decerrs++; end
        else chk(r == RESP_OKAY && d == model[s][w], "read data");
      end
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 256; j++)
      if (smem[i][j] != model[i][j]) begin chk(0, "slave contents"); break; end
    chk(stray == 0 && decerrs > 0, "no stray valids, decode errors seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
