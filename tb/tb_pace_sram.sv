// tb_pace_sram: self-checking test of the 512KB on-chip SRAM.
//
// Random word and byte-strobed writes over the whole 512KB range, read back
// against a sparse model; checks one-cycle read latency and the B response.
module tb_pace_sram;
  import pace_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic [31:0] model [int];
  int checks = 0, failures = 0;

  pace_sram dut (.axi_req(req), .axi_rsp(rsp), .*);
  always #5 clk = ~clk;

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

  initial begin
    int idx [200];
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      idx[k] = (k == 0) ? 0 : (k == 1) ? 131071 : $urandom_range(0, 131071);
      @(negedge clk);
      req.aw_valid = 1; req.w_valid = 1; req.aw_addr = 32'h1000_0000 + 32'(idx[k] * 4);
      req.w_data = $urandom; req.w_strb = 4'hf; req.b_ready = 1;
      #1 chk(rsp.aw_ready && rsp.w_ready, "write accepted");
      model[idx[k]] = req.w_data;
      @(negedge clk); req.aw_valid = 0; req.w_valid = 0;
      chk(rsp.b_valid && rsp.b_resp == RESP_OKAY, "write response");
      @(negedge clk);
    end
    // byte strobes on a few words
    for (int k = 0; k < 20; k++) begin
      logic [31:0] d; logic [3:0] st;
      d = $urandom; st = 4'($urandom);
      @(negedge clk);
      req.aw_valid = 1; req.w_valid = 1; req.aw_addr = 32'(idx[k] * 4); req.w_data = d; req.w_strb = st;
      for (int b = 0; b < 4; b++) if (st[b]) model[idx[k]][8*b +: 8] = d[8*b +: 8];
      @(negedge clk); req.aw_valid = 0; req.w_valid = 0;
      @(negedge clk);
    end
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      req.ar_valid = 1; req.ar_addr = 32'(idx[k] * 4); req.r_ready = 1;
      @(negedge clk); req.ar_valid = 0;
      chk(rsp.r_valid && rsp.r_data == model[idx[k]], "read data after one cycle");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
