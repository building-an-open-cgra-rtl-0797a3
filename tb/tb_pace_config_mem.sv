// tb_pace_config_mem: self-checking test of the PE configuration memory.
//
// Writes all 32 words in 32-bit halves, reads them back, checks the one-cycle
// read latency, that rdata holds while the memory is not enabled, and that a
// half-word write leaves the other half alone.
module tb_pace_config_mem;
  logic clk = 0, en = 0, we = 0;
  logic [1:0] wmask = 0;
  logic [4:0] addr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] model [32];
  int checks = 0, failures = 0;

  pace_config_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [1:0] m, logic [63:0] d);
    @(negedge clk); en = 1; we = 1; addr = 5'(a); wmask = m; wdata = d;
    @(negedge clk); en = 0; we = 0;
    if (m[0]) model[a][31:0]  = d[31:0];
    if (m[1]) model[a][63:32] = d[63:32];
  endtask

  task automatic rd_check(int a);
    @(negedge clk); en = 1; we = 0; addr = 5'(a);
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[a]) begin failures++; $display("FAIL rd %0d %h %h", a, rdata, model[a]); end
    en = 0;
  endtask

  initial begin
    for (int a = 0; a < 32; a++) begin
      wr(a, 2'b01, {32'h0, $urandom});
      wr(a, 2'b10, {$urandom, 32'h0});
    end
    for (int a = 0; a < 32; a++) rd_check(a);
    // hold while disabled
    rd_check(7);
    repeat (3) @(negedge clk);
    addr = 5'd9;
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL hold"); end
    // partial write
    wr(3, 2'b10, 64'hDEAD_BEEF_0000_0000);
    rd_check(3);
    // latency: value must not appear before the edge
    @(negedge clk); en = 1; addr = 5'd4;
    #1;
    checks++;
    if (rdata === model[4] && model[4] !== model[3]) begin failures++; $display("FAIL early"); end
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[4]) begin failures++; $display("FAIL latency"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
