// tb_pace_dmem: self-checking test of a dual-port data memory bank.
//
// Random reads and writes on both ports against a model: one-cycle read
// latency, read-old-data on a same-cycle write, port A winning a same-address
// write collision, rdata holding between reads, and the full 4096-word depth.
module tb_pace_dmem;
  import pace_pkg::*;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = 0, b_addr = 0;
  logic [15:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [15:0] model [4096];
  logic [15:0] exp_a, exp_b;
  int checks = 0, failures = 0, collisions = 0;
  bit va = 0, vb = 0;

  pace_dmem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill through both ports
    for (int i = 0; i < 4096; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 12'(i);   a_wdata = 16'($urandom);
      b_en = 1; b_we = 1; b_addr = 12'(i+1); b_wdata = 16'($urandom);
      model[i] = a_wdata; model[i+1] = b_wdata;
    end
    exp_a = '0; exp_b = '0;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      a_en = 1'($urandom); a_we = ($urandom_range(0, 2) == 0);
      b_en = 1'($urandom); b_we = ($urandom_range(0, 2) == 0);
      a_addr = 12'($urandom); b_addr = (it % 7 == 0) ? a_addr : 12'($urandom);
      a_wdata = 16'($urandom); b_wdata = 16'($urandom);
      if (a_en && !a_we) begin exp_a = model[a_addr]; va = 1; end
      if (b_en && !b_we) begin exp_b = model[b_addr]; vb = 1; end
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) collisions++;
      if (b_en && b_we) model[b_addr] = b_wdata;
      if (a_en && a_we) model[a_addr] = a_wdata;
      @(posedge clk); #1;
      checks += 2;
      if (va && a_rdata !== exp_a) begin failures++; $display("FAIL A it=%0d %h %h", it, a_rdata, exp_a); end
      if (vb && b_rdata !== exp_b) begin failures++; $display("FAIL B it=%0d %h %h", it, b_rdata, exp_b); end
    end
    a_en = 0; b_en = 0;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk); a_en = 1; a_we = 0; a_addr = 12'(i);
      @(posedge clk); #1;
      checks++;
      if (a_rdata !== model[i]) begin failures++; $display("FAIL final %0d", i); end
    end
    checks++;
    if (collisions == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
