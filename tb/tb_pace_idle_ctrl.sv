// tb_pace_idle_ctrl: self-checking test of NOP idle windows and clock gating.
//
// Feeds a random stream of instructions (NOPs with random counts, and other
// operations) the way a PE would see them: during an idle window the held NOP
// is presented again. Checks, cycle by cycle against a model: the idle window
// length, that configuration reads are off inside the window except in its
// last cycle, the gated clock pulses (none in NOP cycles, none when stopped or
// statically disabled, always on clear), and that clear ends a window.
module tb_pace_idle_ctrl;
  logic clk = 0, rst_n = 0, run = 0, clear = 0, static_en = 1, is_nop = 0, test_en = 0;
  logic [4:0] nop_len = 1;
  logic idle, cm_ren, gclk;
  int checks = 0, failures = 0;
  int gpulses = 0, exp_pulses = 0, windows = 0, gated_cycles = 0;

  pace_idle_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge gclk) gpulses++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string w, int it);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0d", w, it); end
  endtask

  initial begin
    int remain;      // idle cycles left in the model's window, including this one
    logic [4:0] cur_len;
    logic cur_nop;
    remain = 0; cur_nop = 0; cur_len = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      clear = (it % 1000 == 0);
      run = !clear && ($urandom_range(0, 19) != 0);
      static_en = (it % 3000) < 2800;
      // choose the instruction: inside a window the NOP is held
      if (remain == 0) begin
        if (!run) begin
          // keep whatever is there when stopped
        end else if ($urandom_range(0, 2) == 0) begin
          cur_nop = 1; cur_len = 5'($urandom_range(1, 9));
        end else begin
          cur_nop = 0; cur_len = 1;
        end
      end
      is_nop = cur_nop; nop_len = cur_len;
      #1;
      // model
      begin
        bit in_win, starts, last, exp_ren, exp_en;
        in_win = (remain > 0);
        starts = run && !in_win && cur_nop && cur_len > 1;
        last   = in_win && remain == 1;
        exp_ren = clear || (run && (in_win ? last : !starts));
        exp_en  = clear || (static_en && run && !cur_nop);
        chk(idle == in_win, "idle", it);
        chk(cm_ren == exp_ren, "cm_ren", it);
        if (exp_en) exp_pulses++; else gated_cycles++;
        if (starts) begin remain = cur_len - 1; windows++; end
        else if (in_win && run) remain--;
        if (clear) remain = 0;
      end
    end
    @(negedge clk);
    chk(gpulses == exp_pulses, "gated pulses", 0);
    chk(windows > 100 && gated_cycles > 1000, "coverage", 0);
    $display("windows=%0d gated_cycles=%0d", windows, gated_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
