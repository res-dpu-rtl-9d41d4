// tb_cia2m_ctrl: runs random commands through the CIA2M sequencer and checks
// every step it issues (input bit, weight nibble, cell row, shift) against the
// expected MSB-first order, the step count of each mode (all bits, 4 or 3), the
// cycle count, the done pulse, the zero-activation shortcut and that nothing
// starts outside PIM mode.
module tb_cia2m_ctrl;
  import resdpu_pkg::*;
  logic clk = 0, rst_n, pim_en, start;
  cia2m_mode_e mode;
  logic [2:0] w_nib, slot, row_sel;
  logic [4:0] lead, shift;
  logic busy, step_en, acc_clr, acc_en, done;
  logic [3:0] bit_idx;
  logic [1:0] nib_idx;
  logic [7:0] cycles;
  int checks = 0, failures = 0;
  int n_mode [3] = '{0, 0, 0};

  cia2m_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pim_en = 0; start = 0; mode = MODE_EXACT; w_nib = 3'd1; slot = '0; lead = '0;
    #12 rst_n = 1;
    // No start outside PIM mode.
    @(negedge clk); start = 1; lead = 5'd8;
    #1 chk(!acc_clr, "accepted start with pim_en low");
    @(negedge clk); start = 0;
    chk(!busy && !done, "ran with pim_en low");
    pim_en = 1;
    for (int t = 0; t < 300; t++) begin
      int m, nb, sl, ld, lim, steps, n;
      m     = $urandom_range(0, 2);
      nb    = $urandom_range(1, 4);
      sl    = $urandom_range(0, 8 - nb);
      ld    = (t % 25 == 0) ? 0 : $urandom_range(1, 16);
      lim   = (m == 1) ? 4 : (m == 2) ? 3 : 16;
      steps = (ld < lim) ? ld : lim;
      n     = 0;
      mode = cia2m_mode_e'(m); w_nib = 3'(nb); slot = 3'(sl); lead = 5'(ld);
      n_mode[m]++;
      @(negedge clk);
      start = 1;
      #1 chk(acc_clr, "acc_clr missing at start");
      @(negedge clk);
      start = 0;
      lead = 5'($urandom);   // lead only matters at start
      for (int s = 0; s < steps; s++)
        for (int k = 0; k < nb; k++) begin
          chk(busy && acc_en && step_en, "not busy during a step");
          chk(int'(bit_idx) == ld - 1 - s, $sformatf("bit_idx %0d expected %0d", bit_idx, ld - 1 - s));
          chk(int'(nib_idx) == k, "nib_idx");
          chk(int'(row_sel) == sl + k, "row_sel");
          chk(int'(shift) == ld - 1 - s + 4 * k, "shift");
          chk(!done, "done too early");
          n++;
          @(negedge clk);
        end
      chk(done && !busy, $sformatf("done missing after %0d steps (mode %0d lead %0d)", n, m, ld));
      chk(int'(cycles) == steps * nb, $sformatf("cycles %0d expected %0d", cycles, steps * nb));
      // After a mismatch, let a longer run finish before the next command.
      for (int w = 0; w < 100 && busy; w++) @(negedge clk);
      @(negedge clk);
      chk(!done, "done longer than one cycle");
    end
    for (int m = 0; m < 3; m++) chk(n_mode[m] > 0, "mode never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
