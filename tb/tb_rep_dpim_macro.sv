// tb_rep_dpim_macro: end-to-end test of the full-size macro (default
// parameters: 256 x 64 array, 16 columns, 32 activations).
//
// Storage mode: writes every row with weights laid out as the macro expects
// (row 8r+slot+k, columns 4c..4c+3 hold nibble k of weight W[r][c]), reads rows
// back, and checks that a write attempted in PIM mode is ignored.
// PIM mode: loads 32 activations and runs MACs with 4-, 8- and 16-bit weights
// in exact, accurate (4 input bits) and approximate (3 input bits) mode. Every
// result of all 16 columns is compared with a reference that keeps only the
// processed input bits, and the cycle count and start-to-done latency are
// checked. Mechanisms counted (each must occur): row write, row read, blocked
// write, the three modes, early stop when the activations have fewer bits than
// the mode's limit, the all-zero shortcut and switched-off column groups.
module tb_rep_dpim_macro;
  import resdpu_pkg::*;
  localparam int NSB = 32, NCG = 16;

  logic clk = 0, rst_n, pim_en, en_str, rd_en, rvalid, act_we, start, busy, done;
  logic [7:0] row, cycles;
  logic [63:0] wdata, rdata;
  logic [4:0] act_idx;
  logic [15:0] act_data;
  cia2m_mode_e mode;
  logic [2:0] w_nib, slot;
  logic [NCG-1:0] col_en;
  logic [NCG-1:0][ACC_W-1:0] mac;

  logic [63:0] mem [256];
  logic [15:0] acts [NSB];
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_blocked = 0, n_exact = 0, n_accurate = 0, n_approx = 0;
  int n_early = 0, n_zero = 0, n_coloff = 0;

  rep_dpim_macro dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Weight of sub-bank r, column c, stored at slot with nb nibbles.
  function automatic longint weight_of(int r, int c, int sl, int nb);
    longint w = 0;
    for (int k = 0; k < nb; k++)
      w |= longint'(mem[8*r + sl + k][4*c +: 4]) << (4 * k);
    return w;
  endfunction

  task automatic write_row(int r, logic [63:0] d);
    @(negedge clk);
    en_str = 1; row = 8'(r); wdata = d;
    @(negedge clk);
    en_str = 0;
  endtask

  task automatic load_acts(int bits);
    for (int r = 0; r < NSB; r++) begin
      acts[r] = 16'($urandom) & 16'((32'd1 << bits) - 1);
      @(negedge clk);
      act_we = 1; act_idx = 5'(r); act_data = acts[r];
    end
    @(negedge clk);
    act_we = 0;
  endtask

  task automatic run_mac(cia2m_mode_e m, int sl, int nb);
    logic [15:0] o;
    int lead, lim, steps, lat;
    logic [15:0] mask;
    longint exp_mac;
    o = '0;
    for (int r = 0; r < NSB; r++) o |= acts[r];
    lead = 0;
    for (int b = 0; b < 16; b++) if (o[b]) lead = b + 1;
    lim   = (m == MODE_ACCURATE) ? 4 : (m == MODE_APPROX) ? 3 : 16;
    steps = (lead < lim) ? lead : lim;
    mask  = '0;
    for (int b = lead - steps; b < lead; b++) mask[b] = 1'b1;
    if (lead == 0) n_zero++;
    else if (steps < lim && m != MODE_EXACT) n_early++;
    case (m)
      MODE_EXACT:    n_exact++;
      MODE_ACCURATE: n_accurate++;
      default:       n_approx++;
    endcase
    @(negedge clk);
    start = 1; mode = m; slot = 3'(sl); w_nib = 3'(nb);
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 200) begin @(negedge clk); lat++; end
    chk(done, "done never came");
    chk(lat == steps * nb + 1, $sformatf("latency %0d expected %0d", lat, steps * nb + 1));
    chk(int'(cycles) == steps * nb, $sformatf("cycles %0d expected %0d", cycles, steps * nb));
    for (int c = 0; c < NCG; c++) begin
      exp_mac = 0;
      for (int r = 0; r < NSB; r++) exp_mac += longint'(acts[r] & mask) * weight_of(r, c, sl, nb);
      if (!col_en[c]) exp_mac = 0;
      chk(longint'(mac[c]) == exp_mac,
          $sformatf("mode %0d slot %0d nib %0d col %0d: mac %0d expected %0d", m, sl, nb, c, mac[c], exp_mac));
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pim_en = 0; en_str = 0; rd_en = 0; row = '0; wdata = '0;
    act_we = 0; act_idx = '0; act_data = '0; start = 0; mode = MODE_EXACT; w_nib = 3'd1; slot = '0;
    col_en = '1;
    #22 rst_n = 1;

    // Storage mode: fill the whole array.
    for (int r = 0; r < 256; r++) begin
      mem[r] = {$urandom, $urandom};
      write_row(r, mem[r]);
      n_write++;
    end
    // Read back a sample of rows.
    for (int i = 0; i < 40; i++) begin
      int r;
      r = $urandom_range(0, 255);
      @(negedge clk); rd_en = 1; row = 8'(r);
      @(negedge clk); rd_en = 0;
      chk(rvalid && rdata == mem[r], $sformatf("read row %0d", r));
      n_read++;
    end

    // PIM mode.
    pim_en = 1;
    // A write in PIM mode must not land.
    write_row(5, ~mem[5]);
    n_blocked++;

    load_acts(8);
    run_mac(MODE_EXACT, 0, 2);      // 8b x 8b, all bits
    run_mac(MODE_ACCURATE, 0, 2);   // 8b x 8b, 4 bits
    run_mac(MODE_APPROX, 0, 2);     // 8b x 8b, 3 bits
    run_mac(MODE_ACCURATE, 2, 4);   // 16-bit weights in rows 2..5
    run_mac(MODE_EXACT, 6, 1);      // 4-bit weights
    run_mac(MODE_APPROX, 7, 1);
    // Switch off some column groups (pruned filters): they must read 0.
    col_en = 16'($urandom) | 16'h0001;
    col_en[15] = 1'b0;
    run_mac(MODE_EXACT, 0, 2);
    n_coloff++;
    col_en = '1;
    load_acts(16);
    run_mac(MODE_EXACT, 2, 4);      // 16b x 16b
    run_mac(MODE_ACCURATE, 4, 2);
    load_acts(2);                   // fewer bits than the mode limit
    run_mac(MODE_ACCURATE, 0, 2);
    run_mac(MODE_APPROX, 1, 3);
    for (int r = 0; r < NSB; r++) begin
      @(negedge clk); act_we = 1; act_idx = 5'(r); act_data = '0; acts[r] = '0;
    end
    @(negedge clk); act_we = 0;
    run_mac(MODE_EXACT, 0, 2);      // all-zero activations

    // Back to storage mode: the blocked write left row 5 untouched.
    pim_en = 0;
    @(negedge clk); rd_en = 1; row = 8'd5;
    @(negedge clk); rd_en = 0;
    chk(rvalid && rdata == mem[5], "write in PIM mode changed the array");

    chk(n_write > 0, "no row write");
    chk(n_read > 0, "no row read");
    chk(n_blocked > 0, "no blocked write");
    chk(n_exact > 0, "exact mode never ran");
    chk(n_accurate > 0, "accurate mode never ran");
    chk(n_approx > 0, "approximate mode never ran");
    chk(n_early > 0, "early stop never happened");
    chk(n_zero > 0, "zero shortcut never happened");
    chk(n_coloff > 0, "no column group was switched off");
    $display("mechanisms: write=%0d read=%0d blocked=%0d exact=%0d accurate=%0d approx=%0d early=%0d zero=%0d col_off=%0d",
             n_write, n_read, n_blocked, n_exact, n_accurate, n_approx, n_early, n_zero, n_coloff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
