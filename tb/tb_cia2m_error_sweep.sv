// tb_cia2m_error_sweep: all 65,536 products of two unsigned 8-bit operands,
// computed by the full-size macro in exact, accurate and approximate mode.
//
// Operand B (the weight) is written into sub-bank 0 of each of the 16 column
// groups, so one MAC multiplies activation A by 16 weights at once; the other
// 31 activations are zero, so the common leading one is A's own. For every
// pair the testbench checks: exact mode gives A*B; the other modes give
// (A with the bits below its top 4 or 3 bits cleared) * B; the cycle count is
// 2 x (input bits processed). It then prints the mean and largest error of the
// two approximate modes over all pairs.
module tb_cia2m_error_sweep;
  import resdpu_pkg::*;
  localparam int NCG = 16;

  logic clk = 0, rst_n, pim_en, en_str, rd_en, rvalid, act_we, start, busy, done;
  logic [7:0] row, cycles;
  logic [63:0] wdata, rdata;
  logic [4:0] act_idx;
  logic [15:0] act_data;
  cia2m_mode_e mode;
  logic [2:0] w_nib, slot;
  logic [NCG-1:0] col_en;
  logic [NCG-1:0][ACC_W-1:0] mac;

  int checks = 0, failures = 0, pairs = 0;
  longint err_sum [3] = '{0, 0, 0};
  longint err_max [3] = '{0, 0, 0};
  int cyc_sum [3] = '{0, 0, 0};

  rep_dpim_macro dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pim_en = 0; en_str = 0; rd_en = 0; row = '0; wdata = '0;
    act_we = 0; act_idx = '0; act_data = '0; start = 0; mode = MODE_EXACT;
    w_nib = 3'd2; slot = '0; col_en = '1;
    #22 rst_n = 1;
    // Clear rows 0 and 1 everywhere once (other rows are never selected with
    // a non-zero input bit, since activations 1..31 stay zero).
    for (int g = 0; g < 16; g++) begin
      logic [63:0] lo, hi;
      pim_en = 0;
      for (int c = 0; c < NCG; c++) begin
        logic [7:0] b;
        b = 8'(16 * g + c);
        lo[4*c +: 4] = b[3:0];
        hi[4*c +: 4] = b[7:4];
      end
      @(negedge clk); en_str = 1; row = 8'd0; wdata = lo;
      @(negedge clk); en_str = 1; row = 8'd1; wdata = hi;
      @(negedge clk); en_str = 0;
      pim_en = 1;
      for (int a = 0; a < 256; a++) begin
        int lead;
        @(negedge clk); act_we = 1; act_idx = '0; act_data = 16'(a);
        @(negedge clk); act_we = 0;
        lead = 0;
        for (int k = 0; k < 8; k++) if (a[k]) lead = k + 1;
        for (int m = 0; m < 3; m++) begin
          int lim, steps, lo_bit, a_t;
          lim    = (m == 1) ? 4 : (m == 2) ? 3 : 16;
          steps  = (lead < lim) ? lead : lim;
          lo_bit = lead - steps;
          a_t    = (a >> lo_bit) << lo_bit;
          @(negedge clk); start = 1; mode = cia2m_mode_e'(m);
          @(negedge clk); start = 0;
          while (!done) @(negedge clk);
          chk(int'(cycles) == 2 * steps, $sformatf("A=%0d mode %0d: %0d cycles", a, m, cycles));
          cyc_sum[m] += int'(cycles);
          for (int c = 0; c < NCG; c++) begin
            longint b, got;
            b   = longint'(16 * g + c);
            got = longint'(mac[c]);
            chk(got == longint'(a_t) * b,
                $sformatf("A=%0d B=%0d mode %0d: %0d expected %0d", a, b, m, got, longint'(a_t) * b));
            err_sum[m] += longint'(a) * b - got;
            if (longint'(a) * b - got > err_max[m]) err_max[m] = longint'(a) * b - got;
          end
        end
        pairs += NCG;
      end
    end
    chk(pairs == 65536, "not all operand pairs covered");
    chk(err_sum[0] == 0, "exact mode has an error");
    for (int m = 0; m < 3; m++)
      $display("mode %0d: mean error %0.1f, max error %0d, mean cycles %0.2f",
               m, real'(err_sum[m]) / 65536.0, err_max[m], real'(cyc_sum[m]) / 4096.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
