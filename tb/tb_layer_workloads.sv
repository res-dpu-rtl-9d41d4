// tb_layer_workloads: runs the two layer mappings of the macro at full size.
//
// Convolution: a 3-channel 6 x 6 input feature map and sixteen 3 x 3 x 3 filters
// of 8-bit values. Filter c is stored in column group c, one weight per
// sub-bank (27 of the 32 sub-banks, the rest zero), as two nibbles in cell rows
// 0 and 1. For each of the 16 output positions the 27-value input patch is
// loaded as the activations and one MAC yields all 16 output channels at once.
// Results are checked against a direct convolution (exact mode) and against the
// truncated-input reference (accurate mode).
// Fully connected: 32 inputs to 16 outputs with 8-bit weights in cell rows 2-3;
// one MAC gives all 16 outputs, checked against the matrix-vector product.
// About 30 % of the weights are set to zero, as in a pruned layer.
module tb_layer_workloads;
  import resdpu_pkg::*;
  localparam int NSB = 32, NCG = 16, CH = 3, H = 6, K = 3, OH = H - K + 1;

  logic clk = 0, rst_n, pim_en, en_str, rd_en, rvalid, act_we, start, busy, done;
  logic [7:0] row, cycles;
  logic [63:0] wdata, rdata;
  logic [4:0] act_idx;
  logic [15:0] act_data;
  cia2m_mode_e mode;
  logic [2:0] w_nib, slot;
  logic [NCG-1:0] col_en = '1;
  logic [NCG-1:0][ACC_W-1:0] mac;

  logic [63:0] mem [256];
  logic [7:0] fmap [CH][H][H];
  logic [7:0] wconv [NCG][NSB];    // filter c, flattened (ch, ky, kx); 27 used
  logic [7:0] wfc   [NCG][NSB];
  logic [7:0] xin   [NSB];
  int checks = 0, failures = 0, n_conv = 0, n_fc = 0;

  rep_dpim_macro dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [7:0] pruned_rand();
    return ($urandom_range(0, 9) < 3) ? 8'd0 : 8'($urandom);
  endfunction

  task automatic load(input logic [7:0] v [NSB]);
    for (int r = 0; r < NSB; r++) begin
      @(negedge clk); act_we = 1; act_idx = 5'(r); act_data = 16'(v[r]);
    end
    @(negedge clk); act_we = 0;
  endtask

  task automatic mac_run(cia2m_mode_e m, int sl);
    @(negedge clk); start = 1; mode = m; slot = 3'(sl); w_nib = 3'd2;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pim_en = 0; en_str = 0; rd_en = 0; row = '0; wdata = '0;
    act_we = 0; act_idx = '0; act_data = '0; start = 0; mode = MODE_EXACT; w_nib = 3'd2; slot = '0;
    #22 rst_n = 1;

    for (int c = 0; c < NCG; c++)
      for (int r = 0; r < NSB; r++) begin
        wconv[c][r] = (r < CH * K * K) ? pruned_rand() : 8'd0;
        wfc[c][r]   = pruned_rand();
      end
    for (int ch = 0; ch < CH; ch++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < H; x++) fmap[ch][y][x] = 8'($urandom);

    // Build the array image: sub-bank r, rows 8r+0/1 conv nibbles, 8r+2/3 FC.
    for (int i = 0; i < 256; i++) mem[i] = '0;
    for (int r = 0; r < NSB; r++)
      for (int c = 0; c < NCG; c++) begin
        mem[8*r + 0][4*c +: 4] = wconv[c][r][3:0];
        mem[8*r + 1][4*c +: 4] = wconv[c][r][7:4];
        mem[8*r + 2][4*c +: 4] = wfc[c][r][3:0];
        mem[8*r + 3][4*c +: 4] = wfc[c][r][7:4];
      end
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); en_str = 1; row = 8'(i); wdata = mem[i];
    end
    @(negedge clk); en_str = 0;
    pim_en = 1;

    // Convolution, one output position per MAC.
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OH; ox++) begin
        logic [7:0] o;
        int lead, lo;
        for (int r = 0; r < NSB; r++) xin[r] = '0;
        for (int ch = 0; ch < CH; ch++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              xin[ch*K*K + ky*K + kx] = fmap[ch][oy+ky][ox+kx];
        load(xin);
        mac_run(MODE_EXACT, 0);
        for (int c = 0; c < NCG; c++) begin
          longint acc;
          acc = 0;
          for (int ch = 0; ch < CH; ch++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                acc += longint'(fmap[ch][oy+ky][ox+kx]) * longint'(wconv[c][ch*K*K + ky*K + kx]);
          chk(longint'(mac[c]) == acc, $sformatf("conv (%0d,%0d) ch %0d: %0d vs %0d", oy, ox, c, mac[c], acc));
        end
        // Accurate mode: only the top four bits from the common leading one.
        mac_run(MODE_ACCURATE, 0);
        o = '0;
        for (int r = 0; r < NSB; r++) o |= xin[r];
        lead = 0;
        for (int b = 0; b < 8; b++) if (o[b]) lead = b + 1;
        lo = (lead > 4) ? lead - 4 : 0;
        for (int c = 0; c < NCG; c++) begin
          longint acc;
          acc = 0;
          for (int r = 0; r < NSB; r++)
            acc += longint'((xin[r] >> lo) << lo) * longint'(wconv[c][r]);
          chk(longint'(mac[c]) == acc, $sformatf("conv accurate ch %0d", c));
        end
        chk(int'(cycles) == 8, $sformatf("accurate 8b x 8b took %0d cycles", cycles));
        n_conv++;
      end

    // Fully connected layer.
    for (int r = 0; r < NSB; r++) xin[r] = 8'($urandom);
    load(xin);
    mac_run(MODE_EXACT, 2);
    for (int c = 0; c < NCG; c++) begin
      longint acc;
      acc = 0;
      for (int r = 0; r < NSB; r++) acc += longint'(xin[r]) * longint'(wfc[c][r]);
      chk(longint'(mac[c]) == acc, $sformatf("fc out %0d: %0d vs %0d", c, mac[c], acc));
    end
    n_fc++;

    chk(n_conv == OH * OH && n_fc == 1, "workload not completed");
    $display("conv positions=%0d fc layers=%0d", n_conv, n_fc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
