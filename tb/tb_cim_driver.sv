// tb_cim_driver: loads random activations, then checks the broadcast input
// bits for every bit position, the one-hot compute word lines, that nothing is
// driven outside PIM steps, and the common leading-one position.
module tb_cim_driver;
  localparam int N_ACT = 32, PREC = 16, CELLS = 8;
  logic clk = 0, rst_n, act_we, pim_en, step_en;
  logic [4:0] act_idx;
  logic [PREC-1:0] act_data;
  logic [3:0] bit_idx;
  logic [2:0] row_sel;
  logic [N_ACT-1:0] in_bits;
  logic [CELLS-1:0] rwl_cells;
  logic [4:0] lead;
  logic [PREC-1:0] acts [N_ACT];
  int checks = 0, failures = 0;

  cim_driver dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_lead();
    logic [PREC-1:0] o = '0;
    int l = 0;
    for (int r = 0; r < N_ACT; r++) o |= acts[r];
    for (int b = 0; b < PREC; b++) if (o[b]) l = b + 1;
    return l;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; act_we = 0; act_idx = '0; act_data = '0; pim_en = 0; step_en = 0;
    bit_idx = '0; row_sel = '0;
    #12 rst_n = 1;
    @(negedge clk);
    checks++;
    if (lead !== '0) begin failures++; $display("lead after reset %0d", lead); end
    for (int rep = 0; rep < 12; rep++) begin
      int maxb;
      maxb = $urandom_range(1, PREC);
      for (int r = 0; r < N_ACT; r++) begin
        acts[r] = PREC'($urandom) & PREC'((32'd1 << maxb) - 1);
        act_we = 1; act_idx = 5'(r); act_data = acts[r];
        @(negedge clk);
      end
      act_we = 0;
      #1;
      checks++;
      if (int'(lead) != ref_lead()) begin failures++; $display("lead %0d expected %0d", lead, ref_lead()); end
      for (int b = 0; b < PREC; b++) begin
        pim_en = 1; step_en = 1; bit_idx = 4'(b); row_sel = 3'($urandom);
        #1;
        for (int r = 0; r < N_ACT; r++) begin
          checks++;
          if (in_bits[r] !== acts[r][b]) begin failures++; $display("in_bits[%0d] bit %0d", r, b); end
        end
        checks++;
        if (rwl_cells !== (CELLS'(1) << row_sel)) begin failures++; $display("rwl_cells %b", rwl_cells); end
        step_en = 0; #1;
        checks++;
        if (in_bits !== '0 || rwl_cells !== '0) begin failures++; $display("driven outside a step"); end
        pim_en = 0; step_en = 1; #1;
        checks++;
        if (in_bits !== '0 || rwl_cells !== '0) begin failures++; $display("driven in storage mode"); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
