// tb_im2col_unit: self-checking test of the IM2COL unit.
//
// A behavioural SRAM returns the next patch column (6 pixels x 8 channels)
// one cycle after each read and holds it until the next read; columns are
// read in address order. Random patches are pushed through with a step
// length of 1 to 4 cycles (the NNZ of the accelerator). For every step s
// of every patch, group g and window v must show pixel (row v + s%3,
// column g + s/3) of the patch, kpos must equal s, and each patch must cost
// exactly 4 SRAM column reads for its 9 steps: 24 pixels read for 72 pixel
// vectors delivered, the 3x read reduction of the unit.
module tb_im2col_unit;
  localparam int NPATCH = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, adv, rd;
  logic [5:0][7:0][7:0] sram;
  logic [1:0][3:0][7:0][7:0] out;
  logic [3:0] kpos;
  int checks = 0, failures = 0;

  im2col_unit dut (.clk, .rst_n, .start_i(start), .adv_i(adv), .sram_i(sram),
                   .rd_o(rd), .out_o(out), .kpos_o(kpos));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // patch memory: column-major, 4 columns per patch (+1 patch of slack)
  logic [5:0][7:0][7:0] colmem [(NPATCH + 1) * 4];
  int   rd_ptr = 0;
  int   reads = 0;
  logic tb_rd;

  always @(posedge clk) begin
    if (tb_rd || rd) begin
      sram   <= colmem[rd_ptr];
      rd_ptr <= rd_ptr + 1;
      reads  <= reads + 1;
    end
  end

  initial begin
    start = 0; adv = 0; tb_rd = 0;
    for (int i = 0; i < (NPATCH + 1) * 4; i++)
      for (int p = 0; p < 6; p++) for (int ch = 0; ch < 8; ch++)
        colmem[i][p][ch] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // restart and prime: read column 0, then one advance out of step 8
    @(negedge clk); start = 1; tb_rd = 1;
    @(negedge clk); start = 0; tb_rd = 0; adv = 1;
    @(negedge clk); adv = 0;
    for (int pt = 0; pt < NPATCH; pt++) begin
      automatic int len = 1 + $urandom_range(0, 3);
      automatic int reads_at_start = reads;
      for (int s = 0; s < 9; s++) begin
        for (int cyc = 0; cyc < len; cyc++) begin
          adv = (cyc == len - 1);
          #1;
          check(kpos == 4'(s), $sformatf("patch %0d step %0d kpos %0d", pt, s, kpos));
          for (int g = 0; g < 2; g++) for (int v = 0; v < 4; v++)
            check(out[g][v] == colmem[pt*4 + g + s/3][v + s%3],
                  $sformatf("patch %0d step %0d group %0d window %0d", pt, s, g, v));
          @(negedge clk);
        end
      end
      adv = 0;
      check(reads - reads_at_start == 4, $sformatf("patch %0d used %0d reads", pt, reads - reads_at_start));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
