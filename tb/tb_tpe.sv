// tb_tpe: self-checking test of one tensor PE (A x C = 4 x 8 S8DP1 units).
//
// Streams random compressed GEMM slices (K of 1 to 4 blocks, NNZ 1 to 8,
// blocks with fewer non-zeros than NNZ padded with zero weights) into the
// TPE, one weight row per cycle with the activation tensor held for the NNZ
// cycles of its block. After the last row the A x C result register must
// hold the products computed here. Also checks the one-cycle operand
// registers towards the neighbours and the drain path (shift_i).
module tb_tpe;
  localparam int A = 4, C = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [A-1:0][7:0][7:0] act_i, act_o;
  logic [C-1:0][7:0] w_val_i, w_val_o;
  logic [C-1:0][2:0] w_idx_i, w_idx_o;
  logic valid_i, last_i, valid_o, last_o, shift_i;
  logic [A-1:0][C-1:0][31:0] drain_i, drain_o;
  logic [A-1:0][C-1:0] gated;
  int checks = 0, failures = 0;

  tpe dut (.clk, .rst_n, .act_i, .act_o, .w_val_i, .w_idx_i, .valid_i, .last_i,
           .w_val_o, .w_idx_o, .valid_o, .last_o, .shift_i, .drain_i, .drain_o,
           .gated_o(gated));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // previous-cycle copies for the register checks
  logic [A-1:0][7:0][7:0] act_d;
  logic [C-1:0][7:0] wv_d;
  logic valid_d;
  always @(posedge clk) begin
    act_d <= act_i; wv_d <= w_val_i; valid_d <= valid_i;
  end

  initial begin
    valid_i = 0; last_i = 0; shift_i = 0; act_i = '0; w_val_i = '0; w_idx_i = '0; drain_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 60; g++) begin
      automatic int nblk = 1 + $urandom_range(0, 3);
      automatic int nnz  = 1 + $urandom_range(0, 7);
      longint exp_res [A][C];
      for (int a = 0; a < A; a++) for (int c = 0; c < C; c++) exp_res[a][c] = 0;
      for (int b = 0; b < nblk; b++) begin
        logic [A-1:0][7:0][7:0] blk;
        int pos [C][8];
        int cnt [C];
        for (int a = 0; a < A; a++) for (int k = 0; k < 8; k++)
          blk[a][k] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
        for (int c = 0; c < C; c++) begin
          automatic int want = $urandom_range(0, nnz);   // may be below nnz: padding
          cnt[c] = 0;
          for (int k = 0; k < 8; k++)
            if (cnt[c] < want && $urandom_range(0, 7 - k) < want - cnt[c]) begin
              pos[c][cnt[c]] = k; cnt[c]++;
            end
        end
        for (int r = 0; r < nnz; r++) begin
          @(negedge clk);
          valid_i = 1; act_i = blk;
          last_i = (b == nblk - 1) && (r == nnz - 1);
          for (int c = 0; c < C; c++) begin
            if (r < cnt[c]) begin
              w_val_i[c] = ($urandom_range(0, 5) == 0) ? 8'd0 : 8'($urandom | 1);
              w_idx_i[c] = 3'(pos[c][r]);
            end else begin
              w_val_i[c] = 8'd0; w_idx_i[c] = 3'd0;
            end
            for (int a = 0; a < A; a++)
              exp_res[a][c] += longint'(signed'(blk[a][w_idx_i[c]])) * longint'(signed'(w_val_i[c]));
          end
          @(posedge clk); #1;
          check(act_o == act_d && w_val_o == wv_d && valid_o == valid_d, "operand registers");
        end
      end
      @(negedge clk); valid_i = 0; last_i = 0;
      #1;
      for (int a = 0; a < A; a++) for (int c = 0; c < C; c++)
        check(drain_o[a][c] == 32'(exp_res[a][c]),
              $sformatf("set %0d result[%0d][%0d] = %0d, expected %0d", g, a, c,
                        signed'(drain_o[a][c]), exp_res[a][c]));
      // drain: a neighbour's values shift in
      drain_i = {A*C{32'($urandom)}};
      shift_i = 1;
      @(negedge clk); shift_i = 0;
      check(drain_o == drain_i, "drain shift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
