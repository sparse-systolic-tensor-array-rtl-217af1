// tb_s8dp1: self-checking test of the time-unrolled sparse MAC.
//
// Streams random DBB-compressed dot products (1 to 4 blocks of 8, NNZ from 1
// to 8, activations with about one zero in four) one non-zero per cycle and
// compares the final sum on the last cycle with a sum computed here from the
// expanded block. Also checks that the gating flag is raised exactly for
// zero operands and that a block of NNZ non-zeros takes NNZ cycles.
module tb_s8dp1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic valid, last;
  logic [7:0][7:0] act;
  logic signed [7:0] w_val;
  logic [2:0] w_idx;
  logic signed [31:0] sum;
  logic gated;
  int checks = 0, failures = 0;

  s8dp1 dut (.clk, .rst_n, .valid_i(valid), .last_i(last), .act_i(act),
             .w_val_i(w_val), .w_idx_i(w_idx), .sum_o(sum), .gated_o(gated));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    valid = 0; last = 0; act = '0; w_val = 0; w_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int dot = 0; dot < 300; dot++) begin
      automatic int nblk = 1 + $urandom_range(0, 3);
      automatic int nnz  = 1 + $urandom_range(0, 7);
      automatic longint expect_sum = 0;
      automatic int cycles = 0;
      for (int b = 0; b < nblk; b++) begin
        automatic logic [7:0][7:0] blk;
        automatic int pos [8];
        automatic int np = 0;
        for (int k = 0; k < 8; k++)
          blk[k] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
        // choose nnz distinct positions in increasing order
        for (int k = 0; k < 8; k++)
          if (np < nnz && $urandom_range(0, 7 - k) < nnz - np) begin
            pos[np] = k; np++;
          end
        for (int r = 0; r < nnz; r++) begin
          automatic logic signed [7:0] wv = ($urandom_range(0, 7) == 0) ? 8'sd0 : 8'($urandom);
          @(negedge clk);
          valid = 1; act = blk; w_val = wv; w_idx = 3'(pos[r]);
          last  = (b == nblk - 1) && (r == nnz - 1);
          expect_sum += longint'(signed'(blk[pos[r]])) * longint'(wv);
          cycles++;
          #1;
          check(gated == ((blk[pos[r]] == 0) || (wv == 0)), "gating flag");
          if (last) check(sum == 32'(expect_sum), $sformatf("dot %0d sum %0d expected %0d", dot, sum, expect_sum));
        end
      end
      check(cycles == nblk * nnz, "cycles per block equal NNZ");
      // random idle gap
      if ($urandom_range(0, 1) == 1) begin
        @(negedge clk); valid = 0; last = 0;
      end
    end
    @(negedge clk); valid = 0; last = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
