// tb_sta_array: self-checking GEMM test of the full 4 x 8 grid of 4x8x8 TPEs.
//
// Each run multiplies a random 16 x (8*KB) INT8 activation matrix by a random
// (8*KB) x 64 weight matrix in DBB form (at most NNZ non-zeros per block of
// 8 along K, NNZ drawn from 1..8). The stimulus is presented aligned at the
// edges, one compressed weight row per cycle, each activation block held for
// NNZ cycles. Checks: the run takes KB*NNZ streaming cycles; the results
// are complete M+N-2 cycles after the last row; draining returns column k
// of every TPE row on the k-th shift cycle, equal to the reference GEMM.
module tb_sta_array;
  import vdbb_pkg::*;
  localparam int A = TPE_A, C = TPE_C, M = ARR_M, N = ARR_N;
  localparam int R = A * M, Q = C * N, KBMAX = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [M-1:0][A-1:0][7:0][7:0] act_i;
  logic [N-1:0][C-1:0][7:0] w_val_i;
  logic [N-1:0][C-1:0][2:0] w_idx_i;
  logic valid_i, last_i, shift_i;
  logic [M-1:0][A-1:0][C-1:0][31:0] res;
  logic [M-1:0][N-1:0][A-1:0][C-1:0] gated;
  int checks = 0, failures = 0;
  int gated_events = 0;

  sta_array dut (.clk, .rst_n, .act_i, .w_val_i, .w_idx_i, .valid_i, .last_i,
                 .shift_i, .res_o(res), .gated_o(gated));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) gated_events += $countones(gated);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [7:0] act [R][KBMAX][8];
  logic [7:0] wv  [Q][KBMAX][8];
  logic [2:0] wi  [Q][KBMAX][8];
  longint     ref_out [R][Q];

  initial begin
    valid_i = 0; last_i = 0; shift_i = 0; act_i = '0; w_val_i = '0; w_idx_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      automatic int kb  = 1 + $urandom_range(0, KBMAX - 1);
      automatic int nnz = (run < 8) ? run + 1 : 1 + $urandom_range(0, 7);
      automatic int stream_cycles = 0;
      // random operands
      for (int i = 0; i < R; i++) for (int b = 0; b < kb; b++) for (int k = 0; k < 8; k++)
        act[i][b][k] = ($urandom_range(0, 1) == 0) ? 8'd0 : 8'($urandom);
      for (int q = 0; q < Q; q++) for (int b = 0; b < kb; b++) begin
        automatic int want = $urandom_range(0, nnz);
        automatic int np = 0;
        for (int k = 0; k < 8; k++)
          if (np < want && $urandom_range(0, 7 - k) < want - np) begin
            wi[q][b][np] = 3'(k); wv[q][b][np] = 8'($urandom | 1); np++;
          end
        for (int r = np; r < 8; r++) begin wi[q][b][r] = 3'd0; wv[q][b][r] = 8'd0; end
      end
      for (int i = 0; i < R; i++) for (int q = 0; q < Q; q++) begin
        ref_out[i][q] = 0;
        for (int b = 0; b < kb; b++) for (int r = 0; r < nnz; r++)
          ref_out[i][q] += longint'(signed'(act[i][b][wi[q][b][r]])) * longint'(signed'(wv[q][b][r]));
      end
      // stream
      for (int b = 0; b < kb; b++) for (int r = 0; r < nnz; r++) begin
        @(negedge clk);
        valid_i = 1;
        last_i  = (b == kb - 1) && (r == nnz - 1);
        for (int i = 0; i < M; i++) for (int a = 0; a < A; a++) for (int k = 0; k < 8; k++)
          act_i[i][a][k] = act[i*A + a][b][k];
        for (int j = 0; j < N; j++) for (int c = 0; c < C; c++) begin
          w_val_i[j][c] = wv[j*C + c][b][r];
          w_idx_i[j][c] = wi[j*C + c][b][r];
        end
        stream_cycles++;
      end
      check(stream_cycles == kb * nnz, "occupancy NNZ cycles per block");
      @(negedge clk); valid_i = 0; last_i = 0;
      // the far corner takes its last row M+N-2 cycles after the edge did
      repeat (M + N - 2) @(negedge clk);
      for (int k = 0; k < N; k++) begin
        shift_i = 1;
        #1;
        for (int i = 0; i < M; i++) for (int a = 0; a < A; a++) for (int c = 0; c < C; c++)
          check(res[i][a][c] == 32'(ref_out[i*A + a][k*C + c]),
                $sformatf("run %0d nnz %0d row %0d col %0d: %0d expected %0d", run, nnz,
                          i*A + a, k*C + c, signed'(res[i][a][c]), ref_out[i*A + a][k*C + c]));
        @(negedge clk);
      end
      shift_i = 0;
    end
    check(gated_events > 0, "zero-operand gating happened");
    $display("gated MAC-cycles: %0d", gated_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
