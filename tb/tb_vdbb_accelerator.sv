// tb_vdbb_accelerator: end-to-end test of the accelerator at its default
// size (4x8x8_4x8 array, 2 MB activation buffer, 0.5 MB weight buffer,
// 64 KB program store).
//
// The testbench plays the part of the MCU cluster. For each job it makes
// random INT8 data, writes the activation and compressed weight words
// through the host ports into the banks the array does not own, flips
// both bank selects, starts the job and compares every drained INT32
// result with a GEMM worked out here from the dense data.
//
// Jobs:
//   * plain GEMMs (IM2COL bypass) for NNZ = 1..8, with 1..3 M-tiles and
//     1..2 N-tiles. Weight blocks hold between 0 and NNZ non-zeros; slots
//     beyond a block's non-zeros ("padding") are filled with random junk
//     in the value array, which the index decoder must suppress.
//   * 3x3 convolutions with stride 1 and zero padding through the IM2COL
//     units: 8 or 16 input channels (one or two nine-step chunks), output
//     tiles of 4x4 pixels across the image width, NNZ random.
// Activations contain zeros so that MAC clock gating happens.
//
// Each job's run time must be tiles * (2 + K*NNZ + (M+N-2) + N) cycles
// from start to done (K blocks of 8 along the reduction). Counted and
// required at least once: each NNZ mode, bypass and IM2COL jobs, gated
// MAC-cycles, bank swaps, padding slots, multi-tile jobs and image-border
// zero padding. The program store is written and read back as well.
module tb_vdbb_accelerator;
  import vdbb_pkg::*;
  localparam int A = TPE_A, C = TPE_C, M = ARR_M, N = ARR_N;
  localparam int TR = M * A, TC = N * C;          // 16 x 64 output tile
  localparam int ABW = M * A * BZ * 8, WBW = N * C * 8;
  localparam int ABAW = 13, WBAW = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  gemm_cfg_t cfg;
  logic ab_sel, wb_sel;
  logic ab_h_en, ab_h_we, wb_h_en, wb_h_we, wb_h_msk;
  logic [ABAW-1:0] ab_h_addr;
  logic [WBAW-1:0] wb_h_addr;
  logic [ABW-1:0] ab_h_wdata, ab_h_rdata;
  logic [WBW-1:0] wb_h_wdata, wb_h_rdata;
  logic pm_en;
  logic [3:0] pm_be;
  logic [13:0] pm_addr;
  logic [31:0] pm_wdata, pm_rdata;
  logic res_valid;
  logic [$clog2(N+1)-1:0] res_col;
  logic [7:0] res_tm, res_tn;
  logic [M-1:0][A-1:0][C-1:0][31:0] res_data;

  vdbb_accelerator dut (
    .clk, .rst_n, .start_i(start), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .ab_bank_sel_i(ab_sel), .wb_bank_sel_i(wb_sel),
    .ab_h_en_i(ab_h_en), .ab_h_we_i(ab_h_we), .ab_h_addr_i(ab_h_addr),
    .ab_h_wdata_i(ab_h_wdata), .ab_h_rdata_o(ab_h_rdata),
    .wb_h_en_i(wb_h_en), .wb_h_we_i(wb_h_we), .wb_h_msk_i(wb_h_msk), .wb_h_addr_i(wb_h_addr),
    .wb_h_wdata_i(wb_h_wdata), .wb_h_rdata_o(wb_h_rdata),
    .pm_en_i(pm_en), .pm_be_i(pm_be), .pm_addr_i(pm_addr), .pm_wdata_i(pm_wdata),
    .pm_rdata_o(pm_rdata),
    .res_valid_o(res_valid), .res_col_o(res_col), .res_tile_m_o(res_tm), .res_tile_n_o(res_tn),
    .res_data_o(res_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- data
  // dense GEMM operands of the current job
  int rows, kblk, cols;
  logic signed [7:0] act [][];     // [row][k]
  logic signed [7:0] wd  [][];     // [k][col]
  longint            ref_out [][];
  logic [7:0]        wmask [][];   // [col][block]
  logic signed [7:0] wnz [][][];   // [col][block][rank], junk beyond the block's count

  // mechanism counters
  int nnz_runs [9];
  int bypass_runs = 0, im2col_runs = 0, swaps = 0, pad_slots = 0, multi_tile = 0;
  int border_px = 0;
  longint gated_cyc = 0;

  always @(posedge clk) if (busy) gated_cyc += $countones(dut.gated);

  function automatic logic signed [7:0] rnd_act();
    return ($urandom_range(0, 3) == 0) ? 8'sd0 : 8'($urandom);
  endfunction

  // random VDBB weights: each column block keeps 0..nnz non-zeros
  task automatic make_weights(input int nnz);
    wd = new[kblk * 8];
    foreach (wd[k]) begin wd[k] = new[cols]; foreach (wd[k][q]) wd[k][q] = 0; end
    wmask = new[cols];
    wnz = new[cols];
    for (int q = 0; q < cols; q++) begin
      wmask[q] = new[kblk];
      wnz[q] = new[kblk];
      for (int b = 0; b < kblk; b++) begin
        automatic int want = $urandom_range(0, nnz), np = 0;
        wnz[q][b] = new[nnz];
        wmask[q][b] = '0;
        for (int k = 0; k < 8; k++)
          if (np < want && $urandom_range(0, 7 - k) < want - np) begin
            automatic logic signed [7:0] v = 8'($urandom);
            if (v == 0) v = 8'sd1;
            wmask[q][b][k] = 1'b1;
            wd[b*8 + k][q] = v;
            wnz[q][b][np] = v;
            np++;
          end
        for (int r = np; r < nnz; r++) begin
          wnz[q][b][r] = 8'($urandom);      // padding slot: junk on purpose
          pad_slots++;
        end
      end
    end
  endtask

  task automatic make_ref();
    ref_out = new[rows];
    foreach (ref_out[i]) begin
      ref_out[i] = new[cols];
      foreach (ref_out[i][q]) begin
        automatic longint s = 0;
        for (int k = 0; k < kblk * 8; k++) s += longint'(act[i][k]) * longint'(wd[k][q]);
        ref_out[i][q] = s;
      end
    end
  endtask

  // ------------------------------------------------------------ host port
  task automatic ab_write(input int addr, input logic [ABW-1:0] w);
    ab_h_en = 1; ab_h_we = 1; ab_h_addr = ABAW'(addr); ab_h_wdata = w;
    @(negedge clk);
    ab_h_en = 0; ab_h_we = 0;
  endtask

  task automatic wb_write(input bit msk, input int addr, input logic [WBW-1:0] w);
    wb_h_en = 1; wb_h_we = 1; wb_h_msk = msk; wb_h_addr = WBAW'(addr); wb_h_wdata = w;
    @(negedge clk);
    wb_h_en = 0; wb_h_we = 0;
  endtask

  // compressed weights: value row (tn, b, r) at wbb + (tn*kblk + b)*nnz + r,
  // mask row (tn, b) at mkb + tn*kblk + b
  task automatic load_weights(input int nnz, input int wbb, input int mkb);
    for (int tn = 0; tn < cols / TC; tn++)
      for (int b = 0; b < kblk; b++) begin
        automatic logic [WBW-1:0] mw = '0;
        for (int q = 0; q < TC; q++) mw[q*8 +: 8] = wmask[tn*TC + q][b];
        wb_write(1'b1, mkb + tn*kblk + b, mw);
        for (int r = 0; r < nnz; r++) begin
          automatic logic [WBW-1:0] vw = '0;
          for (int q = 0; q < TC; q++) vw[q*8 +: 8] = wnz[tn*TC + q][b][r];
          wb_write(1'b0, wbb + (tn*kblk + b)*nnz + r, vw);
        end
      end
  endtask

  task automatic swap_banks();
    ab_sel = ~ab_sel; wb_sel = ~wb_sel; swaps++;
    @(negedge clk);
  endtask

  // ---------------------------------------------------------------- run
  // start the job, check every drained result and the run time
  task automatic run_job(input int nnz, input bit im, input int abb, input int stride,
                         input int wbb, input int mkb, input int row_of [][]);
    automatic int tm_n = rows / TR, tn_n = cols / TC;
    automatic int cyc = 0, seen = 0;
    automatic int expect_cyc = tm_n * tn_n * (2 + kblk*nnz + (M + N - 2) + N);
    cfg = '0;
    cfg.nnz = 4'(nnz); cfg.im2col_en = im; cfg.k_blocks = 16'(kblk);
    cfg.ab_base = 16'(abb); cfg.ab_tile_stride = 16'(stride);
    cfg.wb_base = 16'(wbb); cfg.msk_base = 16'(mkb);
    cfg.tiles_m = 8'(tm_n); cfg.tiles_n = 8'(tn_n);
    start = 1;
    @(posedge clk);
    #1 start = 0;
    while (!done && cyc < 100000) begin
      @(posedge clk);
      if (res_valid) begin
        for (int i = 0; i < M; i++) for (int a = 0; a < A; a++) for (int c = 0; c < C; c++) begin
          automatic int r = row_of[res_tm][i*A + a];
          automatic int q = int'(res_tn) * TC + int'(res_col) * C + c;
          check(res_data[i][a][c] == 32'(ref_out[r][q]),
                $sformatf("nnz %0d im2col %0d row %0d col %0d: got %0d expected %0d",
                          nnz, im, r, q, signed'(res_data[i][a][c]), ref_out[r][q]));
        end
        seen++;
      end
      cyc++;
      #1;
    end
    check(done, "job finished");
    check(cyc == expect_cyc, $sformatf("run time %0d cycles, expected %0d", cyc, expect_cyc));
    check(seen == tm_n * tn_n * N, $sformatf("drain count %0d", seen));
    nnz_runs[nnz]++;
    if (im) im2col_runs++; else bypass_runs++;
    if (tm_n > 1 && tn_n > 1) multi_tile++;
    @(negedge clk);
  endtask

  // plain GEMM: AB word (tm, b) at abb + tm*kblk + b
  task automatic gemm_job(input int nnz, input int tm_n, input int tn_n, input int kb);
    automatic int row_of [][];
    rows = tm_n * TR; cols = tn_n * TC; kblk = kb;
    act = new[rows];
    foreach (act[i]) begin act[i] = new[kblk * 8]; foreach (act[i][k]) act[i][k] = rnd_act(); end
    make_weights(nnz);
    make_ref();
    row_of = new[tm_n];
    foreach (row_of[t]) begin row_of[t] = new[TR]; foreach (row_of[t][x]) row_of[t][x] = t*TR + x; end
    for (int tm = 0; tm < tm_n; tm++)
      for (int b = 0; b < kblk; b++) begin
        automatic logic [ABW-1:0] w = '0;
        for (int x = 0; x < TR; x++) for (int k = 0; k < 8; k++)
          w[(x*8 + k)*8 +: 8] = act[tm*TR + x][b*8 + k];
        ab_write(100 + tm*kblk + b, w);
      end
    load_weights(nnz, 40, 1500);
    swap_banks();
    run_job(nnz, 1'b0, 100, kblk, 40, 1500, row_of);
  endtask

  // 3x3 convolution, stride 1, zero padding 1, on a 4 x (4*tiles) image
  // with cin = 8*groups channels and 64*tn_n output channels. Output tile tm
  // covers image columns 4tm..4tm+3; IM2COL unit u owns columns 4tm+2u and
  // 4tm+2u+1 and reads patch columns 4tm+2u+p (p = 0..3) of padded rows 0..5.
  // GEMM row of unit u, group g, window v = output pixel (v, 4tm+2u+g);
  // K index (chunk cg, step s, channel ch) with kx = s/3, ky = s%3.
  task automatic conv_job(input int nnz, input int tiles, input int groups, input int tn_n);
    automatic int OH = 4, OW = 4 * tiles, cin = 8 * groups;
    automatic logic signed [7:0] img [][][];   // padded [OH+2][OW+2][cin]
    automatic int row_of [][];
    automatic int stride = 4 * groups;
    rows = tiles * TR; cols = tn_n * TC; kblk = 9 * groups;
    img = new[OH + 2];
    foreach (img[y]) begin
      img[y] = new[OW + 2];
      foreach (img[y][x]) begin
        img[y][x] = new[cin];
        foreach (img[y][x][c])
          img[y][x][c] = (y == 0 || x == 0 || y == OH + 1 || x == OW + 1) ? 8'sd0 : rnd_act();
      end
    end
    // dense im2col matrix, GEMM row = tm*16 + (2u+g)*4 + v
    act = new[rows];
    row_of = new[tiles];
    for (int tm = 0; tm < tiles; tm++) begin
      row_of[tm] = new[TR];
      for (int u = 0; u < M/2; u++) for (int g = 0; g < 2; g++) for (int v = 0; v < 4; v++) begin
        automatic int r = tm*TR + (2*u + g)*4 + v;
        automatic int ox = 4*tm + 2*u + g;
        row_of[tm][(2*u + g)*4 + v] = r;
        act[r] = new[kblk * 8];
        for (int cg = 0; cg < groups; cg++) for (int s = 0; s < 9; s++) for (int ch = 0; ch < 8; ch++) begin
          automatic int py = v + s % 3, px = ox + s / 3;
          act[r][(cg*9 + s)*8 + ch] = img[py][px][cg*8 + ch];
          if (py == 0 || px == 0 || py == OH + 1 || px == OW + 1) border_px++;
        end
      end
    end
    make_weights(nnz);
    make_ref();
    for (int tm = 0; tm < tiles; tm++)
      for (int cg = 0; cg < groups; cg++)
        for (int p = 0; p < 4; p++) begin
          automatic logic [ABW-1:0] w = '0;
          for (int u = 0; u < M/2; u++) for (int py = 0; py < 6; py++) for (int ch = 0; ch < 8; ch++)
            w[(u*48 + py*8 + ch)*8 +: 8] = img[py][4*tm + 2*u + p][cg*8 + ch];
          ab_write(2000 + tm*stride + cg*4 + p, w);
        end
    load_weights(nnz, 0, 1000);
    swap_banks();
    run_job(nnz, 1'b1, 2000, stride, 0, 1000, row_of);
  endtask

  // -------------------------------------------------------------- program store
  task automatic pm_test();
    automatic logic [31:0] words [16];
    for (int n = 0; n < 16; n++) begin
      words[n] = $urandom;
      pm_en = 1; pm_be = 4'hF; pm_addr = 14'(n * 1000); pm_wdata = words[n];
      @(negedge clk);
    end
    for (int n = 0; n < 16; n++) begin
      pm_en = 1; pm_be = 4'h0; pm_addr = 14'(n * 1000);
      @(negedge clk);
      check(pm_rdata == words[n], $sformatf("program store word %0d", n));
    end
    pm_en = 0;
  endtask

  initial begin
    start = 0; cfg = '0; ab_sel = 0; wb_sel = 0;
    ab_h_en = 0; ab_h_we = 0; ab_h_addr = '0; ab_h_wdata = '0;
    wb_h_en = 0; wb_h_we = 0; wb_h_msk = 0; wb_h_addr = '0; wb_h_wdata = '0;
    pm_en = 0; pm_be = 0; pm_addr = '0; pm_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    pm_test();
    for (int nnz = 1; nnz <= 8; nnz++)
      gemm_job(nnz, $urandom_range(1, 3), $urandom_range(1, 2), $urandom_range(1, 4));
    gemm_job($urandom_range(1, 8), 2, 2, 3);
    conv_job($urandom_range(1, 8), 2, 1, 1);
    conv_job($urandom_range(1, 8), 3, 2, 2);
    conv_job(4, 1, 1, 1);
    $display("mechanisms: bypass %0d im2col %0d swaps %0d gated MAC-cycles %0d padding slots %0d multi-tile %0d border pixels %0d",
             bypass_runs, im2col_runs, swaps, gated_cyc, pad_slots, multi_tile, border_px);
    for (int n = 1; n <= 8; n++) check(nnz_runs[n] > 0, $sformatf("NNZ mode %0d exercised", n));
    check(bypass_runs > 0, "IM2COL bypass exercised");
    check(im2col_runs > 0, "IM2COL exercised");
    check(swaps > 1, "bank swap exercised");
    check(gated_cyc > 0, "clock gating exercised");
    check(pad_slots > 0, "padding slots exercised");
    check(multi_tile > 0, "multi-tile job exercised");
    check(border_px > 0, "image zero padding exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
