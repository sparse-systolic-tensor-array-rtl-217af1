// tb_vdbb_workloads: layer shapes of the networks the accelerator targets,
// run end to end through the accelerator at its default size.
//
// Same harness as the end-to-end test (the testbench acts as the MCU: it
// loads the buffers through the host ports, swaps banks, starts a job and
// compares every drained result with a reference computed here), with the
// jobs taken from real layers, at the sparsity each network was pruned to:
//   * LeNet-5 conv2 (5x5, 6 -> 16 channels, 10x10 outputs), NNZ = 2,
//     with the 5x5 im2col done by the host and the IM2COL unit bypassed
//     (channels padded from 6 to 8; 100 outputs padded to 7 row tiles)
//   * CIFAR ConvNet 3x3 layer, 32 -> 64 channels, NNZ = 2, IM2COL
//   * ResNet-50 3x3 layer, 64 -> 64 channels, NNZ = 3, IM2COL, and a 1x1
//     layer 256 -> 64, NNZ = 3, bypass
//   * VGG-16 3x3 layer, 128 -> 128 channels, NNZ = 3, IM2COL
//   * ResNet-50 stage-5 3x3 layer, 7x7x512 -> 512, NNZ = 3: one complete
//     job (all 49 outputs, as 2x2 tiles of 4x4, full K = 4608, 64 of the
//     512 output channels; the layer needs eight such jobs because one
//     weight bank holds 2048 rows and one 64-channel slice uses 1728)
//   * MobileNetV1 1x1 layer 512 -> 128, NNZ = 4, bypass, and a 3x3
//     depthwise layer on 16 channels run as an IM2COL GEMM in which each
//     output channel has one non-zero per block of its own channel group
//     (NNZ = 1)
// Spatial sizes are cut to a few 4x4 output tiles; channel counts, kernel
// sizes and NNZ are those of the layers. Layer shapes are the standard
// ones of these networks; the NNZ per network is the pruning level it was
// trained to. Each job's cycle count is checked as in the end-to-end test.
module tb_vdbb_workloads;
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
    repeat (2000000) @(posedge clk);
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
  task automatic make_weights(input int nnz, input bit dw = 1'b0);
    wd = new[kblk * 8];
    foreach (wd[k]) begin wd[k] = new[cols]; foreach (wd[k][q]) wd[k][q] = 0; end
    wmask = new[cols];
    wnz = new[cols];
    for (int q = 0; q < cols; q++) begin
      wmask[q] = new[kblk];
      wnz[q] = new[kblk];
      for (int b = 0; b < kblk; b++) begin
        // depthwise: column q only sees input channel q, once per kernel tap
        automatic int want = dw ? ((b / 9 == q / 8) ? 1 : 0) : $urandom_range(0, nnz), np = 0;
        wnz[q][b] = new[nnz];
        wmask[q][b] = '0;
        for (int k = 0; k < 8; k++)
          if (dw ? (want == 1 && k == q % 8) : (np < want && $urandom_range(0, 7 - k) < want - np)) begin
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
    rows = tm_n * TR; cols = tn_n * TC; kblk = kb;
    act = new[rows];
    foreach (act[i]) begin act[i] = new[kblk * 8]; foreach (act[i][k]) act[i][k] = rnd_act(); end
    gemm_run(nnz);
  endtask

  // bypass job on the act[][] already set up (rows, kblk and cols set)
  task automatic gemm_run(input int nnz);
    automatic int tm_n = rows / TR;
    automatic int row_of [][];
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

  // 3x3 convolution, stride 1, zero padding 1, on an ih x iw image (default
  // 4*th x 4*tw) with cin = 8*groups channels and 64*tn_n output channels.
  // Output tiles are 4x4 pixels; tile tm = ty*tw + tx covers output rows
  // 4ty..4ty+3 and columns 4tx..4tx+3. IM2COL unit u owns output columns
  // 4tx+2u and 4tx+2u+1 and reads patch columns 4tx+2u+p (p = 0..3) of
  // padded rows 4ty..4ty+5. GEMM row of unit u, group g, window v = output
  // pixel (4ty+v, 4tx+2u+g); K index (chunk cg, step s, channel ch) with
  // kx = s/3, ky = s%3. Outputs beyond ih x iw are computed and checked
  // like the others (they see only zero padding at the far side).
  task automatic conv_job(input int nnz, input int tw, input int groups, input int tn_n,
                          input bit dw = 1'b0, input int th = 1, input int ih = 0, input int iw = 0);
    automatic int OH = 4 * th, OW = 4 * tw, cin = 8 * groups, tiles = th * tw;
    automatic int IH = (ih == 0) ? OH : ih, IW = (iw == 0) ? OW : iw;
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
          img[y][x][c] = (y == 0 || x == 0 || y > IH || x > IW) ? 8'sd0 : rnd_act();
      end
    end
    // dense im2col matrix, GEMM row = tm*16 + (2u+g)*4 + v
    act = new[rows];
    row_of = new[tiles];
    for (int tm = 0; tm < tiles; tm++) begin
      automatic int ty = tm / tw, tx = tm % tw;
      row_of[tm] = new[TR];
      for (int u = 0; u < M/2; u++) for (int g = 0; g < 2; g++) for (int v = 0; v < 4; v++) begin
        automatic int r = tm*TR + (2*u + g)*4 + v;
        automatic int ox = 4*tx + 2*u + g, oy = 4*ty + v;
        row_of[tm][(2*u + g)*4 + v] = r;
        act[r] = new[kblk * 8];
        for (int cg = 0; cg < groups; cg++) for (int s = 0; s < 9; s++) for (int ch = 0; ch < 8; ch++) begin
          automatic int py = oy + s % 3, px = ox + s / 3;
          act[r][(cg*9 + s)*8 + ch] = img[py][px][cg*8 + ch];
          if (py == 0 || px == 0 || py > IH || px > IW) border_px++;
        end
      end
    end
    make_weights(nnz, dw);
    make_ref();
    for (int tm = 0; tm < tiles; tm++)
      for (int cg = 0; cg < groups; cg++)
        for (int p = 0; p < 4; p++) begin
          automatic int ty = tm / tw, tx = tm % tw;
          automatic logic [ABW-1:0] w = '0;
          for (int u = 0; u < M/2; u++) for (int py = 0; py < 6; py++) for (int ch = 0; ch < 8; ch++)
            w[(u*48 + py*8 + ch)*8 +: 8] = img[4*ty + py][4*tx + 2*u + p][cg*8 + ch];
          ab_write(2000 + tm*stride + cg*4 + p, w);
        end
    load_weights(nnz, 0, 1000);
    swap_banks();
    run_job(nnz, 1'b1, 2000, stride, 0, 1000, row_of);
  endtask

  // LeNet-5 conv2: 14x14x6 input, 5x5 kernel, valid, 10x10x16 output.
  // Host im2col: K = 25 taps x 8 channels (6 real), tap t = 5*ky + kx.
  task automatic lenet_conv2();
    automatic logic signed [7:0] img [14][14][8];
    for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++) for (int c = 0; c < 8; c++)
      img[y][x][c] = (c < 6) ? rnd_act() : 8'sd0;
    rows = 7 * TR; cols = TC; kblk = 25;
    act = new[rows];
    foreach (act[r]) begin
      act[r] = new[kblk * 8];
      for (int t = 0; t < 25; t++) for (int c = 0; c < 8; c++)
        act[r][t*8 + c] = (r < 100) ? img[r / 10 + t / 5][r % 10 + t % 5][c] : 8'sd0;
    end
    gemm_run(2);
  endtask

  initial begin
    start = 0; cfg = '0; ab_sel = 0; wb_sel = 0;
    ab_h_en = 0; ab_h_we = 0; ab_h_addr = '0; ab_h_wdata = '0;
    wb_h_en = 0; wb_h_we = 0; wb_h_msk = 0; wb_h_addr = '0; wb_h_wdata = '0;
    pm_en = 0; pm_be = 0; pm_addr = '0; pm_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    lenet_conv2();                 // LeNet-5 conv2, NNZ 2, bypass
    conv_job(2, 2, 4, 1);          // ConvNet 3x3, 32 -> 64, NNZ 2
    conv_job(3, 2, 8, 1);          // ResNet-50 3x3, 64 -> 64, NNZ 3
    gemm_job(3, 2, 1, 32);         // ResNet-50 1x1, 256 -> 64, NNZ 3
    conv_job(3, 1, 16, 2);         // VGG-16 3x3, 128 -> 128, NNZ 3
    gemm_job(4, 2, 2, 64);         // MobileNetV1 1x1, 512 -> 128, NNZ 4
    conv_job(1, 2, 2, 1, 1'b1);    // MobileNetV1 3x3 depthwise, 16 channels
    // ResNet-50 stage 5 3x3 layer, 7x7x512 -> 512, NNZ 3: one whole job of
    // the eight (one per 64 output channels) the layer is split into
    conv_job(3, 2, 64, 1, 1'b0, 2, 7, 7);
    $display("mechanisms: bypass %0d im2col %0d swaps %0d gated MAC-cycles %0d padding slots %0d multi-tile %0d border pixels %0d",
             bypass_runs, im2col_runs, swaps, gated_cyc, pad_slots, multi_tile, border_px);
    check(nnz_runs[1] > 0 && nnz_runs[2] > 0 && nnz_runs[3] > 0 && nnz_runs[4] > 0, "NNZ 1-4 exercised");
    check(bypass_runs == 3 && im2col_runs == 5, "all eight layer jobs ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
