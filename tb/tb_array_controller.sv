// tb_array_controller: self-checking test of the GEMM tile sequencer.
//
// Random configurations (NNZ 1..8, bypass or IM2COL, 1..3 x 1..3 tiles,
// random base addresses) are run to completion. The IM2COL unit's read
// request is modelled from its step counter (a read after steps 2, 5, 6
// and 8 of each nine-step patch). A monitor records every SRAM read
// address, every valid cycle with its rank, every last flag and every drain
// cycle. The sequences are compared with ones built here from the
// schedule: per tile, K*NNZ streaming cycles with rank 0..NNZ-1 repeating,
// K mask reads and K*NNZ value reads at consecutive addresses that
// continue across the N-tiles of one M-tile, K activation reads (bypass)
// or 4*K/9+1 (IM2COL) from the M-tile's base, a flush of M+N-2 cycles
// and N drain cycles. The busy time must be exactly
// tiles * (2 + K*NNZ + (M+N-2) + N) cycles.
module tb_array_controller;
  import vdbb_pkg::*;
  localparam int M = ARR_M, N = ARR_N;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  gemm_cfg_t cfg;
  logic ab_en, im_start, im_adv, im_rd, im_en, v_en, m_en, valid, last, shift, res_valid;
  logic [ADDR_W-1:0] ab_addr, v_addr, m_addr;
  logic [IDX_W-1:0]  rank;
  logic [$clog2(N+1)-1:0] res_col;
  logic [7:0] res_tm, res_tn;
  int checks = 0, failures = 0;

  array_controller dut (.clk, .rst_n, .start_i(start), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .ab_rd_en_o(ab_en), .ab_rd_addr_o(ab_addr), .im_start_o(im_start), .im_adv_o(im_adv),
    .im_rd_i(im_rd), .im2col_en_o(im_en), .val_rd_en_o(v_en), .val_rd_addr_o(v_addr),
    .msk_rd_en_o(m_en), .msk_rd_addr_o(m_addr), .valid_o(valid), .last_o(last), .rank_o(rank),
    .shift_o(shift), .res_valid_o(res_valid), .res_col_o(res_col),
    .res_tile_m_o(res_tm), .res_tile_n_o(res_tn));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // IM2COL step model
  int step;
  always @(posedge clk) begin
    if (im_start) step <= 8;
    else if (im_adv) step <= (step == 8) ? 0 : step + 1;
  end
  assign im_rd = im_adv && (step == 2 || step == 5 || step == 6 || step == 8);

  // monitor
  int ab_seq[$], v_seq[$], m_seq[$], rank_seq[$], col_seq[$], tile_seq[$];
  int busy_cyc, last_cnt, shift_cnt;
  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cyc++;
    if (ab_en) ab_seq.push_back(int'(ab_addr));
    if (v_en)  v_seq.push_back(int'(v_addr));
    if (m_en)  m_seq.push_back(int'(m_addr));
    if (valid) rank_seq.push_back(int'(rank));
    if (last)  last_cnt++;
    if (shift) shift_cnt++;
    if (res_valid) begin col_seq.push_back(int'(res_col)); tile_seq.push_back(int'(res_tm) * 256 + int'(res_tn)); end
  end

  int n_im2col = 0, n_bypass = 0, nnz_seen [9];

  task automatic run(input int nnz, input bit im, input int kb, input int tm, input int tn);
    automatic int e_ab[$], e_v[$], e_m[$], e_rank[$], e_col[$], e_tile[$];
    automatic int abb = $urandom_range(0, 1000), stride = $urandom_range(1, 100);
    automatic int wbb = $urandom_range(0, 1000), mkb = $urandom_range(0, 1000);
    automatic int cyc = 0;
    ab_seq = {}; v_seq = {}; m_seq = {}; rank_seq = {}; col_seq = {}; tile_seq = {};
    busy_cyc = 0; last_cnt = 0; shift_cnt = 0;
    cfg = '0;
    cfg.nnz = 4'(nnz); cfg.im2col_en = im; cfg.k_blocks = 16'(kb);
    cfg.ab_base = 16'(abb); cfg.ab_tile_stride = 16'(stride);
    cfg.wb_base = 16'(wbb); cfg.msk_base = 16'(mkb);
    cfg.tiles_m = 8'(tm); cfg.tiles_n = 8'(tn);
    for (int i = 0; i < tm; i++)
      for (int j = 0; j < tn; j++) begin
        automatic int nab = im ? 4 * kb / 9 + 1 : kb;
        for (int a = 0; a < nab; a++) e_ab.push_back(abb + i * stride + a);
        for (int a = 0; a < kb * nnz; a++) e_v.push_back(wbb + j * kb * nnz + a);
        for (int a = 0; a < kb; a++) e_m.push_back(mkb + j * kb + a);
        for (int a = 0; a < kb * nnz; a++) e_rank.push_back(a % nnz);
        for (int a = 0; a < N; a++) begin e_col.push_back(a); e_tile.push_back(i * 256 + j); end
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    check(done, "done seen");
    check(!busy, "idle after done");
    check(busy_cyc == tm * tn * (2 + kb * nnz + (M + N - 2) + N),
          $sformatf("busy cycles %0d nnz %0d kb %0d tiles %0dx%0d", busy_cyc, nnz, kb, tm, tn));
    check(ab_seq == e_ab, $sformatf("ab read sequence (%0d vs %0d reads) im2col=%0d", ab_seq.size(), e_ab.size(), im));
    check(v_seq == e_v, "value read sequence");
    check(m_seq == e_m, "mask read sequence");
    check(rank_seq == e_rank, "rank sequence");
    check(col_seq == e_col, "drain column sequence");
    check(tile_seq == e_tile, "drain tile tags");
    check(last_cnt == tm * tn, "one last per tile");
    check(shift_cnt == tm * tn * N, "N shifts per tile");
    check(im_en == im, "im2col mode output");
    if (im) n_im2col++; else n_bypass++;
    nnz_seen[nnz]++;
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int nnz = 1; nnz <= 8; nnz++) run(nnz, 0, $urandom_range(1, 6), $urandom_range(1, 3), $urandom_range(1, 3));
    for (int nnz = 1; nnz <= 8; nnz++) run(nnz, 1, 9 * $urandom_range(1, 2), $urandom_range(1, 3), $urandom_range(1, 3));
    for (int r = 0; r < 20; r++) begin
      automatic bit im = 1'($urandom);
      run($urandom_range(1, 8), im, im ? 9 * $urandom_range(1, 3) : $urandom_range(1, 10),
          $urandom_range(1, 3), $urandom_range(1, 3));
    end
    check(n_im2col > 0 && n_bypass > 0, "both modes run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
