// vdbb_accelerator: sparse systolic tensor array accelerator (STA-VDBB with
// hardware IM2COL), 4x8x8_4x8 by default.
//
// Computes INT8 GEMMs A x W with INT32 results, where W is stored in the
// variable density-bound-block (VDBB) format: along K, every block of 8
// weights of a column holds at most NNZ non-zeros, stored as the non-zero
// values plus an 8-bit mask. The array spends NNZ cycles per block, so a
// layer pruned to NNZ/8 density runs 8/NNZ times faster than dense at the
// same utilisation of its 1024 MACs.
//
// Blocks inside:
//   activation_buffer  2 MB, two banks (array side / host side)
//   weight_buffer      0.5 MB of compressed weights, two banks
//   im2col_unit x M/2  3x3 IM2COL from 6x4 pixel patches; unit u feeds TPE
//                      rows 2u (window column 0) and 2u+1 (window column 1)
//   dbb_index_decoder  one per weight column: mask + rank -> mux select
//   sta_array          M x N TPEs of A x C S8DP1 units
//   array_controller   tile sequencing, reads, drain
//   mcu_program_sram   64 KB program store of the MCU cluster
// The MCU cluster itself (Arm Cortex-M33s, with the AXI DMA port) is not part
// of this RTL: its connections are the host ports of the two buffers and of
// the program SRAM, the configuration/start/done signals and the result
// stream, all brought out as ports.
//
// Activation word layout (one AB word, M*A*BZ bytes):
//   bypass : byte (i*A + a)*BZ + k = element k of the block, GEMM row a of
//            TPE row i (GEMM row tm*A*M + i*A + a)
//   IM2COL : byte u*6*BZ + p*BZ + ch = channel ch of pixel row p of the
//            current patch column for IM2COL unit u
// Weight rows: value row byte j*C + c = current non-zero of GEMM column
// tn*N*C + j*C + c; mask row byte j*C + c = its block's mask.
// Result stream: on res_valid_o, res_data_o[i][a][c] is the result of GEMM
// row tm*A*M + i*A + a, column tn*N*C + res_col_o*C + c.
//
// The geometry, buffer sizes, operand widths, the TPE/S8DP1 structure and
// the IM2COL unit follow the paper's main 4 TOPS configuration; the memory
// layouts, the port list, how IM2COL outputs map onto TPE rows and the
// tile sequencing are this design's choices.
module vdbb_accelerator
  import vdbb_pkg::*;
#(
  parameter int unsigned A_P  = TPE_A,
  parameter int unsigned C_P  = TPE_C,
  parameter int unsigned M_P  = ARR_M,
  parameter int unsigned N_P  = ARR_N,
  parameter int unsigned AB_W = M_P * A_P * BZ * 8,
  parameter int unsigned WB_W = N_P * C_P * 8,
  parameter int unsigned AB_DEPTH = AB_BYTES / (2 * (AB_W / 8)),
  parameter int unsigned WB_DEPTH = WB_BYTES / (4 * (WB_W / 8)),
  parameter int unsigned PM_DEPTH = MCU_BYTES / 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // control from the MCU cluster
  input  logic                                   start_i,
  input  gemm_cfg_t                              cfg_i,
  output logic                                   busy_o,
  output logic                                   done_o,
  input  logic                                   ab_bank_sel_i,
  input  logic                                   wb_bank_sel_i,
  // activation buffer, host side
  input  logic                                   ab_h_en_i,
  input  logic                                   ab_h_we_i,
  input  logic [$clog2(AB_DEPTH)-1:0]            ab_h_addr_i,
  input  logic [AB_W-1:0]                        ab_h_wdata_i,
  output logic [AB_W-1:0]                        ab_h_rdata_o,
  // weight buffer, host side
  input  logic                                   wb_h_en_i,
  input  logic                                   wb_h_we_i,
  input  logic                                   wb_h_msk_i,
  input  logic [$clog2(WB_DEPTH)-1:0]            wb_h_addr_i,
  input  logic [WB_W-1:0]                        wb_h_wdata_i,
  output logic [WB_W-1:0]                        wb_h_rdata_o,
  // MCU program store
  input  logic                                   pm_en_i,
  input  logic [3:0]                             pm_be_i,
  input  logic [$clog2(PM_DEPTH)-1:0]            pm_addr_i,
  input  logic [31:0]                            pm_wdata_i,
  output logic [31:0]                            pm_rdata_o,
  // result stream to the MCU cluster
  output logic                                   res_valid_o,
  output logic [$clog2(N_P+1)-1:0]               res_col_o,
  output logic [7:0]                             res_tile_m_o,
  output logic [7:0]                             res_tile_n_o,
  output logic [M_P-1:0][A_P-1:0][C_P-1:0][31:0] res_data_o
);

  localparam int unsigned NU = M_P / 2;   // IM2COL units

  if (A_P != IM_WIN || (M_P % 2) != 0 || NU * IM_ROWS * BZ * 8 > AB_W) begin : g_bad_geometry
    $error("IM2COL needs A = 4, an even M and room for M/2 patch columns in an AB word");
  end

  // ---------------- controller ----------------
  logic                 ab_rd_en, im_start, im_adv, im_rd, im2col_en;
  logic                 val_rd_en, msk_rd_en, valid, last, shift;
  logic [ADDR_W-1:0]    ab_rd_addr, val_rd_addr, msk_rd_addr;
  logic [IDX_W-1:0]     rank;

  array_controller #(.M_P(M_P), .N_P(N_P)) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start_i      (start_i),
    .cfg_i        (cfg_i),
    .busy_o       (busy_o),
    .done_o       (done_o),
    .ab_rd_en_o   (ab_rd_en),
    .ab_rd_addr_o (ab_rd_addr),
    .im_start_o   (im_start),
    .im_adv_o     (im_adv),
    .im_rd_i      (im_rd),
    .im2col_en_o  (im2col_en),
    .val_rd_en_o  (val_rd_en),
    .val_rd_addr_o(val_rd_addr),
    .msk_rd_en_o  (msk_rd_en),
    .msk_rd_addr_o(msk_rd_addr),
    .valid_o      (valid),
    .last_o       (last),
    .rank_o       (rank),
    .shift_o      (shift),
    .res_valid_o  (res_valid_o),
    .res_col_o    (res_col_o),
    .res_tile_m_o (res_tile_m_o),
    .res_tile_n_o (res_tile_n_o)
  );

  // ---------------- buffers ----------------
  logic [AB_W-1:0] ab_rd_data;
  logic [WB_W-1:0] val_rd_data, msk_rd_data;

  activation_buffer #(.AB_W(AB_W), .DEPTH_P(AB_DEPTH)) u_ab (
    .clk       (clk),
    .bank_sel_i(ab_bank_sel_i),
    .rd_en_i   (ab_rd_en),
    .rd_addr_i (ab_rd_addr[$clog2(AB_DEPTH)-1:0]),
    .rd_data_o (ab_rd_data),
    .h_en_i    (ab_h_en_i),
    .h_we_i    (ab_h_we_i),
    .h_addr_i  (ab_h_addr_i),
    .h_wdata_i (ab_h_wdata_i),
    .h_rdata_o (ab_h_rdata_o)
  );

  weight_buffer #(.WB_W(WB_W), .DEPTH_P(WB_DEPTH)) u_wb (
    .clk          (clk),
    .bank_sel_i   (wb_bank_sel_i),
    .val_rd_en_i  (val_rd_en),
    .val_rd_addr_i(val_rd_addr[$clog2(WB_DEPTH)-1:0]),
    .val_rd_data_o(val_rd_data),
    .msk_rd_en_i  (msk_rd_en),
    .msk_rd_addr_i(msk_rd_addr[$clog2(WB_DEPTH)-1:0]),
    .msk_rd_data_o(msk_rd_data),
    .h_en_i       (wb_h_en_i),
    .h_we_i       (wb_h_we_i),
    .h_msk_i      (wb_h_msk_i),
    .h_addr_i     (wb_h_addr_i),
    .h_wdata_i    (wb_h_wdata_i),
    .h_rdata_o    (wb_h_rdata_o)
  );

  mcu_program_sram #(.DEPTH_P(PM_DEPTH)) u_pm (
    .clk    (clk),
    .en_i   (pm_en_i),
    .be_i   (pm_be_i),
    .addr_i (pm_addr_i),
    .wdata_i(pm_wdata_i),
    .rdata_o(pm_rdata_o)
  );

  // ---------------- activation path ----------------
  logic [M_P-1:0][A_P-1:0][BZ-1:0][7:0] act_bypass, act_im2col, act_edge;
  logic [NU-1:0]                        unit_rd;

  assign act_bypass = ab_rd_data[M_P*A_P*BZ*8-1:0];

  for (genvar u = 0; u < NU; u++) begin : g_im2col
    logic [1:0][3:0][BZ-1:0][7:0] im_out;
    logic [3:0]                   kpos;
    im2col_unit #(.CH_P(BZ)) u_im2col (
      .clk    (clk),
      .rst_n  (rst_n),
      .start_i(im_start),
      .adv_i  (im_adv),
      .sram_i (ab_rd_data[u*IM_ROWS*BZ*8 +: IM_ROWS*BZ*8]),
      .rd_o   (unit_rd[u]),
      .out_o  (im_out),
      .kpos_o (kpos)
    );
    assign act_im2col[2*u]   = im_out[0];
    assign act_im2col[2*u+1] = im_out[1];
  end

  // All units step together; unit 0 decides when a column is read.
  assign im_rd    = unit_rd[0];
  assign act_edge = im2col_en ? act_im2col : act_bypass;

  // ---------------- weight path ----------------
  logic [N_P-1:0][C_P-1:0][7:0]      w_val;
  logic [N_P-1:0][C_P-1:0][IDX_W-1:0] w_idx;
  logic [N_P-1:0][C_P-1:0]           w_found;

  logic [N_P-1:0][C_P-1:0][7:0]      val_row;
  assign val_row = val_rd_data;

  for (genvar j = 0; j < N_P; j++) begin : g_wcol
    for (genvar c = 0; c < C_P; c++) begin : g_lane
      dbb_index_decoder #(.BZ_P(BZ)) u_dec (
        .mask_i (msk_rd_data[(j*C_P + c)*8 +: BZ]),
        .rank_i (rank),
        .idx_o  (w_idx[j][c]),
        .found_o(w_found[j][c])
      );
      // a padding slot (rank beyond the block's non-zeros) contributes zero
      assign w_val[j][c] = w_found[j][c] ? val_row[j][c] : 8'd0;
    end
  end

  // ---------------- array ----------------
  logic [M_P-1:0][N_P-1:0][A_P-1:0][C_P-1:0] gated;

  sta_array #(.A_P(A_P), .C_P(C_P), .BZ_P(BZ), .M_P(M_P), .N_P(N_P), .ACC_P(ACC_W)) u_array (
    .clk    (clk),
    .rst_n  (rst_n),
    .act_i  (act_edge),
    .w_val_i(w_val),
    .w_idx_i(w_idx),
    .valid_i(valid),
    .last_i (last),
    .shift_i(shift),
    .res_o  (res_data_o),
    .gated_o(gated)
  );

endmodule
