// array_controller: tile sequencer of the STA-VDBB accelerator.
//
// Runs one GEMM as tiles_m x tiles_n output tiles of (A*M) x (C*N). For
// each tile it streams k_blocks DBB blocks through the array, NNZ cycles per
// block (nnz is a run-time setting, 1..8: the time-unrolled variable DBB),
// then waits for the skewed data to reach the far corner and drains the
// results out of the left edge. The sequence of a tile, in cycles:
//
//   PRIME0  1      IM2COL mode: restart the IM2COL units, read patch column 0
//   PRIME1  1      first value row, first mask row; IM2COL: first step
//                  advance (and column 1 read); bypass: first activation word
//   STREAM  K*NNZ  valid to the array; at the last cycle of each block the
//                  next mask row and the next activation (bypass word or
//                  IM2COL step) are fetched
//   FLUSH   M+N-2  data still travelling through the skew
//   DRAIN   N      result columns leave the array, res_col_o = 0 .. N-1
//
// All SRAM reads are issued one cycle ahead of use; the buffers hold their
// read data between reads, so a mask row or an activation block stays valid
// for all NNZ cycles of its block. Weight rows and mask rows are read at
// consecutive addresses across the column tiles of a row tile; activation
// words at consecutive addresses from ab_base + tm * ab_tile_stride.
//
// The paper gives the dataflow (blocks streamed one non-zero per cycle,
// activation tensors held for the block's occupancy, skewed edges) and
// leaves control to the MCU software; the state machine, the configuration
// record and the serial (non-overlapped) drain are this design's choices.
module array_controller #(
  parameter int unsigned M_P = vdbb_pkg::ARR_M,
  parameter int unsigned N_P = vdbb_pkg::ARR_N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_i,
  input  vdbb_pkg::gemm_cfg_t         cfg_i,
  output logic                        busy_o,
  output logic                        done_o,
  // activation buffer and IM2COL units
  output logic                        ab_rd_en_o,
  output logic [vdbb_pkg::ADDR_W-1:0] ab_rd_addr_o,
  output logic                        im_start_o,
  output logic                        im_adv_o,
  input  logic                        im_rd_i,
  output logic                        im2col_en_o,
  // weight buffer
  output logic                        val_rd_en_o,
  output logic [vdbb_pkg::ADDR_W-1:0] val_rd_addr_o,
  output logic                        msk_rd_en_o,
  output logic [vdbb_pkg::ADDR_W-1:0] msk_rd_addr_o,
  // array
  output logic                        valid_o,
  output logic                        last_o,
  output logic [vdbb_pkg::IDX_W-1:0]  rank_o,
  output logic                        shift_o,
  // result tags
  output logic                        res_valid_o,
  output logic [$clog2(N_P+1)-1:0]    res_col_o,
  output logic [7:0]                  res_tile_m_o,
  output logic [7:0]                  res_tile_n_o
);

  import vdbb_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_PRIME0, S_PRIME1, S_STREAM, S_FLUSH, S_DRAIN} state_t;

  localparam int unsigned FLUSH_CYC = M_P + N_P - 2;
  localparam int unsigned CW = $clog2(N_P + M_P + 1);

  state_t            state_q;
  gemm_cfg_t         cfg_q;
  logic [3:0]        r_q;          // rank inside the block
  logic [CNT_W-1:0]  b_q;          // block index
  logic [7:0]        tm_q, tn_q;
  logic [ADDR_W-1:0] ab_tile_q, ab_addr_q, val_addr_q, msk_addr_q;
  logic [CW-1:0]     cnt_q;

  logic blk_end, last_blk, last_cyc;

  always_comb begin
    blk_end  = (r_q == cfg_q.nnz - 4'd1);
    last_blk = (b_q == cfg_q.k_blocks - 1'b1);
    last_cyc = (state_q == S_STREAM) && blk_end && last_blk;
  end

  // Read requests and array controls.
  always_comb begin
    ab_rd_en_o    = 1'b0;
    im_start_o    = 1'b0;
    im_adv_o      = 1'b0;
    val_rd_en_o   = 1'b0;
    msk_rd_en_o   = 1'b0;
    valid_o       = 1'b0;
    last_o        = 1'b0;
    shift_o       = 1'b0;
    res_valid_o   = 1'b0;
    unique case (state_q)
      S_PRIME0: begin
        im_start_o = 1'b1;
        ab_rd_en_o = cfg_q.im2col_en;
      end
      S_PRIME1: begin
        val_rd_en_o = 1'b1;
        msk_rd_en_o = 1'b1;
        im_adv_o    = cfg_q.im2col_en;
        ab_rd_en_o  = cfg_q.im2col_en ? im_rd_i : 1'b1;
      end
      S_STREAM: begin
        valid_o     = 1'b1;
        last_o      = last_cyc;
        val_rd_en_o = !last_cyc;
        if (blk_end && !last_blk) begin
          msk_rd_en_o = 1'b1;
          im_adv_o    = cfg_q.im2col_en;
          ab_rd_en_o  = cfg_q.im2col_en ? im_rd_i : 1'b1;
        end
      end
      S_DRAIN: begin
        shift_o     = 1'b1;
        res_valid_o = 1'b1;
      end
      default: ;
    endcase
  end

  assign ab_rd_addr_o  = ab_addr_q;
  assign val_rd_addr_o = val_addr_q;
  assign msk_rd_addr_o = msk_addr_q;
  assign rank_o        = r_q[IDX_W-1:0];
  assign im2col_en_o   = cfg_q.im2col_en;
  assign busy_o        = (state_q != S_IDLE);
  assign res_col_o     = cnt_q[$clog2(N_P+1)-1:0];
  assign res_tile_m_o  = tm_q;
  assign res_tile_n_o  = tn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      cfg_q      <= '0;
      r_q        <= '0;
      b_q        <= '0;
      tm_q       <= '0;
      tn_q       <= '0;
      ab_tile_q  <= '0;
      ab_addr_q  <= '0;
      val_addr_q <= '0;
      msk_addr_q <= '0;
      cnt_q      <= '0;
      done_o     <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (ab_rd_en_o)  ab_addr_q  <= ab_addr_q + 1'b1;
      if (val_rd_en_o) val_addr_q <= val_addr_q + 1'b1;
      if (msk_rd_en_o) msk_addr_q <= msk_addr_q + 1'b1;
      unique case (state_q)
        S_IDLE: begin
          if (start_i) begin
            cfg_q      <= cfg_i;
            tm_q       <= '0;
            tn_q       <= '0;
            ab_tile_q  <= cfg_i.ab_base;
            ab_addr_q  <= cfg_i.ab_base;
            val_addr_q <= cfg_i.wb_base;
            msk_addr_q <= cfg_i.msk_base;
            state_q    <= S_PRIME0;
          end
        end
        S_PRIME0: state_q <= S_PRIME1;
        S_PRIME1: begin
          r_q     <= '0;
          b_q     <= '0;
          state_q <= S_STREAM;
        end
        S_STREAM: begin
          if (blk_end) begin
            r_q <= '0;
            b_q <= b_q + 1'b1;
          end else begin
            r_q <= r_q + 4'd1;
          end
          if (last_cyc) begin
            if (FLUSH_CYC == 0) begin
              cnt_q   <= '0;
              state_q <= S_DRAIN;
            end else begin
              cnt_q   <= CW'(FLUSH_CYC - 1);
              state_q <= S_FLUSH;
            end
          end
        end
        S_FLUSH: begin
          if (cnt_q == '0) state_q <= S_DRAIN;
          else             cnt_q   <= cnt_q - 1'b1;
        end
        S_DRAIN: begin
          if (cnt_q == CW'(N_P - 1)) begin
            cnt_q <= '0;
            if (tn_q == cfg_q.tiles_n - 8'd1) begin
              tn_q       <= '0;
              val_addr_q <= cfg_q.wb_base;
              msk_addr_q <= cfg_q.msk_base;
              if (tm_q == cfg_q.tiles_m - 8'd1) begin
                done_o  <= 1'b1;
                state_q <= S_IDLE;
              end else begin
                tm_q      <= tm_q + 8'd1;
                ab_tile_q <= ab_tile_q + cfg_q.ab_tile_stride;
                ab_addr_q <= ab_tile_q + cfg_q.ab_tile_stride;
                state_q   <= S_PRIME0;
              end
            end else begin
              tn_q      <= tn_q + 8'd1;
              ab_addr_q <= ab_tile_q;
              state_q   <= S_PRIME0;
            end
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Configuration rules.
  a_nnz_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_IDLE && start_i) |-> (cfg_i.nnz >= 4'd1 && cfg_i.nnz <= 4'(BZ)));
  a_kblocks: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_IDLE && start_i) |-> (cfg_i.k_blocks != '0 && cfg_i.tiles_m != '0 && cfg_i.tiles_n != '0));

endmodule
