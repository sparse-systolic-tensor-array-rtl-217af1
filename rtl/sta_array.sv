// sta_array: M x N systolic tensor array with VDBB support (STA-VDBB).
//
// A grid of M x N tensor PEs (tpe). Row i of the grid receives an activation
// tensor of A rows x BZ elements per cycle at its left edge; column j
// receives one compressed weight row of C (value, index) pairs plus the
// valid/last flags at its top edge. Operands move one TPE per cycle: right
// for activations, down for weights. The dataflow is output stationary: each
// S8DP1 keeps its accumulator until the last non-zero of the GEMM's K
// dimension has passed.
//
// Edge skew: the caller presents all rows and columns aligned in time; this
// block delays row i by i cycles and column j by j cycles, so that TPE(i,j)
// sees the activation block and the weights of the same K position, i+j
// cycles after they were presented. An activation block is held at the
// edge for NNZ cycles while its NNZ weights stream past.
//
// Results: after the last weight has reached TPE(M-1,N-1) (M+N-2 cycles
// after last_i at the edge) every TPE holds its A x C results. Raising
// shift_i then moves the results of each grid row one TPE to the left per
// cycle; res_o shows the results of TPE column k of every grid row on the
// k-th shift cycle (k = 0 .. N-1). The TPE grid, the edge skew and the
// leftward result path follow the paper's array figures; the exact drain
// protocol is this design's choice.
module sta_array #(
  parameter int unsigned A_P   = vdbb_pkg::TPE_A,
  parameter int unsigned C_P   = vdbb_pkg::TPE_C,
  parameter int unsigned BZ_P  = vdbb_pkg::BZ,
  parameter int unsigned M_P   = vdbb_pkg::ARR_M,
  parameter int unsigned N_P   = vdbb_pkg::ARR_N,
  parameter int unsigned ACC_P = vdbb_pkg::ACC_W
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic [M_P-1:0][A_P-1:0][BZ_P-1:0][7:0]       act_i,
  input  logic [N_P-1:0][C_P-1:0][7:0]                 w_val_i,
  input  logic [N_P-1:0][C_P-1:0][$clog2(BZ_P)-1:0]    w_idx_i,
  input  logic                                         valid_i,
  input  logic                                         last_i,
  input  logic                                         shift_i,
  output logic [M_P-1:0][A_P-1:0][C_P-1:0][ACC_P-1:0]  res_o,
  output logic [M_P-1:0][N_P-1:0][A_P-1:0][C_P-1:0]    gated_o
);

  localparam int unsigned IW = $clog2(BZ_P);

  typedef logic [A_P-1:0][BZ_P-1:0][7:0]     act_t;
  typedef logic [C_P-1:0][7:0]               wval_t;
  typedef logic [C_P-1:0][IW-1:0]            widx_t;
  typedef logic [A_P-1:0][C_P-1:0][ACC_P-1:0] res_t;

  // Skewed edge signals.
  act_t  act_edge   [M_P];
  wval_t wval_edge  [N_P];
  widx_t widx_edge  [N_P];
  logic  valid_edge [N_P];
  logic  last_edge  [N_P];

  for (genvar i = 0; i < M_P; i++) begin : g_askew
    if (i == 0) begin : g_direct
      assign act_edge[i] = act_i[i];
    end else begin : g_delay
      act_t dly [i];
      always_ff @(posedge clk) begin
        dly[0] <= act_i[i];
        for (int k = 1; k < i; k++) dly[k] <= dly[k-1];
      end
      assign act_edge[i] = dly[i-1];
    end
  end

  for (genvar j = 0; j < N_P; j++) begin : g_wskew
    if (j == 0) begin : g_direct
      assign wval_edge[j]  = w_val_i[j];
      assign widx_edge[j]  = w_idx_i[j];
      assign valid_edge[j] = valid_i;
      assign last_edge[j]  = last_i;
    end else begin : g_delay
      wval_t dv [j];
      widx_t di [j];
      logic  dvl [j];
      logic  dl  [j];
      always_ff @(posedge clk) begin
        dv[0] <= w_val_i[j];
        di[0] <= w_idx_i[j];
        for (int k = 1; k < j; k++) begin
          dv[k] <= dv[k-1];
          di[k] <= di[k-1];
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < j; k++) begin
            dvl[k] <= 1'b0;
            dl[k]  <= 1'b0;
          end
        end else begin
          dvl[0] <= valid_i;
          dl[0]  <= last_i;
          for (int k = 1; k < j; k++) begin
            dvl[k] <= dvl[k-1];
            dl[k]  <= dl[k-1];
          end
        end
      end
      assign wval_edge[j]  = dv[j-1];
      assign widx_edge[j]  = di[j-1];
      assign valid_edge[j] = dvl[j-1];
      assign last_edge[j]  = dl[j-1];
    end
  end

  // Inter-TPE nets: h[i][j] enters TPE(i,j) from the left, v[i][j] from the top.
  act_t  h_act  [M_P][N_P+1];
  wval_t v_val  [M_P+1][N_P];
  widx_t v_idx  [M_P+1][N_P];
  logic  v_vld  [M_P+1][N_P];
  logic  v_last [M_P+1][N_P];
  res_t  d_res  [M_P][N_P+1];

  for (genvar i = 0; i < M_P; i++) begin : g_row
    assign h_act[i][0] = act_edge[i];
    assign d_res[i][N_P] = '0;
    assign res_o[i] = d_res[i][0];
    for (genvar j = 0; j < N_P; j++) begin : g_col
      if (i == 0) begin : g_top
        assign v_val[0][j]  = wval_edge[j];
        assign v_idx[0][j]  = widx_edge[j];
        assign v_vld[0][j]  = valid_edge[j];
        assign v_last[0][j] = last_edge[j];
      end
      tpe #(.A_P(A_P), .C_P(C_P), .BZ_P(BZ_P), .ACC_P(ACC_P)) u_tpe (
        .clk     (clk),
        .rst_n   (rst_n),
        .act_i   (h_act[i][j]),
        .act_o   (h_act[i][j+1]),
        .w_val_i (v_val[i][j]),
        .w_idx_i (v_idx[i][j]),
        .valid_i (v_vld[i][j]),
        .last_i  (v_last[i][j]),
        .w_val_o (v_val[i+1][j]),
        .w_idx_o (v_idx[i+1][j]),
        .valid_o (v_vld[i+1][j]),
        .last_o  (v_last[i+1][j]),
        .shift_i (shift_i),
        .drain_i (d_res[i][j+1]),
        .drain_o (d_res[i][j]),
        .gated_o (gated_o[i][j])
      );
    end
  end

endmodule
