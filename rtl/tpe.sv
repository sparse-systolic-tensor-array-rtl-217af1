// tpe: tensor processing element of the STA-VDBB array.
//
// An A x C grid of S8DP1 sparse MAC units. Every cycle the TPE takes an
// activation tensor of A rows x BZ elements (one DBB block per row) from the
// left and one compressed weight row of C (value, in-block index) pairs from
// the top. Activation row a is shared by the C units of row a, weight c by
// the A units of column c, so each operand is reused inside the TPE
// (intra-TPE reuse). A block of NNZ non-zeros occupies the TPE for NNZ
// cycles; the activation tensor stays the same for those cycles.
//
// The activation tensor leaves to the right and the weight row (with its
// valid/last flags) leaves downward through one register stage each, giving
// the systolic one-cycle hop between neighbouring TPEs.
//
// Results: on the cycle that carries last_i, each unit's final sum is loaded
// into the TPE's A x C result register. When shift_i is high the result
// register loads drain_i instead (the right-hand neighbour's results), so
// the results of a TPE row move leftwards to the array edge, one TPE per
// cycle. The register stages and the S8DP1 grid follow the paper's figure of
// the STA-VDBB TPE; the result register and its drain chain are this
// design's choice (the paper only shows results leaving the array to the
// left). gated_o reports, per unit, that its accumulator was not enabled.
module tpe #(
  parameter int unsigned A_P   = vdbb_pkg::TPE_A,
  parameter int unsigned C_P   = vdbb_pkg::TPE_C,
  parameter int unsigned BZ_P  = vdbb_pkg::BZ,
  parameter int unsigned ACC_P = vdbb_pkg::ACC_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // activations from the left
  input  logic [A_P-1:0][BZ_P-1:0][7:0]          act_i,
  output logic [A_P-1:0][BZ_P-1:0][7:0]          act_o,
  // compressed weights from the top
  input  logic [C_P-1:0][7:0]                    w_val_i,
  input  logic [C_P-1:0][$clog2(BZ_P)-1:0]       w_idx_i,
  input  logic                                   valid_i,
  input  logic                                   last_i,
  output logic [C_P-1:0][7:0]                    w_val_o,
  output logic [C_P-1:0][$clog2(BZ_P)-1:0]       w_idx_o,
  output logic                                   valid_o,
  output logic                                   last_o,
  // result drain chain
  input  logic                                   shift_i,
  input  logic [A_P-1:0][C_P-1:0][ACC_P-1:0]     drain_i,
  output logic [A_P-1:0][C_P-1:0][ACC_P-1:0]     drain_o,
  output logic [A_P-1:0][C_P-1:0]                gated_o
);

  logic [A_P-1:0][C_P-1:0][ACC_P-1:0] sum;

  for (genvar a = 0; a < A_P; a++) begin : g_a
    for (genvar c = 0; c < C_P; c++) begin : g_c
      s8dp1 #(.BZ_P(BZ_P), .ACC_P(ACC_P)) u_mac (
        .clk    (clk),
        .rst_n  (rst_n),
        .valid_i(valid_i),
        .last_i (last_i),
        .act_i  (act_i[a]),
        .w_val_i(signed'(w_val_i[c])),
        .w_idx_i(w_idx_i[c]),
        .sum_o  (sum[a][c]),
        .gated_o(gated_o[a][c])
      );
    end
  end

  // Operand pipeline registers (right and down).
  always_ff @(posedge clk) begin
    act_o   <= act_i;
    w_val_o <= w_val_i;
    w_idx_o <= w_idx_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      last_o  <= 1'b0;
    end else begin
      valid_o <= valid_i;
      last_o  <= last_i;
    end
  end

  // Result register: capture on last, otherwise shift on drain.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_o <= '0;
    end else if (valid_i && last_i) begin
      drain_o <= sum;
    end else if (shift_i) begin
      drain_o <= drain_i;
    end
  end

  // The sequencer must never drain while a result is being captured.
  a_no_capture_during_drain: assert property (@(posedge clk) disable iff (!rst_n)
    !(valid_i && last_i && shift_i));

endmodule
