// s8dp1: time-unrolled sparse dot product over one DBB block (S8DP1).
//
// One multiplier and one dedicated accumulator per output. Each valid cycle
// delivers one non-zero weight of a compressed block together with its
// position inside the block (w_idx). A BZ:1 multiplexer picks the activation
// at that position out of the BZ-element activation block, the product is
// added to the accumulator. A block with NNZ non-zeros therefore takes NNZ
// cycles, which is what makes the sparsity level variable at run time.
//
// Zero skipping of activations: when the selected activation or the weight
// is zero the accumulator register is not enabled (gated_o = 1), so a clock
// gate can be inserted by synthesis; the sum is unaffected.
//
// Interface and timing: act_i, w_val_i, w_idx_i, valid_i and last_i are
// sampled on the rising clock edge. sum_o = acc + product is combinational;
// on a valid cycle with last_i = 1 the caller captures sum_o as the result
// and the accumulator is cleared for the next output (output stationary).
// The mux, multiplier, adder and accumulator follow the S8DP1 drawing of the
// paper; the enable-based gating and the last/clear protocol are choices of
// this design.
module s8dp1 #(
  parameter int unsigned BZ_P  = vdbb_pkg::BZ,
  parameter int unsigned ACC_P = vdbb_pkg::ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        valid_i,
  input  logic                        last_i,
  input  logic [BZ_P-1:0][7:0]        act_i,     // activation block, INT8 each
  input  logic signed [7:0]           w_val_i,   // non-zero weight, INT8
  input  logic [$clog2(BZ_P)-1:0]     w_idx_i,   // position of the weight in the block
  output logic signed [ACC_P-1:0]     sum_o,     // accumulator + current product
  output logic                        gated_o    // accumulator update suppressed
);

  logic signed [7:0]       a_sel;
  logic signed [15:0]      prod;
  logic signed [ACC_P-1:0] acc_q;

  always_comb begin
    a_sel   = signed'(act_i[w_idx_i]);
    prod    = a_sel * w_val_i;
    sum_o   = acc_q + ACC_P'(prod);
    gated_o = valid_i && ((a_sel == 8'sd0) || (w_val_i == 8'sd0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
    end else if (valid_i && last_i) begin
      acc_q <= '0;                       // result taken by the caller
    end else if (valid_i && !gated_o) begin
      acc_q <= sum_o;
    end
  end

endmodule
