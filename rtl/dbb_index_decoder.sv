// dbb_index_decoder: position of the r-th non-zero of a compressed DBB block.
//
// A compressed DBB block is stored as its non-zero values in increasing
// position order followed by a BZ-bit bitmask M, bit i set when element i of
// the expanded block is non-zero. The time-unrolled datapath consumes one
// non-zero per cycle and needs its position to steer the activation mux.
// This block scans the mask and returns the index of the set bit whose rank
// (count of set bits below it) equals rank_i. When the block holds fewer
// non-zeros than the configured NNZ the padding slots carry zero weights;
// for them (rank_i >= popcount(M)) the index is 0 and found_o is low.
//
// Purely combinational. The mapping "bit i = element i" is this design's
// choice: the paper's example mask 8'b01100110 reads the same either way.
module dbb_index_decoder #(
  parameter int unsigned BZ_P = vdbb_pkg::BZ
) (
  input  logic [BZ_P-1:0]         mask_i,
  input  logic [$clog2(BZ_P)-1:0] rank_i,
  output logic [$clog2(BZ_P)-1:0] idx_o,
  output logic                    found_o
);

  localparam int unsigned IW = $clog2(BZ_P);

  always_comb begin
    logic [IW:0] cnt;
    cnt     = '0;
    idx_o   = '0;
    found_o = 1'b0;
    for (int unsigned i = 0; i < BZ_P; i++) begin
      if (mask_i[i]) begin
        if (!found_o && cnt == (IW+1)'(rank_i)) begin
          idx_o   = IW'(i);
          found_o = 1'b1;
        end
        cnt = cnt + 1'b1;
      end
    end
  end

endmodule
