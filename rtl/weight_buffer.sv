// weight_buffer: double-buffered weight SRAM (WB), 0.5 MB, for DBB weights.
//
// Weights are kept in the compressed DBB form: the non-zero values of each
// block and the block's BZ-bit bitmask. The buffer has a value array and a
// mask array so that the array side can read one value row every cycle and
// one mask row per block at the same time. A value row holds one non-zero
// (INT8) for each of the N x C weight columns; a mask row holds the BZ-bit
// mask of the current block of each column. Each array has two banks;
// bank_sel_i gives one bank of each to the array, the other to the host.
//
// Timing as in sram_sp: read data on the next cycle, held until the next
// read. The 0.5 MB total and the double buffering follow the paper. Giving
// half of it to values and half to masks (enough for the densest case, one
// mask row per value row at NNZ = 1) is this design's choice.
module weight_buffer #(
  parameter int unsigned WB_W    = vdbb_pkg::ARR_N * vdbb_pkg::TPE_C * 8,
  parameter int unsigned DEPTH_P = int'(vdbb_pkg::WB_BYTES / (4 * (WB_W / 8)))  // rows per bank
) (
  input  logic                       clk,
  input  logic                       bank_sel_i,
  // array read ports
  input  logic                       val_rd_en_i,
  input  logic [$clog2(DEPTH_P)-1:0] val_rd_addr_i,
  output logic [WB_W-1:0]            val_rd_data_o,
  input  logic                       msk_rd_en_i,
  input  logic [$clog2(DEPTH_P)-1:0] msk_rd_addr_i,
  output logic [WB_W-1:0]            msk_rd_data_o,
  // host port; h_msk_i selects the mask array
  input  logic                       h_en_i,
  input  logic                       h_we_i,
  input  logic                       h_msk_i,
  input  logic [$clog2(DEPTH_P)-1:0] h_addr_i,
  input  logic [WB_W-1:0]            h_wdata_i,
  output logic [WB_W-1:0]            h_rdata_o
);

  localparam int unsigned AW = $clog2(DEPTH_P);

  // Bank index: {mask array, bank}.
  logic [3:0]           en, we;
  logic [3:0][AW-1:0]   addr;
  logic [3:0][WB_W-1:0] rdata;
  logic                 sel_q, hmsk_q;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      automatic logic is_msk = k[1];
      automatic logic bank   = k[0];
      if (bank == bank_sel_i) begin
        en[k]   = is_msk ? msk_rd_en_i : val_rd_en_i;
        we[k]   = 1'b0;
        addr[k] = is_msk ? msk_rd_addr_i : val_rd_addr_i;
      end else begin
        en[k]   = h_en_i && (h_msk_i == is_msk);
        we[k]   = h_we_i;
        addr[k] = h_addr_i;
      end
    end
  end

  for (genvar k = 0; k < 4; k++) begin : g_bank
    sram_sp #(.WIDTH(WB_W), .DEPTH(DEPTH_P)) u_bank (
      .clk(clk), .en_i(en[k]), .we_i(we[k]), .addr_i(addr[k]),
      .wdata_i(h_wdata_i), .rdata_o(rdata[k]));
  end

  always_ff @(posedge clk) begin
    sel_q <= bank_sel_i;
    if (h_en_i) hmsk_q <= h_msk_i;
  end

  assign val_rd_data_o = rdata[{1'b0, sel_q}];
  assign msk_rd_data_o = rdata[{1'b1, sel_q}];
  assign h_rdata_o     = rdata[{hmsk_q, ~sel_q}];

endmodule
