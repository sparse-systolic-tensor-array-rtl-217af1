// activation_buffer: double-buffered activation SRAM (AB), 2 MB.
//
// Two banks of equal size. bank_sel_i chooses the bank the array reads; the
// other bank is the host's (MCU / DMA) for loading the next input or reading
// back results, so both sides work at once and swap by flipping bank_sel_i.
// A word is AB_W bits wide: in bypass mode one word is the activation tensor
// of every TPE row for one block (M x A x BZ bytes); in IM2COL mode it holds
// one patch column (6 pixels x BZ channels) for each IM2COL unit.
//
// Timing: one read or write per port per cycle, read data on the next cycle
// and held until the next read of that port. The total size and the double
// buffering follow the paper; the word width, the bank split of the 2 MB and
// the port arrangement are this design's choices.
module activation_buffer #(
  parameter int unsigned AB_W    = vdbb_pkg::ARR_M * vdbb_pkg::TPE_A * vdbb_pkg::BZ * 8,
  parameter int unsigned DEPTH_P = int'(vdbb_pkg::AB_BYTES / (2 * (AB_W / 8)))  // words per bank
) (
  input  logic                       clk,
  input  logic                       bank_sel_i,
  // array read port
  input  logic                       rd_en_i,
  input  logic [$clog2(DEPTH_P)-1:0] rd_addr_i,
  output logic [AB_W-1:0]            rd_data_o,
  // host port
  input  logic                       h_en_i,
  input  logic                       h_we_i,
  input  logic [$clog2(DEPTH_P)-1:0] h_addr_i,
  input  logic [AB_W-1:0]            h_wdata_i,
  output logic [AB_W-1:0]            h_rdata_o
);

  logic [1:0]                       en, we;
  logic [1:0][$clog2(DEPTH_P)-1:0]  addr;
  logic [1:0][AB_W-1:0]             rdata;
  logic                             sel_q;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (bank_sel_i == b[0]) begin
        en[b] = rd_en_i;  we[b] = 1'b0;    addr[b] = rd_addr_i;
      end else begin
        en[b] = h_en_i;   we[b] = h_we_i;  addr[b] = h_addr_i;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_sp #(.WIDTH(AB_W), .DEPTH(DEPTH_P)) u_bank (
      .clk(clk), .en_i(en[b]), .we_i(we[b]), .addr_i(addr[b]),
      .wdata_i(h_wdata_i), .rdata_o(rdata[b]));
  end

  always_ff @(posedge clk) sel_q <= bank_sel_i;

  assign rd_data_o = rdata[sel_q];
  assign h_rdata_o = rdata[~sel_q];

endmodule
