// mcu_program_sram: 64 KB program store of the MCU cluster.
//
// A single-port 32-bit SRAM with byte write enables, the access width of a
// Cortex-M33 bus. en_i with a non-zero be_i writes the enabled bytes of
// wdata_i; en_i with be_i = 0 reads, data on the next cycle, held until the
// next read. The 64 KB size is the paper's; the word width and byte enables
// are this design's choice.
module mcu_program_sram #(
  parameter int unsigned DEPTH_P = int'(vdbb_pkg::MCU_BYTES / 4)
) (
  input  logic                       clk,
  input  logic                       en_i,
  input  logic [3:0]                 be_i,
  input  logic [$clog2(DEPTH_P)-1:0] addr_i,
  input  logic [31:0]                wdata_i,
  output logic [31:0]                rdata_o
);

  logic [3:0][7:0] mem [DEPTH_P];

  always_ff @(posedge clk) begin
    if (en_i) begin
      if (be_i == 4'b0000) begin
        rdata_o <= mem[addr_i];
      end else begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][b] <= wdata_i[8*b +: 8];
      end
    end
  end

endmodule
