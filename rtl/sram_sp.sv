// sram_sp: single-port synchronous SRAM bank, written as an array.
//
// Stands for one single-ported SRAM macro. One access per cycle: with en_i
// and we_i high, wdata_i is written to addr_i; with en_i high and we_i low,
// the word at addr_i appears on rdata_o on the next cycle. rdata_o keeps the
// last read word until the next read, as the output latch of a compiled
// SRAM does; the accelerator's feeders rely on this. Contents are not reset.
module sram_sp #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     en_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  output logic [WIDTH-1:0]         rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end

endmodule
