// im2col_unit: hardware IM2COL "bandwidth magnifier" for 3x3 convolution.
//
// The unit turns a 6 x 4 pixel patch of the input feature map (6 rows, 4
// columns, CH channels per pixel) into the 8 windows of a stride-1 3x3
// convolution that fit in it: 4 vertical positions x 2 horizontal positions.
// The SRAM delivers one patch column (6 pixels x CH channels) per read, and
// a patch needs 4 reads; the unit emits, per step, one window position of
// all 8 windows (two groups of 4 pixels, 8 x CH bytes), and needs 9 steps per
// patch. That is 72 pixels out for 24 read, a 3x reduction in SRAM reads.
//
// Storage is a 6 x 2 array of pixel registers (columns X and Y) plus the
// SRAM read data, which holds its value until the next read. Step s covers
// kernel column kx = s / 3 and kernel row ky = s % 3; group 0 (windows at
// patch columns 0) needs patch column kx, group 1 (windows at patch column
// 1) needs column kx + 1, and window v of a group takes the pixel of row
// v + ky. Sources per step, and what happens on the step's last cycle:
//
//   step 0-2 : g0 <- X (col 0), g1 <- S (col 1) ; after 2: Y <- S, read col 2
//   step 3-5 : g0 <- Y (col 1), g1 <- S (col 2) ; after 5: X <- S, read col 3
//   step 6   : g0 <- X (col 2), g1 <- S (col 3) ; after 6: Y <- S, read col 0'
//   step 7-8 : g0 <- X (col 2), g1 <- Y (col 3) ; after 8: X <- S, read col 1'
//
// so one column is read and at most one register column is loaded per step
// boundary, and the reads come in address order col 0, 1, 2, 3, 0', ...
//
// Interface and timing: start_i puts the unit in step 8 with nothing
// stored; the caller then issues one SRAM read itself (col 0) and, once its
// data is valid, one adv_i (which loads X and requests col 1). After that
// adv_i marks the last cycle of every step (every NNZ cycles in the
// accelerator). rd_o is high on the adv_i cycles on which a new column must
// be read; sram_i must hold the most recent read data. out_o and kpos_o
// (= 3*kx + ky) are combinational from the current step. The patch size,
// the 6 x 2 buffer, 6 pixels in per read and 2 x 4 pixels out per step are
// the paper's; the step order and the use of the held SRAM output as the
// third column are this design's own schedule.
module im2col_unit #(
  parameter int unsigned CH_P = vdbb_pkg::BZ   // channels per pixel
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start_i,
  input  logic                                  adv_i,
  input  logic [5:0][CH_P-1:0][7:0]             sram_i,  // one patch column
  output logic                                  rd_o,
  output logic [1:0][3:0][CH_P-1:0][7:0]        out_o,   // [group][window]
  output logic [3:0]                            kpos_o
);

  typedef logic [5:0][CH_P-1:0][7:0] col_t;

  col_t       x_q, y_q;
  logic [3:0] step_q;

  // Step counter and register loads.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q <= 4'd8;
    end else if (start_i) begin
      step_q <= 4'd8;
    end else if (adv_i) begin
      step_q <= (step_q == 4'd8) ? 4'd0 : step_q + 4'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (adv_i && !start_i) begin
      unique case (step_q)
        4'd2, 4'd6: y_q <= sram_i;
        4'd5, 4'd8: x_q <= sram_i;
        default: ;
      endcase
    end
  end

  assign rd_o = adv_i && (step_q == 4'd2 || step_q == 4'd5 ||
                          step_q == 4'd6 || step_q == 4'd8);

  // Output selection.
  col_t       src0, src1;
  logic [1:0] ky;

  always_comb begin
    unique case (step_q)
      4'd0, 4'd1, 4'd2: begin src0 = x_q; src1 = sram_i; end
      4'd3, 4'd4, 4'd5: begin src0 = y_q; src1 = sram_i; end
      4'd6:             begin src0 = x_q; src1 = sram_i; end
      default:          begin src0 = x_q; src1 = y_q;    end
    endcase
    unique case (step_q)
      4'd0, 4'd3, 4'd6: ky = 2'd0;
      4'd1, 4'd4, 4'd7: ky = 2'd1;
      default:          ky = 2'd2;
    endcase
    for (int v = 0; v < 4; v++) begin
      out_o[0][v] = src0[v + int'(ky)];
      out_o[1][v] = src1[v + int'(ky)];
    end
    kpos_o = step_q;
  end

endmodule
