// tb_dbb_index_decoder: exhaustive test of the mask-and-rank decoder.
//
// For every 8-bit mask and every rank 0..7 the expected position is found by
// listing the set bits of the mask from bit 0 upwards.
module tb_dbb_index_decoder;
  logic [7:0] mask;
  logic [2:0] rank, idx;
  logic found;
  int checks = 0, failures = 0;

  dbb_index_decoder dut (.mask_i(mask), .rank_i(rank), .idx_o(idx), .found_o(found));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 256; m++) begin
      automatic int list [8];
      automatic int n = 0;
      for (int i = 0; i < 8; i++) if (m[i]) begin list[n] = i; n++; end
      for (int r = 0; r < 8; r++) begin
        mask = 8'(m); rank = 3'(r);
        #1;
        checks++;
        if (r < n) begin
          if (!(found && idx == 3'(list[r]))) begin
            failures++;
            $display("FAIL mask %b rank %0d: idx %0d found %0d", mask, r, idx, found);
          end
        end else if (found || idx != 0) begin
          failures++;
          $display("FAIL mask %b rank %0d: padding slot gave idx %0d found %0d", mask, r, idx, found);
        end
      end
    end
    // the paper's example block 0, 8, -3, 0, 0, 1, 2, 0 with mask 8'b01100110
    mask = 8'b01100110;
    for (int r = 0; r < 4; r++) begin
      automatic int exp_pos [4] = '{1, 2, 5, 6};
      rank = 3'(r); #1; checks++;
      if (idx != 3'(exp_pos[r])) begin failures++; $display("FAIL example rank %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
