// tb_activation_buffer: self-checking test of the double-buffered
// activation SRAM at its full size (two banks of 8192 x 1024 bits).
//
// Phase 1 fills random words of the bank the host owns while the array
// reads the other bank. Then the bank select flips ("bank swap") and the
// array reads back every written word, one cycle after the read enable,
// while the host writes the other bank. The expected contents are kept in a
// scoreboard (associative array). The test also checks that the read data
// is held while no read is issued and that a host write never reaches the
// bank the array owns.
module tb_activation_buffer;
  localparam int W = 1024, D = 8192, AW = 13, NW = 300;
  logic clk = 1'b0;
  logic bank_sel, rd_en, h_en, h_we;
  logic [AW-1:0] rd_addr, h_addr;
  logic [W-1:0]  rd_data, h_wdata, h_rdata;
  int checks = 0, failures = 0, swaps = 0;

  activation_buffer dut (.clk, .bank_sel_i(bank_sel), .rd_en_i(rd_en), .rd_addr_i(rd_addr),
    .rd_data_o(rd_data), .h_en_i(h_en), .h_we_i(h_we), .h_addr_i(h_addr),
    .h_wdata_i(h_wdata), .h_rdata_o(h_rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  logic [W-1:0] model [2][int];
  int addrs [2][$];

  // host writes NW random words into bank b (the bank it owns)
  task automatic host_fill(input int b);
    for (int n = 0; n < NW; n++) begin
      automatic int a = $urandom_range(0, D - 1);
      automatic logic [W-1:0] w = rnd_word();
      h_en = 1; h_we = 1; h_addr = AW'(a); h_wdata = w;
      if (!model[b].exists(a)) addrs[b].push_back(a);
      model[b][a] = w;
      @(negedge clk);
    end
    h_en = 0; h_we = 0;
  endtask

  // array reads every word of bank b, with random gaps; host reads the other bank
  task automatic array_check(input int b);
    foreach (addrs[b][n]) begin
      automatic int a = addrs[b][n];
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0;
      check(rd_data == model[b][a], $sformatf("bank %0d addr %0d", b, a));
      // hold: no read issued, data unchanged for a few cycles
      repeat ($urandom_range(0, 2)) begin
        rd_addr = AW'($urandom);
        @(negedge clk);
        check(rd_data == model[b][a], $sformatf("hold bank %0d addr %0d", b, a));
      end
    end
  endtask

  initial begin
    bank_sel = 0; rd_en = 0; h_en = 0; h_we = 0; rd_addr = '0; h_addr = '0; h_wdata = '0;
    @(negedge clk);
    // host owns bank 1 while array owns bank 0
    host_fill(1);
    bank_sel = 1; swaps++;
    @(negedge clk);
    // host now owns bank 0; fill it while array reads bank 1 concurrently
    fork
      array_check(1);
      host_fill(0);
    join
    // host read-back of bank 0 through the host port
    foreach (addrs[0][n]) begin
      if (n >= 50) break;
      h_en = 1; h_we = 0; h_addr = AW'(addrs[0][n]);
      @(negedge clk);
      h_en = 0;
      check(h_rdata == model[0][addrs[0][n]], $sformatf("host read bank 0 addr %0d", addrs[0][n]));
    end
    bank_sel = 0; swaps++;
    @(negedge clk);
    array_check(0);
    check(swaps == 2, "bank swaps happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
