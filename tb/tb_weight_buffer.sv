// tb_weight_buffer: self-checking test of the double-buffered compressed
// weight SRAM at its full size (value and mask arrays, two banks each of
// 2048 x 512 bits).
//
// The host writes random value rows and mask rows into the banks it owns,
// the bank select flips, and the array reads both arrays back at
// independent addresses on the same cycle (value one cycle after the read
// enable, mask likewise). A scoreboard holds the expected rows. Held data,
// host read-back and the separation of the value and mask arrays are
// checked too.
module tb_weight_buffer;
  localparam int W = 512, D = 2048, AW = 11, NW = 300;
  logic clk = 1'b0;
  logic bank_sel, v_en, m_en, h_en, h_we, h_msk;
  logic [AW-1:0] v_addr, m_addr, h_addr;
  logic [W-1:0]  v_data, m_data, h_wdata, h_rdata;
  int checks = 0, failures = 0;

  weight_buffer dut (.clk, .bank_sel_i(bank_sel),
    .val_rd_en_i(v_en), .val_rd_addr_i(v_addr), .val_rd_data_o(v_data),
    .msk_rd_en_i(m_en), .msk_rd_addr_i(m_addr), .msk_rd_data_o(m_data),
    .h_en_i(h_en), .h_we_i(h_we), .h_msk_i(h_msk), .h_addr_i(h_addr),
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

  // index: {mask, bank}
  logic [W-1:0] model [4][int];
  int addrs [4][$];

  task automatic host_fill(input int b);
    for (int n = 0; n < 2 * NW; n++) begin
      automatic int a = $urandom_range(0, D - 1);
      automatic int k = ((n % 2) << 1) | b;
      automatic logic [W-1:0] w = rnd_word();
      h_en = 1; h_we = 1; h_msk = n[0]; h_addr = AW'(a); h_wdata = w;
      if (!model[k].exists(a)) addrs[k].push_back(a);
      model[k][a] = w;
      @(negedge clk);
    end
    h_en = 0; h_we = 0;
  endtask

  task automatic array_check(input int b);
    automatic int nv = addrs[b].size(), nm = addrs[2 + b].size();
    for (int n = 0; n < (nv > nm ? nv : nm); n++) begin
      automatic int av = addrs[b][n % nv], am = addrs[2 + b][n % nm];
      v_en = 1; v_addr = AW'(av); m_en = 1; m_addr = AW'(am);
      @(negedge clk);
      v_en = 0; m_en = 0; v_addr = AW'($urandom); m_addr = AW'($urandom);
      check(v_data == model[b][av], $sformatf("value bank %0d addr %0d", b, av));
      check(m_data == model[2 + b][am], $sformatf("mask bank %0d addr %0d", b, am));
      @(negedge clk);
      check(v_data == model[b][av] && m_data == model[2 + b][am], "held data");
    end
  endtask

  initial begin
    bank_sel = 0; v_en = 0; m_en = 0; h_en = 0; h_we = 0; h_msk = 0;
    v_addr = '0; m_addr = '0; h_addr = '0; h_wdata = '0;
    @(negedge clk);
    host_fill(1);
    bank_sel = 1;
    @(negedge clk);
    fork
      array_check(1);
      host_fill(0);
    join
    for (int k = 0; k < 4; k += 2)
      for (int n = 0; n < 40; n++) begin
        h_en = 1; h_we = 0; h_msk = k[1]; h_addr = AW'(addrs[k][n]);
        @(negedge clk);
        h_en = 0;
        check(h_rdata == model[k][addrs[k][n]], $sformatf("host read %0d addr %0d", k, addrs[k][n]));
      end
    bank_sel = 0;
    @(negedge clk);
    array_check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
