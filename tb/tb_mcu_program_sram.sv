// tb_mcu_program_sram: self-checking test of the 64 KB MCU program store.
// Random full-word and byte-enable writes are mirrored in a scoreboard and
// read back (one-cycle read latency, data held between reads); the first
// and last words of the 16384-word array are exercised explicitly.
module tb_mcu_program_sram;
  localparam int D = 16384, AW = 14;
  logic clk = 1'b0, en;
  logic [3:0] be;
  logic [AW-1:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;

  mcu_program_sram dut (.clk, .en_i(en), .be_i(be), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [31:0] model [int];
  int used [$];

  task automatic wr(input int a, input logic [3:0] b, input logic [31:0] d);
    en = 1; be = b; addr = AW'(a); wdata = d;
    if (!model.exists(a)) begin model[a] = 32'h0; used.push_back(a); end
    for (int i = 0; i < 4; i++) if (b[i]) model[a][8*i +: 8] = d[8*i +: 8];
    @(negedge clk);
    en = 0;
  endtask

  task automatic rd_check(input int a);
    en = 1; be = 4'b0000; addr = AW'(a); wdata = $urandom;
    @(negedge clk);
    en = 0;
    check(rdata == model[a], $sformatf("addr %0d: %08h vs %08h", a, rdata, model[a]));
    addr = AW'($urandom);
    @(negedge clk);
    check(rdata == model[a], $sformatf("hold addr %0d", a));
  endtask

  initial begin
    en = 0; be = 0; addr = '0; wdata = '0;
    @(negedge clk);
    wr(0, 4'hF, 32'hDEADBEEF);
    wr(D - 1, 4'hF, 32'h01234567);
    for (int n = 0; n < 2000; n++) wr($urandom_range(0, D - 1), 4'hF, $urandom);
    // byte-enable updates of words already written
    for (int n = 0; n < 2000; n++) begin
      automatic int a = used[$urandom_range(0, used.size() - 1)];
      wr(a, 4'($urandom_range(1, 15)), $urandom);
    end
    foreach (used[n]) rd_check(used[n]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
