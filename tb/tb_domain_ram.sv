// tb_domain_ram: self-checking test of a domain's private RAM.
//
// Random byte-enabled writes and reads to a 1000-word RAM against a reference
// array kept here, plus an out-of-range write that must not land and an
// out-of-range read that must return zero.
module tb_domain_ram;
  import st_pkg::*;
  localparam int W = 1000;
  logic clk = 0;
  ram_req_t req = '0;
  logic [31:0] rdata;
  logic [31:0] model [W];
  int checks = 0, failures = 0;

  domain_ram #(.WORDS(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int a, input logic [31:0] d, input logic [3:0] be);
    req = '{en: 1, we: 1, be: be, addr: RAM_AW'(a), wdata: d};
    @(negedge clk);
    req = '0;
    if (a < W) for (int b = 0; b < 4; b++) if (be[b]) model[a][8*b +: 8] = d[8*b +: 8];
  endtask

  task automatic read(input int a, input logic [31:0] exp, input string what);
    req = '{en: 1, we: 0, be: 0, addr: RAM_AW'(a), wdata: 0};
    @(negedge clk);
    req = '0;
    check(rdata == exp, what);
  endtask

  int a;
  initial begin
    @(negedge clk);
    for (int i = 0; i < W; i++) write(i, 32'(i * 7 + 1), 4'hF);
    for (int n = 0; n < 3000; n++) begin
      a = $urandom_range(0, W - 1);
      if ($urandom_range(0, 1)) write(a, $urandom, 4'($urandom));
      else read(a, model[a], "random read");
    end
    write(W + 5, 32'hDEAD_BEEF, 4'hF);
    read(W + 5, 32'h0, "out-of-range read is zero");
    for (int i = 0; i < W; i++) read(i, model[i], "final sweep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
