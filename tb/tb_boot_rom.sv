// tb_boot_rom: self-checking test of the bootloader ROM.
//
// Loads tb/boot_rom_test.hex, whose word i is (0x13579BDF * (i+1)) mod 2^32,
// into a 16-word ROM, and checks every word (computed here from the same
// formula), the one-cycle read latency and that rdata holds while en is low.
module tb_boot_rom;
  logic clk = 0, en = 0;
  logic [3:0] addr = 0;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  boot_rom #(.WORDS(16), .INIT_FILE("tb/boot_rom_test.hex")) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 15; i >= 0; i--) begin
      en = 1; addr = 4'(i);
      @(negedge clk);
      check(rdata == 32'(32'h13579BDF * (i + 1)), $sformatf("word %0d", i));
    end
    en = 0; addr = 4'd7;
    repeat (3) @(negedge clk);
    check(rdata == 32'h13579BDF, "rdata holds while en is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
