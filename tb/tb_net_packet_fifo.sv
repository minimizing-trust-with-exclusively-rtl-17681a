// tb_net_packet_fifo: self-checking test of the network packet FIFOs.
//
// Checks that received packets come out unchanged and in order, that irq is
// raised only while a whole packet is stored (not for a partial one) and
// drops after the last stored packet is read, that the transmit FIFO passes
// words through, and that 'clr' empties both FIFOs and drops the interrupt.
module tb_net_packet_fifo;
  import st_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic  in_valid = 0, in_ready, mcu_rx_valid, mcu_rx_ready = 0;
  logic  mcu_tx_valid = 0, mcu_tx_ready, out_valid, out_ready = 0, irq;
  beat_t in_beat = '0, mcu_rx_beat, mcu_tx_beat = '0, out_beat;
  int checks = 0, failures = 0;

  net_packet_fifo #(.DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input logic [31:0] d, input bit last);
    in_valid = 1; in_beat = '{data: d, last: last};
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic get(input logic [31:0] d, input bit last, input string what);
    check(mcu_rx_valid && mcu_rx_beat.data == d && mcu_rx_beat.last == last, what);
    mcu_rx_ready = 1;
    @(negedge clk);
    mcu_rx_ready = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!irq && !mcu_rx_valid, "empty after reset");
    put(32'hA0, 0); put(32'hA1, 0);
    check(!irq, "no interrupt for a partial packet");
    put(32'hA2, 1);
    check(irq, "interrupt once a whole packet is stored");
    put(32'hB0, 1);
    get(32'hA0, 0, "packet A word 0"); get(32'hA1, 0, "packet A word 1"); get(32'hA2, 1, "packet A word 2");
    check(irq, "interrupt stays while packet B is stored");
    get(32'hB0, 1, "packet B");
    check(!irq && !mcu_rx_valid, "interrupt drops when no packet is left");
    // transmit path
    mcu_tx_valid = 1; mcu_tx_beat = '{data: 32'hC0, last: 1};
    @(negedge clk);
    mcu_tx_valid = 0;
    check(out_valid && out_beat.data == 32'hC0 && out_beat.last, "transmit word available");
    // wipe
    put(32'hD0, 1);
    check(irq, "interrupt before wipe");
    clr = 1; @(negedge clk); clr = 0;
    check(!irq && !mcu_rx_valid && !out_valid, "wipe empties both FIFOs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
