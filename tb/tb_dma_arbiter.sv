// tb_dma_arbiter: self-checking test of the domain-bound DMA arbiter.
//
// Sends receive packets from the "device" and transmit beats from both the
// DMA side and the FIFO side, with the select in each position, and records
// every beat that reaches each sink. Checks that data reach only the selected
// party, that the unselected side never gets a handshake, that the select
// takes effect one cycle after use_dma changes, and that a receive packet cut
// by a switch is dropped to its end instead of reaching the new party.
module tb_dma_arbiter;
  import st_pkg::*;
  logic clk = 0, rst_n = 0, use_dma = 0;
  logic  dev_rx_valid = 0, dev_rx_ready, dev_tx_valid, dev_tx_ready = 1;
  beat_t dev_rx_beat = '0, dev_tx_beat;
  logic  dma_s2mm_valid, dma_s2mm_ready = 1, dma_mm2s_valid = 0, dma_mm2s_ready;
  beat_t dma_s2mm_beat, dma_mm2s_beat = '0;
  logic  fifo_rx_valid, fifo_rx_ready = 1, fifo_tx_valid = 0, fifo_tx_ready;
  beat_t fifo_rx_beat, fifo_tx_beat = '0;
  logic  sel_dma;
  int checks = 0, failures = 0;
  beat_t got_dma [$], got_fifo [$], got_tx [$];

  dma_arbiter dut (.*);

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

  always @(posedge clk) if (rst_n) begin
    if (dma_s2mm_valid && dma_s2mm_ready) got_dma.push_back(dma_s2mm_beat);
    if (fifo_rx_valid && fifo_rx_ready)   got_fifo.push_back(fifo_rx_beat);
    if (dev_tx_valid && dev_tx_ready)     got_tx.push_back(dev_tx_beat);
  end

  task automatic rx_beat(input logic [31:0] d, input bit last);
    dev_rx_valid = 1; dev_rx_beat = '{data: d, last: last};
    @(negedge clk);
    dev_rx_valid = 0;
  endtask

  task automatic rx_packet(input logic [31:0] base, input int n);
    for (int i = 0; i < n; i++) rx_beat(base + i, i == n - 1);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // --- FIFO side selected
    check(!sel_dma, "FIFO selected after reset");
    rx_packet(32'h100, 3);
    check(got_fifo.size() == 3 && got_dma.size() == 0, "rx packet reached the FIFO only");
    check(got_fifo[0].data == 32'h100 && got_fifo[2].data == 32'h102 && got_fifo[2].last, "rx packet content");
    dma_mm2s_valid = 1; dma_mm2s_beat = '{data: 32'hD0, last: 1};
    fifo_tx_valid = 1;  fifo_tx_beat  = '{data: 32'hF0, last: 1};
    #1 check(!dma_mm2s_ready && fifo_tx_ready, "tx: only the FIFO may send");
    @(negedge clk);
    fifo_tx_valid = 0;
    @(negedge clk);
    check(got_tx.size() == 1 && got_tx[0].data == 32'hF0, "tx beat from the FIFO only");
    // --- switch to DMA: one cycle latency
    use_dma = 1;
    #1 check(!sel_dma, "select not yet changed");
    @(negedge clk);
    check(sel_dma, "DMA selected one cycle later");
    @(negedge clk);
    check(got_tx.size() == 2 && got_tx[1].data == 32'hD0, "tx beat from the DMA once selected");
    dma_mm2s_valid = 0;
    got_fifo.delete(); got_dma.delete();
    rx_packet(32'h200, 4);
    check(got_dma.size() == 4 && got_fifo.size() == 0, "rx packet reached the DMA only");
    // --- switch back in the middle of a packet
    got_fifo.delete(); got_dma.delete();
    rx_beat(32'h300, 0);
    rx_beat(32'h301, 0);
    use_dma = 0;
    rx_beat(32'h302, 0);   // last beat still to the DMA (select changes at this edge)
    rx_beat(32'h303, 0);   // dropped
    rx_beat(32'h304, 1);   // dropped (end of the cut packet)
    check(got_fifo.size() == 0, "rest of a cut packet does not reach the new party");
    check(got_dma.size() == 3, "DMA saw the beats before the switch only");
    rx_packet(32'h400, 2);
    check(got_fifo.size() == 2 && got_fifo[0].data == 32'h400, "next packet goes whole to the FIFO");
    check(got_dma.size() == 3, "nothing more to the DMA");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
