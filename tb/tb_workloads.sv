// tb_workloads: the traffic of the prototype's benchmarks, run through the
// split-trust hardware at its default sizes.
//
// The testbench acts as the domain processors, the network device and the
// DMA engine, and moves the same amount of data as each benchmark, at the
// hardware's full rate (one 32-bit word per cycle, 100 MHz clock assumed).
// The data is checked word for word. The cycle counts are checked against what
// the hardware should need, and against the rate the prototype measured
// end to end, which includes its software. The workloads:
//   1. Mailbox throughput: 10,000 messages of 512 B over a data-plane mailbox,
//      unlimited message quota (the prototype measured 9.64 MB/s).
//   2. Mailbox latency: a 64 B message and a 64 B acknowledgment over the
//      storage domain's two control-plane mailboxes (prototype: 15.26 us).
//   3. Storage writes: 2000 blocks of 512 B under a message quota of exactly
//      2000; the session must end by itself after the last block is read.
//   4. Security-critical program reading a 1 MiB file: 2048 blocks from the
//      storage domain under a quota of 2048. During the read, the storage
//      domain and the TEE cannot be reset; after it, they can.
//   5. iPerf through domain-bound DMA: 100 frames of 1500 B each way at the
//      same time (prototype: 943 Mbit/s).
//   6. A TEE's network traffic through the network domain's packet FIFO: one
//      1518 B frame; the interrupt rises only after its last beat.
// Message counts, sizes and measured rates follow the prototype's evaluation.
// The frame sizes and the 100 MHz clock are this testbench's own choices.
module tb_workloads;
  import st_pkg::*;

  localparam int DW  = DATA_MSG_WORDS;
  localparam int CWD = CTRL_MSG_WORDS;
  localparam real NS_PER_CYCLE = 10.0;

  logic clk = 0, rst_n = 0;
  mb_req_t    mb_req    [N_DOM][N_MB];
  mb_rsp_t    mb_rsp    [N_DOM][N_MB];
  mb_cmd_t    mb_cmd    [N_DOM][N_MB];
  mb_status_t mb_status [N_DOM][N_MB];
  dom_id_t    mb_owner  [N_MB];
  logic [N_MB-1:0] mb_session;
  logic [N_PQ-1:0] pq_wr_valid = '0, pq_wr_ready, pq_rd_valid, pq_rd_ready = '0;
  logic [31:0] pq_wr_data [N_PQ], pq_rd_data [N_PQ];
  logic pmu_cmd_valid = 0, pmu_resp_valid, pmu_resp_ok;
  dom_id_t pmu_cmd_dom = DOM_RM;
  logic [N_DOM-1:0] dom_locked, dom_rst;
  logic  net_rx_valid = 0, net_rx_ready, net_tx_valid, net_tx_ready = 1;
  beat_t net_rx_beat = '0, net_tx_beat;
  logic  dma_s2mm_valid, dma_s2mm_ready = 1, dma_mm2s_valid = 0, dma_mm2s_ready;
  beat_t dma_s2mm_beat, dma_mm2s_beat = '0;
  logic  net_sel_dma;
  logic  nmcu_rx_valid, nmcu_rx_ready = 0, nmcu_tx_valid = 0, nmcu_tx_ready, nmcu_irq;
  beat_t nmcu_rx_beat, nmcu_tx_beat = '0;
  ram_req_t ram_req [N_MCU];
  logic [31:0] ram_rdata [N_MCU];
  logic [N_MCU-1:0] rom_en = '0;
  logic [11:0] rom_addr [N_MCU];
  logic [31:0] rom_rdata [N_MCU];

  split_trust_hw dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cycle counter, for measuring.
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic delegate(input mb_id_e m, input dom_id_t to, input int mq, input int tq);
    mb_cmd[DOM_RM][m] = '{op: MB_DELEGATE, target: to, msg_quota: QUOTA_W'(mq), time_quota: QUOTA_W'(tq)};
    @(negedge clk);
    mb_cmd[DOM_RM][m] = '0;
    check(mb_owner[m] == to && mb_session[m], $sformatf("mailbox %0d delegated to %s", m, to.name()));
  endtask

  task automatic yield(input mb_id_e m, input dom_id_t from);
    mb_cmd[from][m] = '{op: MB_YIELD, target: DOM_RM, msg_quota: 0, time_quota: 0};
    @(negedge clk);
    mb_cmd[from][m] = '0;
    check(mb_owner[m] == DOM_RM, $sformatf("%s yielded mailbox %0d", from.name(), m));
  endtask

  // Writer w and reader r move 'words' words base+i through mailbox m at the
  // same time, each as fast as the mailbox allows. Returns the cycles from the
  // first write to the last read and the number of wrong words.
  task automatic stream(input mb_id_e m, input dom_id_t w, input dom_id_t r,
                        input logic [31:0] base, input int words,
                        output longint cycles, output int bad);
    longint t0;
    bad = 0;
    t0 = cycle;
    fork
      begin : writer
        for (int i = 0; i < words; i++) begin
          mb_req[w][m].wr_valid = 1;
          mb_req[w][m].wr_data  = base + 32'(i);
          #1;
          while (!mb_rsp[w][m].wr_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        mb_req[w][m].wr_valid = 0;
      end
      begin : reader
        int i, idle;
        i = 0;
        idle = 0;
        while (i < words && idle < 1000) begin
          #1;
          if (mb_rsp[r][m].rd_valid) begin
            if (mb_rsp[r][m].rd_data != base + 32'(i)) bad++;
            mb_req[r][m].rd_ready = 1;
            i++;
            idle = 0;
          end else begin
            mb_req[r][m].rd_ready = 0;
            idle++;
          end
          @(negedge clk);
          mb_req[r][m].rd_ready = 0;
        end
        if (i < words) bad += words - i;
      end
    join
    cycles = cycle - t0;
  endtask

  task automatic pmu_reset_cmd(input dom_id_t d, input bit expect_ok, input string what);
    pmu_cmd_valid = 1; pmu_cmd_dom = d;
    @(negedge clk);
    pmu_cmd_valid = 0;
    check(pmu_resp_valid && pmu_resp_ok == expect_ok && dom_rst[d] == expect_ok, what);
  endtask

  // Network monitors.
  longint s2mm_beats = 0, tx_beats = 0, s2mm_bad = 0, tx_bad = 0, s2mm_pkts = 0;
  always @(posedge clk) if (rst_n) begin
    if (dma_s2mm_valid && dma_s2mm_ready) begin
      if (dma_s2mm_beat.data != 32'(s2mm_beats)) s2mm_bad++;
      s2mm_beats++;
      if (dma_s2mm_beat.last) s2mm_pkts++;
    end
    if (net_tx_valid && net_tx_ready) begin
      if (net_tx_beat.data != 32'h8000_0000 + 32'(tx_beats)) tx_bad++;
      tx_beats++;
    end
  end

  longint cyc, t0;
  int bad;
  real rate;
  initial begin
    for (int d = 0; d < N_DOM; d++)
      for (int m = 0; m < N_MB; m++) begin mb_req[d][m] = '0; mb_cmd[d][m] = '0; end
    foreach (pq_wr_data[q]) pq_wr_data[q] = '0;
    foreach (ram_req[i]) ram_req[i] = '0;
    foreach (rom_addr[i]) rom_addr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. throughput: 10,000 x 512 B, unlimited message quota, 100 ms
    delegate(MB_STORAGE_DATA_IN, DOM_TEE1, int'(MSG_QUOTA_INF), 100);
    stream(MB_STORAGE_DATA_IN, DOM_TEE1, DOM_STORAGE, 32'h0, 10_000 * DW, cyc, bad);
    rate = 10_000.0 * 512.0 / (real'(cyc) * NS_PER_CYCLE * 1.0e-9) / 1.0e6;
    $display("throughput: 10000 x 512 B in %0d cycles = %0.1f MB/s at 100 MHz", cyc, rate);
    check(bad == 0, "throughput run delivers every word in order");
    check(cyc <= 10_000 * DW + 4, "mailbox moves one word per cycle");
    check(rate >= 9.64, "hardware rate is above the measured 9.64 MB/s");
    check(mb_status[DOM_TEE1][MB_STORAGE_DATA_IN].msg_left == MSG_QUOTA_INF, "unlimited quota is not counted down");
    yield(MB_STORAGE_DATA_IN, DOM_TEE1);

    // 2. latency: 64 B request and 64 B acknowledgment
    delegate(MB_STORAGE_CMD_IN, DOM_TEE1, 1, 10);
    delegate(MB_STORAGE_CMD_OUT, DOM_TEE1, 1, 10);
    t0 = cycle;
    begin
      longint c1, c2;
      int b1, b2;
      stream(MB_STORAGE_CMD_IN, DOM_TEE1, DOM_STORAGE, 32'hA000_0000, CWD, c1, b1);
      stream(MB_STORAGE_CMD_OUT, DOM_STORAGE, DOM_TEE1, 32'hB000_0000, CWD, c2, b2);
      check(b1 == 0 && b2 == 0, "request and acknowledgment delivered");
    end
    cyc = cycle - t0;
    $display("latency: 64 B round trip in %0d cycles = %0.2f us", cyc, real'(cyc) * NS_PER_CYCLE / 1000.0);
    check(cyc <= longint'(2 * (CWD + 4)), "round trip takes about two message times");
    check(real'(cyc) * NS_PER_CYCLE / 1000.0 < 15.26, "hardware share is below the measured 15.26 us");
    @(negedge clk);
    check(mb_owner[MB_STORAGE_CMD_IN] == DOM_RM && mb_owner[MB_STORAGE_CMD_OUT] == DOM_RM,
          "one-message sessions end by themselves");

    // 3. storage writes: 2000 blocks, quota 2000
    delegate(MB_STORAGE_DATA_IN, DOM_TEE1, 2000, 4095);
    stream(MB_STORAGE_DATA_IN, DOM_TEE1, DOM_STORAGE, 32'h1000_0000, 2000 * DW, cyc, bad);
    check(bad == 0, "2000 blocks written intact");
    @(negedge clk);
    check(mb_owner[MB_STORAGE_DATA_IN] == DOM_RM, "write session ends when the quota is used and drained");

    // 4. security-critical program: read a 1 MiB file, 2048 blocks, quota 2048
    delegate(MB_STORAGE_DATA_OUT, DOM_TEE1, 2048, 4095);
    check(mb_status[DOM_TEE1][MB_STORAGE_DATA_OUT].msg_left == 2048, "TEE1 verifies its quota of 2048 blocks");
    pmu_reset_cmd(DOM_STORAGE, 0, "storage domain cannot be reset during the read");
    stream(MB_STORAGE_DATA_OUT, DOM_STORAGE, DOM_TEE1, 32'h2000_0000, 1024 * DW, cyc, bad);
    check(mb_status[DOM_STORAGE][MB_STORAGE_DATA_OUT].msg_left == 1024, "half the quota left after half the file");
    pmu_reset_cmd(DOM_TEE1, 0, "TEE1 cannot be reset during the read");
    stream(MB_STORAGE_DATA_OUT, DOM_STORAGE, DOM_TEE1, 32'h2000_0000 + 1024 * DW, 1024 * DW, cyc, bad);
    check(bad == 0, "1 MiB file read intact");
    @(negedge clk);
    check(mb_owner[MB_STORAGE_DATA_OUT] == DOM_RM, "read session ends after the last block");
    pmu_reset_cmd(DOM_STORAGE, 1, "storage domain can be reset after the session");
    repeat (20) @(negedge clk);

    // 5. iPerf through domain-bound DMA, both directions at once
    delegate(MB_NETWORK_CMD_IN, DOM_UNTRUSTED, int'(MSG_QUOTA_INF), 100);
    @(negedge clk);
    check(net_sel_dma, "DMA path selected for the untrusted domain");
    s2mm_beats = 0; tx_beats = 0;
    t0 = cycle;
    fork
      for (int i = 0; i < 100 * 375; i++) begin
        net_rx_valid = 1; net_rx_beat = '{data: 32'(i), last: (i % 375) == 374};
        #1;
        while (!net_rx_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      for (int i = 0; i < 100 * 375; i++) begin
        dma_mm2s_valid = 1; dma_mm2s_beat = '{data: 32'h8000_0000 + 32'(i), last: (i % 375) == 374};
        #1;
        while (!dma_mm2s_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
    join
    net_rx_valid = 0; dma_mm2s_valid = 0;
    @(negedge clk);
    cyc = cycle - t0;
    rate = 100.0 * 1500.0 * 8.0 / (real'(cyc) * NS_PER_CYCLE * 1.0e-9) / 1.0e6;
    $display("iperf: 100 x 1500 B each way in %0d cycles = %0.0f Mbit/s per direction", cyc, rate);
    check(s2mm_beats == 100 * 375 && s2mm_bad == 0 && s2mm_pkts == 100, "every received frame reached the DMA engine");
    check(tx_beats == 100 * 375 && tx_bad == 0, "every DMA frame reached the device");
    check(rate >= 943.0, "stream path carries at least 943 Mbit/s");
    check(!nmcu_rx_valid, "nothing reached the network domain's FIFO");
    yield(MB_NETWORK_CMD_IN, DOM_UNTRUSTED);
    @(negedge clk);

    // 6. TEE network traffic through the packet FIFO: one 1518 B frame
    check(!net_sel_dma, "FIFO path selected");
    for (int i = 0; i < 380; i++) begin
      net_rx_valid = 1; net_rx_beat = '{data: 32'hC000_0000 + 32'(i), last: i == 379};
      #1;
      while (!net_rx_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      if (i == 378) check(!nmcu_irq, "no interrupt for a partial frame");
    end
    net_rx_valid = 0;
    check(nmcu_irq, "interrupt once the whole frame is in");
    bad = 0;
    for (int i = 0; i < 380; i++) begin
      if (!nmcu_rx_valid || nmcu_rx_beat.data != 32'hC000_0000 + 32'(i) || nmcu_rx_beat.last != (i == 379)) bad++;
      nmcu_rx_ready = 1; @(negedge clk); nmcu_rx_ready = 0;
    end
    check(bad == 0 && !nmcu_irq, "network domain reads the whole frame");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
