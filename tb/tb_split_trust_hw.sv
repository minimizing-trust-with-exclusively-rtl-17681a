// tb_split_trust_hw: end-to-end test of the split-trust hardware at its
// default sizes (512 B data-plane and 64 B control-plane messages, 1 ms quota
// ticks of 100000 cycles, full-size memories).
//
// The testbench plays the part of the domain processors, the network device
// and the DMA engine, and walks through the operations the machine exists
// for:
//   1. Boot hand-off: the resource manager lends the storage domain's data-out
//      mailbox to TEE1 for one message; the storage domain sends a 512 B image,
//      TEE1 copies it into its own RAM, and the session ends by itself.
//   2. A TEE session on the serial output: while TEE1 holds the mailbox the
//      resource manager cannot reset TEE1 or the serial-output domain, reads
//      only a dummy status, and cannot write; the session times out after its
//      time quota (checked to the cycle), after which the reset goes through.
//   3. Wipe on yield: TEE2 writes a message and yields before it is read; the
//      serial-output domain never sees it.
//   4. TEE-to-TEE IPC over TEE1's mailbox.
//   5. Domain-bound DMA: while the untrusted domain owns the network command
//      mailbox, device packets go to the DMA engine; otherwise to the network
//      domain's FIFO with an interrupt; a packet cut by the switch is dropped.
//   6. A permanent queue, and the private RAM of every microcontroller.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_split_trust_hw;
  import st_pkg::*;

  localparam int TICK = 100000;   // the top's default TICK_CYCLES
  localparam int DW   = DATA_MSG_WORDS;
  localparam int CWD  = CTRL_MSG_WORDS;

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

  // Mechanism counters.
  int n_delegate = 0, n_yield = 0, n_msg_expiry = 0, n_time_expiry = 0, n_wipe = 0;
  int n_dummy_status = 0, n_reset_blocked = 0, n_reset_done = 0, n_dma = 0, n_fifo = 0;
  int n_cut_drop = 0, n_irq = 0, n_pq = 0, n_data_plane = 0, n_reset_cut = 0;

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ helpers
  task automatic delegate(input mb_id_e m, input dom_id_t to, input int mq, input int tq);
    mb_cmd[DOM_RM][m] = '{op: MB_DELEGATE, target: to, msg_quota: QUOTA_W'(mq), time_quota: QUOTA_W'(tq)};
    @(negedge clk);
    mb_cmd[DOM_RM][m] = '0;
    check(mb_owner[m] == to && mb_session[m], $sformatf("mailbox %0d delegated to %s", m, to.name()));
    n_delegate++;
  endtask

  task automatic yield(input mb_id_e m, input dom_id_t from);
    mb_cmd[from][m] = '{op: MB_YIELD, target: DOM_RM, msg_quota: 0, time_quota: 0};
    @(negedge clk);
    mb_cmd[from][m] = '0;
    check(mb_owner[m] == DOM_RM && !mb_session[m], $sformatf("%s yielded mailbox %0d", from.name(), m));
    n_yield++;
  endtask

  // Domain d writes n words base+i into mailbox m (waits for ready).
  task automatic send(input dom_id_t d, input mb_id_e m, input logic [31:0] base, input int n);
    for (int i = 0; i < n; i++) begin
      mb_req[d][m].wr_valid = 1;
      mb_req[d][m].wr_data  = base + 32'(i);
      #1;
      while (!mb_rsp[d][m].wr_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    mb_req[d][m].wr_valid = 0;
  endtask

  // Domain d reads n words from mailbox m and compares with base+i; when
  // to_ram is set, the words are also stored at address i of the domain's RAM.
  task automatic receive(input dom_id_t d, input mb_id_e m, input logic [31:0] base, input int n,
                         input int ram_idx, input string what);
    int bad;
    bad = 0;
    for (int i = 0; i < n; i++) begin
      int wait_cyc;
      wait_cyc = 0;
      while (!mb_rsp[d][m].rd_valid && wait_cyc < 100) begin @(negedge clk); wait_cyc++; end
      if (!mb_rsp[d][m].rd_valid || mb_rsp[d][m].rd_data != base + 32'(i)) bad++;
      if (ram_idx >= 0) ram_req[ram_idx] = '{en: 1, we: 1, be: 4'hF, addr: RAM_AW'(i), wdata: mb_rsp[d][m].rd_data};
      mb_req[d][m].rd_ready = 1;
      @(negedge clk);
      mb_req[d][m].rd_ready = 0;
      if (ram_idx >= 0) ram_req[ram_idx] = '0;
    end
    check(bad == 0, what);
  endtask

  task automatic pmu_reset_cmd(input dom_id_t d, input bit expect_ok, input string what);
    pmu_cmd_valid = 1; pmu_cmd_dom = d;
    @(negedge clk);
    pmu_cmd_valid = 0;
    check(pmu_resp_valid && pmu_resp_ok == expect_ok, what);
    if (!expect_ok) begin
      check(!dom_rst[d], "no reset reaches a locked domain");
      n_reset_blocked++;
    end else begin
      check(dom_rst[d], "reset reaches an unlocked domain");
      n_reset_done++;
    end
  endtask

  task automatic rx_beat(input logic [31:0] d, input bit last);
    net_rx_valid = 1; net_rx_beat = '{data: d, last: last};
    #1;
    while (!net_rx_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    net_rx_valid = 0;
  endtask

  int dma_beats = 0, tx_beats = 0;
  logic [31:0] tx_last_data = 0;
  always @(posedge clk) if (rst_n) begin
    if (dma_s2mm_valid && dma_s2mm_ready) dma_beats++;
    if (net_tx_valid && net_tx_ready) begin tx_beats++; tx_last_data = net_tx_beat.data; end
  end

  // ------------------------------------------------------------ scenario
  int cyc;
  time t_deleg, t_end;
  initial begin
    for (int d = 0; d < N_DOM; d++)
      for (int m = 0; m < N_MB; m++) begin mb_req[d][m] = '0; mb_cmd[d][m] = '0; end
    foreach (pq_wr_data[q]) pq_wr_data[q] = '0;
    foreach (ram_req[i]) ram_req[i] = '0;
    foreach (rom_addr[i]) rom_addr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int m = 0; m < N_MB; m++) check(mb_owner[m] == DOM_RM, "every mailbox starts with the resource manager");

    // 1. boot hand-off over the storage data plane
    delegate(MB_STORAGE_DATA_OUT, DOM_TEE1, 1, 100);
    send(DOM_STORAGE, MB_STORAGE_DATA_OUT, 32'h1000_0000, DW);
    receive(DOM_TEE1, MB_STORAGE_DATA_OUT, 32'h1000_0000, DW, 1, "TEE1 receives a 512 B image");
    n_data_plane++;
    @(negedge clk);
    check(mb_owner[MB_STORAGE_DATA_OUT] == DOM_RM, "one-message session ends after the message");
    if (mb_owner[MB_STORAGE_DATA_OUT] == DOM_RM) n_msg_expiry++;
    // the image is in TEE1's RAM
    ram_req[1] = '{en: 1, we: 0, be: 0, addr: RAM_AW'(DW - 1), wdata: 0};
    @(negedge clk); ram_req[1] = '0;
    check(ram_rdata[1] == 32'h1000_0000 + DW - 1, "image word stored in TEE1 RAM");

    // 2. TEE1 session on the serial output, 2 ticks
    mb_cmd[DOM_RM][MB_SERIAL_OUT] = '{op: MB_DELEGATE, target: DOM_TEE1, msg_quota: MSG_QUOTA_INF, time_quota: 2};
    @(posedge clk); t_deleg = $time;
    #1 mb_cmd[DOM_RM][MB_SERIAL_OUT] = '0;
    n_delegate++;
    @(negedge clk);
    check(mb_status[DOM_TEE1][MB_SERIAL_OUT].owner == DOM_TEE1 &&
          mb_status[DOM_TEE1][MB_SERIAL_OUT].time_left == 2, "TEE1 verifies its access and quota");
    check(mb_status[DOM_SERIAL_OUT][MB_SERIAL_OUT].owner == DOM_TEE1, "serial output verifies its client");
    check(mb_status[DOM_RM][MB_SERIAL_OUT] == '0 && mb_status[DOM_UNTRUSTED][MB_SERIAL_OUT] == '0,
          "others read the dummy status");
    n_dummy_status++;
    pmu_reset_cmd(DOM_TEE1, 0, "reset of TEE1 refused during its session");
    pmu_reset_cmd(DOM_SERIAL_OUT, 0, "reset of serial output refused during the session");
    mb_req[DOM_RM][MB_SERIAL_OUT].wr_valid = 1;
    #1 check(!mb_rsp[DOM_RM][MB_SERIAL_OUT].wr_ready, "resource manager cannot write during the session");
    @(negedge clk); mb_req[DOM_RM][MB_SERIAL_OUT].wr_valid = 0;
    send(DOM_TEE1, MB_SERIAL_OUT, 32'h2000_0000, CWD);
    receive(DOM_SERIAL_OUT, MB_SERIAL_OUT, 32'h2000_0000, CWD, 4, "serial output gets TEE1's message");
    // wait for the time quota
    cyc = 0;
    while (cyc < 3 * TICK) begin
      @(posedge clk); #1; cyc++;
      if (mb_owner[MB_SERIAL_OUT] != DOM_TEE1) break;
    end
    t_end = $time - 1;
    @(negedge clk);
    check(mb_owner[MB_SERIAL_OUT] == DOM_RM, "time quota expires");
    check((t_end - t_deleg) / 10 == 2 * TICK,
          $sformatf("a 2-tick session lasts %0d cycles (got %0d)", 2 * TICK, (t_end - t_deleg) / 10));
    n_time_expiry++;
    pmu_reset_cmd(DOM_TEE1, 1, "reset of TEE1 allowed after the session");

    // a session that starts during a reset pulse cuts the pulse at once
    pmu_reset_cmd(DOM_TEE2, 1, "reset of TEE2 accepted");
    check(dom_rst[DOM_TEE2], "TEE2 in reset");
    // 3. wipe on yield (the delegation also locks TEE2 mid-reset)
    delegate(MB_SERIAL_OUT, DOM_TEE2, 4, 10);
    check(!dom_rst[DOM_TEE2] && dom_locked[DOM_TEE2], "reset guard cuts the reset of a domain entering a session");
    if (!dom_rst[DOM_TEE2]) n_reset_cut++;
    send(DOM_TEE2, MB_SERIAL_OUT, 32'h3000_0000, CWD);
    check(mb_rsp[DOM_SERIAL_OUT][MB_SERIAL_OUT].rd_valid, "message waiting before yield");
    yield(MB_SERIAL_OUT, DOM_TEE2);
    check(!mb_rsp[DOM_SERIAL_OUT][MB_SERIAL_OUT].rd_valid, "yield wiped the unread message");
    n_wipe++;

    // 4. TEE-to-TEE IPC
    delegate(MB_TEE1_IPC, DOM_TEE2, 1, 10);
    send(DOM_TEE2, MB_TEE1_IPC, 32'h4000_0000, CWD);
    receive(DOM_TEE1, MB_TEE1_IPC, 32'h4000_0000, CWD, -1, "TEE1 receives TEE2's IPC message");
    @(negedge clk);
    check(mb_owner[MB_TEE1_IPC] == DOM_RM, "IPC session ends after its message");

    // 5. domain-bound DMA
    check(!net_sel_dma, "network streams go to the FIFO by default");
    delegate(MB_NETWORK_CMD_IN, DOM_UNTRUSTED, int'(MSG_QUOTA_INF), 100);
    @(negedge clk);
    check(net_sel_dma, "untrusted domain as client selects the DMA engine");
    for (int i = 0; i < 4; i++) rx_beat(32'h5000_0000 + 32'(i), i == 3);
    check(dma_beats == 4 && !nmcu_rx_valid, "packet went to the DMA engine only");
    if (dma_beats == 4) n_dma++;
    // cut a packet by yielding in its middle
    rx_beat(32'h5100_0000, 0);
    rx_beat(32'h5100_0001, 0);
    yield(MB_NETWORK_CMD_IN, DOM_UNTRUSTED);
    rx_beat(32'h5100_0002, 0);
    rx_beat(32'h5100_0003, 0);
    rx_beat(32'h5100_0004, 1);
    check(!net_sel_dma, "back to the FIFO after the untrusted domain yields");
    check(!nmcu_rx_valid && !nmcu_irq, "rest of the cut packet reached neither party");
    if (!nmcu_rx_valid) n_cut_drop++;
    for (int i = 0; i < 3; i++) rx_beat(32'h5200_0000 + 32'(i), i == 2);
    check(nmcu_irq && nmcu_rx_valid && nmcu_rx_beat.data == 32'h5200_0000, "packet in the FIFO raises the interrupt");
    if (nmcu_irq) n_irq++;
    n_fifo++;
    for (int i = 0; i < 3; i++) begin
      check(nmcu_rx_valid && nmcu_rx_beat.data == 32'h5200_0000 + 32'(i), "network domain reads the packet");
      nmcu_rx_ready = 1; @(negedge clk); nmcu_rx_ready = 0;
    end
    check(!nmcu_irq, "interrupt drops when the FIFO holds no packet");
    nmcu_tx_valid = 1; nmcu_tx_beat = '{data: 32'h5300_0000, last: 1};
    @(negedge clk); nmcu_tx_valid = 0;
    @(negedge clk);
    check(tx_beats == 1 && tx_last_data == 32'h5300_0000, "network domain's beat left through the device port");

    // 6. permanent queue and private memories
    pq_wr_valid[0] = 1; pq_wr_data[0] = 32'h6000_0001;
    @(negedge clk); pq_wr_valid[0] = 0;
    check(pq_rd_valid[0] && pq_rd_data[0] == 32'h6000_0001, "permanent queue delivers");
    pq_rd_ready[0] = 1; @(negedge clk); pq_rd_ready[0] = 0;
    check(!pq_rd_valid[0], "permanent queue empty after the read");
    n_pq++;
    for (int i = 0; i < N_MCU; i++) ram_req[i] = '{en: 1, we: 1, be: 4'hF, addr: 17'd100, wdata: 32'h7000_0000 + 32'(i)};
    @(negedge clk);
    for (int i = 0; i < N_MCU; i++) ram_req[i] = '{en: 1, we: 0, be: 0, addr: 17'd100, wdata: 0};
    @(negedge clk);
    for (int i = 0; i < N_MCU; i++) ram_req[i] = '0;
    for (int i = 0; i < N_MCU; i++) check(ram_rdata[i] == 32'h7000_0000 + 32'(i), "each RAM keeps its own word");
    rom_en = '1;
    @(negedge clk);
    rom_en = '0;
    for (int i = 0; i < N_MCU; i++) check(rom_rdata[i] == 0, "empty ROM image reads zero");

    // mechanism coverage
    check(n_delegate > 0, "delegation happened");
    check(n_yield > 0, "yield happened");
    check(n_msg_expiry > 0, "message-quota expiry happened");
    check(n_time_expiry > 0, "time-quota expiry happened");
    check(n_wipe > 0, "queue wipe happened");
    check(n_dummy_status > 0, "dummy status read happened");
    check(n_reset_blocked > 0, "blocked reset happened");
    check(n_reset_done > 0, "granted reset happened");
    check(n_reset_cut > 0, "reset cut by the guard happened");
    check(n_dma > 0, "DMA routing happened");
    check(n_fifo > 0, "FIFO routing happened");
    check(n_cut_drop > 0, "cut-packet drop happened");
    check(n_irq > 0, "FIFO interrupt happened");
    check(n_pq > 0, "permanent queue transfer happened");
    check(n_data_plane > 0, "data-plane message happened");
    $display("mechanisms: delegate=%0d yield=%0d msg_expiry=%0d time_expiry=%0d wipe=%0d dummy=%0d reset_blocked=%0d reset_done=%0d dma=%0d fifo=%0d cut_drop=%0d irq=%0d pq=%0d data_plane=%0d reset_cut=%0d",
             n_delegate, n_yield, n_msg_expiry, n_time_expiry, n_wipe, n_dummy_status, n_reset_blocked,
             n_reset_done, n_dma, n_fifo, n_cut_drop, n_irq, n_pq, n_data_plane, n_reset_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
