// split_trust_hw: the hardware added to a phone SoC to split it into
// physically isolated trust domains.
//
// Every domain (resource manager, untrusted OS, two TEEs, serial input, serial
// output, storage, network) has its own processor; the processors sit outside
// this module and reach it only through their own ports. What this module
// holds is everything the domains would otherwise have to share, built so that
// none of it can be reprogrammed to break the partition:
//
//   * 12 delegatable mailboxes (mailbox). Each has one end hard-wired to an I/O
//     or TEE domain and one end that the resource manager can lend, with a
//     message and a time quota, to exactly one other domain at a time.
//   * 11 permanent queues (msg_queue) for fixed connections, for example from
//     the domains to the TPM mediator or between a TEE and the resource
//     manager. Which processor drives which queue is decided where the
//     processors are wired; here they are numbered 0..N_PQ-1.
//   * The PMU reset interface (pmu_reset) and the reset guard (reset_guard):
//     the resource manager can reset any domain except one taking part in a
//     mailbox session.
//   * The domain-bound DMA arbiter (dma_arbiter) and the network packet FIFO
//     (net_packet_fifo): network device streams go to the untrusted domain's
//     DMA engine only while the untrusted domain owns the network domain's
//     command mailbox, and to a FIFO private to the network domain otherwise.
//   * A bootloader ROM (boot_rom) and a RAM (domain_ram) for each of the 8
//     microcontrollers: the 7 non-untrusted domains and the TPM mediator.
//
// Port conventions: mb_*[d][m] is domain d's port on mailbox m (st_pkg gives
// both numberings and which domain is each mailbox's fixed end). dom_rst[d]
// is the reset of domain d, active high. ram_*[i]/rom_*[i] belong to
// microcontroller i: indices 0..6 are domains RM, TEE1, TEE2, SERIAL_IN,
// SERIAL_OUT, STORAGE, NETWORK, index 7 the TPM mediator. Everything runs on
// one clock; the paper's FPGA prototype ran these parts at 100 MHz, which is
// what TICK_CYCLES = 100000 (1 ms quota ticks) assumes.
//
// From the paper: the set of parts, their counts, the mailbox sizes, the
// rules each part enforces. This design's choices: the numbering, which
// mailbox serves which domain beyond the four storage mailboxes, the memory
// sizes per domain, and the signal-level interfaces.
module split_trust_hw
  import st_pkg::*;
#(
  parameter int unsigned TICK_CYCLES    = 100000,
  parameter int unsigned RESET_CYCLES   = 16,
  parameter int unsigned PQ_DEPTH       = MB_MSG_SLOTS * CTRL_MSG_WORDS,
  parameter int unsigned NET_FIFO_DEPTH = 512,
  parameter int unsigned RAM_WORDS      = 98304,
  parameter int unsigned ROM_WORDS      = 4096,
  parameter string       ROM_INIT_FILE  = "",
  localparam int unsigned ROM_AW = $clog2(ROM_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // mailboxes
  input  mb_req_t           mb_req    [N_DOM][N_MB],
  output mb_rsp_t           mb_rsp    [N_DOM][N_MB],
  input  mb_cmd_t           mb_cmd    [N_DOM][N_MB],
  output mb_status_t        mb_status [N_DOM][N_MB],
  output dom_id_t           mb_owner  [N_MB],
  output logic [N_MB-1:0]   mb_session,
  // permanent queues
  input  logic [N_PQ-1:0]   pq_wr_valid,
  output logic [N_PQ-1:0]   pq_wr_ready,
  input  logic [WORD_W-1:0] pq_wr_data [N_PQ],
  output logic [N_PQ-1:0]   pq_rd_valid,
  input  logic [N_PQ-1:0]   pq_rd_ready,
  output logic [WORD_W-1:0] pq_rd_data [N_PQ],
  // reset commands from the resource manager, domain resets
  input  logic              pmu_cmd_valid,
  input  dom_id_t           pmu_cmd_dom,
  output logic              pmu_resp_valid,
  output logic              pmu_resp_ok,
  output logic [N_DOM-1:0]  dom_locked,
  output logic [N_DOM-1:0]  dom_rst,
  // network device
  input  logic              net_rx_valid,
  output logic              net_rx_ready,
  input  beat_t             net_rx_beat,
  output logic              net_tx_valid,
  input  logic              net_tx_ready,
  output beat_t             net_tx_beat,
  // domain-bound DMA engine of the untrusted domain
  output logic              dma_s2mm_valid,
  input  logic              dma_s2mm_ready,
  output beat_t             dma_s2mm_beat,
  input  logic              dma_mm2s_valid,
  output logic              dma_mm2s_ready,
  input  beat_t             dma_mm2s_beat,
  output logic              net_sel_dma,
  // network domain's microcontroller: packet FIFO
  output logic              nmcu_rx_valid,
  input  logic              nmcu_rx_ready,
  output beat_t             nmcu_rx_beat,
  input  logic              nmcu_tx_valid,
  output logic              nmcu_tx_ready,
  input  beat_t             nmcu_tx_beat,
  output logic              nmcu_irq,
  // per-microcontroller memories
  input  ram_req_t          ram_req   [N_MCU],
  output logic [WORD_W-1:0] ram_rdata [N_MCU],
  input  logic [N_MCU-1:0]  rom_en,
  input  logic [ROM_AW-1:0] rom_addr  [N_MCU],
  output logic [WORD_W-1:0] rom_rdata [N_MCU]
);

  // ------------------------------------------------------------- mailboxes
  for (genvar m = 0; m < int'(N_MB); m++) begin : g_mb
    mb_req_t    req    [N_DOM];
    mb_rsp_t    rsp    [N_DOM];
    mb_cmd_t    cmd    [N_DOM];
    mb_status_t status [N_DOM];

    always_comb begin
      for (int d = 0; d < int'(N_DOM); d++) begin
        req[d] = mb_req[d][m];
        cmd[d] = mb_cmd[d][m];
        mb_rsp[d][m]    = rsp[d];
        mb_status[d][m] = status[d];
      end
    end

    mailbox #(
      .FIXED_DOM   (MB_FIXED_DOM[m]),
      .FIXED_READER(MB_FIXED_READER[m]),
      .MSG_WORDS   (MB_DATA_PLANE[m] ? DATA_MSG_WORDS : CTRL_MSG_WORDS),
      .MSG_SLOTS   (MB_MSG_SLOTS),
      .TICK_CYCLES (TICK_CYCLES)
    ) u_mailbox (
      .clk, .rst_n, .req, .rsp, .cmd, .status,
      .owner  (mb_owner[m]),
      .session(mb_session[m])
    );
  end

  // ------------------------------------------------------ permanent queues
  for (genvar q = 0; q < int'(N_PQ); q++) begin : g_pq
    logic [$clog2(PQ_DEPTH+1)-1:0] count;
    msg_queue #(.WIDTH(WORD_W), .DEPTH(PQ_DEPTH)) u_queue (
      .clk, .rst_n, .clr(1'b0),
      .wr_valid(pq_wr_valid[q]), .wr_ready(pq_wr_ready[q]), .wr_data(pq_wr_data[q]),
      .rd_valid(pq_rd_valid[q]), .rd_ready(pq_rd_ready[q]), .rd_data(pq_rd_data[q]),
      .count
    );
  end

  // ------------------------------------------------- PMU and reset guard
  logic [N_DOM-1:0] rst_req;

  pmu_reset #(.RESET_CYCLES(RESET_CYCLES)) u_pmu (
    .clk, .rst_n,
    .cmd_valid(pmu_cmd_valid), .cmd_dom(pmu_cmd_dom),
    .locked(dom_locked),
    .resp_valid(pmu_resp_valid), .resp_ok(pmu_resp_ok),
    .rst_req
  );

  reset_guard #(.N_MBOX(N_MB), .FIXED_DOM(MB_FIXED_DOM)) u_guard (
    .rst_req, .mb_session, .mb_owner,
    .locked(dom_locked), .dom_rst
  );

  // ------------------------------------- domain-bound DMA for the network
  logic  fifo_rx_valid, fifo_rx_ready, fifo_tx_valid, fifo_tx_ready;
  beat_t fifo_rx_beat, fifo_tx_beat;

  dma_arbiter u_arbiter (
    .clk, .rst_n,
    .use_dma(mb_owner[MB_NETWORK_CMD_IN] == DOM_UNTRUSTED),
    .dev_rx_valid(net_rx_valid), .dev_rx_ready(net_rx_ready), .dev_rx_beat(net_rx_beat),
    .dev_tx_valid(net_tx_valid), .dev_tx_ready(net_tx_ready), .dev_tx_beat(net_tx_beat),
    .dma_s2mm_valid, .dma_s2mm_ready, .dma_s2mm_beat,
    .dma_mm2s_valid, .dma_mm2s_ready, .dma_mm2s_beat,
    .fifo_rx_valid, .fifo_rx_ready, .fifo_rx_beat,
    .fifo_tx_valid, .fifo_tx_ready, .fifo_tx_beat,
    .sel_dma(net_sel_dma)
  );

  net_packet_fifo #(.DEPTH(NET_FIFO_DEPTH)) u_net_fifo (
    .clk, .rst_n, .clr(dom_rst[DOM_NETWORK]),
    .in_valid(fifo_rx_valid), .in_ready(fifo_rx_ready), .in_beat(fifo_rx_beat),
    .mcu_rx_valid(nmcu_rx_valid), .mcu_rx_ready(nmcu_rx_ready), .mcu_rx_beat(nmcu_rx_beat),
    .mcu_tx_valid(nmcu_tx_valid), .mcu_tx_ready(nmcu_tx_ready), .mcu_tx_beat(nmcu_tx_beat),
    .out_valid(fifo_tx_valid), .out_ready(fifo_tx_ready), .out_beat(fifo_tx_beat),
    .irq(nmcu_irq)
  );

  // ------------------------------------------ microcontroller memories
  for (genvar i = 0; i < int'(N_MCU); i++) begin : g_mcu
    boot_rom #(.WORDS(ROM_WORDS), .INIT_FILE(ROM_INIT_FILE)) u_rom (
      .clk, .en(rom_en[i]), .addr(rom_addr[i]), .rdata(rom_rdata[i])
    );
    domain_ram #(.WORDS(RAM_WORDS)) u_ram (
      .clk, .req(ram_req[i]), .rdata(ram_rdata[i])
    );
  end

endmodule
