// dma_arbiter: switch behind domain-bound DMA for the network device.
//
// The network device's receive and transmit streams may reach the untrusted
// domain's memory through a DMA engine only while the untrusted domain is the
// network domain's client. At all other times they go to a packet FIFO that
// only the network domain's microcontroller can read and write. This module is
// that switch. Its select, use_dma, is derived in hardware from mailbox
// ownership, so no software can steer device data to the DMA engine.
//
// Operation: use_dma is registered (sel_q). With sel_q = 1 the device receive
// stream feeds dma_s2mm and dma_mm2s feeds the device transmit stream; with
// sel_q = 0 the same streams connect to fifo_rx and fifo_tx. The side not
// selected sees valid and ready low, so it can neither send nor receive.
// A receive packet that is in flight when the select changes is not split
// between the two parties: its remaining beats are accepted and dropped up to
// and including its last beat, and the new party starts at a packet boundary.
//
// Streams: valid/ready handshake, beat_t payload (32-bit data and 'last').
// Latency: zero cycles through the switch; one cycle from use_dma to sel_q.
//
// From the paper: the switch between the DMA engine and a FIFO, used only when
// the untrusted domain is the client. This design's choices: the stream
// format, deriving the select from mailbox ownership, and the drop rule for a
// packet cut by a switch. Transmit packets cut by a switch are not repaired.
module dma_arbiter
  import st_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  use_dma,
  // network device
  input  logic  dev_rx_valid,
  output logic  dev_rx_ready,
  input  beat_t dev_rx_beat,
  output logic  dev_tx_valid,
  input  logic  dev_tx_ready,
  output beat_t dev_tx_beat,
  // domain-bound DMA engine (untrusted domain's memory)
  output logic  dma_s2mm_valid,
  input  logic  dma_s2mm_ready,
  output beat_t dma_s2mm_beat,
  input  logic  dma_mm2s_valid,
  output logic  dma_mm2s_ready,
  input  beat_t dma_mm2s_beat,
  // packet FIFO of the network domain
  output logic  fifo_rx_valid,
  input  logic  fifo_rx_ready,
  output beat_t fifo_rx_beat,
  input  logic  fifo_tx_valid,
  output logic  fifo_tx_ready,
  input  beat_t fifo_tx_beat,
  output logic  sel_dma           // current select, for observation
);

  logic sel_q, rx_inpkt_q, rx_drop_q;
  logic rx_hs, rx_inpkt_d;

  assign sel_dma = sel_q;

  always_comb begin
    dma_s2mm_valid = 1'b0;
    fifo_rx_valid  = 1'b0;
    dma_s2mm_beat  = '0;
    fifo_rx_beat   = '0;
    dev_rx_ready   = 1'b0;
    if (rx_drop_q) begin
      dev_rx_ready = 1'b1;
    end else if (sel_q) begin
      dma_s2mm_valid = dev_rx_valid;
      dma_s2mm_beat  = dev_rx_beat;
      dev_rx_ready   = dma_s2mm_ready;
    end else begin
      fifo_rx_valid = dev_rx_valid;
      fifo_rx_beat  = dev_rx_beat;
      dev_rx_ready  = fifo_rx_ready;
    end

    dev_tx_valid   = sel_q ? dma_mm2s_valid : fifo_tx_valid;
    dev_tx_beat    = sel_q ? dma_mm2s_beat  : fifo_tx_beat;
    dma_mm2s_ready = sel_q  && dev_tx_ready;
    fifo_tx_ready  = !sel_q && dev_tx_ready;
  end

  assign rx_hs      = dev_rx_valid && dev_rx_ready;
  assign rx_inpkt_d = rx_hs ? !dev_rx_beat.last : rx_inpkt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q      <= 1'b0;
      rx_inpkt_q <= 1'b0;
      rx_drop_q  <= 1'b0;
    end else begin
      sel_q      <= use_dma;
      rx_inpkt_q <= rx_inpkt_d;
      if (use_dma != sel_q) rx_drop_q <= rx_inpkt_d;
      else if (rx_hs && dev_rx_beat.last) rx_drop_q <= 1'b0;
    end
  end

  // The side that is not selected never sees a handshake.
  a_no_fifo_when_dma : assert property (@(posedge clk) disable iff (!rst_n)
    sel_q |-> !(fifo_rx_valid || fifo_tx_ready));
  a_no_dma_when_fifo : assert property (@(posedge clk) disable iff (!rst_n)
    !sel_q |-> !(dma_s2mm_valid || dma_mm2s_ready));

endmodule
