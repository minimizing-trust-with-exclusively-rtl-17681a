// net_packet_fifo: packet FIFOs of the network domain.
//
// When the network domain serves a TEE (or any client other than the
// untrusted domain), the arbiter connects the network device to these two
// FIFOs, which only the network domain's microcontroller can reach. The
// receive FIFO raises an interrupt to that microcontroller while it holds at
// least one whole packet; the transmit FIFO is filled by the microcontroller
// and drained by the device through the arbiter.
//
// Each FIFO is a msg_queue of DEPTH beats (beat_t: 32-bit data plus 'last').
// 'clr' empties both, and is driven by the network domain's reset so that no
// packet survives from one client to the next.
//
// Interface: valid/ready streams on all four sides. Timing: a beat written at
// one edge can be read after it; irq rises the cycle after the last beat of a
// packet is stored and falls the cycle after the last beat of the only
// stored packet is read.
//
// From the paper: a FIFO holding the packets, accessible to the network
// domain, that interrupts its microcontroller. Depth, width and the interrupt
// condition are this design's choices.
module net_packet_fifo
  import st_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  // receive: arbiter -> microcontroller
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  output logic  mcu_rx_valid,
  input  logic  mcu_rx_ready,
  output beat_t mcu_rx_beat,
  // transmit: microcontroller -> arbiter
  input  logic  mcu_tx_valid,
  output logic  mcu_tx_ready,
  input  beat_t mcu_tx_beat,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_beat,
  output logic  irq
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0] rx_count, tx_count, pkts_q;
  logic          pkt_in, pkt_out;

  msg_queue #(.WIDTH($bits(beat_t)), .DEPTH(DEPTH)) u_rx (
    .clk, .rst_n, .clr,
    .wr_valid(in_valid), .wr_ready(in_ready), .wr_data(in_beat),
    .rd_valid(mcu_rx_valid), .rd_ready(mcu_rx_ready), .rd_data(mcu_rx_beat),
    .count(rx_count)
  );

  msg_queue #(.WIDTH($bits(beat_t)), .DEPTH(DEPTH)) u_tx (
    .clk, .rst_n, .clr,
    .wr_valid(mcu_tx_valid), .wr_ready(mcu_tx_ready), .wr_data(mcu_tx_beat),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(out_beat),
    .count(tx_count)
  );

  // Whole packets held in the receive FIFO.
  assign pkt_in  = in_valid && in_ready && in_beat.last && !clr;
  assign pkt_out = mcu_rx_valid && mcu_rx_ready && mcu_rx_beat.last && !clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   pkts_q <= '0;
    else if (clr) pkts_q <= '0;
    else          pkts_q <= pkts_q + CW'(pkt_in) - CW'(pkt_out);
  end

  assign irq = (pkts_q != '0);

  a_tx_bounded : assert property (@(posedge clk) disable iff (!rst_n) tx_count <= CW'(DEPTH));
  a_pkts_bounded : assert property (@(posedge clk) disable iff (!rst_n) pkts_q <= rx_count);

endmodule
