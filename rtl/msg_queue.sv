// msg_queue: synchronous first-in first-out queue with a wipe input.
//
// This is the "message queue" inside every mailbox, and on its own it is one
// of the permanent hardware queues that connect two fixed domains (for example
// a TEE and the resource manager). Storage is a DEPTH-entry array addressed by
// a write and a read pointer; a separate occupancy counter tells full from
// empty. 'clr' empties the queue in one cycle. The read port shows zero
// whenever the queue is empty, so words left in the array by a wiped session
// cannot be read back through any path.
//
// Interface: valid/ready on both sides. The head word is presented on
// 'rd_data' whenever 'rd_valid' is high (first-word fall-through); a word is
// taken when rd_valid && rd_ready at a rising clock edge, and stored when
// wr_valid && wr_ready. A write into a full queue waits. 'clr' has priority
// over a simultaneous read or write, which are then dropped.
//
// The paper names the queue and gives its size for mailboxes (4 messages);
// the handshake, the word width and the zeroed read port when empty are this design's.
module msg_queue #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign wr_ready = (count != CW'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = rd_valid ? mem[rptr] : '0;
  assign do_wr    = wr_valid && wr_ready && !clr;
  assign do_rd    = rd_valid && rd_ready && !clr;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (clr) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= nxt(wptr);
      if (do_rd) rptr <= nxt(rptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  // Data array, not reset: stale entries are unreachable once the pointers
  // and the count are cleared.
  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  // A word is never accepted into a full queue nor taken from an empty one.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
