// mailbox: verifiably delegatable hardware mailbox.
//
// A mailbox is a message queue between two domains. One end is hard-wired to
// FIXED_DOM. The other, delegatable end is wired to every domain, but a
// multiplexer lets only the current owner through. After reset the owner is
// the resource manager. The resource manager can delegate the end to one other
// domain with a message quota and a time quota; that starts a session. During
// the session only the owner can move data through the delegatable end, and
// nothing the resource manager does can take it back. The session ends when the
// owner yields, when the time quota runs out, or when the message quota is used
// up; the owner then reverts to the resource manager. The queue is wiped on
// every delegation and at the end of every session.
//
// Ports are per domain, indexed by dom_id_t. Entry FIXED_DOM of req/rsp is the
// fixed end; every other entry is that domain's leg of the delegatable end.
// With FIXED_READER = 1 the fixed end reads and the delegatable end writes;
// with FIXED_READER = 0 the directions are swapped. Legs that are not
// connected (a non-owner, or the unused direction) see all-zero responses.
//
// Commands (cmd[d], sampled every cycle):
//   MB_DELEGATE, from the resource manager only, while it owns the mailbox:
//     target must not be the resource manager or FIXED_DOM, and both quotas
//     must be non-zero; otherwise the command is ignored.
//   MB_YIELD, from the current owner during a session.
// Quotas: msg_quota counts whole messages of MSG_WORDS words moved by the
// owner; all ones means no message limit. time_quota counts ticks of
// TICK_CYCLES clock cycles and cannot be unlimited.
//
// Status: status[d] is the status register as domain d reads it. The owner and
// the fixed end read {valid=1, owner, messages left, ticks left}; every other
// domain, including the resource manager while the mailbox is delegated, reads
// the dummy value zero.
//
// Timing: a command takes effect at the next clock edge; the queue is empty
// from that edge on. When a delegated writer has used its message quota it can
// write no more, and the session ends at the edge after the fixed reader has
// drained the queue, so the last message is delivered before the wipe. A
// delegated reader's session ends at the edge after its last quota message was
// read. A time-out ends the session at the edge where the last tick elapses.
//
// From the paper: the fixed and delegatable ends, the multiplexer, the default
// owner, delegation with message and time quotas, irrevocable sessions, yield,
// expiry, the status register with a dummy value for others, and wiping on
// delegation, yield and expiry. This design's own choices: word-wide ports,
// the command and status formats, the checks on a delegate command, and the
// drain rule for a delegated writer whose message quota is used up.
//
// The assertions at the end restate the mailbox's security rules as
// properties: only a delegation, a yield or an expiry moves the owner or the
// quota; a session never outlives its time quota; no quota is exceeded;
// domains without access see no ready, no data and a dummy status; the queue
// is empty after every wipe; ownership only moves to or from the resource
// manager.
module mailbox
  import st_pkg::*;
#(
  parameter dom_id_t     FIXED_DOM    = DOM_SERIAL_OUT,
  parameter bit          FIXED_READER = 1'b1,
  parameter int unsigned MSG_WORDS    = CTRL_MSG_WORDS,
  parameter int unsigned MSG_SLOTS    = MB_MSG_SLOTS,
  parameter int unsigned TICK_CYCLES  = 100000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  mb_req_t    req    [N_DOM],
  output mb_rsp_t    rsp    [N_DOM],
  input  mb_cmd_t    cmd    [N_DOM],
  output mb_status_t status [N_DOM],
  output dom_id_t    owner,
  output logic       session
);

  localparam int unsigned DEPTH = MSG_SLOTS * MSG_WORDS;
  localparam int unsigned CW    = $clog2(DEPTH + 1);
  localparam int unsigned WCW   = (MSG_WORDS > 1) ? $clog2(MSG_WORDS) : 1;
  localparam int unsigned TW    = (TICK_CYCLES > 1) ? $clog2(TICK_CYCLES) : 1;

  // ---------------------------------------------------------------- state
  dom_id_t            owner_q;
  logic [QUOTA_W-1:0] msg_left_q, time_left_q;
  logic [TW-1:0]      tick_cnt_q;
  logic [WCW-1:0]     word_cnt_q;

  assign owner   = owner_q;
  assign session = (owner_q != DOM_RM);

  // ---------------------------------------------------------------- queue
  logic              q_clr, q_wr_valid, q_wr_ready, q_rd_valid, q_rd_ready;
  logic [WORD_W-1:0] q_wr_data, q_rd_data;
  logic [CW-1:0]     q_count;

  msg_queue #(.WIDTH(WORD_W), .DEPTH(DEPTH)) u_queue (
    .clk, .rst_n, .clr(q_clr),
    .wr_valid(q_wr_valid), .wr_ready(q_wr_ready), .wr_data(q_wr_data),
    .rd_valid(q_rd_valid), .rd_ready(q_rd_ready), .rd_data(q_rd_data),
    .count(q_count)
  );

  // ---------------------------------------------------- multiplexing logic
  logic quota_ok;      // the owner may still move words
  logic deleg_xfer;    // a word moved through the delegatable end
  logic msg_done;      // ... and it completed a message
  logic tick;
  logic do_delegate, do_yield, time_out, msg_out, end_session;

  assign quota_ok = !session || (msg_left_q != '0);
  assign tick     = session && (tick_cnt_q == TW'(TICK_CYCLES - 1));

  assign do_delegate = !session
                    && cmd[DOM_RM].op == MB_DELEGATE
                    && cmd[DOM_RM].target != DOM_RM
                    && cmd[DOM_RM].target != FIXED_DOM
                    && cmd[DOM_RM].msg_quota != '0
                    && cmd[DOM_RM].time_quota != '0;
  assign do_yield    = session && cmd[owner_q].op == MB_YIELD;
  assign time_out    = tick && (time_left_q == QUOTA_W'(1));
  assign msg_out     = session && (msg_left_q == '0) && (FIXED_READER ? (q_count == '0) : 1'b1);
  assign end_session = do_yield || time_out || msg_out;
  assign q_clr       = do_delegate || end_session;

  // The multiplexer: connect the owner's leg and the fixed end to the queue.
  always_comb begin
    for (int d = 0; d < int'(N_DOM); d++) rsp[d] = '0;
    q_wr_valid = 1'b0;
    q_wr_data  = '0;
    q_rd_ready = 1'b0;
    deleg_xfer = 1'b0;
    if (FIXED_READER) begin
      // Delegatable writer -> queue -> fixed reader.
      q_wr_valid             = req[owner_q].wr_valid && quota_ok && !q_clr;
      q_wr_data              = req[owner_q].wr_data;
      rsp[owner_q].wr_ready  = q_wr_ready && quota_ok && !q_clr;
      deleg_xfer             = q_wr_valid && q_wr_ready;
      q_rd_ready             = req[FIXED_DOM].rd_ready;
      rsp[FIXED_DOM].rd_valid = q_rd_valid;
      rsp[FIXED_DOM].rd_data  = q_rd_data;
    end else begin
      // Fixed writer -> queue -> delegatable reader.
      q_wr_valid              = req[FIXED_DOM].wr_valid;
      q_wr_data               = req[FIXED_DOM].wr_data;
      rsp[FIXED_DOM].wr_ready = q_wr_ready && !q_clr;
      q_rd_ready              = req[owner_q].rd_ready && quota_ok && !q_clr;
      rsp[owner_q].rd_valid   = q_rd_valid && quota_ok && !q_clr;
      rsp[owner_q].rd_data    = (quota_ok && !q_clr) ? q_rd_data : '0;
      deleg_xfer              = q_rd_valid && q_rd_ready;
    end
  end

  assign msg_done = session && deleg_xfer && (word_cnt_q == WCW'(MSG_WORDS - 1));

  // ------------------------------------------------------ status register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_q     <= DOM_RM;
      msg_left_q  <= '0;
      time_left_q <= '0;
      tick_cnt_q  <= '0;
      word_cnt_q  <= '0;
    end else if (do_delegate) begin
      owner_q     <= cmd[DOM_RM].target;
      msg_left_q  <= cmd[DOM_RM].msg_quota;
      time_left_q <= cmd[DOM_RM].time_quota;
      tick_cnt_q  <= '0;
      word_cnt_q  <= '0;
    end else if (end_session) begin
      owner_q     <= DOM_RM;
      msg_left_q  <= '0;
      time_left_q <= '0;
      tick_cnt_q  <= '0;
      word_cnt_q  <= '0;
    end else if (session) begin
      tick_cnt_q <= tick ? '0 : tick_cnt_q + 1'b1;
      if (tick) time_left_q <= time_left_q - 1'b1;
      if (deleg_xfer) word_cnt_q <= msg_done ? '0 : word_cnt_q + 1'b1;
      if (msg_done && msg_left_q != MSG_QUOTA_INF) msg_left_q <= msg_left_q - 1'b1;
    end
  end

  mb_status_t real_status;
  assign real_status = '{valid: 1'b1, owner: owner_q, msg_left: msg_left_q,
                         time_left: time_left_q, rsvd: '0};

  always_comb begin
    for (int d = 0; d < int'(N_DOM); d++)
      status[d] = (dom_id_t'(d) == owner_q || dom_id_t'(d) == FIXED_DOM) ? real_status : '0;
  end

  // ------------------------------------------------------------ assertions
  // One property for each of the mailbox's security rules.
  //
  // Nothing but a delegation, a yield or an expiry changes the owner, and
  // nothing but those and the owner's own messages changes the quota.
  a_owner_only_by_rule : assert property (@(posedge clk) disable iff (!rst_n)
    (owner_q != $past(owner_q)) |-> $past(do_delegate || end_session));
  a_quota_only_by_rule : assert property (@(posedge clk) disable iff (!rst_n)
    (msg_left_q != $past(msg_left_q)) |-> $past(do_delegate || end_session || msg_done));
  // A session never outlives its time quota.
  a_time_bounded : assert property (@(posedge clk) disable iff (!rst_n)
    session |-> (time_left_q != '0));
  // Domains that are neither owner nor fixed end see nothing: no ready, no
  // data, dummy status.
  logic others_quiet;
  always_comb begin
    others_quiet = 1'b1;
    for (int d = 0; d < int'(N_DOM); d++)
      if (dom_id_t'(d) != owner_q && dom_id_t'(d) != FIXED_DOM)
        if (rsp[d] != '0 || status[d] != '0) others_quiet = 1'b0;
  end
  a_others_quiet : assert property (@(posedge clk) disable iff (!rst_n) others_quiet);
  // The queue is empty after every delegation, yield and expiry.
  a_wiped : assert property (@(posedge clk) disable iff (!rst_n)
    $past(q_clr) |-> (q_count == '0));
  // Ownership moves only from the resource manager to a domain or back.
  a_owner_moves : assert property (@(posedge clk) disable iff (!rst_n)
    (owner_q != $past(owner_q)) |-> (owner_q == DOM_RM || $past(owner_q) == DOM_RM));
  // The fixed end is never the owner of the delegatable end.
  a_fixed_not_owner : assert property (@(posedge clk) disable iff (!rst_n) owner_q != FIXED_DOM);
  // No word moves through the delegatable end once the message quota is spent.
  a_quota : assert property (@(posedge clk) disable iff (!rst_n)
    (session && msg_left_q == '0) |-> !deleg_xfer);

endmodule
