// tb_mailbox: self-checking test of the delegatable mailbox.
//
// Two mailboxes with small sizes (4-word messages, 4 slots, 4-cycle ticks):
// A has a fixed reader (serial output domain) and a delegatable writer, B a
// fixed writer (serial input domain) and a delegatable reader. The test walks
// through the default owner, delegation, the exclusivity of the owner's leg,
// refusal of revocation and of malformed commands, message-quota expiry
// (after the drain for a writer, at once for a reader), time-quota expiry
// with its exact cycle count, yield, the wipe of the queue on every change of
// owner, and the dummy status seen by domains without access.
module tb_mailbox;
  import st_pkg::*;
  localparam int MW = 4, SLOTS = 4, TICK = 4;

  logic clk = 0, rst_n = 0;
  mb_req_t    req_a [N_DOM], req_b [N_DOM];
  mb_rsp_t    rsp_a [N_DOM], rsp_b [N_DOM];
  mb_cmd_t    cmd_a [N_DOM], cmd_b [N_DOM];
  mb_status_t st_a  [N_DOM], st_b  [N_DOM];
  dom_id_t    own_a, own_b;
  logic       ses_a, ses_b;
  int checks = 0, failures = 0;

  mailbox #(.FIXED_DOM(DOM_SERIAL_OUT), .FIXED_READER(1'b1), .MSG_WORDS(MW),
            .MSG_SLOTS(SLOTS), .TICK_CYCLES(TICK)) dut_a (
    .clk, .rst_n, .req(req_a), .rsp(rsp_a), .cmd(cmd_a), .status(st_a), .owner(own_a), .session(ses_a));
  mailbox #(.FIXED_DOM(DOM_SERIAL_IN), .FIXED_READER(1'b0), .MSG_WORDS(MW),
            .MSG_SLOTS(SLOTS), .TICK_CYCLES(TICK)) dut_b (
    .clk, .rst_n, .req(req_b), .rsp(rsp_b), .cmd(cmd_b), .status(st_b), .owner(own_b), .session(ses_b));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    for (int d = 0; d < N_DOM; d++) begin
      req_a[d] = '0; req_b[d] = '0; cmd_a[d] = '0; cmd_b[d] = '0;
    end
  endtask

  // Issue one command for one cycle on mailbox A (sel=0) or B (sel=1).
  task automatic command(input bit sel, input dom_id_t from, input mb_op_e op,
                         input dom_id_t target, input int mq, input int tq);
    mb_cmd_t c;
    c = '{op: op, target: target, msg_quota: QUOTA_W'(mq), time_quota: QUOTA_W'(tq)};
    if (sel) cmd_b[from] = c; else cmd_a[from] = c;
    @(negedge clk);
    cmd_a[from] = '0; cmd_b[from] = '0;
  endtask

  // Domain 'd' tries to write one word into A; returns whether it was taken.
  task automatic write_a(input dom_id_t d, input logic [31:0] w, output bit taken);
    req_a[d].wr_valid = 1; req_a[d].wr_data = w;
    #1 taken = rsp_a[d].wr_ready;
    @(negedge clk);
    req_a[d].wr_valid = 0;
  endtask

  // Fixed reader of A reads one word (must be there).
  task automatic read_a(input logic [31:0] exp, input string what);
    check(rsp_a[DOM_SERIAL_OUT].rd_valid && rsp_a[DOM_SERIAL_OUT].rd_data == exp, what);
    req_a[DOM_SERIAL_OUT].rd_ready = 1;
    @(negedge clk);
    req_a[DOM_SERIAL_OUT].rd_ready = 0;
  endtask

  bit taken;
  int cyc;

  initial begin
    idle();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // --- default owner and status
    check(own_a == DOM_RM && !ses_a, "A: resource manager owns after reset");
    check(st_a[DOM_RM].valid && st_a[DOM_RM].owner == DOM_RM, "A: RM reads real status");
    check(st_a[DOM_SERIAL_OUT].valid, "A: fixed end reads real status");
    check(st_a[DOM_TEE1] == '0, "A: TEE1 reads dummy status");

    // --- RM (default writer) sends a message, a non-owner cannot
    write_a(DOM_TEE1, 32'hBAD0, taken);
    check(!taken, "A: non-owner TEE1 cannot write");
    for (int i = 0; i < MW; i++) begin
      write_a(DOM_RM, 32'h100 + i, taken);
      check(taken, "A: RM writes while default owner");
    end
    read_a(32'h100, "A: fixed reader gets RM word 0");
    // two more words stay in the queue

    // --- delegation to TEE1: 2 messages, 100 ticks; queue wiped
    command(0, DOM_RM, MB_DELEGATE, DOM_TEE1, 2, 100);
    check(own_a == DOM_TEE1 && ses_a, "A: delegated to TEE1");
    check(!rsp_a[DOM_SERIAL_OUT].rd_valid && rsp_a[DOM_SERIAL_OUT].rd_data == 0,
          "A: queue wiped on delegation");
    check(st_a[DOM_TEE1].valid && st_a[DOM_TEE1].owner == DOM_TEE1 &&
          st_a[DOM_TEE1].msg_left == 2 && st_a[DOM_TEE1].time_left == 100, "A: owner reads its quota");
    check(st_a[DOM_SERIAL_OUT] == st_a[DOM_TEE1], "A: fixed end reads the same status");
    check(st_a[DOM_RM] == '0 && st_a[DOM_TEE2] == '0, "A: RM and TEE2 read dummy status");

    // --- no revocation, no writes by others
    command(0, DOM_RM, MB_DELEGATE, DOM_TEE2, 5, 5);
    check(own_a == DOM_TEE1, "A: RM cannot re-delegate during a session");
    command(0, DOM_RM, MB_YIELD, DOM_RM, 0, 0);
    check(own_a == DOM_TEE1, "A: RM cannot yield for the owner");
    command(0, DOM_TEE2, MB_YIELD, DOM_RM, 0, 0);
    check(own_a == DOM_TEE1, "A: non-owner cannot yield");
    write_a(DOM_RM, 32'hBAD1, taken);
    check(!taken, "A: RM cannot write during a session");

    // --- message quota: 2 messages, then blocked, session ends after drain
    for (int i = 0; i < 2 * MW; i++) begin
      write_a(DOM_TEE1, 32'h200 + i, taken);
      check(taken, "A: owner writes within quota");
    end
    check(st_a[DOM_TEE1].msg_left == 0, "A: message quota used up");
    write_a(DOM_TEE1, 32'hBAD2, taken);
    check(!taken, "A: owner blocked once quota is used");
    check(own_a == DOM_TEE1, "A: session lasts until the reader drains");
    for (int i = 0; i < 2 * MW; i++) read_a(32'h200 + i, "A: reader gets the owner's words in order");
    @(negedge clk);
    check(own_a == DOM_RM && !ses_a, "A: message-quota expiry returns the mailbox to RM");

    // --- malformed delegations are ignored
    command(0, DOM_RM, MB_DELEGATE, DOM_SERIAL_OUT, 1, 1);
    check(own_a == DOM_RM, "A: cannot delegate to the fixed end");
    command(0, DOM_RM, MB_DELEGATE, DOM_TEE2, 0, 5);
    check(own_a == DOM_RM, "A: zero message quota refused");
    command(0, DOM_RM, MB_DELEGATE, DOM_TEE2, 5, 0);
    check(own_a == DOM_RM, "A: zero time quota refused");
    command(0, DOM_TEE1, MB_DELEGATE, DOM_TEE1, 5, 5);
    check(own_a == DOM_RM, "A: only RM can delegate");

    // --- time quota: 3 ticks of TICK cycles
    cmd_a[DOM_RM] = '{op: MB_DELEGATE, target: DOM_TEE2, msg_quota: 5, time_quota: 3};
    @(posedge clk);
    cyc = 0;
    #1 cmd_a[DOM_RM] = '0;
    while (own_a == DOM_TEE2 && cyc < 100) begin @(posedge clk); cyc++; #1; end
    check(cyc == 3 * TICK, $sformatf("A: time quota of 3 ticks lasts %0d cycles (got %0d)", 3 * TICK, cyc));
    @(negedge clk);

    // --- unlimited message quota and yield; queue wiped
    command(0, DOM_RM, MB_DELEGATE, DOM_UNTRUSTED, int'(MSG_QUOTA_INF), 50);
    for (int i = 0; i < 3 * MW; i++) begin
      write_a(DOM_UNTRUSTED, 32'h300 + i, taken);
      check(taken, "A: unlimited quota keeps accepting");
    end
    check(st_a[DOM_UNTRUSTED].msg_left == MSG_QUOTA_INF, "A: unlimited quota is not counted down");
    command(0, DOM_UNTRUSTED, MB_YIELD, DOM_RM, 0, 0);
    check(own_a == DOM_RM, "A: yield returns the mailbox to RM");
    check(!rsp_a[DOM_SERIAL_OUT].rd_valid, "A: queue wiped on yield");

    // --- mailbox B: fixed writer, delegatable reader with quota 1
    // a word written before delegation must be wiped
    req_b[DOM_SERIAL_IN].wr_valid = 1; req_b[DOM_SERIAL_IN].wr_data = 32'h400;
    @(negedge clk);
    req_b[DOM_SERIAL_IN].wr_valid = 0;
    command(1, DOM_RM, MB_DELEGATE, DOM_TEE2, 1, 100);
    check(own_b == DOM_TEE2 && !rsp_b[DOM_TEE2].rd_valid, "B: delegated, earlier word wiped");
    for (int i = 1; i < 2 * MW; i++) begin
      req_b[DOM_SERIAL_IN].wr_valid = 1; req_b[DOM_SERIAL_IN].wr_data = 32'h400 + i;
      @(negedge clk);
    end
    req_b[DOM_SERIAL_IN].wr_valid = 0;
    check(!rsp_b[DOM_TEE1].rd_valid && !rsp_b[DOM_RM].rd_valid, "B: non-owners cannot read");
    for (int i = 1; i < 1 + MW; i++) begin
      check(rsp_b[DOM_TEE2].rd_valid && rsp_b[DOM_TEE2].rd_data == 32'h400 + i, "B: owner reads in order");
      req_b[DOM_TEE2].rd_ready = 1; @(negedge clk); req_b[DOM_TEE2].rd_ready = 0;
    end
    check(own_b == DOM_TEE2 && st_b[DOM_TEE2].msg_left == 0, "B: quota used up at the last read");
    @(negedge clk);
    check(own_b == DOM_RM && !ses_b, "B: reader session ends the edge after its last message");
    check(!rsp_b[DOM_RM].rd_valid, "B: the rest of the queue is wiped");
    check(st_b[DOM_SERIAL_IN].owner == DOM_RM && st_b[DOM_TEE2] == '0, "B: status after expiry");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
