// tb_reset_guard: self-checking test of the reset guard.
//
// Three mailboxes with fixed ends SERIAL_OUT, STORAGE and TEE1. Random session
// and owner patterns and random reset requests are applied; the expected lock
// set (owner and fixed end of every mailbox in a session) is computed here and
// compared with 'locked' and 'dom_rst'. A few directed cases come first.
module tb_reset_guard;
  import st_pkg::*;
  localparam int NM = 3;
  localparam dom_id_t FD [NM] = '{DOM_SERIAL_OUT, DOM_STORAGE, DOM_TEE1};

  logic [N_DOM-1:0] rst_req, locked, dom_rst;
  logic [NM-1:0]    mb_session;
  dom_id_t          mb_owner [NM];
  int checks = 0, failures = 0;

  reset_guard #(.N_MBOX(NM), .FIXED_DOM(FD)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N_DOM-1:0] exp_lock;
  initial begin
    // No session: every request passes.
    mb_session = '0; foreach (mb_owner[m]) mb_owner[m] = DOM_RM; rst_req = '1;
    #1 check(locked == '0 && dom_rst == '1, "no session: all resets pass");
    // TEE2 holds the storage mailbox: TEE2 and STORAGE locked.
    mb_session = 3'b010; mb_owner[1] = DOM_TEE2;
    #1 check(locked == (8'(1) << DOM_TEE2 | 8'(1) << DOM_STORAGE), "TEE2/storage session locks both ends");
    check(dom_rst[DOM_TEE2] == 0 && dom_rst[DOM_STORAGE] == 0 && dom_rst[DOM_TEE1] == 1, "locked resets blocked, others pass");
    // Random patterns against an independent model.
    for (int n = 0; n < 2000; n++) begin
      rst_req = 8'($urandom);
      mb_session = 3'($urandom);
      foreach (mb_owner[m]) mb_owner[m] = dom_id_t'($urandom_range(0, N_DOM - 1));
      exp_lock = '0;
      for (int m = 0; m < NM; m++)
        if (mb_session[m]) begin exp_lock[mb_owner[m]] = 1; exp_lock[FD[m]] = 1; end
      #1;
      check(locked == exp_lock, "random lock set");
      check(dom_rst == (rst_req & ~exp_lock), "random gated reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
