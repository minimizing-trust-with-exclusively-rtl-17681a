// tb_pmu_reset: self-checking test of the PMU reset interface.
//
// Checks that an accepted command is answered one cycle later with resp_ok
// and produces a reset pulse of exactly RESET_CYCLES cycles on the named
// domain only, that a command for a locked domain is refused with no pulse,
// and that pulses of two domains can overlap.
module tb_pmu_reset;
  import st_pkg::*;
  localparam int RC = 5;
  logic clk = 0, rst_n = 0, cmd_valid = 0, resp_valid, resp_ok;
  dom_id_t cmd_dom = DOM_RM;
  logic [N_DOM-1:0] locked = '0, rst_req;
  int checks = 0, failures = 0;
  int width [N_DOM];

  pmu_reset #(.RESET_CYCLES(RC)) dut (.*);

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

  // Measure pulse widths.
  always @(posedge clk) for (int d = 0; d < N_DOM; d++) if (rst_req[d]) width[d]++;

  task automatic issue(input dom_id_t d);
    cmd_valid = 1; cmd_dom = d;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (width[d]) width[d] = 0;
    check(rst_req == '0 && !resp_valid, "idle after reset");
    issue(DOM_TEE1);
    check(resp_valid && resp_ok, "accepted command answered ok");
    check(rst_req == (8'(1) << DOM_TEE1), "pulse on TEE1 only");
    repeat (RC + 2) @(negedge clk);
    check(width[DOM_TEE1] == RC, $sformatf("pulse lasts %0d cycles (got %0d)", RC, width[DOM_TEE1]));
    // Locked domain: refused.
    locked[DOM_STORAGE] = 1;
    issue(DOM_STORAGE);
    check(resp_valid && !resp_ok, "locked domain refused");
    repeat (RC + 2) @(negedge clk);
    check(width[DOM_STORAGE] == 0, "no pulse for a locked domain");
    locked = '0;
    // Overlapping pulses.
    issue(DOM_NETWORK);
    @(negedge clk);
    issue(DOM_TEE2);
    check(rst_req[DOM_NETWORK] && rst_req[DOM_TEE2], "two pulses overlap");
    repeat (RC + 2) @(negedge clk);
    check(width[DOM_NETWORK] == RC && width[DOM_TEE2] == RC, "both pulses full length");
    check(rst_req == '0, "all pulses over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
