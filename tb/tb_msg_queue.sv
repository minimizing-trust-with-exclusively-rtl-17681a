// tb_msg_queue: self-checking test of msg_queue.
//
// Drives random writes and reads against a SystemVerilog queue as reference
// model, checking every word read, the count, full/empty flags, and that a
// wipe ('clr') empties the queue and hides the old words (rd_data reads zero).
module tb_msg_queue;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [31:0] model [$];

  msg_queue #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!rd_valid && wr_ready && count == 0 && rd_data == 0, "empty after reset");
    // Fill to full, then check that a further write waits.
    for (int i = 0; i < DEPTH; i++) begin
      wr_valid = 1; wr_data = 32'hA000 + i;
      @(negedge clk);
    end
    wr_valid = 0;
    check(!wr_ready && count == DEPTH, "full after DEPTH writes");
    // Random traffic.
    for (int n = 0; n < 3000; n++) begin
      wr_valid = $urandom_range(0, 1);
      wr_data  = $urandom;
      rd_ready = $urandom_range(0, 1);
      @(negedge clk);
      checks++;
      if (count != model.size()) begin failures++; $display("FAIL: count %0d model %0d", count, model.size()); end
    end
    wr_valid = 0; rd_ready = 0;
    // Drain and compare.
    while (model.size() > 0) begin
      check(rd_valid && rd_data == model[0], "drain order");
      rd_ready = 1; @(negedge clk); rd_ready = 0;
    end
    check(!rd_valid && count == 0 && rd_data == 0, "empty after drain");
    // Wipe: fill three words, clear, nothing left, old data unreadable.
    for (int i = 0; i < 3; i++) begin
      wr_valid = 1; wr_data = 32'hBEEF0000 + i; @(negedge clk);
    end
    wr_valid = 0;
    check(count == 3 && rd_data == 32'hBEEF0000, "three words before wipe");
    clr = 1; wr_valid = 1; wr_data = 32'h1234; @(negedge clk); clr = 0; wr_valid = 0;
    check(count == 0 && !rd_valid && rd_data == 0, "wipe empties, drops simultaneous write");
    wr_valid = 1; wr_data = 32'h55; @(negedge clk); wr_valid = 0;
    check(rd_valid && rd_data == 32'h55 && count == 1, "first word after wipe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model for the random phase: track handshakes at each edge.
  logic [31:0] exp_head;
  always @(posedge clk) if (rst_n && clr) model.delete();
  else if (rst_n) begin
    if (rd_valid && rd_ready) begin
      exp_head = model.pop_front();
      checks++;
      if (rd_data != exp_head) begin failures++; $display("FAIL: read %h exp %h", rd_data, exp_head); end
    end
    if (wr_valid && wr_ready) model.push_back(wr_data);
  end
endmodule
