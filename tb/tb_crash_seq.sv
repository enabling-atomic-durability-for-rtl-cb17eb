// Self-checking test of crash_seq: after power_fail the memory controller
// is started first, the cache levels are flushed from the lowest to the
// highest with every lower level forwarding, and done follows the
// controller's final answer.  Models for the controller and caches reply
// after random delays and record the order of events.
module tb_crash_seq;
  localparam int NLVL = 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic power_fail, busy, done, mc_start, mc_ready, mc_end, mc_done;
  logic [NLVL-1:0] flush_start, flush_done, fwd;
  crash_seq #(.NLVL(NLVL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  string log_q[$];
  logic mc_saved = 0;
  always @(posedge clk) if (rst_n) begin
    if (mc_start) begin
      log_q.push_back("mc");
      fork begin repeat (3 + $urandom % 5) @(posedge clk); mc_saved <= 1; end join_none
    end
    for (int k = 0; k < NLVL; k++) if (flush_start[k]) begin
      log_q.push_back($sformatf("L%0d", k + 1));
      chk(mc_saved, "caches flushed after the controller saved its state");
      for (int j = 0; j < NLVL; j++)
        chk(fwd[j] == (j > k), $sformatf("fwd[%0d] while flushing L%0d", j, k + 1));
      fork
        automatic int kk = k;
        begin
          repeat (2 + $urandom % 20) @(posedge clk);
          flush_done[kk] <= 1; @(posedge clk); flush_done[kk] <= 0;
        end
      join_none
    end
  end
  assign mc_ready = mc_saved;
  int end_seen = 0;
  always @(posedge clk) if (rst_n && mc_end && end_seen == 0) begin
    end_seen = 1;
    log_q.push_back("end");
    fork begin repeat (4) @(posedge clk); mc_done <= 1; @(posedge clk); mc_done <= 0; end join_none
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    power_fail = 0; flush_done = 0; mc_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    chk(!busy, "idle before power fail");
    power_fail = 1; @(negedge clk); power_fail = 0;
    while (!done) @(negedge clk);
    chk(log_q.size() == 5, "five steps");
    if (log_q.size() == 5)
      chk(log_q[0] == "mc" && log_q[1] == "L3" && log_q[2] == "L2" && log_q[3] == "L1" &&
          log_q[4] == "end", "order mc, L3, L2, L1, end");
    @(negedge clk);
    chk(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
