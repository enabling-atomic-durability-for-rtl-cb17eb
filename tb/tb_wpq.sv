// Self-checking test of wpq: random pushes and pops with back-pressure on
// both sides; every write must leave in order and unchanged, the queue must
// refuse pushes at DEPTH entries and report empty correctly.
module tb_wpq;
  import hercules_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic push_valid, push_ready, pop_valid, pop_ready, empty;
  preq_t push_data, pop_data;
  logic [3:0] level;
  wpq #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  preq_t q[$];
  int sent = 0, got = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (push_ready != (int'(level) < DEPTH) || empty != (level == 0) || int'(level) != q.size()) begin
      failures++; $display("FAIL: level %0d model %0d", level, q.size());
    end
    if (pop_valid && pop_ready) begin
      preq_t e;
      e = q.pop_front();
      checks++;
      if (pop_data != e) begin failures++; $display("FAIL: order/data at %0d", got); end
      got++;
    end
    if (push_valid && push_ready) begin q.push_back(push_data); sent++; end
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill to full without popping
    for (int i = 0; i < DEPTH + 3; i++) begin
      @(negedge clk);
      push_valid = 1; push_data = '{we: 1'b1, addr: laddr_t'(i), data: line_t'(i * 77), be: '1};
    end
    @(negedge clk); push_valid = 0;
    checks++;
    if (push_ready || sent != DEPTH) begin failures++; $display("FAIL: full"); end
    // random traffic
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      push_valid = ($urandom % 2) == 0;
      push_data  = '{we: 1'b1, addr: laddr_t'($urandom), data: line_t'({$urandom, $urandom}), be: 64'($urandom)};
      pop_ready  = ($urandom % 3) != 0;
    end
    @(negedge clk); push_valid = 0; pop_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (!empty || got != sent) begin failures++; $display("FAIL: drain %0d/%0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
