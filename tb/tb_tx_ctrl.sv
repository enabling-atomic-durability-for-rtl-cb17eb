// Self-checking test of tx_ctrl: TxIDs come from GlobalTxID in order; a
// start writes TxLen 0; line_new pulses count the length; a commit writes
// TxLen = length before the state reset is broadcast and waits for every
// receiver; an abort broadcasts with is_abort and writes no TxLen; illegal
// primitives are refused; a context load restores the registers.
module tb_tx_ctrl;
  import hercules_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_done, cmd_err, in_tx, line_new;
  logic [1:0] cmd_op;
  txid_t cur_txid, len_txid, ctx_txid, global_txid;
  logic [31:0] cur_len, len_value, ctx_len;
  logic ctx_load, ctx_in_tx, len_valid, len_done, sr_valid;
  sreset_t sr;
  logic [3:0] sr_done;

  tx_ctrl #(.NSR(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // memory-controller side: acknowledge TxLen writes after 3 cycles
  int len_writes = 0;
  txid_t last_len_id; logic [31:0] last_len_val;
  int sr_seen = 0; sreset_t last_sr; int len_at_sr = 0;
  always @(posedge clk) if (rst_n) begin
    len_done <= 1'b0;
    if (len_valid && !len_done) begin
      repeat (3) @(posedge clk);
      len_writes++; last_len_id = len_txid; last_len_val = len_value;
      len_done <= 1'b1;
    end
  end
  // receivers answer the state reset after 1, 4, 10 and 2 cycles
  always @(posedge clk) if (rst_n && sr_valid) begin
    sr_seen++; last_sr = sr; len_at_sr = len_writes;
    fork
      begin repeat (1)  @(posedge clk); sr_done[0] <= 1; @(posedge clk); sr_done[0] <= 0; end
      begin repeat (4)  @(posedge clk); sr_done[1] <= 1; @(posedge clk); sr_done[1] <= 0; end
      begin repeat (10) @(posedge clk); sr_done[2] <= 1; @(posedge clk); sr_done[2] <= 0; end
      begin repeat (2)  @(posedge clk); sr_done[3] <= 1; @(posedge clk); sr_done[3] <= 0; end
    join_none
  end

  task automatic prim(input logic [1:0] op, output logic err, output int cyc);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!cmd_done) begin @(negedge clk); cyc++; end
    err = cmd_err;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err; int cyc;
    cmd_valid = 0; cmd_op = 0; line_new = 0; ctx_load = 0; ctx_in_tx = 0; ctx_txid = 0;
    ctx_len = 0; len_done = 0; sr_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int lines;
      prim(2'd0, err, cyc);
      chk(!err && in_tx && cur_txid == txid_t'(t) && cur_len == 0, $sformatf("start %0d", t));
      chk(last_len_id == txid_t'(t) && last_len_val == 0, "TxLen initialised to 0");
      chk(global_txid == txid_t'(t + 1), "GlobalTxID incremented");
      lines = 1 + $urandom % 9;
      for (int k = 0; k < lines; k++) begin
        @(negedge clk); line_new = 1; @(negedge clk); line_new = 0;
      end
      chk(cur_len == 32'(lines), "PerCoreTxLen counts new lines");
      if (t != 2) begin
        int n_before;
        n_before = len_writes;
        prim(2'd1, err, cyc);
        chk(!err && !in_tx, "commit finished");
        chk(len_writes == n_before + 1 && last_len_val == 32'(lines) && last_len_id == txid_t'(t),
            "commit writes TxLen = length");
        chk(len_at_sr == n_before + 1, "TxLen written n_before state reset");
        chk(!last_sr.is_abort && last_sr.txid == txid_t'(t), "commit broadcast");
        chk(cyc >= 10, $sformatf("commit waits for slowest receiver (%0d)", cyc));
      end else begin
        int n_before;
        n_before = len_writes;
        prim(2'd2, err, cyc);
        chk(!err && !in_tx && len_writes == n_before, "abort writes no TxLen");
        chk(last_sr.is_abort && last_sr.txid == txid_t'(t), "abort broadcast");
      end
    end
    chk(sr_seen == 4, "one broadcast per commit/abort");
    prim(2'd1, err, cyc);
    chk(err, "commit outside a transaction refused");
    prim(2'd0, err, cyc);
    prim(2'd0, err, cyc);
    chk(err, "nested start refused");
    // context switch: load another thread's registers
    @(negedge clk); ctx_load = 1; ctx_in_tx = 1; ctx_txid = txid_t'(77); ctx_len = 32'd5;
    @(negedge clk); ctx_load = 0;
    chk(in_tx && cur_txid == txid_t'(77) && cur_len == 5, "context restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
