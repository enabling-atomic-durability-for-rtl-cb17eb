// Full-size run of hercules_top with the paper's parameters (L1D 32 KB,
// L2 256 KB, LLC 16 MB, 512-entry eWPQ, 10-cycle state reset) and a pmem
// of 450/300-cycle read/write latency (150/100 ns at 3 GHz).  One
// transaction stores to three lines, reads them back, and commits.
// Checked: L1D hit latency of 2 cycles, a miss served from pmem takes at
// least the pmem read latency, PerCoreTxLen, the TxLen profile write, the
// commit taking the TxLen post to the WPQ plus the 10-cycle state
// reset, and the
// committed values being visible to a plain reader afterwards.
module tb_hercules_top_full;
  import hercules_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic core_req_valid, core_req_ready, core_rsp_valid;
  mreq_t core_req; mrsp_t core_rsp;
  logic tx_cmd_valid, tx_cmd_ready, tx_cmd_done, tx_cmd_err, in_tx;
  logic [1:0] tx_cmd_op;
  txid_t cur_txid, ctx_txid; logic [31:0] cur_len, ctx_len;
  logic ctx_load, ctx_in_tx, power_fail, crash_busy, crash_done;
  logic p_req_valid, p_req_ready, p_rsp_valid; preq_t p_req; line_t p_rsp_data;
  logidx_t log_head, log_tail;
  logic [$clog2(EWPQ_ENTRIES):0] ewpq_count;
  logic [$clog2(10*EWPQ_ENTRIES+1)-1:0] ext_count;
  logic mc_err;
  logic recover_start, recover_busy, recover_done, recover_clean;
  logic [31:0] recover_replayed, recover_discarded;
  logic [11:0] ev;

  hercules_top dut (.*);
  pmem_model pm (.clk, .req_valid(p_req_valid), .req_ready(p_req_ready),
    .req(p_req), .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic core(input op_e op, input laddr_t a, input int w, input word_t v,
                      output mrsp_t rs, output int cyc);
    @(negedge clk);
    core_req_valid = 1;
    core_req = '{op: op, addr: a, data: line_t'(v), word: 3'(w), default: '0};
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    core_req_valid = 0;
    cyc = 1;
    while (!core_rsp_valid) begin @(negedge clk); cyc++; end
    rs = core_rsp;
  endtask
  task automatic txcmd(input int op, output int cyc);
    @(negedge clk);
    tx_cmd_valid = 1; tx_cmd_op = 2'(op);
    while (!tx_cmd_ready) @(negedge clk);
    @(negedge clk);
    tx_cmd_valid = 0;
    cyc = 1;
    while (!tx_cmd_done) begin @(negedge clk); cyc++; end
    chk(!tx_cmd_err, $sformatf("tx command %0d accepted", op));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mrsp_t rs; int cyc;
    txid_t t;
    word_t v [3];
    core_req_valid = 0; core_req = '0; tx_cmd_valid = 0; tx_cmd_op = 0;
    ctx_load = 0; ctx_in_tx = 0; ctx_txid = 0; ctx_len = 0; power_fail = 0;
    recover_start = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    txcmd(0, cyc);
    t = cur_txid;
    for (int i = 0; i < 3; i++) begin
      v[i] = word_t'($urandom);
      core(OP_WR, laddr_t'(32'h4_0000 + 7 * i), i, v[i], rs, cyc);
      chk(!rs.conflict, "store");
      if (i == 0) chk(cyc >= 450, $sformatf("miss to pmem takes >= 450 cycles (%0d)", cyc));
    end
    for (int i = 0; i < 3; i++) begin
      core(OP_RD, laddr_t'(32'h4_0000 + 7 * i), 0, 0, rs, cyc);
      chk(rs.data[64 * i +: 64] == v[i], "transaction reads its store");
      chk(cyc == 2, $sformatf("L1D hit latency %0d == 2", cyc));
    end
    chk(cur_len == 3, "PerCoreTxLen = 3");
    txcmd(1, cyc);
    // the TxLen write is durable once it is in the WPQ (inside the power-fail
    // protected domain), so commit costs a few cycles plus the 10-cycle reset
    chk(cyc >= 10 && cyc < 30, $sformatf("commit = TxLen post + 10-cycle reset (%0d)", cyc));
    chk(pm.peek_word(PROF_BASE + laddr_t'(t >> 4), int'(t[3:0]) / 2)[32 * t[0] +: 32] == 32'd3,
        "TxLen profile holds 3");
    chk(!in_tx, "transaction closed");
    for (int i = 0; i < 3; i++) begin
      core(OP_RD, laddr_t'(32'h4_0000 + 7 * i), 0, 0, rs, cyc);
      chk(!rs.conflict && rs.data[64 * i +: 64] == v[i], "committed data visible");
    end
    chk(!mc_err, "no memory-controller error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
