// Self-checking test of hercules_mc with a behavioural pmem.  It checks
// TxLen writes, ordinary write-backs, premature flush into the log zone,
// loads served from the eWPQ (own transaction, committed, alias of the
// partial address), isolation (conflict for another transaction, home copy
// for a plain reader), the eWPQ search latency, off-chip commit and
// migration to home, eWPQ overflow into the extension area, the lookup
// there and the commit of an entry left there, log garbage collection,
// and the power-off dump.  Expected values
// come from a line-level reference of what each address should hold.
module tb_hercules_mc;
  import hercules_pkg::*;
  localparam int EWPQ_N = 4, LAT = 10, GC_T = 6, CHUNK = 4;
  localparam int unsigned MIGP = 400;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic up_req_valid, up_req_ready, up_rsp_valid;
  mreq_t up_req; mrsp_t up_rsp;
  logic len_valid, len_done, sr_valid, sr_done;
  txid_t len_txid; logic [31:0] len_value; sreset_t sr;
  logic crash_start, crash_ready, crash_end, crash_done;
  logic p_req_valid, p_req_ready, p_rsp_valid; preq_t p_req; line_t p_rsp_data;
  logidx_t log_head, log_tail;
  logic [2:0] ewpq_count;
  logic [$clog2(10*EWPQ_N+1)-1:0] ext_count;
  logic err, ev_pflush, ev_ewpq_hit, ev_conflict, ev_mig, ev_ext_dump, ev_ext_hit, ev_gc_move;

  hercules_mc #(.EWPQ_N(EWPQ_N), .EXT_N(10 * EWPQ_N), .WPQ_DEPTH(8), .EWPQ_LAT(LAT),
                .MIG_PERIOD(MIGP), .GC_THRESH(GC_T), .GC_CHUNK(CHUNK)) dut (.*);
  pmem_model #(.RD_LAT(6), .WR_LAT(3)) pm (.clk, .req_valid(p_req_valid), .req_ready(p_req_ready),
    .req(p_req), .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  int checks = 0, failures = 0;
  int n_pf = 0, n_hit = 0, n_conf = 0, n_mig = 0, n_xd = 0, n_xh = 0, n_gc = 0;
  always @(posedge clk) if (rst_n) begin
    n_pf += ev_pflush; n_hit += ev_ewpq_hit; n_conf += ev_conflict; n_mig += ev_mig;
    n_xd += ev_ext_dump; n_xh += ev_ext_hit; n_gc += ev_gc_move;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input mreq_t r, output mrsp_t rs, output int cyc);
    @(negedge clk);
    up_req_valid = 1; up_req = r;
    cyc = 0;
    while (!up_req_ready) begin @(negedge clk); end
    @(negedge clk);
    up_req_valid = 0;
    cyc = 1;
    while (!up_rsp_valid) begin @(negedge clk); cyc++; end
    rs = up_rsp;
  endtask

  function automatic line_t pat(input int a, input int v);
    return {16{a[15:0], v[15:0]}};
  endfunction
  function automatic mreq_t wb(input laddr_t a, input line_t d, input bit tx, input int id);
    return '{op: OP_WB, addr: a, data: d, word: 3'd0, tx: tx, txid: txid_t'(id),
             txstate: tx, dirty: 1'b1};
  endfunction
  function automatic mreq_t rd(input laddr_t a, input bit tx, input int id);
    return '{op: OP_RD, addr: a, data: '0, word: 3'd0, tx: tx, txid: txid_t'(id),
             txstate: 1'b0, dirty: 1'b0};
  endfunction

  task automatic wait_idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic sreset(input bit ab, input int id);
    @(negedge clk); sr_valid = 1; sr = '{is_abort: ab, txid: txid_t'(id)};
    @(negedge clk); sr_valid = 0;
    while (!sr_done) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("ret=%0d rv=%0d rw=%0d pv=%0d empty=%0d exti=%0d st=%0d ext=%0d ewpq=%0d head=%0d tail=%0d", dut.ret_q, dut.rv_q, dut.rw_q, dut.pv_q, dut.wpq_empty, dut.exti_q, dut.st_q, ext_count, ewpq_count, log_head, log_tail);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mrsp_t rs; int cyc;
    laddr_t A, B, C, Calias;
    up_req_valid = 0; up_req = '0; len_valid = 0; len_txid = 0; len_value = 0;
    sr_valid = 0; sr = '0; crash_start = 0; crash_end = 0;
    A = laddr_t'(33'h0_0000_1000); B = laddr_t'(33'h0_0000_2000);
    C = laddr_t'(33'h0_0003_0040); Calias = laddr_t'(33'h0_0083_0040);  // same low 21 bits
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // --- TxLen writes in the transaction profiles
    @(negedge clk); len_valid = 1; len_txid = txid_t'(21); len_value = 32'd7;
    while (!len_done) @(negedge clk);
    len_valid = 0;
    wait_idle(10);
    chk(pm.peek_word(PROF_BASE + laddr_t'(1), 2)[63:32] == 32'd7, "TxLen[21] = 7 in profiles");

    // --- ordinary write-back goes home
    pm.poke(A, pat(1, 0));
    send(wb(B, pat(2, 1), 0, 0), rs, cyc);
    wait_idle(10);
    chk(pm.peek(B) == pat(2, 1), "non-transactional write-back reaches home");

    // --- premature flush of A for TxID 5
    send(wb(A, pat(1, 5), 1, 5), rs, cyc);
    wait_idle(10);
    chk(ewpq_count == 1 && log_head == 1, "premature flush takes eWPQ entry and log entry");
    chk(pm.peek(A) == pat(1, 0), "home copy of A untouched");
    chk(pm.peek(LDATA_BASE) == pat(1, 5), "log entry data");
    chk(pm.peek_word(LMETA_BASE, 0) == pack_meta(1'b1, txid_t'(5), A), "log entry metadata");

    // --- isolation: other transaction conflicts, plain reader sees home
    send(rd(A, 1, 6), rs, cyc);
    chk(rs.conflict, "other transaction's load conflicts");
    send(rd(A, 0, 0), rs, cyc);
    chk(!rs.conflict && rs.data == pat(1, 0) && !rs.tx && rs.nocache,
        "plain load returns committed home copy, marked nocache");
    chk(ewpq_count == 1, "entry kept");

    // --- own transaction reloads its line from the log
    send(rd(A, 1, 5), rs, cyc);
    chk(rs.data == pat(1, 5) && rs.tx && rs.txstate && rs.txid == 5 && rs.dirty,
        "own transaction reloads prematurely flushed line");
    chk(cyc >= LAT, $sformatf("eWPQ search latency %0d >= %0d", cyc, LAT));
    chk(ewpq_count == 0, "entry released on reload");

    // --- aliasing partial home address
    send(wb(Calias, pat(3, 9), 1, 7), rs, cyc);
    send(wb(C, pat(4, 9), 1, 7), rs, cyc);
    send(rd(C, 1, 7), rs, cyc);
    chk(rs.data == pat(4, 9), "alias skipped, full address matched");
    chk(ewpq_count == 1, "alias entry remains");

    // --- commit TxID 7 off-chip, then migration to home
    sreset(1'b0, 7);
    chk(dut.u_ewpq.ent[0].txstate == 1'b0 || dut.u_ewpq.ent[1].txstate == 1'b0, "TxState reset in eWPQ");
    repeat (MIGP + 200) @(negedge clk);
    chk(pm.peek(Calias) == pat(3, 9), "committed line migrated to home");
    chk(ewpq_count == 0 && n_mig == 1, "migration frees the entry");

    // --- abort removes uncommitted entries
    send(wb(A, pat(1, 8), 1, 8), rs, cyc);
    sreset(1'b1, 8);
    chk(ewpq_count == 0, "abort discards eWPQ entry");
    send(rd(A, 1, 9), rs, cyc);
    chk(!rs.conflict && rs.data == pat(1, 0) && !rs.tx, "aborted data never visible");

    // --- eWPQ overflow into the extension area
    for (int i = 0; i < EWPQ_N + 2; i++) send(wb(laddr_t'(32'h5000 + i), pat(5, i), 1, 10), rs, cyc);
    chk(n_xd == 2 && ext_count == 2 && ewpq_count == 3'(EWPQ_N), "LRU entries dumped to extension");
    send(rd(laddr_t'(32'h5000), 1, 10), rs, cyc);
    @(negedge clk);
    chk(rs.data == pat(5, 0) && rs.tx && n_xh == 1,
        $sformatf("line found through extension area (%h tx=%0d xh=%0d)", rs.data[31:0], rs.tx, n_xh));
    send(rd(laddr_t'(32'h5003), 1, 10), rs, cyc);
    chk(rs.data == pat(5, 3), "line found in eWPQ");

    // --- garbage collection: LogHead - LogTail above threshold.  Commit
    // TxID 10 and let migration empty the eWPQ, then keep two live lines
    // (X) at the old end of the log behind released ones (Y).
    sreset(1'b0, 10);
    wait_idle(60);
    chk(pm.peek_word(EXT_BASE, 1) != '1 && pm.peek_word(EXT_BASE, 1)[63] == 1'b0,
        "commit clears TxState of the entry left in the extension area");
    send(rd(laddr_t'(32'h5001), 1, 13), rs, cyc);
    @(negedge clk);
    chk(rs.data == pat(5, 1) && !rs.conflict && !rs.tx && n_xh == 2,
        $sformatf("committed extension entry readable by another transaction (%h c=%0d tx=%0d xh=%0d)", rs.data[31:0], rs.conflict, rs.tx, n_xh));
    repeat (MIGP + 400) @(negedge clk);
    chk(ewpq_count == 0, "committed lines migrated before GC test");
    for (int i = 0; i < 2; i++) send(wb(laddr_t'(32'h8000 + i), pat(8, i), 1, 12), rs, cyc);
    for (int i = 0; i < 8; i++) begin
      send(wb(laddr_t'(32'h9000 + i), pat(9, i), 1, 12), rs, cyc);
      send(rd(laddr_t'(32'h9000 + i), 1, 12), rs, cyc);
    end
    wait_idle(600);
    chk(n_gc >= 2, $sformatf("GC moved live log entries (%0d)", n_gc));
    chk(32'(logidx_t'(log_head - log_tail)) <= GC_T, "log window back under the threshold");
    send(rd(laddr_t'(32'h8000), 1, 12), rs, cyc);
    chk(rs.data == pat(8, 0), "moved entry still readable");
    send(rd(laddr_t'(32'h8001), 1, 12), rs, cyc);
    chk(rs.data == pat(8, 1), "moved entry still readable (2)");

    // --- power-off dump
    @(negedge clk); crash_start = 1; @(negedge clk); crash_start = 0;
    while (!crash_ready) @(negedge clk);
    send('{op: OP_EMERG, addr: laddr_t'(32'h7000), data: pat(7, 1), word: 0, tx: 1,
           txid: txid_t'(11), txstate: 1, dirty: 1}, rs, cyc);
    send(wb(laddr_t'(32'h7100), pat(7, 2), 0, 0), rs, cyc);
    @(negedge clk); crash_end = 1;
    while (!crash_done) @(negedge clk);
    crash_end = 0;
    chk(pm.peek_word(EMG_HDR, 0) == word_t'(log_head) && pm.peek_word(EMG_HDR, 1) == word_t'(log_tail),
        "LogHead/LogTail saved");
    chk(pm.peek_word(EMG_HDR, 3) == 0, "shutdown flag clear after emergency dump");
    chk(pm.peek_word(EMG_HDR, 4) == 1, "one emergency line");
    chk(pm.peek(EMG_BITMAP)[EWPQ_N-1:0] == dut.u_ewpq.vld, "validity bitmap saved");
    chk(pm.peek_word(EMG_META, 0) == pack_meta(1'b1, txid_t'(11), laddr_t'(32'h7000)), "emergency metadata");
    chk(pm.peek(EMG_DATA) == pat(7, 1), "emergency data");
    chk(pm.peek(laddr_t'(32'h7100)) == pat(7, 2), "non-transactional line flushed home");
    chk(!err, "no error flag");
    chk(n_pf >= 10 && n_hit >= 3 && n_conf == 1, "event counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
