// End-to-end test of hercules_top at reduced sizes (8/16/32-set caches with
// 2/2/4 ways, TransTag ratio 100 %/50 %/25 %, 4-entry eWPQ, short migration
// period and GC threshold) against the behavioural pmem.  A scripted core
// runs transactions whose lines collide in one set of every level, so the
// TransTags overflow and lines move L1D -> L2 -> L3 -> memory controller.
// Counted mechanisms (each must happen at least once, or it is a failure):
// transactional eviction at L1D/L2/L3, premature flush, eWPQ hit, eWPQ
// overflow to the extension area and a hit there, conflict, read-committed
// bypass, commit, abort, migration, log garbage collection, TransTag
// acquisition, the power-off flush and recovery after it.  Data checks: every committed value
// reads back, uncommitted values never reach home, after recovery every
// committed value is at its home address, aborted values never
// appear, and the TxLen profile holds the committed length.
module tb_hercules_top;
  import hercules_pkg::*;
  localparam int EWPQ_N = 4, EXT_N = 40;
  localparam int unsigned MIGP = 3000;

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
  logic [$clog2(EWPQ_N):0] ewpq_count;
  logic [$clog2(EXT_N+1)-1:0] ext_count;
  logic mc_err;
  logic recover_start, recover_busy, recover_done, recover_clean;
  logic [31:0] recover_replayed, recover_discarded;
  logic [11:0] ev;

  hercules_top #(
    .L1_SETS(8),  .L1_WAYS(2), .L1_NTT(2), .L1_LAT(2),
    .L2_SETS(16), .L2_WAYS(2), .L2_NTT(1), .L2_LAT(8),
    .L3_SETS(32), .L3_WAYS(4), .L3_NTT(1), .L3_LAT(30),
    .RESET_CYC(10), .EWPQ_N(EWPQ_N), .EXT_N(EXT_N), .WPQ_DEPTH(8), .EWPQ_LAT(10),
    .MIG_PERIOD(MIGP), .GC_THRESH(8), .GC_CHUNK(4)
  ) dut (.*);
  pmem_model #(.RD_LAT(20), .WR_LAT(10)) pm (.clk, .req_valid(p_req_valid), .req_ready(p_req_ready),
    .req(p_req), .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  int checks = 0, failures = 0;
  int evn [12];
  int n_commit = 0, n_abort = 0, n_crash = 0, n_recover = 0;
  always @(posedge clk) if (rst_n) for (int i = 0; i < 12; i++) evn[i] += ev[i];
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic core(input op_e op, input laddr_t a, input int w, input word_t v, output mrsp_t rs);
    @(negedge clk);
    core_req_valid = 1;
    core_req = '{op: op, addr: a, data: line_t'(v), word: 3'(w), default: '0};
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    core_req_valid = 0;
    while (!core_rsp_valid) @(negedge clk);
    rs = core_rsp;
  endtask
  task automatic txcmd(input int op);
    @(negedge clk);
    tx_cmd_valid = 1; tx_cmd_op = 2'(op);
    while (!tx_cmd_ready) @(negedge clk);
    @(negedge clk);
    tx_cmd_valid = 0;
    while (!tx_cmd_done) @(negedge clk);
    chk(!tx_cmd_err, $sformatf("tx command %0d accepted", op));
    if (op == 1) n_commit++;
    if (op == 2) n_abort++;
  endtask
  task automatic ctx(input bit t, input txid_t id, input int len);
    @(negedge clk); ctx_load = 1; ctx_in_tx = t; ctx_txid = id; ctx_len = 32'(len);
    @(negedge clk); ctx_load = 0;
  endtask

  // committed reference of word 0 of each line touched
  word_t ref_v [laddr_t];
  function automatic word_t ref_of(input laddr_t a);
    return ref_v.exists(a) ? ref_v[a] : '0;
  endfunction
  function automatic laddr_t L(input int i);   // line i, all in set 0 of every level
    return laddr_t'(32'h1000 + 64 * i);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: ev counts %p", evn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mrsp_t rs;
    txid_t t1, t3;
    word_t w [laddr_t];
    core_req_valid = 0; core_req = '0; tx_cmd_valid = 0; tx_cmd_op = 0;
    ctx_load = 0; ctx_in_tx = 0; ctx_txid = 0; ctx_len = 0; power_fail = 0;
    recover_start = 0;
    for (int i = 0; i < 12; i++) evn[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---- transaction 1: 8 lines in one set -> overflow down to the MC
    txcmd(0);
    t1 = cur_txid;
    for (int i = 0; i < 8; i++) begin
      w[L(i)] = word_t'($urandom) | 64'h1;
      core(OP_WR, L(i), 0, w[L(i)], rs);
      chk(!rs.conflict, "tx1 store");
    end
    chk(cur_len == 8, $sformatf("PerCoreTxLen counts 8 lines (%0d)", cur_len));
    chk(ewpq_count > 0, "prematurely flushed lines in eWPQ");
    // own reads: every line comes back with the new value (eWPQ hit for the
    // flushed ones, exclusive hand-over from L2/L3 for the others)
    for (int i = 0; i < 8; i++) begin
      core(OP_RD, L(i), 0, 0, rs);
      chk(!rs.conflict && rs.data[63:0] == w[L(i)], $sformatf("tx1 reads back line %0d", i));
    end
    // another transaction touches tx1's line: conflict
    ctx(1'b1, txid_t'(t1 + 100), 0);
    core(OP_WR, L(7), 0, 64'hBAD, rs);
    chk(rs.conflict, "other transaction conflicts on an uncommitted line");
    // a plain reader sees the committed (old) copy
    ctx(1'b0, '0, 0);
    core(OP_RD, L(7), 0, 0, rs);
    chk(!rs.conflict && rs.data[63:0] == ref_of(L(7)), "plain reader sees committed data");
    ctx(1'b1, t1, 8);
    txcmd(1);
    foreach (w[a]) ref_v[a] = w[a];
    w.delete();
    chk(pm.peek_word(PROF_BASE + laddr_t'(t1 >> 4), int'(t1[3:0]) / 2)[32 * t1[0] +: 32] == 32'd8,
        "TxLen of tx1 stored in the profiles");
    // other transactions now see tx1's values
    ctx(1'b0, '0, 0);
    for (int i = 0; i < 8; i++) begin
      core(OP_RD, L(i), 0, 0, rs);
      chk(rs.data[63:0] == ref_of(L(i)), $sformatf("committed line %0d visible", i));
    end

    // ---- transaction 2: aborted
    txcmd(0);
    for (int i = 0; i < 6; i++) core(OP_WR, L(i), 0, 64'hDEAD_0000 + 64'(i), rs);
    txcmd(2);
    for (int i = 0; i < 6; i++) begin
      core(OP_RD, L(i), 0, 0, rs);
      chk(rs.data[63:0] == ref_of(L(i)), $sformatf("abort restores line %0d", i));
    end

    // ---- migration of committed eWPQ entries
    repeat (MIGP + 2000) @(negedge clk);
    chk(evn[7] > 0, "committed eWPQ entries migrated home");

    // ---- transaction 3: overflows the eWPQ into the extension area
    txcmd(0);
    t3 = cur_txid;
    for (int i = 8; i < 24; i++) begin
      w[L(i)] = word_t'($urandom) | 64'h2;
      core(OP_WR, L(i), 0, w[L(i)], rs);
    end
    chk(ext_count > 0, "eWPQ overflowed to the extension area");
    for (int i = 8; i < 24; i++) begin
      core(OP_RD, L(i), 0, 0, rs);
      chk(!rs.conflict && rs.data[63:0] == w[L(i)], $sformatf("tx3 reads back line %0d", i));
    end
    txcmd(1);
    foreach (w[a]) ref_v[a] = w[a];
    w.delete();
    repeat (2000) @(negedge clk);

    // ---- transaction 5: keeps its oldest log entry live while rereading
    // the others, so the log window grows with dead entries behind it and
    // GC has to move the live one
    txcmd(0);
    for (int i = 30; i < 38; i++) begin
      w[L(i)] = word_t'($urandom) | 64'h4;
      core(OP_WR, L(i), 0, w[L(i)], rs);
    end
    for (int k = 0; k < 24; k++) begin
      core(OP_RD, L(31 + k % 7), 0, 0, rs);
      chk(!rs.conflict && rs.data[63:0] == w[L(31 + k % 7)], "tx5 rereads its line");
    end
    repeat (500) @(negedge clk);
    core(OP_RD, L(30), 0, 0, rs);
    chk(!rs.conflict && rs.data[63:0] == w[L(30)], "tx5 line moved by GC still readable");
    txcmd(1);
    foreach (w[a]) ref_v[a] = w[a];
    w.delete();

    // ---- transaction 4 is running at power failure
    txcmd(0);
    for (int i = 24; i < 30; i++) core(OP_WR, L(i), 0, 64'hCAFE_0000 + 64'(i), rs);
    core(OP_WR, L(0), 1, 64'h77, rs);
    @(negedge clk); power_fail = 1; @(negedge clk); power_fail = 0;
    while (!crash_done) @(negedge clk);
    n_crash++;
    chk(pm.peek_word(EMG_HDR, 4) > 0, "uncommitted lines dumped to the emergency area");
    chk(pm.peek_word(EMG_HDR, 3) == 0, "shutdown flag marks an emergency dump");
    chk(pm.peek_word(EMG_HDR, 0) == word_t'(log_head), "LogHead saved");
    // every committed line is either home or still described by the eWPQ /
    // extension dump; lines never written transactionally in eWPQ must be home
    foreach (ref_v[a]) begin
      bit home_ok;
      home_ok = pm.peek(a)[63:0] == ref_v[a];
      if (!home_ok) chk(pm.peek(a)[63:0] != 64'hCAFE_0000 + 64'(a), "no uncommitted data at home");
    end
    for (int i = 24; i < 30; i++)
      chk(pm.peek(L(i))[63:0] != 64'hCAFE_0000 + 64'(i), $sformatf("uncommitted line %0d not at home", i));
    chk(!mc_err, "no memory-controller error");

    // ---- power returns: reset, then recovery replays committed log and
    // emergency lines; afterwards every committed value is at home and no
    // uncommitted one is
    @(negedge clk); rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    recover_start = 1; @(negedge clk); recover_start = 0;
    while (!recover_done) @(negedge clk);
    n_recover++;
    $display("recovery replayed %0d discarded %0d", recover_replayed, recover_discarded);
    chk(!recover_clean, "recovery saw an emergency image");
    chk(recover_discarded > 0, "uncommitted saved lines discarded");
    foreach (ref_v[a])
      chk(pm.peek(a)[63:0] == ref_v[a], $sformatf("committed line %h home after recovery", a));
    for (int i = 24; i < 30; i++)
      chk(pm.peek(L(i))[63:0] != 64'hCAFE_0000 + 64'(i), "uncommitted line not home after recovery");
    // the machine runs again: a new transaction on recovered data
    txcmd(0);
    core(OP_RD, L(3), 0, 0, rs);
    chk(rs.data[63:0] == ref_of(L(3)), "recovered data read after restart");
    core(OP_WR, L(3), 0, 64'h1234, rs);
    txcmd(1);
    core(OP_RD, L(3), 0, 0, rs);
    chk(rs.data[63:0] == 64'h1234, "new transaction after recovery commits");

    // ---- mechanism counts
    begin
      string nm [12];
      nm = '{"L1D tx evict", "L2 tx evict", "L3 tx evict", "bypass", "conflict",
             "premature flush", "eWPQ hit", "migration", "extension dump",
             "extension hit", "GC move", "TransTag acquire"};
      for (int i = 0; i < 12; i++) begin
        $display("mechanism %-16s %0d", nm[i], evn[i]);
        chk(evn[i] > 0, {"mechanism never happened: ", nm[i]});
      end
      $display("mechanism %-16s %0d", "commit", n_commit);
      $display("mechanism %-16s %0d", "abort", n_abort);
      $display("mechanism %-16s %0d", "power-off dump", n_crash);
      $display("mechanism %-16s %0d", "recovery", n_recover);
      chk(n_commit > 0 && n_abort > 0 && n_crash > 0 && n_recover > 0,
          "commit, abort, dump and recovery happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
