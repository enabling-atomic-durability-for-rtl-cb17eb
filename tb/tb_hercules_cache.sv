// Self-checking test of one hercules_cache level (8 sets, 2 ways, one
// TransTag per set) against a behavioural lower level.  The lower level
// keeps home lines and, separately, the transactional lines evicted to it,
// answering every request DLAT cycles after acceptance.  Checked: miss fill
// and the HIT_LAT hit latency, write-back of dirty lines, the rule that a
// dirty line is cleaned below before a transaction writes it, TransTag
// acquisition (line_new), conflict for another transaction, read-committed
// bypass for a plain reader, transactional eviction when TransTags run out,
// commit and abort with their reset latency, and the power-off flush.
module tb_hercules_cache;
  import hercules_pkg::*;
  localparam int SETS = 8, WAYS = 2, NTT = 1, HL = 2, RC = 4, DLAT = 5;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic up_req_valid, up_req_ready, up_rsp_valid;
  mreq_t up_req; mrsp_t up_rsp;
  logic dn_req_valid, dn_req_ready, dn_rsp_valid;
  mreq_t dn_req; mrsp_t dn_rsp;
  logic sr_valid, sr_done, line_new, flush_start, fwd, flush_done;
  sreset_t sr;
  logic ev_tx_evict, ev_bypass, ev_conflict;

  hercules_cache #(.SETS(SETS), .WAYS(WAYS), .NTT(NTT), .HIT_LAT(HL),
                   .RESET_CYCLES(RC), .UPPER_CACHE(1'b0)) dut (.*);

  // ---------------------------------------------------- lower level model
  line_t home [laddr_t];
  line_t txl  [laddr_t];
  mreq_t log_q [$];
  int    dcnt = 0;
  mreq_t dcur;
  assign dn_req_ready = (dcnt == 0);
  function automatic line_t home_of(input laddr_t a);
    return home.exists(a) ? home[a] : {16{a[31:0]}};
  endfunction
  always @(posedge clk) begin
    dn_rsp_valid <= 1'b0;
    if (dcnt > 0) begin
      dcnt <= dcnt - 1;
      if (dcnt == 1) begin
        dn_rsp <= '0;
        if (dcur.op == OP_RD) dn_rsp.data <= home_of(dcur.addr);
        dn_rsp_valid <= 1'b1;
      end
    end else if (dn_req_valid) begin
      dcur = dn_req;
      log_q.push_back(dn_req);
      if (dn_req.op == OP_WB && !dn_req.tx) home[dn_req.addr] = dn_req.data;
      if (dn_req.op != OP_RD && dn_req.tx) txl[dn_req.addr] = dn_req.data;
      dcnt <= DLAT;
    end
  end

  int checks = 0, failures = 0;
  int n_new = 0, n_ev = 0, n_byp = 0, n_conf = 0;
  always @(posedge clk) if (rst_n) begin
    n_new += line_new; n_ev += ev_tx_evict; n_byp += ev_bypass; n_conf += ev_conflict;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input mreq_t r, output mrsp_t rs, output int cyc);
    @(negedge clk);
    up_req_valid = 1; up_req = r;
    while (!up_req_ready) @(negedge clk);
    @(negedge clk);
    up_req_valid = 0;
    cyc = 1;
    while (!up_rsp_valid) begin @(negedge clk); cyc++; end
    rs = up_rsp;
  endtask
  function automatic mreq_t rd(input laddr_t a, input bit tx, input int id);
    return '{op: OP_RD, addr: a, data: '0, word: 3'd0, tx: tx, txid: txid_t'(id),
             txstate: 1'b0, dirty: 1'b0};
  endfunction
  function automatic mreq_t wr(input laddr_t a, input int w, input word_t v, input bit tx, input int id);
    return '{op: OP_WR, addr: a, data: line_t'(v), word: 3'(w), tx: tx, txid: txid_t'(id),
             txstate: tx, dirty: 1'b1};
  endfunction
  task automatic sreset(input bit ab, input int id, output int cyc);
    @(negedge clk); sr_valid = 1; sr = '{is_abort: ab, txid: txid_t'(id)};
    @(negedge clk); sr_valid = 0;
    cyc = 1;
    while (!sr_done) begin @(negedge clk); cyc++; end
  endtask
  function automatic int find_log(input op_e op, input laddr_t a, input bit tx);
    for (int i = 0; i < log_q.size(); i++)
      if (log_q[i].op == op && log_q[i].addr == a && log_q[i].tx == tx) return i;
    return -1;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mrsp_t rs; int cyc, idx;
    line_t v;
    laddr_t A, B, C, D, E;
    A = 33'h10; B = 33'h18; C = 33'h20; D = 33'h30; E = 33'h11;   // A..D in set 0
    up_req_valid = 0; up_req = '0; sr_valid = 0; sr = '0; flush_start = 0; fwd = 0;
    dn_rsp = '0; dn_rsp_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // miss then hit
    send(rd(A, 0, 0), rs, cyc);
    chk(rs.data == home_of(A) && cyc > DLAT, "read miss filled from below");
    send(rd(A, 0, 0), rs, cyc);
    chk(rs.data == home_of(A), "read hit data");
    chk(cyc == HL, $sformatf("hit latency %0d == %0d", cyc, HL));

    // plain store, then a transactional store to the dirty line
    send(wr(A, 1, 64'h1111, 0, 0), rs, cyc);
    chk(cyc == HL, "write hit latency");
    v = home_of(A); v[127:64] = 64'h1111;
    send(wr(A, 2, 64'h2222, 1, 3), rs, cyc);
    chk(home_of(A) == v, "dirty line cleaned below before the transaction writes it");
    chk(n_new == 1, "line_new on TransTag acquisition");
    chk(dut.u_tt.tags[0][0].valid && dut.u_tt.tags[0][0].txid == 3 && dut.u_tt.tags[0][0].txstate,
        "TransTag holds TxID 3, TxState 1");

    // isolation
    send(wr(A, 0, 64'h9, 1, 4), rs, cyc);
    @(negedge clk);
    chk(rs.conflict && n_conf == 1, "other transaction's store conflicts");
    send(rd(A, 0, 0), rs, cyc);
    chk(!rs.conflict && rs.data == v && n_byp == 1 && rs.nocache,
        "plain read bypasses to committed copy, marked nocache");
    send(rd(A, 1, 3), rs, cyc);
    v[191:128] = 64'h2222;
    chk(rs.data == v && cyc == HL, "own transaction reads its update");

    // second transactional line in the set: only one TransTag -> evict A
    send(wr(B, 0, 64'h3333, 1, 3), rs, cyc);
    idx = find_log(OP_WB, A, 1);
    chk(idx >= 0 && log_q[idx].txid == 3 && log_q[idx].txstate && n_ev == 1,
        "transactional line evicted with its TxID");
    chk(home_of(A)[191:128] != 64'h2222, "evicted uncommitted data kept away from home");
    chk(txl.exists(A) && txl[A] == v, "evicted transactional data");

    // commit: TxState cleared in RESET_CYCLES, plus one cycle for the cache
    // to hand the reset to its TransTag array and one for the registered done
    sreset(1'b0, 3, cyc);
    chk(cyc == RC + 2, $sformatf("commit reset latency %0d == %0d", cyc, RC + 2));
    send(rd(B, 1, 5), rs, cyc);
    chk(!rs.conflict && rs.data[63:0] == 64'h3333, "committed line visible to others");

    // abort: line dropped, older copy read again from below
    send(wr(C, 0, 64'h4444, 1, 6), rs, cyc);
    sreset(1'b1, 6, cyc);
    chk(cyc == RC + 2, "abort reset latency");
    send(rd(C, 0, 0), rs, cyc);
    chk(rs.data == home_of(C) && cyc > DLAT, "aborted line dropped, reread from below");

    // power-off flush
    send(wr(D, 0, 64'h5555, 1, 7), rs, cyc);
    send(wr(E, 0, 64'h6666, 0, 0), rs, cyc);
    log_q.delete();
    @(negedge clk); flush_start = 1; @(negedge clk); flush_start = 0;
    while (!flush_done) @(negedge clk);
    idx = find_log(OP_EMERG, D, 1);
    chk(idx >= 0 && log_q[idx].txid == 7 && log_q[idx].data[63:0] == 64'h5555,
        "uncommitted line dumped as emergency data");
    chk(home_of(E)[63:0] == 64'h6666, "dirty plain line flushed home");
    chk(home_of(B)[63:0] == 64'h3333, "committed dirty line flushed home");
    chk(log_q.size() inside {2, 3}, $sformatf("only dirty/transactional lines flushed (%0d)", log_q.size()));
    send(rd(E, 0, 0), rs, cyc);
    chk(cyc > DLAT, "cache empty after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
