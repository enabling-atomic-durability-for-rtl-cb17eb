// Self-checking test of hercules_recovery on a hand-built crash image in
// the behavioural pmem: an 8-entry eWPQ dump with a committed-off-chip
// entry, an entry of an uncommitted transaction and an entry of a
// transaction whose TxLen was written but whose state reset did not
// finish; two extension entries (one removed); three emergency lines, one
// of them a newer copy of a logged address.  Checked: exactly the
// committed lines reach home, the emergency copy wins over the log copy,
// uncommitted data never reaches home, replay and discard counts, the
// TxLens of replayed transactions are zero afterwards while a neighbour
// TxLen in the same profile line is kept, and the header and bitmap are
// reset.  Expected values are worked out here from the image itself.
module tb_hercules_recovery;
  import hercules_pkg::*;
  localparam int EWPQ_N = 8, EXT_N = 80;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic start, busy, done, clean;
  logic [31:0] replayed, discarded;
  logic p_req_valid, p_req_ready, p_rsp_valid; preq_t p_req; line_t p_rsp_data;

  hercules_recovery #(.EWPQ_N(EWPQ_N), .EXT_N(EXT_N)) dut (.*);
  pmem_model #(.RD_LAT(7), .WR_LAT(4)) pm (.clk, .req_valid(p_req_valid), .req_ready(p_req_ready),
    .req(p_req), .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t D(input int i);
    return {16{32'hD000_0000 + 32'(i)}};
  endfunction
  function automatic laddr_t H(input int i);
    return laddr_t'(32'h0010_0000 + 32'h100 * i);
  endfunction
  task automatic put_word(input laddr_t a, input int slot, input word_t w);
    line_t l;
    l = pm.peek(a);
    l[64 * slot +: 64] = w;
    pm.poke(a, l);
  endtask
  task automatic put_len(input int id, input int len);
    line_t l;
    l = pm.peek(PROF_BASE + laddr_t'(id >> 4));
    l[32 * (id % 16) +: 32] = 32'(len);
    pm.poke(PROF_BASE + laddr_t'(id >> 4), l);
  endtask
  function automatic word_t ent(input bit st, input int id, input int home, input int li);
    ewpq_entry_t e;
    e = '{txstate: st, txid: txid_t'(id), home: PART_W'(home), logidx: logidx_t'(li)};
    return word_t'(e);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0;
    // home lines before the crash
    for (int i = 0; i < 7; i++) pm.poke(H(i), {16{32'hAAAA_0000 + 32'(i)}});
    // transaction profiles: 5 and 7 committed, 6 and 8 not, 9 unrelated
    put_len(5, 4); put_len(7, 3); put_len(6, 0); put_len(8, 0); put_len(9, 77);
    // log entries 0..3
    for (int i = 0; i < 4; i++) begin
      put_word(LMETA_BASE, i, pack_meta(1'b1, txid_t'(i == 0 ? 5 : (i == 1 ? 6 : 7)), H(i)));
      pm.poke(LDATA_BASE + laddr_t'(i), D(i));
    end
    // saved eWPQ: slot 0 committed off-chip, slot 1 uncommitted tx 6,
    // slot 2 tx 7 (TxLen set, TxState still 1); slot 5 valid bit clear
    put_word(EMG_EWPQ, 0, ent(1'b0, 5, H(0), 0));
    put_word(EMG_EWPQ, 1, ent(1'b1, 6, H(1), 1));
    put_word(EMG_EWPQ, 2, ent(1'b1, 7, H(2), 2));
    put_word(EMG_EWPQ, 5, ent(1'b0, 5, H(6), 1));
    pm.poke(EMG_BITMAP, line_t'(8'b0000_0111));
    // extension area: entry 0 of tx 7, entry 1 removed
    put_word(EXT_BASE, 0, ent(1'b1, 7, H(3), 3));
    put_word(EXT_BASE, 1, '1);
    // emergency lines: newer copy of H(2) by tx 7, tx 6's H(5), tx 8's H(6)
    put_word(EMG_META, 0, pack_meta(1'b1, txid_t'(7), H(2)));
    put_word(EMG_META, 1, pack_meta(1'b1, txid_t'(6), H(5)));
    put_word(EMG_META, 2, pack_meta(1'b1, txid_t'(8), H(6)));
    pm.poke(EMG_DATA + 0, D(4));
    pm.poke(EMG_DATA + 1, D(5));
    pm.poke(EMG_DATA + 2, D(6));
    // header: head 4, tail 0, 2 extension entries, flag 0, 3 emergency lines
    pm.poke(EMG_HDR, {line_t'(3) << 256} | {line_t'(2) << 128} | line_t'(4));

    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    chk(busy, "busy after start");
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    chk(!busy, "idle after done");
    chk(!clean, "emergency image reported (flag was 0)");
    chk(pm.peek(H(0)) == D(0), "committed-off-chip log entry replayed");
    chk(pm.peek(H(1)) == {16{32'hAAAA_0001}}, "uncommitted log entry discarded");
    chk(pm.peek(H(2)) == D(4), "emergency copy replayed after the older log copy");
    chk(pm.peek(H(3)) == D(3), "extension entry of committed tx replayed");
    chk(pm.peek(H(5)) == {16{32'hAAAA_0005}}, "uncommitted emergency line discarded");
    chk(pm.peek(H(6)) == {16{32'hAAAA_0006}}, "emergency line of tx without TxLen discarded");
    chk(replayed == 4, $sformatf("replayed %0d == 4", replayed));
    chk(discarded == 3, $sformatf("discarded %0d == 3", discarded));
    chk(pm.peek(PROF_BASE)[32 * 5 +: 32] == 0 && pm.peek(PROF_BASE)[32 * 7 +: 32] == 0,
        "TxLens of replayed transactions reset");
    chk(pm.peek(PROF_BASE)[32 * 9 +: 32] == 77, "neighbouring TxLen kept");
    chk(pm.peek_word(EMG_HDR, 3) == 1 && pm.peek_word(EMG_HDR, 4) == 0 &&
        pm.peek_word(EMG_HDR, 2) == 0, "header reset to a clean shutdown");
    chk(pm.peek_word(EMG_HDR, 0) == 4, "header LogHead word untouched");
    chk(pm.peek(EMG_BITMAP) == '0, "saved bitmap cleared");
    // a second run on the clean image replays nothing
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(clean && replayed == 0, "second recovery finds a clean image");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
