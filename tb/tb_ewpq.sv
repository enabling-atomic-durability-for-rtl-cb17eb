// Self-checking test of ewpq against a reference list: insertion order and
// full flag, search by partial home address with alias skipping, search by
// log index, LRU victim, commit (TxState cleared for one TxID only),
// migration candidates, repointing and abort.
module tb_ewpq;
  import hercules_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic [PART_W-1:0] lk_home;
  logic [N-1:0]      lk_skip;
  logic              lk_touch, lk_hit, lg_hit, mig_hit, full;
  logic [3:0]        lk_slot, lg_slot, mig_slot, free_slot, lru_slot, rd_slot, inv_slot, upd_slot;
  ewpq_entry_t       lk_entry, rd_entry, ins_entry;
  logidx_t           lg_idx, upd_logidx;
  logic [4:0]        count;
  logic [N-1:0]      bitmap;
  logic              ins_en, inv_en, upd_en, sr_valid;
  sreset_t           sr;

  ewpq #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  ewpq_entry_t m [N];
  logic [N-1:0] mv;

  task automatic insert(input ewpq_entry_t e, output int slot);
    @(negedge clk);
    slot = int'(free_slot);
    ins_en = 1; ins_entry = e;
    @(negedge clk);
    ins_en = 0;
    m[slot] = e; mv[slot] = 1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int slot;
    lk_home = 0; lk_skip = 0; lk_touch = 0; lg_idx = 0; rd_slot = 0;
    ins_en = 0; ins_entry = '0; inv_en = 0; inv_slot = 0; upd_en = 0; upd_slot = 0;
    upd_logidx = 0; sr_valid = 0; sr = '0; mv = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk(count == 0 && !full && !lk_hit, "empty after reset");
    // fill: TxID 1 for even i, 2 for odd i; home 100+i, but i=3 aliases i=1
    for (int i = 0; i < N; i++) begin
      ewpq_entry_t e;
      e = '{txstate: 1'b1, txid: txid_t'(1 + (i % 2)), home: 21'(100 + ((i == 3) ? 1 : i)),
            logidx: logidx_t'(1000 + i)};
      insert(e, slot);
      chk(slot == i, $sformatf("insert %0d lands in slot %0d", i, slot));
    end
    chk(full && count == 5'(N), "full after N inserts");
    chk(lru_slot == 0, "LRU is first inserted");
    // search by home
    lk_home = 21'(100 + 5); #1;
    chk(lk_hit && lk_slot == 5 && lk_entry == m[5], "lookup home 105");
    lk_home = 21'(101); #1;
    chk(lk_hit && lk_slot == 1, "lookup alias first match");
    lk_skip[1] = 1'b1; #1;
    chk(lk_hit && lk_slot == 3, "lookup alias second match");
    lk_skip = '0;
    lk_home = 21'(999); #1;
    chk(!lk_hit, "lookup miss");
    // search by log index
    lg_idx = logidx_t'(1000 + 9); #1;
    chk(lg_hit && lg_slot == 9, "lookup log index");
    chk(!mig_hit, "nothing committed yet");
    // commit TxID 2 (odd slots)
    @(negedge clk); sr_valid = 1; sr = '{is_abort: 1'b0, txid: txid_t'(2)};
    @(negedge clk); sr_valid = 0;
    for (int i = 0; i < N; i++) begin
      rd_slot = 4'(i); #1;
      chk(rd_entry.txstate == ((i % 2) == 0), $sformatf("commit state slot %0d", i));
    end
    chk(mig_hit && mig_slot == 1, "migration candidate");
    // migrate slot 1: invalidate
    @(negedge clk); inv_en = 1; inv_slot = 4'd1; @(negedge clk); inv_en = 0;
    chk(!full && free_slot == 1 && count == 5'(N - 1), "slot freed");
    chk(mig_hit && mig_slot == 3, "next migration candidate");
    // repoint slot 4 (GC)
    @(negedge clk); upd_en = 1; upd_slot = 4'd4; upd_logidx = logidx_t'(7); @(negedge clk); upd_en = 0;
    lg_idx = logidx_t'(7); #1;
    chk(lg_hit && lg_slot == 4, "repointed entry found by log index");
    lg_idx = logidx_t'(1004); #1;
    chk(!lg_hit, "old log index gone");
    // LRU moves when the oldest entry is touched
    lk_home = 21'(100); lk_touch = 1; @(negedge clk); lk_touch = 0; #1;
    chk(lru_slot == 2, "LRU after touching slot 0");
    // abort TxID 1 (even slots, uncommitted) -> removed; committed odd stay
    @(negedge clk); sr_valid = 1; sr = '{is_abort: 1'b1, txid: txid_t'(1)};
    @(negedge clk); sr_valid = 0;
    for (int i = 0; i < N; i++)
      chk(bitmap[i] == ((i % 2) == 1 && i != 1), $sformatf("abort bitmap slot %0d", i));
    chk(count == 5'(N / 2 - 1), "count after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
