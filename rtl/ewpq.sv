// ewpq: the extended write pending queue of the memory controller.
//
// Every transactional line that leaves the cache before its transaction
// commits ("premature flush") gets one entry here.  An entry holds TxState,
// TxID, the low 21 bits of the home line address and the 21-bit index of
// the in-pmem log entry that holds the line; a validity bitmap marks live
// entries.  512 entries of 64 bits make the paper's 4 KB eWPQ.  The queue
// is searched like a fully associative cache.
//
// Interface (all searches are combinational, all updates take effect at the
// next clock edge; at most one update port is used per cycle by the MC):
//   lk_home, lk_skip -> lk_hit/lk_slot   lowest valid entry whose partial
//                                        home address matches, ignoring the
//                                        slots in lk_skip (earlier matches
//                                        that proved to be aliases)
//   lg_idx  -> lg_hit/lg_slot            entry that points at a log index
//   mig_hit/mig_slot                     a committed entry (TxState 0)
//   free_slot/full, lru_slot             insertion point and LRU victim
//   ins_en/ins_entry                     insert at free_slot
//   inv_en/inv_slot                      clear a validity bit
//   upd_en/upd_slot/upd_logidx           repoint an entry (log GC)
//   sr_valid/sr                          commit: TxState <- 0 / abort:
//                                        invalidate, for every entry of
//                                        sr.txid with TxState 1, one cycle
// Recency for LRU is a per-entry stamp written on insertion and on every
// search hit; the victim is the valid entry with the oldest stamp.
module ewpq
  import hercules_pkg::*;
#(
  parameter int N = EWPQ_ENTRIES,
  localparam int SLOT_W = $clog2(N)
)(
  input  logic                clk,
  input  logic                rst_n,
  // search by home address
  input  logic [PART_W-1:0]   lk_home,
  input  logic [N-1:0]        lk_skip,
  input  logic                lk_touch,    // count a search hit as a use
  output logic                lk_hit,
  output logic [SLOT_W-1:0]   lk_slot,
  output ewpq_entry_t         lk_entry,
  // search by log index
  input  logidx_t             lg_idx,
  output logic                lg_hit,
  output logic [SLOT_W-1:0]   lg_slot,
  // migration candidate
  output logic                mig_hit,
  output logic [SLOT_W-1:0]   mig_slot,
  // allocation
  output logic                full,
  output logic [SLOT_W-1:0]   free_slot,
  output logic [SLOT_W-1:0]   lru_slot,
  output logic [$clog2(N+1)-1:0] count,
  // read any slot
  input  logic [SLOT_W-1:0]   rd_slot,
  output ewpq_entry_t         rd_entry,
  output logic [N-1:0]        bitmap,
  // updates
  input  logic                ins_en,
  input  ewpq_entry_t         ins_entry,
  input  logic                inv_en,
  input  logic [SLOT_W-1:0]   inv_slot,
  input  logic                upd_en,
  input  logic [SLOT_W-1:0]   upd_slot,
  input  logidx_t             upd_logidx,
  input  logic                sr_valid,
  input  sreset_t             sr
);

  ewpq_entry_t       ent   [N];
  logic [N-1:0]      vld;
  logic [31:0]       stamp [N];
  logic [31:0]       now_q;

  assign bitmap   = vld;
  assign rd_entry = ent[rd_slot];
  assign lk_entry = ent[lk_slot];

  always_comb begin
    lk_hit = 1'b0;  lk_slot = '0;
    lg_hit = 1'b0;  lg_slot = '0;
    mig_hit = 1'b0; mig_slot = '0;
    full = 1'b1;    free_slot = '0;
    count = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (vld[i] && !lk_skip[i] && ent[i].home == lk_home) begin
        lk_hit = 1'b1; lk_slot = SLOT_W'(i);
      end
      if (vld[i] && ent[i].logidx == lg_idx) begin
        lg_hit = 1'b1; lg_slot = SLOT_W'(i);
      end
      if (vld[i] && !ent[i].txstate) begin
        mig_hit = 1'b1; mig_slot = SLOT_W'(i);
      end
      if (!vld[i]) begin
        full = 1'b0; free_slot = SLOT_W'(i);
      end
    end
    for (int i = 0; i < N; i++) count += vld[i];
  end

  // LRU victim: oldest stamp among valid entries.
  always_comb begin
    logic [31:0] best;
    best = '1;
    lru_slot = '0;
    for (int i = 0; i < N; i++) begin
      if (vld[i] && stamp[i] < best) begin
        best = stamp[i];
        lru_slot = SLOT_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld   <= '0;
      now_q <= '0;
      for (int i = 0; i < N; i++) begin
        ent[i]   <= '0;
        stamp[i] <= '0;
      end
    end else begin
      if (ins_en) begin
        ent[free_slot]   <= ins_entry;
        vld[free_slot]   <= 1'b1;
        stamp[free_slot] <= now_q;
        now_q            <= now_q + 1;
      end else if (lk_touch && lk_hit) begin
        stamp[lk_slot] <= now_q;
        now_q          <= now_q + 1;
      end
      if (inv_en) vld[inv_slot] <= 1'b0;
      if (upd_en) ent[upd_slot].logidx <= upd_logidx;
      if (sr_valid) begin
        for (int i = 0; i < N; i++) begin
          if (vld[i] && ent[i].txstate && ent[i].txid == sr.txid) begin
            if (sr.is_abort) vld[i] <= 1'b0;
            else          ent[i].txstate <= 1'b0;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ins_en |-> !full)
    else $error("ewpq: insert into a full queue");

endmodule
