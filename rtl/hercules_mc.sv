// hercules_mc: memory controller with WPQ, eWPQ and the log zone logic.
//
// Requests arrive from the last-level cache one at a time:
//  * OP_WB of a non-transactional or committed line: an ordinary write
//    to the home address through the WPQ.
//  * OP_WB of an uncommitted transactional line (premature flush): the
//    line gets a log entry at LogHead (fetch-and-increment), an eWPQ entry
//    {TxState, TxID, home[20:0], log index} is filled, and the entry's
//    metadata (TxState, TxID, full home address) and data are written to
//    the log zone through the WPQ.  If the eWPQ is full, its LRU entry is
//    first written to the in-pmem eWPQ extension area.
//  * OP_RD: the eWPQ is searched (EWPQ_LAT cycles).  A hit with TxState 0,
//    or with TxState 1 and the requester's own TxID, loads the log entry,
//    checks the full home address kept in its metadata (an alias of the
//    21-bit partial address is skipped and the search repeated), returns
//    the line (marked transactional if TxState is 1, and dirty so it is
//    written home later) and frees the eWPQ entry.  A hit on another
//    transaction's uncommitted line returns conflict to a transactional
//    reader and the home copy, marked nocache, to a plain reader.  On a miss the eWPQ
//    extension area is scanned if it holds entries, then the home copy is
//    read.
//  * OP_EMERG (power-off only): the line and its metadata go to the next
//    slot of the area of emergency use.
// Besides requests it
//  * writes TxLen[TxID] in the transaction profiles for tx_ctrl (0 on
//    start, the length on commit; durable once in the WPQ under ADR),
//  * applies commit/abort state resets to the eWPQ (off-chip commit) and,
//    if entries were spilled, to the extension area by a scan that reads
//    each of its lines and rewrites the ones holding the transaction
//    (commit clears TxState, abort removes the entry),
//  * migrates committed log entries to their home addresses (non-temporal
//    copy) in a scan started every MIG_PERIOD cycles,
//  * runs log garbage collection when LogHead - LogTail exceeds GC_THRESH:
//    the GC_CHUNK entries from LogTail that an eWPQ entry still points to
//    are copied to LogHead (eWPQ entry repointed, then LogHead moved by
//    one), then LogTail slides past the chunk to the next live entry,
//  * on crash_start writes LogHead, LogTail, the extension count, the eWPQ
//    validity bitmap and all eWPQ entries to the area of emergency use,
//    raises crash_ready, takes the caches' flush traffic, and on crash_end
//    writes the shutdown flag (1 only if no line went to the emergency
//    area) and pulses crash_done once the WPQ has drained.
//
// Pmem port: valid/ready request, reads answered by p_rsp_valid in order.
// Every write goes through the WPQ; a read is issued only once the WPQ is
// empty, which keeps reads behind earlier writes to the same line.
// Paper values: 512 eWPQ entries, extension 10x, 10-cycle eWPQ search,
// GC threshold 2^20, chunk 32, 21-bit fields.  Own choices: the log zone
// layout (hercules_pkg), metadata packing, doing the eWPQ search before
// (not in parallel with) the home read, a migration period counted in
// cycles rather than instructions, extension entries removed by writing an
// all-ones word, and GC moving every live entry of the chunk (see README).
//
// Tool warnings left on purpose: unused fields of the held request and
// eWPQ entry (only some fields matter in a given state), the WPQ fill
// level and free-slot flag (kept as status ports of the queues), and the
// low bits of the GC index / word index that select a word inside a line
// are reported as unused signals.
module hercules_mc
  import hercules_pkg::*;
#(
  parameter int          EWPQ_N     = EWPQ_ENTRIES,
  parameter int          EXT_N      = 10 * EWPQ_ENTRIES,
  parameter int          WPQ_DEPTH  = 64,
  parameter int          EWPQ_LAT   = 10,
  parameter int unsigned MIG_PERIOD = 3_000_000,
  parameter int unsigned GC_THRESH  = 1 << 20,
  parameter int          GC_CHUNK   = 32,
  localparam int SLOT_W = $clog2(EWPQ_N),
  localparam int EXT_W  = $clog2(EXT_N + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  // from the last-level cache
  input  logic          up_req_valid,
  output logic          up_req_ready,
  input  mreq_t         up_req,
  output logic          up_rsp_valid,
  output mrsp_t         up_rsp,
  // TxLen writes from tx_ctrl
  input  logic          len_valid,
  input  txid_t         len_txid,
  input  logic [31:0]   len_value,
  output logic          len_done,
  // state reset (off-chip commit / abort)
  input  logic          sr_valid,
  input  sreset_t       sr,
  output logic          sr_done,
  // power-off
  input  logic          crash_start,
  output logic          crash_ready,
  input  logic          crash_end,
  output logic          crash_done,
  // pmem
  output logic          p_req_valid,
  input  logic          p_req_ready,
  output preq_t         p_req,
  input  logic          p_rsp_valid,
  input  line_t         p_rsp_data,
  // status
  output logidx_t       log_head,
  output logidx_t       log_tail,
  output logic [SLOT_W:0] ewpq_count,
  output logic [EXT_W-1:0] ext_count,
  output logic          err,
  // event pulses
  output logic          ev_pflush,
  output logic          ev_ewpq_hit,
  output logic          ev_conflict,
  output logic          ev_mig,
  output logic          ev_ext_dump,
  output logic          ev_ext_hit,
  output logic          ev_gc_move
);

  typedef enum logic [5:0] {
    S_IDLE, S_RWAIT, S_RSP_WAIT, S_LEN, S_LK, S_LKDEC, S_LKMETA, S_LKDATA, S_HOMERD,
    S_HOMERSP, S_RESP, S_WBHOME, S_PF, S_PFDATA, S_EXTDUMP, S_EM, S_EMDATA,
    S_MIG, S_MIGMETA, S_MIGDATA, S_MIGWR,
    S_EXT, S_EXTCHK, S_EXTMETA, S_EXTDATA, S_XSR, S_XSRUPD,
    S_GC, S_GCMETA, S_GCDATA, S_GCWMETA, S_GCWDATA, S_GCSLIDE,
    S_CRHDR, S_CRBMP, S_CRENT, S_CRWAIT, S_CRFLAG, S_CRDRAIN, S_CRDONE
  } state_e;

  state_e      st_q, ret_q;
  mreq_t       req_q;
  mrsp_t       rsp_q;
  logidx_t     head_q, tail_q;
  logic [EXT_W-1:0] extc_q;
  logic [17:0] emc_q;                 // lines saved to the emergency area
  logic [7:0]  lat_q;
  logic [EWPQ_N-1:0] skip_q;
  logic [SLOT_W-1:0] slot_q;
  ewpq_entry_t ent_q;
  line_t       rd_q;                  // last pmem read data
  word_t       meta_q;
  logic [EXT_W-1:0] exti_q;           // extension scan index
  logic [5:0]  gck_q;                 // GC chunk position
  logic [SLOT_W:0] dmp_q;             // crash dump index
  logic [31:0] mig_cnt_q;
  logic        mig_on_q, crash_q;
  logic        sr_pend_q;
  sreset_t     sr_q;
  sreset_t     xsr_q;               // state reset being applied to the extension
  logic        err_q;

  // ------------------------------------------------------------- WPQ
  logic  pv_q;  preq_t pd_q;
  logic  wpq_push_ready, wpq_pop_valid, wpq_pop_ready, wpq_empty;
  preq_t wpq_pop;
  logic [$clog2(WPQ_DEPTH):0] wpq_level;
  wpq #(.DEPTH(WPQ_DEPTH)) u_wpq (
    .clk, .rst_n,
    .push_valid(pv_q), .push_ready(wpq_push_ready), .push_data(pd_q),
    .pop_valid(wpq_pop_valid), .pop_ready(wpq_pop_ready), .pop_data(wpq_pop),
    .empty(wpq_empty), .level(wpq_level)
  );

  // pmem reads
  logic   rv_q, rw_q;                 // read to issue / issued, awaiting data
  laddr_t ra_q;
  logic   rd_go;
  assign rd_go = rv_q && wpq_empty && !pv_q;
  always_comb begin
    p_req = '0;
    if (wpq_pop_valid) begin
      p_req = wpq_pop;
      p_req_valid = 1'b1;
    end else begin
      p_req.we   = 1'b0;
      p_req.addr = ra_q;
      p_req_valid = rd_go;
    end
  end
  assign wpq_pop_ready = p_req_ready;

  // ------------------------------------------------------------ eWPQ
  logic              lk_hit, lg_hit, mig_hit, e_full;
  ewpq_entry_t       lk_entry;
  logic [SLOT_W-1:0] lk_slot, lg_slot, mig_slot, free_slot, lru_slot;
  logic [SLOT_W:0]   e_count;
  logic [SLOT_W-1:0] e_rd_slot;
  ewpq_entry_t       e_rd;
  logic [EWPQ_N-1:0] e_bitmap;
  logic              ins_en, inv_en, upd_en;
  ewpq_entry_t       ins_entry;
  logic [SLOT_W-1:0] inv_slot, upd_slot;
  logidx_t           upd_logidx, lg_idx;
  logic              e_sr_valid;

  ewpq #(.N(EWPQ_N)) u_ewpq (
    .clk, .rst_n,
    .lk_home(req_q.addr[PART_W-1:0]), .lk_skip(skip_q), .lk_touch(1'b0),
    .lk_hit, .lk_slot, .lk_entry,
    .lg_idx, .lg_hit, .lg_slot,
    .mig_hit, .mig_slot,
    .full(e_full), .free_slot, .lru_slot, .count(e_count),
    .rd_slot(e_rd_slot), .rd_entry(e_rd), .bitmap(e_bitmap),
    .ins_en, .ins_entry, .inv_en, .inv_slot, .upd_en, .upd_slot, .upd_logidx,
    .sr_valid(e_sr_valid), .sr(sr_q)
  );

  assign e_sr_valid = sr_pend_q && st_q == S_IDLE;
  assign lg_idx     = (st_q == S_GCSLIDE) ? tail_q : logidx_t'(tail_q + logidx_t'(gck_q));

  // combinational eWPQ update strobes decoded from the state
  always_comb begin
    ins_en = 1'b0; ins_entry = '0;
    inv_en = 1'b0; inv_slot = '0;
    upd_en = 1'b0; upd_slot = '0; upd_logidx = '0;
    e_rd_slot = slot_q;
    if (st_q == S_PF && !e_full && !pv_q) begin
      ins_en = 1'b1;
      ins_entry = '{txstate: 1'b1, txid: req_q.txid,
                    home: req_q.addr[PART_W-1:0], logidx: head_q};
    end
    if (st_q == S_EXTDUMP && !pv_q) begin inv_en = 1'b1; inv_slot = lru_slot; end
    if (st_q == S_LKDATA && !pv_q && rsp_q.dirty) begin inv_en = 1'b1; inv_slot = slot_q; end
    if (st_q == S_MIGWR && !pv_q) begin inv_en = 1'b1; inv_slot = slot_q; end
    if (st_q == S_GCWDATA && !pv_q) begin
      upd_en = 1'b1; upd_slot = slot_q; upd_logidx = head_q;
    end
    if (st_q == S_EXTDUMP) e_rd_slot = lru_slot;
    if (st_q == S_CRENT)   e_rd_slot = dmp_q[SLOT_W-1:0];
  end

  // ---------------------------------------------------------- outputs
  assign up_req_ready = (st_q == S_IDLE) && !sr_pend_q && !len_valid &&
                        (crash_q ? !crash_end : !crash_start);
  assign up_rsp_valid = (st_q == S_RESP);
  assign up_rsp       = rsp_q;
  assign log_head     = head_q;
  assign log_tail     = tail_q;
  assign ewpq_count   = e_count;
  assign ext_count    = extc_q;
  assign crash_ready  = crash_q && (st_q == S_CRWAIT || st_q == S_IDLE);
  assign crash_done   = (st_q == S_CRDONE);
  assign err          = err_q;

  ewpq_entry_t x;
  assign x = ewpq_entry_t'(rd_q[64 * exti_q[2:0] +: 64]);
  logidx_t gc_idx;
  assign gc_idx = logidx_t'(tail_q + logidx_t'(gck_q));
  logidx_t used;
  assign used = logidx_t'(head_q - tail_q);

  // One line (8 entries) of the extension area with the state reset in
  // xsr_q applied: commit clears TxState, abort removes the entry.
  line_t       xsr_line;
  logic        xsr_chg;
  ewpq_entry_t xe;
  always_comb begin
    xsr_line = rd_q;
    xsr_chg  = 1'b0;
    xe       = '0;
    for (int w = 0; w < 8; w++) begin
      xe = ewpq_entry_t'(rd_q[64 * w +: 64]);
      if (rd_q[64 * w +: 64] != '1 && xe.txstate && xe.txid == xsr_q.txid) begin
        xsr_chg    = 1'b1;
        xe.txstate = 1'b0;
        xsr_line[64 * w +: 64] = xsr_q.is_abort ? '1 : word_t'(xe);
      end
    end
  end

  function automatic laddr_t meta_line(input laddr_t base, input logic [31:0] idx);
    return base + laddr_t'(idx[31:3]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; ret_q <= S_IDLE;
      req_q <= '0; rsp_q <= '0;
      head_q <= '0; tail_q <= '0; extc_q <= '0; emc_q <= '0;
      lat_q <= '0; skip_q <= '0; slot_q <= '0; ent_q <= '0;
      rd_q <= '0; meta_q <= '0; exti_q <= '0; gck_q <= '0; dmp_q <= '0;
      mig_cnt_q <= '0; mig_on_q <= 1'b0; crash_q <= 1'b0;
      sr_pend_q <= 1'b0; sr_q <= '0; xsr_q <= '0; err_q <= 1'b0;
      pv_q <= 1'b0; pd_q <= '0; rv_q <= 1'b0; rw_q <= 1'b0; ra_q <= '0;
      len_done <= 1'b0; sr_done <= 1'b0;
      ev_pflush <= 1'b0; ev_ewpq_hit <= 1'b0; ev_conflict <= 1'b0; ev_mig <= 1'b0;
      ev_ext_dump <= 1'b0; ev_ext_hit <= 1'b0; ev_gc_move <= 1'b0;
    end else begin
      len_done <= 1'b0; sr_done <= 1'b0;
      ev_pflush <= 1'b0; ev_ewpq_hit <= 1'b0; ev_conflict <= 1'b0; ev_mig <= 1'b0;
      ev_ext_dump <= 1'b0; ev_ext_hit <= 1'b0; ev_gc_move <= 1'b0;

      if (pv_q && wpq_push_ready) pv_q <= 1'b0;
      if (rd_go && !wpq_pop_valid && p_req_ready) begin rv_q <= 1'b0; rw_q <= 1'b1; end
      if (rw_q && p_rsp_valid) begin rw_q <= 1'b0; rd_q <= p_rsp_data; end

      if (sr_valid) begin sr_pend_q <= 1'b1; sr_q <= sr; end
      if (e_sr_valid) begin sr_pend_q <= 1'b0; sr_done <= 1'b1; end

      if (mig_cnt_q >= MIG_PERIOD - 1) begin
        mig_cnt_q <= '0;
        mig_on_q  <= 1'b1;
      end else mig_cnt_q <= mig_cnt_q + 1;

      unique case (st_q)
        // ------------------------------------------------------------ idle
        S_IDLE: begin
          if (e_sr_valid) begin
            // state reset applied to the eWPQ this cycle; entries spilled to
            // the extension area are updated by a scan of that area
            if (extc_q != 0) begin
              xsr_q  <= sr_q;
              exti_q <= '0;
              st_q   <= S_XSR;
            end
          end else if (!crash_q && crash_start) begin
            crash_q <= 1'b1;
            st_q    <= S_CRHDR;
          end else if (crash_q && crash_end) begin
            st_q <= S_CRFLAG;
          end else if (len_valid && !pv_q) begin
            pv_q <= 1'b1;
            pd_q <= '{we: 1'b1, addr: PROF_BASE + laddr_t'(len_txid[TXID_W-1:4]),
                      data: line_t'(len_value) << (32 * len_txid[3:0]),
                      be: 64'hF << (4 * len_txid[3:0])};
            st_q <= S_LEN;
          end else if (up_req_valid && up_req_ready) begin
            req_q  <= up_req;
            rsp_q  <= '0;
            skip_q <= '0;
            unique case (up_req.op)
              OP_RD: begin lat_q <= 8'(EWPQ_LAT - 1); st_q <= S_LK; end
              OP_WB: st_q <= (up_req.tx && up_req.txstate) ? S_PF : S_WBHOME;
              OP_EMERG: st_q <= S_EM;
              default: begin err_q <= 1'b1; st_q <= S_RESP; end
            endcase
          end else if (!crash_q && mig_on_q) begin
            if (mig_hit) begin
              slot_q <= mig_slot;
              st_q   <= S_MIG;
            end else mig_on_q <= 1'b0;
          end else if (!crash_q && 32'(used) > GC_THRESH) begin
            gck_q <= '0;
            st_q  <= S_GC;
          end
        end

        S_LEN: if (!pv_q) begin len_done <= 1'b1; st_q <= S_IDLE; end

        // pmem read helper: wait for data, then go to ret_q
        S_RWAIT: if (!rv_q && rw_q && p_rsp_valid) st_q <= ret_q;

        // --------------------------------------------------------- loads
        S_LK: if (lat_q == 0) st_q <= S_LKDEC; else lat_q <= lat_q - 1'b1;

        S_LKDEC: begin
          if (lk_hit) begin
            slot_q <= lk_slot;
            ent_q  <= lk_entry;
            if (lk_entry.txstate &&
                (!req_q.tx || lk_entry.txid != req_q.txid)) begin
              if (req_q.tx) begin
                rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1;
                st_q <= S_RESP;
              end else begin
                rv_q <= 1'b1; ra_q <= req_q.addr; ret_q <= S_HOMERSP; st_q <= S_RWAIT;
                rsp_q.nocache <= 1'b1;
              end
            end else begin
              rv_q <= 1'b1;
              ra_q <= meta_line(LMETA_BASE, 32'(lk_entry.logidx));
              ret_q <= S_LKMETA; st_q <= S_RWAIT;
            end
          end else if (extc_q != 0) begin
            exti_q <= '0;
            st_q   <= S_EXT;
          end else begin
            rv_q <= 1'b1; ra_q <= req_q.addr; ret_q <= S_HOMERSP; st_q <= S_RWAIT;
          end
        end

        S_LKMETA: begin
          if (rd_q[64 * ent_q.logidx[2:0] +: 33] == req_q.addr) begin
            rv_q <= 1'b1; ra_q <= LDATA_BASE + laddr_t'(ent_q.logidx);
            ret_q <= S_LKDATA; st_q <= S_RWAIT;
            rsp_q.tx      <= ent_q.txstate;
            rsp_q.txid    <= ent_q.txid;
            rsp_q.txstate <= ent_q.txstate;
            rsp_q.dirty   <= 1'b1;
          end else begin
            // alias of the partial address: search again without it
            skip_q[slot_q] <= 1'b1;
            st_q <= S_LKDEC;
          end
        end

        S_LKDATA: if (!pv_q) begin
          // eWPQ entry (or extension entry) released as the line goes up
          rsp_q.data <= rd_q;
          ev_ewpq_hit <= 1'b1;
          st_q <= S_RESP;
        end

        S_HOMERSP: begin rsp_q.data <= rd_q; st_q <= S_RESP; end

        S_RESP: st_q <= crash_q ? S_CRWAIT : S_IDLE;

        // ------------------------------------------------------- writes
        S_WBHOME: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= '{we: 1'b1, addr: req_q.addr, data: req_q.data, be: '1};
          st_q <= S_RESP;
        end

        S_PF: if (!pv_q) begin
          if (e_full) begin
            st_q <= S_EXTDUMP;
          end else begin
            // entry inserted this cycle (ins_en); log entry at LogHead
            if (logidx_t'(head_q + 1'b1) == tail_q) err_q <= 1'b1;   // log zone full
            pv_q <= 1'b1;
            pd_q <= word_write(meta_line(LMETA_BASE, 32'(head_q)), head_q[2:0],
                               pack_meta(1'b1, req_q.txid, req_q.addr));
            st_q <= S_PFDATA;
          end
        end

        S_PFDATA: if (!pv_q) begin
          pv_q   <= 1'b1;
          pd_q   <= '{we: 1'b1, addr: LDATA_BASE + laddr_t'(head_q), data: req_q.data, be: '1};
          head_q <= head_q + 1'b1;
          ev_pflush <= 1'b1;
          st_q   <= S_RESP;
        end

        S_EXTDUMP: if (!pv_q) begin
          if (int'(extc_q) >= EXT_N) err_q <= 1'b1;
          pv_q   <= 1'b1;
          pd_q   <= word_write(meta_line(EXT_BASE, 32'(extc_q)), extc_q[2:0], word_t'(e_rd));
          extc_q <= extc_q + 1'b1;
          ev_ext_dump <= 1'b1;
          st_q   <= S_PF;
        end

        S_EM: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= word_write(meta_line(EMG_META, 32'(emc_q)), emc_q[2:0],
                             pack_meta(req_q.txstate, req_q.txid, req_q.addr));
          st_q <= S_EMDATA;
        end

        S_EMDATA: if (!pv_q) begin
          pv_q  <= 1'b1;
          pd_q  <= '{we: 1'b1, addr: EMG_DATA + laddr_t'(emc_q), data: req_q.data, be: '1};
          emc_q <= emc_q + 1'b1;
          st_q  <= S_RESP;
        end

        // ---------------------------------------------------- migration
        S_MIG: begin
          ent_q <= e_rd;
          rv_q  <= 1'b1; ra_q <= meta_line(LMETA_BASE, 32'(e_rd.logidx));
          ret_q <= S_MIGMETA; st_q <= S_RWAIT;
        end
        S_MIGMETA: begin
          meta_q <= rd_q[64 * ent_q.logidx[2:0] +: 64];
          rv_q   <= 1'b1; ra_q <= LDATA_BASE + laddr_t'(ent_q.logidx);
          ret_q  <= S_MIGWR; st_q <= S_RWAIT;
        end
        S_MIGWR: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= '{we: 1'b1, addr: meta_q[32:0], data: rd_q, be: '1};
          ev_mig <= 1'b1;
          st_q <= S_IDLE;
        end

        // ------------------------------------------ extension area search
        S_EXT: begin
          if (exti_q >= extc_q) begin
            rv_q <= 1'b1; ra_q <= req_q.addr; ret_q <= S_HOMERSP; st_q <= S_RWAIT;
          end else begin
            rv_q <= 1'b1; ra_q <= meta_line(EXT_BASE, 32'(exti_q));
            ret_q <= S_EXTCHK; st_q <= S_RWAIT;
          end
        end
        S_EXTCHK: begin
          if (x != ewpq_entry_t'('1) && x.home == req_q.addr[PART_W-1:0]) begin
            ent_q <= x;
            if (x.txstate && (!req_q.tx || x.txid != req_q.txid)) begin
              if (req_q.tx) begin
                rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1; st_q <= S_RESP;
              end else begin
                rv_q <= 1'b1; ra_q <= req_q.addr; ret_q <= S_HOMERSP; st_q <= S_RWAIT;
                rsp_q.nocache <= 1'b1;
              end
            end else begin
              rv_q <= 1'b1; ra_q <= meta_line(LMETA_BASE, 32'(x.logidx));
              ret_q <= S_EXTMETA; st_q <= S_RWAIT;
            end
          end else begin
            exti_q <= exti_q + 1'b1;
            st_q   <= S_EXT;
          end
        end
        S_EXTMETA: begin
          if (rd_q[64 * ent_q.logidx[2:0] +: 33] == req_q.addr) begin
            // release the extension entry, then fetch the data
            pv_q <= 1'b1;
            pd_q <= word_write(meta_line(EXT_BASE, 32'(exti_q)), exti_q[2:0], '1);
            rv_q <= 1'b1; ra_q <= LDATA_BASE + laddr_t'(ent_q.logidx);
            ret_q <= S_EXTDATA; st_q <= S_RWAIT;
          end else begin
            exti_q <= exti_q + 1'b1;
            st_q   <= S_EXT;
          end
        end
        S_EXTDATA: begin
          rsp_q.data    <= rd_q;
          rsp_q.tx      <= ent_q.txstate;
          rsp_q.txid    <= ent_q.txid;
          rsp_q.txstate <= ent_q.txstate;
          rsp_q.dirty   <= 1'b1;
          ev_ext_hit    <= 1'b1;
          st_q <= S_RESP;
        end

        // ------------------- state reset of the extension area, line by line
        S_XSR: begin
          if (exti_q >= extc_q) st_q <= S_IDLE;
          else begin
            rv_q <= 1'b1; ra_q <= meta_line(EXT_BASE, 32'(exti_q));
            ret_q <= S_XSRUPD; st_q <= S_RWAIT;
          end
        end
        S_XSRUPD: if (!pv_q) begin
          if (xsr_chg) begin
            pv_q <= 1'b1;
            pd_q <= '{we: 1'b1, addr: meta_line(EXT_BASE, 32'(exti_q)), data: xsr_line, be: '1};
          end
          exti_q <= {exti_q[EXT_W-1:3] + 1'b1, 3'b000};
          st_q   <= S_XSR;
        end

        // ------------------------------------------------------------ GC
        S_GC: begin
          if (int'(gck_q) == GC_CHUNK || logidx_t'(tail_q + logidx_t'(gck_q)) == head_q) begin
            tail_q <= logidx_t'(tail_q + logidx_t'(gck_q));
            st_q   <= S_GCSLIDE;
          end else if (lg_hit) begin
            slot_q <= lg_slot;
            rv_q   <= 1'b1;
            ra_q   <= meta_line(LMETA_BASE, 32'(tail_q + logidx_t'(gck_q)));
            ret_q  <= S_GCMETA; st_q <= S_RWAIT;
          end else gck_q <= gck_q + 1'b1;
        end
        S_GCMETA: begin
          meta_q <= rd_q[64 * gc_idx[2:0] +: 64];
          rv_q   <= 1'b1; ra_q <= LDATA_BASE + laddr_t'(logidx_t'(tail_q + logidx_t'(gck_q)));
          ret_q  <= S_GCWMETA; st_q <= S_RWAIT;
        end
        S_GCWMETA: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= word_write(meta_line(LMETA_BASE, 32'(head_q)), head_q[2:0], meta_q);
          st_q <= S_GCDATA;
        end
        S_GCDATA: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= '{we: 1'b1, addr: LDATA_BASE + laddr_t'(head_q), data: rd_q, be: '1};
          st_q <= S_GCWDATA;
        end
        S_GCWDATA: if (!pv_q) begin
          // eWPQ entry repointed this cycle (upd_en), then LogHead moves
          head_q <= head_q + 1'b1;
          gck_q  <= gck_q + 1'b1;
          ev_gc_move <= 1'b1;
          st_q   <= S_GC;
        end
        S_GCSLIDE: begin
          if (tail_q == head_q || lg_hit) st_q <= S_IDLE;
          else tail_q <= tail_q + 1'b1;
        end

        // ----------------------------------------------------- power-off
        S_CRHDR: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= '{we: 1'b1, addr: EMG_HDR,
                    data: {line_t'(extc_q) << 128} | {line_t'(tail_q) << 64} | line_t'(head_q),
                    be: 64'h0000_0000_00FF_FFFF};
          st_q <= S_CRBMP;
        end
        S_CRBMP: if (!pv_q) begin
          pv_q  <= 1'b1;
          pd_q  <= '{we: 1'b1, addr: EMG_BITMAP, data: line_t'(e_bitmap), be: '1};
          dmp_q <= '0;
          st_q  <= S_CRENT;
        end
        S_CRENT: if (!pv_q) begin
          if (int'(dmp_q) == EWPQ_N) st_q <= S_CRWAIT;
          else begin
            pv_q  <= 1'b1;
            pd_q  <= word_write(meta_line(EMG_EWPQ, 32'(dmp_q)), dmp_q[2:0], word_t'(e_rd));
            dmp_q <= dmp_q + 1'b1;
          end
        end
        S_CRWAIT: st_q <= S_IDLE;    // now only flush traffic is served
        S_CRFLAG: if (!pv_q) begin
          pv_q <= 1'b1;
          pd_q <= '{we: 1'b1, addr: EMG_HDR,
                    data: (line_t'(emc_q) << 256) | (line_t'(emc_q == 0) << 192),
                    be: 64'h0000_0000_FF00_0000 | 64'h0000_00FF_0000_0000};
          st_q <= S_CRDRAIN;
        end
        S_CRDRAIN: if (!pv_q && wpq_empty) st_q <= S_CRDONE;
        S_CRDONE: begin
          crash_q <= 1'b0;
          st_q    <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(rv_q && rw_q))
    else $error("hercules_mc: overlapping pmem reads");

endmodule
