// hercules_cache: one level of the transactionally tagged cache hierarchy
// (instantiated as L1D, L2 and L3).
//
// A blocking, write-back, write-allocate, set-associative cache whose sets
// also carry TransTags (transtag_array).  A way covered by a TransTag with
// TxState 1 is a transactional line: it holds the only copy of an
// uncommitted update, so it must never be written to its home address.
// Behaviour taken from the paper:
//  * A transactional store to a clean line takes a TransTag; to a dirty
//    non-transactional (or committed) line, the line is first written to
//    the next level so the latest committed version is kept there.
//  * Replacement: a non-transactional line may only replace a
//    non-transactional one.  A transactional line takes a free TransTag and
//    replaces a non-transactional victim; if all TransTags are in use a
//    transactional line is evicted.  An evicted transactional line keeps
//    its TxID and TxState, so the next level (or, below L3, the memory
//    controller's premature flush) keeps it away from home.
//  * Exclusion for transactional lines: when an upper level reads a line
//    that is transactional here, the line moves up with its TransTag and is
//    dropped here (UPPER_CACHE = 1 on L2 and L3).
//  * Commit clears TxState of the TxID's lines, abort drops them, both in
//    RESET_CYCLES cycles (the TransTag auxiliary circuit).
//  * Isolation: a transactional access to another transaction's line
//    returns conflict (the transaction aborts); a plain read of it is served
//    from the level below without allocating (read-committed bypass); the
//    response carries nocache so no level above keeps that older copy.
//  * Power-off flush walks every way: uncommitted transactional lines go
//    down as OP_EMERG (to the area of emergency use), other dirty lines as
//    OP_WB to home.  With fwd set the level only forwards requests from
//    above, so lower levels can be flushed first.
// This design's own choices: round-robin victim choice among the allowed
// ways (the paper leaves the algorithm open); a non-transactional fill
// that finds only transactional ways evicts one of them; one request at a
// time; WAYS and SETS must be powers of two.
//
// Interface: up_* from the core or upper level, dn_* to the lower level
// or memory controller.  Requests use a valid/ready handshake and each one
// is answered by exactly one *_rsp_valid pulse (writes included).
// Timing: a hit is answered HIT_LAT cycles after it is accepted (minimum
// 2); a miss adds the lower level's time and any write-backs.
//
// Tool warnings left on purpose: the conflict and nocache bits of the
// stored fill response fill_q (both are acted on when the response
// arrives, before it is stored), tt_busy (commit and abort wait for the
// done pulse instead) and unused fields of the TransTag passed to a helper
// function are reported as unused signals.
module hercules_cache
  import hercules_pkg::*;
#(
  parameter int SETS         = 128,
  parameter int WAYS         = 4,
  parameter int NTT          = 4,
  parameter int HIT_LAT      = 2,
  parameter int RESET_CYCLES = 10,
  parameter bit UPPER_CACHE  = 1'b0,
  localparam int SET_W = $clog2(SETS),
  localparam int WAY_W = $clog2(WAYS),
  localparam int NTT_W = (NTT > 1) ? $clog2(NTT) : 1,
  localparam int TAG_W = LADDR_W - SET_W,
  localparam int LANES = (SETS + RESET_CYCLES - 1) / RESET_CYCLES
)(
  input  logic    clk,
  input  logic    rst_n,
  // upper side
  input  logic    up_req_valid,
  output logic    up_req_ready,
  input  mreq_t   up_req,
  output logic    up_rsp_valid,
  output mrsp_t   up_rsp,
  // lower side
  output logic    dn_req_valid,
  input  logic    dn_req_ready,
  output mreq_t   dn_req,
  input  logic    dn_rsp_valid,
  input  mrsp_t   dn_rsp,
  // state reset (commit / abort)
  input  logic    sr_valid,
  input  sreset_t sr,
  output logic    sr_done,
  // running transaction covers a new line (L1D only is used)
  output logic    line_new,
  // power-off flush
  input  logic    flush_start,
  input  logic    fwd,
  output logic    flush_done,
  // event pulses for statistics
  output logic    ev_tx_evict,
  output logic    ev_bypass,
  output logic    ev_conflict
);

  typedef enum logic [4:0] {
    S_IDLE, S_LAT, S_HIT, S_FETCH, S_ALLOC, S_EVICT, S_INSTALL, S_CLEAN,
    S_ACQ, S_BYP, S_FWD, S_RESP, S_SR, S_FLUSH, S_FLWR, S_FLDONE, S_SETTLE
  } state_e;

  // ------------------------------------------------------------ storage
  line_t            data_q [SETS*WAYS];
  logic [TAG_W-1:0] tag_q  [SETS][WAYS];
  logic [WAYS-1:0]  vld_q  [SETS];
  logic [WAYS-1:0]  dty_q  [SETS];
  logic [WAY_W-1:0] rr_q   [SETS];

  state_e           st_q, ret_q, nxt_q;
  mreq_t            req_q;
  mrsp_t            fill_q, rsp_q;
  logic [7:0]       lat_q;
  logic [WAY_W-1:0] way_q;            // way being worked on
  logic [WAY_W-1:0] vic_q;            // victim being evicted
  logic [SET_W+WAY_W:0] fl_q;         // flush walk index
  mreq_t            dnr_q;            // downstream request
  logic             dn_pend_q;        // dn request issued, waiting response
  logic             dn_acc_q;         // dn request accepted

  // -------------------------------------------------------- TransTags
  logic [SET_W-1:0] tt_rd_set;
  transtag_t        tt_rd [NTT];
  logic             tt_wr_en;
  logic [SET_W-1:0] tt_wr_set;
  logic [NTT_W-1:0] tt_wr_idx;
  transtag_t        tt_wr;
  logic             tt_busy, tt_done, kill_valid;
  logic [SET_W:0]   kill_base;
  logic [WAYS-1:0]  kill_mask [LANES];

  transtag_array #(
    .SETS(SETS), .WAYS(WAYS), .NTT(NTT), .RESET_CYCLES(RESET_CYCLES)
  ) u_tt (
    .clk, .rst_n,
    .rd_set(tt_rd_set), .rd_tags(tt_rd),
    .wr_en(tt_wr_en), .wr_set(tt_wr_set), .wr_idx(tt_wr_idx), .wr_tag(tt_wr),
    .sr_valid(sr_valid && st_q == S_IDLE), .sr, .sr_busy(tt_busy), .sr_done(tt_done),
    .kill_valid, .kill_base, .kill_mask
  );

  // ------------------------------------------------- current set decode
  logic [SET_W-1:0] set_c;
  logic [TAG_W-1:0] tag_c;
  logic [SET_W-1:0] fl_set;
  logic [WAY_W-1:0] fl_way;
  assign fl_set = fl_q[SET_W+WAY_W-1:WAY_W];
  assign fl_way = fl_q[WAY_W-1:0];
  assign set_c  = (st_q == S_FLUSH || st_q == S_FLWR) ? fl_set : req_q.addr[SET_W-1:0];
  assign tag_c  = req_q.addr[LADDR_W-1:SET_W];
  assign tt_rd_set = set_c;

  // per-way TransTag view of the current set
  logic [WAYS-1:0]  cov, wtx;
  logic [NTT_W-1:0] cov_idx [WAYS];
  logic             tt_free, tt_recl;
  logic [NTT_W-1:0] tt_free_idx, tt_recl_idx;
  always_comb begin
    cov = '0; wtx = '0;
    for (int w = 0; w < WAYS; w++) cov_idx[w] = '0;
    tt_free = 1'b0; tt_free_idx = '0;
    tt_recl = 1'b0; tt_recl_idx = '0;
    for (int n = NTT - 1; n >= 0; n--) begin
      if (tt_rd[n].valid && int'(tt_rd[n].wayno) < WAYS) begin
        cov[tt_rd[n].wayno[WAY_W-1:0]]     = 1'b1;
        cov_idx[tt_rd[n].wayno[WAY_W-1:0]] = NTT_W'(n);
        if (tt_rd[n].txstate) wtx[tt_rd[n].wayno[WAY_W-1:0]] = 1'b1;
      end
      if (!tt_rd[n].valid) begin tt_free = 1'b1; tt_free_idx = NTT_W'(n); end
      if (tt_rd[n].valid && !tt_rd[n].txstate) begin tt_recl = 1'b1; tt_recl_idx = NTT_W'(n); end
    end
    wtx = wtx & vld_q[set_c];
  end

  // hit detection
  logic             hit;
  logic [WAY_W-1:0] hway;
  always_comb begin
    hit = 1'b0; hway = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (vld_q[set_c][w] && tag_q[set_c][w] == tag_c) begin
        hit = 1'b1; hway = WAY_W'(w);
      end
  end
  transtag_t htag;
  assign htag = tt_rd[cov_idx[hway]];

  // victim choice: round-robin from rr_q among allowed ways, invalid first
  function automatic logic [WAY_W-1:0] pick(input logic [WAYS-1:0] allowed,
                                            input logic [WAYS-1:0] vld,
                                            input logic [WAY_W-1:0] start);
    logic [WAY_W-1:0] r;
    logic found;
    r = start; found = 1'b0;
    for (int k = 0; k < WAYS; k++) begin
      logic [WAY_W-1:0] w;
      w = start + WAY_W'(k);
      if (!found && allowed[w] && !vld[w]) begin r = w; found = 1'b1; end
    end
    for (int k = 0; k < WAYS; k++) begin
      logic [WAY_W-1:0] w;
      w = start + WAY_W'(k);
      if (!found && allowed[w]) begin r = w; found = 1'b1; end
    end
    return r;
  endfunction

  logic             alloc_tx;          // class of the line being placed
  logic [WAY_W-1:0] vic_c;
  always_comb begin
    logic [WAYS-1:0] nontx;
    nontx = ~wtx;
    if (alloc_tx) begin
      if (tt_free || tt_recl) vic_c = pick(nontx, vld_q[set_c], rr_q[set_c]);
      else                    vic_c = pick(wtx,   vld_q[set_c], rr_q[set_c]);
    end else begin
      if (nontx != '0)        vic_c = pick(nontx, vld_q[set_c], rr_q[set_c]);
      else                    vic_c = pick(wtx,   vld_q[set_c], rr_q[set_c]);
    end
  end
  assign alloc_tx = (req_q.op == OP_WB) ? (req_q.tx && req_q.txstate)
                                        : (fill_q.tx && fill_q.txstate);

  // transactional victim other than way_q, for TransTag acquisition
  logic [WAY_W-1:0] acq_vic;
  always_comb begin
    logic [WAYS-1:0] m;
    m = wtx;
    m[way_q] = 1'b0;
    acq_vic = pick(m, vld_q[set_c], rr_q[set_c]);
  end

  function automatic mreq_t wb_of(input laddr_t a, input line_t d, input transtag_t t,
                                  input logic is_tx, input logic dirty);
    mreq_t r;
    r = '0;
    r.op      = OP_WB;
    r.addr    = a;
    r.data    = d;
    r.tx      = is_tx;
    r.txid    = is_tx ? t.txid : '0;
    r.txstate = is_tx;
    r.dirty   = dirty;
    return r;
  endfunction

  function automatic laddr_t addr_of(input logic [TAG_W-1:0] t, input logic [SET_W-1:0] s);
    return {t, s};
  endfunction

  // ------------------------------------------------------ outputs
  assign up_req_ready = (st_q == S_IDLE) && !sr_valid && !flush_start;
  assign up_rsp_valid = (st_q == S_RESP);
  assign up_rsp       = rsp_q;
  assign dn_req_valid = dn_pend_q && !dn_acc_q;
  assign dn_req       = dnr_q;
  assign flush_done   = (st_q == S_FLDONE);

  // --------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; ret_q <= S_IDLE; nxt_q <= S_IDLE;
      req_q <= '0; fill_q <= '0; rsp_q <= '0; lat_q <= '0;
      way_q <= '0; vic_q <= '0; fl_q <= '0; dnr_q <= '0;
      dn_pend_q <= 1'b0; dn_acc_q <= 1'b0;
      sr_done <= 1'b0; line_new <= 1'b0;
      ev_tx_evict <= 1'b0; ev_bypass <= 1'b0; ev_conflict <= 1'b0;
      tt_wr_en <= 1'b0; tt_wr_set <= '0; tt_wr_idx <= '0; tt_wr <= '0;
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0;
        dty_q[s] <= '0;
        rr_q[s]  <= '0;
      end
    end else begin
      sr_done <= 1'b0; line_new <= 1'b0;
      ev_tx_evict <= 1'b0; ev_bypass <= 1'b0; ev_conflict <= 1'b0;
      tt_wr_en <= 1'b0;
      if (dn_req_valid && dn_req_ready) dn_acc_q <= 1'b1;

      // abort: drop the lines reported by the TransTag walk
      if (kill_valid) begin
        for (int l = 0; l < LANES; l++)
          if ((int'(kill_base) + l) < SETS)
            vld_q[int'(kill_base) + l] <= vld_q[int'(kill_base) + l] & ~kill_mask[l];
      end

      unique case (st_q)
        S_IDLE: begin
          if (sr_valid) st_q <= S_SR;
          else if (flush_start) begin
            fl_q <= '0;
            st_q <= S_FLUSH;
          end else if (up_req_valid) begin
            req_q <= up_req;
            rsp_q <= '0;
            if (fwd) begin
              dnr_q <= up_req; dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
              st_q  <= S_FWD;
            end else if (HIT_LAT <= 2) st_q <= S_HIT;
            else begin
              lat_q <= 8'(HIT_LAT - 3);
              st_q  <= S_LAT;
            end
          end
        end

        S_LAT: if (lat_q == 0) st_q <= S_HIT; else lat_q <= lat_q - 1'b1;

        S_HIT: begin
          way_q <= hway;
          unique case (req_q.op)
            OP_RD: begin
              if (hit && wtx[hway]) begin
                if (req_q.tx && htag.txid == req_q.txid) begin
                  rsp_q.data <= data_q[{set_c, hway}];
                  if (UPPER_CACHE) begin
                    // exclusive hand-over to the upper level
                    rsp_q.tx <= 1'b1; rsp_q.txid <= htag.txid;
                    rsp_q.txstate <= 1'b1; rsp_q.dirty <= 1'b1;
                    vld_q[set_c][hway] <= 1'b0;
                    tt_wr_en <= 1'b1; tt_wr_set <= set_c;
                    tt_wr_idx <= cov_idx[hway]; tt_wr <= '0;
                  end
                  st_q <= S_RESP;
                end else if (req_q.tx) begin
                  rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1;
                  st_q <= S_RESP;
                end else begin
                  // read committed: serve the older copy from below
                  dnr_q <= '{op: OP_RD, addr: req_q.addr, default: '0};
                  dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
                  ev_bypass <= 1'b1;
                  st_q <= S_BYP;
                end
              end else if (hit) begin
                rsp_q.data <= data_q[{set_c, hway}];
                st_q <= S_RESP;
              end else begin
                dnr_q <= '{op: OP_RD, addr: req_q.addr, tx: req_q.tx,
                           txid: req_q.txid, default: '0};
                dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
                st_q <= S_FETCH;
              end
            end
            OP_WR: begin
              if (hit && wtx[hway]) begin
                if (req_q.tx && htag.txid == req_q.txid) begin
                  data_q[{set_c, hway}][req_q.word*64 +: 64] <= req_q.data[63:0];
                  dty_q[set_c][hway] <= 1'b1;
                end else begin
                  rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1;
                end
                st_q <= S_RESP;
              end else if (hit && !req_q.tx) begin
                data_q[{set_c, hway}][req_q.word*64 +: 64] <= req_q.data[63:0];
                dty_q[set_c][hway] <= 1'b1;
                st_q <= S_RESP;
              end else if (hit && dty_q[set_c][hway]) begin
                // keep the latest committed version below first
                dnr_q <= wb_of(req_q.addr, data_q[{set_c, hway}], htag, 1'b0, 1'b1);
                dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
                st_q <= S_CLEAN;
              end else if (hit) begin
                st_q <= S_ACQ;
              end else begin
                dnr_q <= '{op: OP_RD, addr: req_q.addr, tx: req_q.tx,
                           txid: req_q.txid, default: '0};
                dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
                st_q <= S_FETCH;
              end
            end
            default: begin // OP_WB from the upper level
              if (hit && req_q.tx && req_q.txstate && !wtx[hway]) begin
                if (dty_q[set_c][hway]) begin
                  dnr_q <= wb_of(req_q.addr, data_q[{set_c, hway}], htag, 1'b0, 1'b1);
                  dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
                  st_q <= S_CLEAN;
                end else st_q <= S_ACQ;
              end else if (hit) begin
                data_q[{set_c, hway}] <= req_q.data;
                dty_q[set_c][hway] <= dty_q[set_c][hway] | req_q.dirty;
                st_q <= S_RESP;
              end else st_q <= S_ALLOC;
            end
          endcase
        end

        S_FETCH: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          fill_q <= dn_rsp;
          if (dn_rsp.conflict) begin
            rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1;
            st_q <= S_RESP;
          end else if (dn_rsp.nocache) begin
            // a lower level bypassed an uncommitted line: pass the older
            // copy up without keeping it; a plain store there is refused
            if (req_q.op == OP_RD) begin
              rsp_q.data <= dn_rsp.data; rsp_q.nocache <= 1'b1;
            end else begin
              rsp_q.conflict <= 1'b1; ev_conflict <= 1'b1;
            end
            st_q <= S_RESP;
          end else st_q <= S_ALLOC;
        end

        S_ALLOC: begin
          vic_q <= vic_c;
          rr_q[set_c] <= vic_c + 1'b1;
          if (vld_q[set_c][vic_c] && (wtx[vic_c] || dty_q[set_c][vic_c])) begin
            dnr_q <= wb_of(addr_of(tag_q[set_c][vic_c], set_c), data_q[{set_c, vic_c}],
                           tt_rd[cov_idx[vic_c]], wtx[vic_c], 1'b1);
            dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
            ev_tx_evict <= wtx[vic_c];
            ret_q <= S_INSTALL;
            st_q  <= S_EVICT;
          end else begin
            vld_q[set_c][vic_c] <= 1'b0;
            if (cov[vic_c]) begin
              tt_wr_en <= 1'b1; tt_wr_set <= set_c;
              tt_wr_idx <= cov_idx[vic_c]; tt_wr <= '0;
            end
            nxt_q <= S_INSTALL;
            st_q  <= S_SETTLE;
          end
        end

        S_EVICT: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          vld_q[set_c][vic_q] <= 1'b0;
          if (cov[vic_q]) begin
            tt_wr_en <= 1'b1; tt_wr_set <= set_c;
            tt_wr_idx <= cov_idx[vic_q]; tt_wr <= '0;
          end
          nxt_q <= ret_q;
          st_q  <= S_SETTLE;
        end

        S_INSTALL: begin
          vld_q[set_c][vic_q] <= 1'b1;
          tag_q[set_c][vic_q] <= tag_c;
          way_q <= vic_q;
          if (req_q.op == OP_WB) begin
            data_q[{set_c, vic_q}] <= req_q.data;
            dty_q[set_c][vic_q]    <= req_q.dirty;
          end else begin
            data_q[{set_c, vic_q}] <= fill_q.data;
            dty_q[set_c][vic_q]    <= fill_q.dirty;
          end
          if (alloc_tx) begin
            tt_wr_en  <= 1'b1;
            tt_wr_set <= set_c;
            tt_wr_idx <= tt_free ? tt_free_idx : tt_recl_idx;
            tt_wr     <= '{valid: 1'b1, wayno: 4'(vic_q),
                           txid: (req_q.op == OP_WB) ? req_q.txid : fill_q.txid,
                           txstate: 1'b1};
          end
          nxt_q <= (req_q.op == OP_WB) ? S_RESP : S_HIT;
          st_q  <= S_SETTLE;
        end

        S_CLEAN: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          dty_q[set_c][way_q] <= 1'b0;
          st_q <= (req_q.op == OP_WB) ? S_ACQ : S_HIT;
        end

        S_ACQ: begin
          // make way_q transactional for req_q.txid
          if (cov[way_q] || tt_free || tt_recl) begin
            tt_wr_en  <= 1'b1;
            tt_wr_set <= set_c;
            tt_wr_idx <= cov[way_q] ? cov_idx[way_q] : (tt_free ? tt_free_idx : tt_recl_idx);
            tt_wr     <= '{valid: 1'b1, wayno: 4'(way_q), txid: req_q.txid, txstate: 1'b1};
            if (req_q.op == OP_WB) begin
              data_q[{set_c, way_q}] <= req_q.data;
              dty_q[set_c][way_q]    <= 1'b1;
              nxt_q <= S_RESP;
            end else begin
              line_new <= 1'b1;
              nxt_q <= S_HIT;
            end
            st_q <= S_SETTLE;
          end else begin
            // all TransTags of the set hold uncommitted lines: evict one
            vic_q <= acq_vic;
            rr_q[set_c] <= acq_vic + 1'b1;
            dnr_q <= wb_of(addr_of(tag_q[set_c][acq_vic], set_c), data_q[{set_c, acq_vic}],
                           tt_rd[cov_idx[acq_vic]], 1'b1, 1'b1);
            dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
            ev_tx_evict <= 1'b1;
            ret_q <= S_ACQ;
            st_q  <= S_EVICT;
          end
        end

        S_BYP: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          rsp_q.data <= dn_rsp.data;
          rsp_q.nocache <= 1'b1;
          st_q <= S_RESP;
        end

        S_FWD: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          rsp_q <= dn_rsp;
          st_q  <= S_RESP;
        end

        S_RESP: st_q <= S_IDLE;

        S_SR: if (tt_done) begin
          sr_done <= 1'b1;
          st_q <= S_IDLE;
        end

        S_FLUSH: begin
          if (vld_q[fl_set][fl_way] && (wtx[fl_way] || dty_q[fl_set][fl_way])) begin
            dnr_q <= wb_of(addr_of(tag_q[fl_set][fl_way], fl_set), data_q[{fl_set, fl_way}],
                           tt_rd[cov_idx[fl_way]], wtx[fl_way], 1'b1);
            if (wtx[fl_way]) dnr_q.op <= OP_EMERG;
            dn_pend_q <= 1'b1; dn_acc_q <= 1'b0;
            st_q <= S_FLWR;
          end else begin
            vld_q[fl_set][fl_way] <= 1'b0;
            if (int'(fl_q) == SETS * WAYS - 1) st_q <= S_FLDONE;
            fl_q <= fl_q + 1'b1;
          end
        end

        S_FLWR: if (dn_rsp_valid) begin
          dn_pend_q <= 1'b0;
          vld_q[fl_set][fl_way] <= 1'b0;
          dty_q[fl_set][fl_way] <= 1'b0;
          if (cov[fl_way]) begin
            tt_wr_en <= 1'b1; tt_wr_set <= fl_set;
            tt_wr_idx <= cov_idx[fl_way]; tt_wr <= '0;
          end
          if (int'(fl_q) == SETS * WAYS - 1) st_q <= S_FLDONE;
          else st_q <= S_FLUSH;
          fl_q <= fl_q + 1'b1;
        end

        S_FLDONE: st_q <= S_IDLE;

        // one cycle for a TransTag write to land before it is read again
        S_SETTLE: st_q <= nxt_q;

        default: st_q <= S_IDLE;
      endcase
    end
  end

  // state resets are only issued between requests
  assert property (@(posedge clk) disable iff (!rst_n) sr_valid |-> st_q == S_IDLE)
    else $error("hercules_cache: state reset while busy");
  // a request is held until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   dn_req_valid && !dn_req_ready |=> dn_req_valid && $stable(dn_req))
    else $error("hercules_cache: downstream request dropped");

endmodule
