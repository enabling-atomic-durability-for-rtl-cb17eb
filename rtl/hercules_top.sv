// hercules_top: one core's transactional memory path.
//
// Wires the transaction registers (tx_ctrl), the three cache levels with
// TransTags (L1D 100 %, L2 50 %, L3 25 % TransTag ratio), the memory
// controller with WPQ and eWPQ, and the power-off sequencer:
//
//   core --> L1D --> L2 --> L3 --> memory controller --> pmem
//   core --> tx_ctrl --(TxLen writes)--> memory controller
//             \--(state reset: commit / abort)--> L1D, L2, L3, eWPQ
//   power_fail --> crash_seq --> MC dump, L3/L2/L1D flush, shutdown flag
//   recover_start --> hercules_recovery (owns the pmem port while busy)
//
// The core and the pmem are outside: the core drives core_req (op, line
// address, word index, store data; the transaction fields are filled in
// here from tx_ctrl) and the tx_* primitives; pmem is a line-wide port.
// Sizes follow the paper's evaluated machine (Table of the system
// configuration): L1D 32 KB 4-way 2 cycles, L2 256 KB 8-way 8 cycles, LLC
// 16 MB 16-way 30 cycles, 64-byte lines, 512-entry eWPQ, 10-cycle state
// reset and eWPQ search.  The paper shrinks L1D to 30 KB only to charge
// the TransTag area against Hercules in simulation; this RTL keeps the
// 32 KB geometry so that the set count stays a power of two.  Only one
// core is built: the shared LLC of the 8-core machine and coherence between
// cores are not modelled.
//
// Interface timing: core requests use valid/ready and get one core_rsp_valid
// each; a conflict in the response means the transaction must be aborted
// (the core issues tx abort).  Statistics leave as event pulses on ev.
//
// Tool warning left on purpose: rst_n is reported as used both
// synchronously and asynchronously; the synchronous use is only the
// "disable iff (!rst_n)" of concurrent assertions, not a circuit path.
// Three outputs of sub-blocks are left open (global_txid, line_new of L2
// and L3) because the top does not need them.
module hercules_top
  import hercules_pkg::*;
#(
  parameter int          L1_SETS    = 128,
  parameter int          L1_WAYS    = 4,
  parameter int          L1_NTT     = 4,
  parameter int          L1_LAT     = 2,
  parameter int          L2_SETS    = 512,
  parameter int          L2_WAYS    = 8,
  parameter int          L2_NTT     = 4,
  parameter int          L2_LAT     = 8,
  parameter int          L3_SETS    = 16384,
  parameter int          L3_WAYS    = 16,
  parameter int          L3_NTT     = 4,
  parameter int          L3_LAT     = 30,
  parameter int          RESET_CYC  = 10,
  parameter int          EWPQ_N     = EWPQ_ENTRIES,
  parameter int          EXT_N      = 10 * EWPQ_ENTRIES,
  parameter int          WPQ_DEPTH  = 64,
  parameter int          EWPQ_LAT   = 10,
  parameter int unsigned MIG_PERIOD = 3_000_000,
  parameter int unsigned GC_THRESH  = 1 << 20,
  parameter int          GC_CHUNK   = 32
)(
  input  logic          clk,
  input  logic          rst_n,
  // core memory port
  input  logic          core_req_valid,
  output logic          core_req_ready,
  input  mreq_t         core_req,
  output logic          core_rsp_valid,
  output mrsp_t         core_rsp,
  // transaction primitives
  input  logic          tx_cmd_valid,
  input  logic [1:0]    tx_cmd_op,
  output logic          tx_cmd_ready,
  output logic          tx_cmd_done,
  output logic          tx_cmd_err,
  output logic          in_tx,
  output txid_t         cur_txid,
  output logic [31:0]   cur_len,
  input  logic          ctx_load,
  input  logic          ctx_in_tx,
  input  txid_t         ctx_txid,
  input  logic [31:0]   ctx_len,
  // power-off
  input  logic          power_fail,
  output logic          crash_busy,
  output logic          crash_done,
  // recovery after power returns (before any new transaction)
  input  logic          recover_start,
  output logic          recover_busy,
  output logic          recover_done,
  output logic          recover_clean,
  output logic [31:0]   recover_replayed,
  output logic [31:0]   recover_discarded,
  // pmem
  output logic          p_req_valid,
  input  logic          p_req_ready,
  output preq_t         p_req,
  input  logic          p_rsp_valid,
  input  line_t         p_rsp_data,
  // status
  output logidx_t       log_head,
  output logidx_t       log_tail,
  output logic [$clog2(EWPQ_N):0] ewpq_count,
  output logic [$clog2(EXT_N+1)-1:0] ext_count,
  output logic          mc_err,
  // events: [0] L1 tx evict [1] L2 tx evict [2] L3 tx evict
  // [3] bypass (any level) [4] conflict (any level) [5] premature flush
  // [6] eWPQ hit [7] migration [8] extension dump [9] extension hit
  // [10] GC move [11] TransTag acquired (new transactional line)
  output logic [11:0]   ev
);

  // ------------------------------------------------------------ links
  logic  l1_dv, l1_dr, l1_rv;  mreq_t l1_dq;  mrsp_t l1_rs;   // L1 -> L2
  logic  l2_dv, l2_dr, l2_rv;  mreq_t l2_dq;  mrsp_t l2_rs;   // L2 -> L3
  logic  l3_dv, l3_dr, l3_rv;  mreq_t l3_dq;  mrsp_t l3_rs;   // L3 -> MC

  logic          sr_valid;
  sreset_t       sr;
  logic [3:0]    sr_done;
  logic          line_new;
  logic          len_valid, len_done;
  txid_t         len_txid;
  logic [31:0]   len_value;
  logic [2:0]    fl_start, fl_done, fwd;
  logic          mc_start, mc_ready, mc_end, mc_done;
  logic [2:0]    ev_evict, ev_byp, ev_conf;
  logic          ev_pf, ev_eh, ev_mc_conf, ev_mig, ev_xd, ev_xh, ev_gc;

  mreq_t core_req_tx;
  always_comb begin
    core_req_tx         = core_req;
    core_req_tx.tx      = in_tx;
    core_req_tx.txid    = cur_txid;
    core_req_tx.txstate = 1'b0;
    core_req_tx.dirty   = 1'b0;
  end

  tx_ctrl #(.NSR(4)) u_tx (
    .clk, .rst_n,
    .cmd_valid(tx_cmd_valid), .cmd_op(tx_cmd_op), .cmd_ready(tx_cmd_ready),
    .cmd_done(tx_cmd_done), .cmd_err(tx_cmd_err),
    .in_tx, .cur_txid, .cur_len, .line_new,
    .ctx_load, .ctx_in_tx, .ctx_txid, .ctx_len,
    .len_valid, .len_txid, .len_value, .len_done,
    .sr_valid, .sr, .sr_done,
    .global_txid()
  );

  hercules_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .NTT(L1_NTT), .HIT_LAT(L1_LAT),
                   .RESET_CYCLES(RESET_CYC), .UPPER_CACHE(1'b0)) u_l1 (
    .clk, .rst_n,
    .up_req_valid(core_req_valid), .up_req_ready(core_req_ready), .up_req(core_req_tx),
    .up_rsp_valid(core_rsp_valid), .up_rsp(core_rsp),
    .dn_req_valid(l1_dv), .dn_req_ready(l1_dr), .dn_req(l1_dq),
    .dn_rsp_valid(l1_rv), .dn_rsp(l1_rs),
    .sr_valid, .sr, .sr_done(sr_done[0]), .line_new,
    .flush_start(fl_start[0]), .fwd(fwd[0]), .flush_done(fl_done[0]),
    .ev_tx_evict(ev_evict[0]), .ev_bypass(ev_byp[0]), .ev_conflict(ev_conf[0])
  );

  hercules_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .NTT(L2_NTT), .HIT_LAT(L2_LAT),
                   .RESET_CYCLES(RESET_CYC), .UPPER_CACHE(1'b1)) u_l2 (
    .clk, .rst_n,
    .up_req_valid(l1_dv), .up_req_ready(l1_dr), .up_req(l1_dq),
    .up_rsp_valid(l1_rv), .up_rsp(l1_rs),
    .dn_req_valid(l2_dv), .dn_req_ready(l2_dr), .dn_req(l2_dq),
    .dn_rsp_valid(l2_rv), .dn_rsp(l2_rs),
    .sr_valid, .sr, .sr_done(sr_done[1]), .line_new(),
    .flush_start(fl_start[1]), .fwd(fwd[1]), .flush_done(fl_done[1]),
    .ev_tx_evict(ev_evict[1]), .ev_bypass(ev_byp[1]), .ev_conflict(ev_conf[1])
  );

  hercules_cache #(.SETS(L3_SETS), .WAYS(L3_WAYS), .NTT(L3_NTT), .HIT_LAT(L3_LAT),
                   .RESET_CYCLES(RESET_CYC), .UPPER_CACHE(1'b1)) u_l3 (
    .clk, .rst_n,
    .up_req_valid(l2_dv), .up_req_ready(l2_dr), .up_req(l2_dq),
    .up_rsp_valid(l2_rv), .up_rsp(l2_rs),
    .dn_req_valid(l3_dv), .dn_req_ready(l3_dr), .dn_req(l3_dq),
    .dn_rsp_valid(l3_rv), .dn_rsp(l3_rs),
    .sr_valid, .sr, .sr_done(sr_done[2]), .line_new(),
    .flush_start(fl_start[2]), .fwd(fwd[2]), .flush_done(fl_done[2]),
    .ev_tx_evict(ev_evict[2]), .ev_bypass(ev_byp[2]), .ev_conflict(ev_conf[2])
  );

  // pmem port of the memory controller and of the recovery engine
  logic   mc_p_valid, mc_p_ready, mc_p_rsp_valid;
  preq_t  mc_p_req;
  logic   rc_p_valid, rc_p_ready, rc_p_rsp_valid;
  preq_t  rc_p_req;

  hercules_mc #(.EWPQ_N(EWPQ_N), .EXT_N(EXT_N), .WPQ_DEPTH(WPQ_DEPTH), .EWPQ_LAT(EWPQ_LAT),
                .MIG_PERIOD(MIG_PERIOD), .GC_THRESH(GC_THRESH), .GC_CHUNK(GC_CHUNK)) u_mc (
    .clk, .rst_n,
    .up_req_valid(l3_dv), .up_req_ready(l3_dr), .up_req(l3_dq),
    .up_rsp_valid(l3_rv), .up_rsp(l3_rs),
    .len_valid, .len_txid, .len_value, .len_done,
    .sr_valid, .sr, .sr_done(sr_done[3]),
    .crash_start(mc_start), .crash_ready(mc_ready), .crash_end(mc_end), .crash_done(mc_done),
    .p_req_valid(mc_p_valid), .p_req_ready(mc_p_ready), .p_req(mc_p_req),
    .p_rsp_valid(mc_p_rsp_valid), .p_rsp_data,
    .log_head, .log_tail, .ewpq_count, .ext_count, .err(mc_err),
    .ev_pflush(ev_pf), .ev_ewpq_hit(ev_eh), .ev_conflict(ev_mc_conf), .ev_mig(ev_mig),
    .ev_ext_dump(ev_xd), .ev_ext_hit(ev_xh), .ev_gc_move(ev_gc)
  );

  // the recovery engine owns the pmem port while it runs; the memory
  // controller is idle then (recovery precedes any traffic)
  hercules_recovery #(.EWPQ_N(EWPQ_N), .EXT_N(EXT_N)) u_rec (
    .clk, .rst_n, .start(recover_start), .busy(recover_busy), .done(recover_done),
    .clean(recover_clean), .replayed(recover_replayed), .discarded(recover_discarded),
    .p_req_valid(rc_p_valid), .p_req_ready(rc_p_ready), .p_req(rc_p_req),
    .p_rsp_valid(rc_p_rsp_valid), .p_rsp_data
  );

  always_comb begin
    if (recover_busy) begin
      p_req_valid = rc_p_valid;
      p_req       = rc_p_req;
    end else begin
      p_req_valid = mc_p_valid;
      p_req       = mc_p_req;
    end
  end
  assign rc_p_ready     = recover_busy && p_req_ready;
  assign mc_p_ready     = !recover_busy && p_req_ready;
  assign rc_p_rsp_valid = recover_busy && p_rsp_valid;
  assign mc_p_rsp_valid = !recover_busy && p_rsp_valid;

  crash_seq #(.NLVL(3)) u_crash (
    .clk, .rst_n, .power_fail, .busy(crash_busy), .done(crash_done),
    .mc_start, .mc_ready, .mc_end, .mc_done,
    .flush_start(fl_start), .flush_done(fl_done), .fwd
  );

  assign ev = {line_new, ev_gc, ev_xh, ev_xd, ev_mig, ev_eh, ev_pf,
               |{ev_conf, ev_mc_conf}, |ev_byp, ev_evict};

endmodule
