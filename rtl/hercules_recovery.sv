// hercules_recovery: post-crash recovery engine of the memory controller.
//
// Run once after power returns, before any new transaction.  It works on
// the pmem image left by the power-off dump.  Pass 0 moves data, pass 1
// zeroes the TxLens of the transactions that were replayed.  Each pass
// visits, in this order:
//   1. every eWPQ entry marked in the saved validity bitmap,
//   2. every live entry of the eWPQ extension area (all-ones = removed),
//   3. every line in the area of emergency use.
// For each, the owner's TxLen is read from the transaction profiles.  A
// line is replayed (copied to its home address) if its transaction has a
// non-zero TxLen (committed), or, for a log entry, if it was already
// committed off-chip (TxState 0) but not yet migrated.  Anything else
// belongs to an uncommitted transaction and is discarded.  Log entries are
// replayed before emergency lines because an emergency line came from the
// cache and is the newer copy of the same address.
// Only after every line is home does pass 1 set those TxLens to zero, so a
// crash during recovery simply repeats it.  Finally the header is
// rewritten (shutdown flag 1, no emergency lines, no extension entries)
// and the saved bitmap is cleared; the controller starts afterwards with
// an empty eWPQ and LogHead = LogTail = 0.
//
// Follows the paper: TxLen decides commit, emergency lines with matching
// TxID and TxState 1 move home, valid eWPQ entries of committed
// transactions are migrated, TxLen reset last.  This design's own choices:
// committed-but-unmigrated entries (TxState 0) are always replayed, the
// extension area is included, recovery runs whatever the shutdown flag
// says (it reports the flag on clean), and the log window is dropped
// rather than reloaded since every live entry has been replayed.
//
// Interface: start pulse -> busy ... done pulse.  The pmem port is the
// same valid/ready line port as the controller's.  One access at a time:
// a read waits for its data, a write for acceptance.  Timing: roughly
// (2-4 pmem accesses) x (number of saved entries) per pass.
//
// Tool warning left on purpose: the eWPQ entry view w_ent has fields
// (home-address bits) that recovery reads from the log metadata instead,
// so those bits are reported as unused.
module hercules_recovery
  import hercules_pkg::*;
#(
  parameter int EWPQ_N = EWPQ_ENTRIES,     // saved eWPQ entries (512)
  parameter int EXT_N  = 10 * EWPQ_ENTRIES // extension area entries (5120)
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        clean,       // shutdown flag read from the header
  output logic [31:0] replayed,    // lines copied home (pass 0)
  output logic [31:0] discarded,   // saved lines of uncommitted transactions
  // pmem
  output logic        p_req_valid,
  input  logic        p_req_ready,
  output preq_t       p_req,
  input  logic        p_rsp_valid,
  input  line_t       p_rsp_data
);

  typedef enum logic [4:0] {
    R_IDLE, R_HDR, R_BMP, R_NEXT, R_ENT, R_LEN, R_DECIDE, R_META, R_DATA,
    R_HOME, R_STEP, R_FINHDR, R_FINBMP, R_DONE, R_RD, R_WR
  } state_e;
  typedef enum logic [1:0] {PH_EWPQ, PH_EXT, PH_EMG} phase_e;

  state_e      st_q, ret_q;
  phase_e      ph_q;
  logic        pass_q;
  logic [31:0] idx_q, extc_q, emc_q;
  logic [EWPQ_N-1:0] bmp_q;
  line_t       rd_q;
  logic        rd_pend_q;
  preq_t       req_q;
  logic        req_v_q;
  logidx_t     lidx_q;             // log index of an eWPQ / extension entry
  txid_t       id_q;
  logic        st1_q;              // TxState of the saved line
  laddr_t      home_q;
  logic [31:0] len_q;

  assign p_req_valid = req_v_q;
  assign p_req       = req_q;
  assign busy        = (st_q != R_IDLE);

  function automatic logic [31:0] limit(input phase_e ph, input logic [31:0] extc,
                                        input logic [31:0] emc);
    unique case (ph)
      PH_EWPQ: return 32'(EWPQ_N);
      PH_EXT:  return (extc > 32'(EXT_N)) ? 32'(EXT_N) : extc;
      default: return emc;
    endcase
  endfunction

  word_t       w_sel;              // idx-th 8-byte word of the line read
  ewpq_entry_t w_ent;
  assign w_sel = rd_q[64 * idx_q[2:0] +: 64];
  assign w_ent = ewpq_entry_t'(w_sel);
  logic [TXID_W-5:0] prof_row;       // profile line of the item's TxID
  assign prof_row = (ph_q == PH_EMG) ? w_sel[61:45] : w_ent.txid[TXID_W-1:4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= R_IDLE; ret_q <= R_IDLE; ph_q <= PH_EWPQ; pass_q <= 1'b0;
      idx_q <= '0; extc_q <= '0; emc_q <= '0; bmp_q <= '0; rd_q <= '0;
      rd_pend_q <= 1'b0; req_q <= '0; req_v_q <= 1'b0; lidx_q <= '0;
      id_q <= '0; st1_q <= 1'b0; home_q <= '0; len_q <= '0;
      done <= 1'b0; clean <= 1'b0; replayed <= '0; discarded <= '0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        R_IDLE: if (start) begin
          replayed <= '0; discarded <= '0; pass_q <= 1'b0;
          req_q <= '{we: 1'b0, addr: EMG_HDR, data: '0, be: '0};
          req_v_q <= 1'b1; ret_q <= R_HDR; st_q <= R_RD;
        end

        // pmem helpers
        R_RD: begin
          if (req_v_q && p_req_ready) begin req_v_q <= 1'b0; rd_pend_q <= 1'b1; end
          if (rd_pend_q && p_rsp_valid) begin
            rd_pend_q <= 1'b0; rd_q <= p_rsp_data; st_q <= ret_q;
          end
        end
        R_WR: if (p_req_ready) begin req_v_q <= 1'b0; st_q <= ret_q; end

        R_HDR: begin
          extc_q <= rd_q[128 +: 32];
          clean  <= rd_q[192];
          emc_q  <= rd_q[256 +: 32];
          req_q  <= '{we: 1'b0, addr: EMG_BITMAP, data: '0, be: '0};
          req_v_q <= 1'b1; ret_q <= R_BMP; st_q <= R_RD;
        end
        R_BMP: begin
          bmp_q <= rd_q[EWPQ_N-1:0];
          ph_q  <= PH_EWPQ; idx_q <= '0;
          st_q  <= R_NEXT;
        end

        // fetch the idx-th saved item of the current phase
        R_NEXT: begin
          if (idx_q >= limit(ph_q, extc_q, emc_q)) begin
            idx_q <= '0;
            if (ph_q == PH_EWPQ) ph_q <= PH_EXT;
            else if (ph_q == PH_EXT) ph_q <= PH_EMG;
            else if (!pass_q) begin pass_q <= 1'b1; ph_q <= PH_EWPQ; end
            else st_q <= R_FINHDR;
          end else if (ph_q == PH_EWPQ && !bmp_q[idx_q[$clog2(EWPQ_N)-1:0]]) begin
            idx_q <= idx_q + 1'b1;
          end else begin
            unique case (ph_q)
              PH_EWPQ: req_q <= '{we: 1'b0, addr: EMG_EWPQ + laddr_t'(idx_q[31:3]), data: '0, be: '0};
              PH_EXT:  req_q <= '{we: 1'b0, addr: EXT_BASE + laddr_t'(idx_q[31:3]), data: '0, be: '0};
              default: req_q <= '{we: 1'b0, addr: EMG_META + laddr_t'(idx_q[31:3]), data: '0, be: '0};
            endcase
            req_v_q <= 1'b1; ret_q <= R_ENT; st_q <= R_RD;
          end
        end

        R_ENT: begin
          if (ph_q == PH_EMG) begin
            id_q   <= w_sel[61:41];
            st1_q  <= w_sel[62];
            home_q <= w_sel[32:0];
          end else begin
            lidx_q <= w_ent.logidx;
            id_q  <= w_ent.txid;
            st1_q <= w_ent.txstate;
          end
          if (ph_q == PH_EXT && w_sel == '1) st_q <= R_STEP;     // removed entry
          else if (ph_q == PH_EMG && !w_sel[63]) st_q <= R_STEP; // empty slot
          else begin
            req_q <= '{we: 1'b0,
                       addr: PROF_BASE + laddr_t'(prof_row),
                       data: '0, be: '0};
            req_v_q <= 1'b1; ret_q <= R_LEN; st_q <= R_RD;
          end
        end

        R_LEN: begin
          len_q <= rd_q[32 * id_q[3:0] +: 32];
          st_q  <= R_DECIDE;
        end

        R_DECIDE: begin
          if (pass_q) begin
            // pass 1: close committed transactions
            if (len_q != 0) begin
              req_q <= '{we: 1'b1, addr: PROF_BASE + laddr_t'(id_q[TXID_W-1:4]),
                         data: '0, be: 64'hF << (4 * id_q[3:0])};
              req_v_q <= 1'b1; ret_q <= R_STEP; st_q <= R_WR;
            end else st_q <= R_STEP;
          end else if (len_q != 0 || (ph_q != PH_EMG && !st1_q)) begin
            if (ph_q == PH_EMG) begin
              req_q <= '{we: 1'b0, addr: EMG_DATA + laddr_t'(idx_q), data: '0, be: '0};
              req_v_q <= 1'b1; ret_q <= R_DATA; st_q <= R_RD;
            end else begin
              req_q <= '{we: 1'b0, addr: LMETA_BASE + laddr_t'(lidx_q[LOGIDX_W-1:3]),
                         data: '0, be: '0};
              req_v_q <= 1'b1; ret_q <= R_META; st_q <= R_RD;
            end
          end else begin
            discarded <= discarded + 1'b1;
            st_q <= R_STEP;
          end
        end

        R_META: begin
          home_q <= rd_q[64 * lidx_q[2:0] +: 33];
          req_q  <= '{we: 1'b0, addr: LDATA_BASE + laddr_t'(lidx_q), data: '0, be: '0};
          req_v_q <= 1'b1; ret_q <= R_DATA; st_q <= R_RD;
        end

        R_DATA: begin
          req_q <= '{we: 1'b1, addr: home_q, data: rd_q, be: '1};
          req_v_q <= 1'b1; ret_q <= R_HOME; st_q <= R_WR;
        end
        R_HOME: begin
          replayed <= replayed + 1'b1;
          st_q <= R_STEP;
        end

        R_STEP: begin
          idx_q <= idx_q + 1'b1;
          st_q  <= R_NEXT;
        end

        R_FINHDR: begin
          // flag = 1, no emergency lines, no extension entries
          req_q <= '{we: 1'b1, addr: EMG_HDR,
                     data: line_t'(1) << 192, be: 64'h0000_00FF_FFFF_0000};
          req_v_q <= 1'b1; ret_q <= R_FINBMP; st_q <= R_WR;
        end
        R_FINBMP: begin
          req_q <= '{we: 1'b1, addr: EMG_BITMAP, data: '0, be: '1};
          req_v_q <= 1'b1; ret_q <= R_DONE; st_q <= R_WR;
        end
        R_DONE: begin
          done <= 1'b1;
          st_q <= R_IDLE;
        end
        default: st_q <= R_IDLE;
      endcase
    end
  end

  // a pmem request is held until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   p_req_valid && !p_req_ready |=> p_req_valid && $stable(p_req))
    else $error("hercules_recovery: pmem request dropped");

endmodule
