// tx_ctrl: transaction registers and primitives of one core.
//
// Holds GlobalTxID (shared source of transaction IDs, incremented by one
// per tx_start), PerCoreTxID and PerCoreTxLen (the running transaction's ID
// and its number of transactional cache lines).  The registers are 64 bits
// wide architecturally; only the low 21 bits (TxID) and 32 bits (length)
// are used, as in the paper, so they are stored at those widths here.
//
// Primitives, each started by cmd_valid with cmd_op and finished by a
// one-cycle cmd_done:
//   START   TxID <- GlobalTxID++, PerCoreTxLen <- 0, then the memory
//           controller writes TxLen[TxID] = 0 in the transaction profiles.
//   COMMIT  the memory controller writes TxLen[TxID] = PerCoreTxLen (the
//           atomic commit point), then a state reset of TxID is broadcast
//           to every cache level and the eWPQ; done when all have answered.
//   ABORT   a state reset with is_abort set is broadcast; TxLen stays 0.
// line_new pulses (from L1D, when a store first covers a line for the
// running transaction) increment PerCoreTxLen.  ctx_* save and restore the
// per-core registers on a context switch.
//
// Ordering (TxLen write before the TxState resets) is this design's choice:
// it keeps a crash between the two recoverable, since recovery treats a
// non-zero TxLen as committed.  A start while a transaction runs, or a
// commit/abort outside one, is refused (cmd_done with cmd_err).
module tx_ctrl
  import hercules_pkg::*;
#(
  parameter int NSR = 4   // number of state-reset receivers (L1D, L2, L3, MC)
)(
  input  logic             clk,
  input  logic             rst_n,
  // primitives from the core
  input  logic             cmd_valid,
  input  logic [1:0]       cmd_op,       // 0 start, 1 commit, 2 abort
  output logic             cmd_ready,
  output logic             cmd_done,
  output logic             cmd_err,
  // running transaction
  output logic             in_tx,
  output txid_t            cur_txid,
  output logic [31:0]      cur_len,
  input  logic             line_new,
  // context switch
  input  logic             ctx_load,
  input  logic             ctx_in_tx,
  input  txid_t            ctx_txid,
  input  logic [31:0]      ctx_len,
  // TxLen write to the memory controller
  output logic             len_valid,
  output txid_t            len_txid,
  output logic [31:0]      len_value,
  input  logic             len_done,
  // state reset broadcast
  output logic             sr_valid,
  output sreset_t          sr,
  input  logic [NSR-1:0]   sr_done,
  // GlobalTxID, exposed for recovery / debug
  output txid_t            global_txid
);

  typedef enum logic [2:0] {S_IDLE, S_LEN, S_SR, S_DONE} state_e;
  localparam logic [1:0] C_START = 2'd0, C_COMMIT = 2'd1, C_ABORT = 2'd2;

  state_e           st_q;
  txid_t            gtx_q, tx_q;
  logic [31:0]      len_q;
  logic             in_q, commit_q, err_q;
  logic [NSR-1:0]   seen_q;
  logic             issued_q;

  assign cmd_ready   = (st_q == S_IDLE);
  assign in_tx       = in_q;
  assign cur_txid    = tx_q;
  assign cur_len     = len_q;
  assign global_txid = gtx_q;
  assign len_valid   = (st_q == S_LEN);
  assign len_txid    = tx_q;
  assign len_value   = commit_q ? len_q : 32'd0;
  assign sr_valid    = (st_q == S_SR) && !issued_q;
  assign sr.is_abort = !commit_q;
  assign sr.txid     = tx_q;
  assign cmd_done    = (st_q == S_DONE);
  assign cmd_err     = (st_q == S_DONE) && err_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= S_IDLE;
      gtx_q    <= '0;
      tx_q     <= '0;
      len_q    <= '0;
      in_q     <= 1'b0;
      commit_q <= 1'b0;
      err_q    <= 1'b0;
      seen_q   <= '0;
      issued_q <= 1'b0;
    end else begin
      if (line_new && in_q) len_q <= len_q + 1;
      unique case (st_q)
        S_IDLE: begin
          err_q <= 1'b0;
          if (ctx_load) begin
            in_q  <= ctx_in_tx;
            tx_q  <= ctx_txid;
            len_q <= ctx_len;
          end else if (cmd_valid) begin
            case (cmd_op)
              C_START: if (in_q) begin
                err_q <= 1'b1; st_q <= S_DONE;
              end else begin
                tx_q     <= gtx_q;
                gtx_q    <= gtx_q + 1'b1;
                len_q    <= '0;
                in_q     <= 1'b1;
                commit_q <= 1'b0;
                st_q     <= S_LEN;
              end
              C_COMMIT: if (!in_q) begin
                err_q <= 1'b1; st_q <= S_DONE;
              end else begin
                commit_q <= 1'b1;
                st_q     <= S_LEN;
              end
              C_ABORT: if (!in_q) begin
                err_q <= 1'b1; st_q <= S_DONE;
              end else begin
                commit_q <= 1'b0;
                seen_q   <= '0;
                issued_q <= 1'b0;
                st_q     <= S_SR;
              end
              default: begin err_q <= 1'b1; st_q <= S_DONE; end
            endcase
          end
        end
        S_LEN: if (len_done) begin
          if (commit_q) begin
            seen_q   <= '0;
            issued_q <= 1'b0;
            st_q     <= S_SR;
          end else begin
            st_q <= S_DONE;          // start finished
          end
        end
        S_SR: begin
          // the first cycle issues the broadcast; then one done is
          // collected from every receiver
          issued_q <= 1'b1;
          seen_q   <= seen_q | sr_done;
          if ((seen_q | sr_done) == '1) begin
            in_q     <= 1'b0;
            issued_q <= 1'b0;
            st_q     <= S_DONE;
          end
        end
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
