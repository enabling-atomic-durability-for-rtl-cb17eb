// crash_seq: orders the power-off flush of the whole hierarchy.
//
// On power_fail (an eADR-style power-loss warning) the sequence is:
//   1. the memory controller saves WPQ content, LogHead, LogTail and the
//      eWPQ (mc_start ... mc_ready);
//   2. the cache levels flush from the lowest (L3) up to L1D.  While a
//      level flushes, every level below it forwards its traffic unchanged
//      (fwd), so an older dirty copy in a lower level reaches home before
//      a newer committed copy from a higher level overwrites it;
//   3. mc_end lets the controller write the shutdown flag; done pulses once
//      it answers mc_done.
// The order MC-first, then caches, and "older version first" are the
// paper's; driving it from a separate sequencer is this design's choice.
// Interface: level k of flush_start/flush_done/fwd is cache level k
// (0 = L1D).  Timing: one cycle between steps; the flush time itself is
// set by the caches and the pmem.
module crash_seq #(
  parameter int NLVL = 3
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            power_fail,
  output logic            busy,
  output logic            done,
  output logic            mc_start,
  input  logic            mc_ready,
  output logic            mc_end,
  input  logic            mc_done,
  output logic [NLVL-1:0] flush_start,
  input  logic [NLVL-1:0] flush_done,
  output logic [NLVL-1:0] fwd
);

  typedef enum logic [2:0] {S_IDLE, S_MC, S_LVL_GO, S_LVL_WAIT, S_END, S_ENDWAIT, S_DONE} state_e;
  state_e st_q;
  logic [$clog2(NLVL+1)-1:0] lvl_q;   // level being flushed

  assign busy = (st_q != S_IDLE);
  assign done = (st_q == S_DONE);
  assign mc_end = (st_q == S_END || st_q == S_ENDWAIT);

  always_comb begin
    flush_start = '0;
    fwd         = '0;
    if (st_q == S_LVL_GO) flush_start[lvl_q] = 1'b1;
    if (st_q == S_LVL_GO || st_q == S_LVL_WAIT) begin
      for (int k = 0; k < NLVL; k++) if (k > int'(lvl_q)) fwd[k] = 1'b1;
    end
    if (st_q == S_END || st_q == S_ENDWAIT) fwd = '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= S_IDLE;
      lvl_q    <= '0;
      mc_start <= 1'b0;
    end else begin
      mc_start <= 1'b0;
      unique case (st_q)
        S_IDLE: if (power_fail) begin
          mc_start <= 1'b1;
          st_q     <= S_MC;
        end
        S_MC: if (mc_ready && !mc_start) begin
          lvl_q <= ($clog2(NLVL+1))'(NLVL - 1);
          st_q  <= S_LVL_GO;
        end
        S_LVL_GO: st_q <= S_LVL_WAIT;
        S_LVL_WAIT: if (flush_done[lvl_q]) begin
          if (lvl_q == 0) st_q <= S_END;
          else begin
            lvl_q <= lvl_q - 1'b1;
            st_q  <= S_LVL_GO;
          end
        end
        S_END: st_q <= S_ENDWAIT;
        S_ENDWAIT: if (mc_done) st_q <= S_DONE;
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
