// transtag_array: the TransTags of one cache level and the auxiliary
// circuit that resets their states on a commit or abort.
//
// Each of the SETS cache sets owns NTT TransTags.  A TransTag names the way
// it covers (WayNo), the 21-bit TxID of the transaction using that way and
// a 1-bit TxState (1 = uncommitted).  NTT/WAYS is the TransTag ratio: 100 %
// for L1D, 50 % for L2 and 25 % for L3 in the paper's main configuration.
//
// Interface
//   rd_set -> rd_tags     combinational read of one set's TransTags
//   wr_en/wr_set/wr_idx   write one TransTag (next clock edge)
//   sr_valid/sr           start a state reset for one TxID; sr_busy stays
//                         high while it runs and sr_done pulses at the end
//   kill_*                during an abort, the ways whose lines must be
//                         invalidated, LANES sets per cycle from kill_base
//
// Timing: the reset walks LANES = ceil(SETS/RESET_CYCLES) sets per cycle,
// so a commit or abort always finishes RESET_CYCLES cycles after it starts
// (ten cycles, the paper's default state reset latency); sr_done is high in
// the cycle after the last pass.  Commit clears TxState of every matching
// uncommitted TransTag and leaves the TransTag allocated, so the committed
// line keeps its way and its TransTag can be reclaimed later.  Abort frees
// the TransTag and reports the way so the cache drops the line.  The
// banked, lane-parallel walk is this design's own choice: the paper only
// says an auxiliary circuit selects TransTags by TxID within the latency.
module transtag_array
  import hercules_pkg::*;
#(
  parameter int SETS         = 128,
  parameter int WAYS         = 4,
  parameter int NTT          = 4,
  parameter int RESET_CYCLES = 10,
  localparam int SET_W = $clog2(SETS),
  localparam int NTT_W = (NTT > 1) ? $clog2(NTT) : 1,
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int LANES = (SETS + RESET_CYCLES - 1) / RESET_CYCLES
)(
  input  logic                 clk,
  input  logic                 rst_n,
  // read port
  input  logic [SET_W-1:0]     rd_set,
  output transtag_t            rd_tags [NTT],
  // write port
  input  logic                 wr_en,
  input  logic [SET_W-1:0]     wr_set,
  input  logic [NTT_W-1:0]     wr_idx,
  input  transtag_t            wr_tag,
  // state reset
  input  logic                 sr_valid,
  input  sreset_t              sr,
  output logic                 sr_busy,
  output logic                 sr_done,
  output logic                 kill_valid,
  output logic [SET_W:0]       kill_base,
  output logic [WAYS-1:0]      kill_mask [LANES]
);

  transtag_t tags [SETS][NTT];

  logic                   busy_q;
  sreset_t                sr_q;
  logic [$clog2(RESET_CYCLES+1)-1:0] pass_q;

  assign sr_busy = busy_q;
  assign kill_base = (SET_W+1)'(pass_q) * (SET_W+1)'(LANES);
  assign kill_valid = busy_q && sr_q.is_abort;

  always_comb begin
    for (int n = 0; n < NTT; n++) rd_tags[n] = tags[rd_set][n];
  end

  // Ways to drop in the sets handled this pass (abort only).
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      kill_mask[l] = '0;
      if ((int'(kill_base) + l) < SETS) begin
        for (int n = 0; n < NTT; n++) begin
          if (tags[int'(kill_base) + l][n].valid && tags[int'(kill_base) + l][n].txstate &&
              tags[int'(kill_base) + l][n].txid == sr_q.txid &&
              int'(tags[int'(kill_base) + l][n].wayno) < WAYS)
            kill_mask[l][WAY_W'(tags[int'(kill_base) + l][n].wayno)] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int n = 0; n < NTT; n++) tags[s][n] <= '0;
      busy_q  <= 1'b0;
      sr_q    <= '0;
      pass_q  <= '0;
      sr_done <= 1'b0;
    end else begin
      sr_done <= 1'b0;
      if (wr_en) tags[wr_set][wr_idx] <= wr_tag;
      if (!busy_q) begin
        if (sr_valid) begin
          busy_q <= 1'b1;
          sr_q   <= sr;
          pass_q <= '0;
        end
      end else begin
        for (int l = 0; l < LANES; l++) begin
          if ((int'(kill_base) + l) < SETS) begin
            for (int n = 0; n < NTT; n++) begin
              if (tags[int'(kill_base) + l][n].valid &&
                  tags[int'(kill_base) + l][n].txstate &&
                  tags[int'(kill_base) + l][n].txid == sr_q.txid) begin
                if (sr_q.is_abort) tags[int'(kill_base) + l][n].valid   <= 1'b0;
                else            tags[int'(kill_base) + l][n].txstate <= 1'b0;
              end
            end
          end
        end
        if (int'(pass_q) == RESET_CYCLES - 1) begin
          busy_q  <= 1'b0;
          sr_done <= 1'b1;
        end
        pass_q <= pass_q + 1'b1;
      end
    end
  end

  // A write may not race the reset walk.
  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && busy_q))
    else $error("transtag_array: write during state reset");

endmodule
