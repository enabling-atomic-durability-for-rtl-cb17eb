// wpq: the write pending queue of the memory controller.
//
// A first-in first-out queue of pmem writes.  Under ADR it lies in the
// persistence domain: whatever it has accepted reaches pmem even on power
// loss, so the memory controller treats a write as durable once it is
// pushed here (the commit write of a TxLen relies on this).  Writes leave in
// order, so a later write to the same line always lands after an earlier
// one.  DEPTH defaults to 64, the write buffer size of the evaluated pmem.
//
// Interface: push_valid/push_ready/push_data on the input side,
// pop_valid/pop_ready/pop_data on the pmem side (valid/ready handshakes,
// a transfer happens in a cycle where both are high); empty is high when
// nothing is pending.  A pushed write can leave one cycle later.
module wpq
  import hercules_pkg::*;
#(
  parameter int DEPTH = 64,
  localparam int PTR_W = $clog2(DEPTH)
)(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  output logic   push_ready,
  input  preq_t  push_data,
  output logic   pop_valid,
  input  logic   pop_ready,
  output preq_t  pop_data,
  output logic   empty,
  output logic [PTR_W:0] level
);

  preq_t            mem [DEPTH];
  logic [PTR_W-1:0] rp_q, wp_q;
  logic [PTR_W:0]   cnt_q;

  logic do_push, do_pop;
  assign push_ready = (int'(cnt_q) < DEPTH);
  assign pop_valid  = (cnt_q != 0);
  assign pop_data   = mem[rp_q];
  assign empty      = (cnt_q == 0);
  assign level      = cnt_q;
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp_q  <= '0;
      wp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) begin
        mem[wp_q] <= push_data;
        wp_q      <= (int'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
      end
      if (do_pop) rp_q <= (int'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + PTR_W'(do_push) - PTR_W'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) int'(cnt_q) <= DEPTH)
    else $error("wpq: overflow");

endmodule
