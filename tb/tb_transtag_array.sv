// Self-checking test of transtag_array: random TransTag writes checked on
// the read port, a commit and an abort checked against a reference model,
// the abort's kill report checked way by way, and the state reset latency
// checked to be exactly RESET_CYCLES cycles.
module tb_transtag_array;
  import hercules_pkg::*;
  localparam int SETS = 32, WAYS = 4, NTT = 2, RC = 10;
  localparam int LANES = (SETS + RC - 1) / RC;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;                 // falling edge: asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic [4:0] rd_set, wr_set;
  transtag_t  rd_tags [NTT];
  logic       wr_en;
  logic [0:0] wr_idx;
  transtag_t  wr_tag;
  logic       sr_valid;
  sreset_t    sr;
  logic       sr_busy, sr_done, kill_valid;
  logic [5:0] kill_base;
  logic [WAYS-1:0] kill_mask [LANES];

  transtag_array #(.SETS(SETS), .WAYS(WAYS), .NTT(NTT), .RESET_CYCLES(RC)) dut (.*);

  transtag_t model [SETS][NTT];
  logic [WAYS-1:0] kills [SETS];
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all();
    for (int s = 0; s < SETS; s++) begin
      rd_set = 5'(s);
      #1;
      for (int n = 0; n < NTT; n++)
        chk(rd_tags[n] == model[s][n], $sformatf("set %0d tag %0d", s, n));
    end
  endtask

  // collect kill reports
  always @(posedge clk) if (rst_n && kill_valid)
    for (int l = 0; l < LANES; l++)
      if (int'(kill_base) + l < SETS) kills[int'(kill_base) + l] |= kill_mask[l];

  task automatic run_reset(input logic ab, input txid_t id);
    int cyc;
    @(negedge clk);
    sr_valid = 1; sr = '{is_abort: ab, txid: id};
    @(negedge clk);
    sr_valid = 0;
    cyc = 0;
    while (!sr_done) begin @(negedge clk); cyc++; end
    chk(cyc == RC,
        $sformatf("state reset latency %0d, expected %0d", cyc, RC));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; sr_valid = 0; sr = '0; rd_set = 0; wr_set = 0; wr_idx = 0; wr_tag = '0;
    for (int s = 0; s < SETS; s++) begin
      kills[s] = '0;
      for (int n = 0; n < NTT; n++) model[s][n] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    // fill TransTags with three transactions (TxID 5, 6, 7), some committed
    for (int s = 0; s < SETS; s++)
      for (int n = 0; n < NTT; n++) begin
        transtag_t t;
        t.valid   = ($urandom % 4) != 0;
        t.wayno   = 4'($urandom % WAYS);
        t.txid    = txid_t'(5 + $urandom % 3);
        t.txstate = ($urandom % 5) != 0;
        if (n == 1 && model[s][0].valid) t.wayno = 4'((model[s][0].wayno + 1) % WAYS);
        @(negedge clk);
        wr_en = 1; wr_set = 5'(s); wr_idx = 1'(n); wr_tag = t;
        @(negedge clk);
        wr_en = 0;
        model[s][n] = t;
      end
    check_all();

    // commit TxID 5: TxState cleared, TransTags kept
    run_reset(1'b0, txid_t'(5));
    for (int s = 0; s < SETS; s++)
      for (int n = 0; n < NTT; n++)
        if (model[s][n].valid && model[s][n].txid == 5) model[s][n].txstate = 1'b0;
    check_all();

    // abort TxID 6: uncommitted TransTags freed and their ways reported
    for (int s = 0; s < SETS; s++) kills[s] = '0;
    begin
      logic [WAYS-1:0] exp_k [SETS];
      for (int s = 0; s < SETS; s++) begin
        exp_k[s] = '0;
        for (int n = 0; n < NTT; n++)
          if (model[s][n].valid && model[s][n].txstate && model[s][n].txid == 6) begin
            exp_k[s][model[s][n].wayno[1:0]] = 1'b1;
            model[s][n].valid = 1'b0;
          end
      end
      run_reset(1'b1, txid_t'(6));
      for (int s = 0; s < SETS; s++) chk(kills[s] == exp_k[s], $sformatf("kill mask set %0d", s));
    end
    check_all();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
