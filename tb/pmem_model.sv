// pmem_model: behavioural model of the persistent memory device (not
// synthesizable; the real part is a memory module, not designed here).
//
// A sparse line-addressed store (unwritten lines read as zero) behind the
// memory controller's pmem port.  One request is served at a time: a write
// is applied with its byte enables WR_LAT cycles after acceptance, a read
// returns its line RD_LAT cycles after acceptance with rsp_valid for one
// cycle.  peek/poke give testbenches direct access, and writes counts the
// line writes for statistics.
module pmem_model
  import hercules_pkg::*;
#(
  parameter int RD_LAT = 450,   // 150 ns at 3 GHz
  parameter int WR_LAT = 300    // 100 ns at 3 GHz
)(
  input  logic  clk,
  input  logic  req_valid,
  output logic  req_ready,
  input  preq_t req,
  output logic  rsp_valid,
  output line_t rsp_data
);
  line_t mem [laddr_t];
  int    busy = 0;
  longint writes = 0, reads = 0;

  function automatic line_t peek(input laddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(input laddr_t a, input line_t d);
    mem[a] = d;
  endfunction
  function automatic word_t peek_word(input laddr_t a, input int slot);
    line_t l;
    l = peek(a);
    return l[64 * slot +: 64];
  endfunction

  assign req_ready = (busy == 0);
  initial begin rsp_valid = 0; rsp_data = '0; end

  int     rd_cnt = 0;
  laddr_t rd_addr = '0;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rd_cnt > 0) begin
      rd_cnt = rd_cnt - 1;
      if (rd_cnt == 0) begin
        rsp_data  <= peek(rd_addr);
        rsp_valid <= 1'b1;
      end
    end
    if (req_valid && req_ready) begin
      preq_t r;
      r = req;
      if (r.we) begin
        line_t cur;
        busy = WR_LAT;
        cur = peek(r.addr);
        for (int b = 0; b < LINE_BYTES; b++)
          if (r.be[b]) cur[8 * b +: 8] = r.data[8 * b +: 8];
        mem[r.addr] = cur;
        writes++;
      end else begin
        busy    = RD_LAT;
        rd_cnt  = RD_LAT;
        rd_addr = r.addr;
        reads++;
      end
    end else if (busy > 0) busy = busy - 1;
  end
endmodule
