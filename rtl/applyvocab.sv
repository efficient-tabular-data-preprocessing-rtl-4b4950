// applyvocab -- the ApplyVocab PE of one sparse column (ApplyVocab-1 and -2).
//
// Loop 1 (loop = LOOP_GEN, ApplyVocab-1): the inputs are the first occurrences
// passed by genvocab. A counter numbers them in order of appearance, starting
// at 0, and each is written to the vocabulary table as table[value] = counter.
// A write is issued in the cycle the input is taken, so writes run at one per
// cycle when the memory accepts them.
// Loop 2 (loop = LOOP_APPLY, ApplyVocab-2): every input issues a table read and
// the entry returned becomes the output (zero-extended to 32 bits). At most
// MAX_READS reads are outstanding; their results queue in a MAX_READS-entry
// buffer, which also absorbs output stalls. With the default MAX_READS = 1 the
// interval between inputs is the memory latency plus one: 2 cycles with the
// on-chip vocab_table and about 15 with an HBM channel, the figures the paper
// gives per PE. With MAX_READS >= latency + 1 reads are pipelined and the PE
// takes one input per cycle, the rate the paper reports for HBM when the
// channels are used in round-robin; the memory must return reads in order.
// count_clear (pulse) resets the counter before loop 1; vocab_count reports how
// many distinct values were numbered.
// Memory port: req_valid/req_ready with we, addr, wdata; rsp_valid/rsp_data for
// reads, any latency.
module applyvocab
  import piper_pkg::*;
#(
  parameter int VOCAB_SIZE = 5000,
  // loop-2 reads that may be in flight at once (responses return in order)
  parameter int MAX_READS  = 1,
  localparam int IDX_W = (VOCAB_SIZE > 1) ? $clog2(VOCAB_SIZE) : 1,
  localparam int VAL_W = $clog2(VOCAB_SIZE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  loop_e            loop,
  input  logic             count_clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output feat_t            out_data,
  output logic [VAL_W-1:0] vocab_count,
  // vocabulary table port
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_we,
  output logic [IDX_W-1:0] mem_req_addr,
  output logic [VAL_W-1:0] mem_req_wdata,
  input  logic             mem_rsp_valid,
  input  logic [VAL_W-1:0] mem_rsp_data,
  output logic             busy
);
  localparam int CNT_W = $clog2(MAX_READS + 1);
  localparam int PTR_W = (MAX_READS > 1) ? $clog2(MAX_READS) : 1;

  logic [CNT_W-1:0] inflight;   // loop-2 reads issued, response not yet back
  logic [CNT_W-1:0] count;      // responses held in the result buffer
  logic [PTR_W-1:0] wp, rp;
  logic [VAL_W-1:0] rbuf [MAX_READS];
  logic             can_issue, pop, issue_rd, rsp_take;

  assign pop       = out_valid && out_ready;
  // A read may go out only if its result is sure to find a buffer slot.
  assign can_issue = (loop == LOOP_GEN) ? 1'b1
                   : ((int'(inflight) + int'(count) - int'(pop)) < MAX_READS);
  assign mem_req_valid = in_valid && can_issue;
  assign mem_req_we    = (loop == LOOP_GEN);
  assign mem_req_addr  = in_data;
  assign mem_req_wdata = vocab_count;
  assign in_ready      = can_issue && mem_req_ready;
  assign issue_rd      = in_valid && in_ready && (loop == LOOP_APPLY);
  assign rsp_take      = mem_rsp_valid && (inflight != '0);
  assign out_valid     = (count != '0);
  assign out_data      = DATA_W'(rbuf[rp]);
  assign busy          = (inflight != '0) || out_valid;

  always_ff @(posedge clk) begin
    if (rsp_take) rbuf[wp] <= mem_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight    <= '0;
      count       <= '0;
      wp          <= '0;
      rp          <= '0;
      vocab_count <= '0;
    end else begin
      if (count_clear) vocab_count <= '0;
      else if (in_valid && in_ready && loop == LOOP_GEN) vocab_count <= vocab_count + 1'b1;
      inflight <= inflight + CNT_W'(issue_rd) - CNT_W'(rsp_take);
      count    <= count + CNT_W'(rsp_take) - CNT_W'(pop);
      if (rsp_take) wp <= (int'(wp) == MAX_READS - 1) ? '0 : wp + 1'b1;
      if (pop)      rp <= (int'(rp) == MAX_READS - 1) ? '0 : rp + 1'b1;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
