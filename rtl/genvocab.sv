// genvocab -- the GenVocab PE of one sparse column (GenVocab-1 and GenVocab-2).
//
// Loop 1 (loop = LOOP_GEN, GenVocab-1): a bitmap with one bit per vocabulary
// entry, kept in on-chip RAM as 32-bit words, records which values were already
// seen. For each input the PE reads the bitmap word (cycle 1), then tests the
// bit and, if it was clear, sets it and passes the value downstream (cycle 2):
// only first occurrences leave, in order, and the PE takes one input every two
// cycles (II = 2), as in the paper.
// Loop 2 (loop = LOOP_APPLY, GenVocab-2): every input passes straight through a
// register stage (II = 1; the paper reports II = 2 only because GenVocab-1 set
// the pace of its build).
// clear_start (a one-cycle pulse while idle) zeroes the bitmap, one word per
// cycle (ceil(VOCAB_SIZE/32) cycles), with clear_busy high meanwhile. The paper
// does not say how the bitmap is reset; this is this design's choice.
// The two figure blocks GenVocab-1 and -2 are one module here because they
// share nothing but their ports and the loop selects the behaviour.
module genvocab
  import piper_pkg::*;
#(
  parameter int VOCAB_SIZE = 5000,
  localparam int IDX_W = (VOCAB_SIZE > 1) ? $clog2(VOCAB_SIZE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  loop_e            loop,
  input  logic             clear_start,
  output logic             clear_busy,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_data,
  output logic             dup_seen,   // pulse: loop-1 input dropped as a repeat
  output logic             busy
);
  localparam int NWORDS = (VOCAB_SIZE + 31) / 32;
  localparam int WA_W   = (NWORDS > 1) ? $clog2(NWORDS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_CLEAR} state_e;
  state_e state;

  logic [31:0]      bitmap [NWORDS];
  logic [31:0]      rd_word;
  logic [IDX_W-1:0] idx_q;
  logic [WA_W-1:0]  clr_addr;
  logic             out_free;
  logic             take;

  function automatic logic [WA_W-1:0] word_of(input logic [IDX_W-1:0] i);
    return WA_W'(i >> 5);
  endfunction

  assign out_free   = !out_valid || out_ready;
  assign in_ready   = (state == S_IDLE) && out_free && !clear_start;
  assign take       = in_valid && in_ready;
  assign clear_busy = (state == S_CLEAR);
  assign busy       = (state != S_IDLE) || out_valid;

  // Bitmap RAM: synchronous read, single write port.
  always_ff @(posedge clk) begin
    if (state == S_CLEAR) begin
      bitmap[clr_addr] <= '0;
    end else if (state == S_CHECK && !rd_word[idx_q[4:0]]) begin
      bitmap[word_of(idx_q)] <= rd_word | (32'd1 << idx_q[4:0]);
    end
    if (take && loop == LOOP_GEN) rd_word <= bitmap[word_of(in_data)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx_q     <= '0;
      clr_addr  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      dup_seen  <= 1'b0;
    end else begin
      dup_seen <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear_start) begin
            state    <= S_CLEAR;
            clr_addr <= '0;
          end else if (take) begin
            if (loop == LOOP_GEN) begin
              idx_q <= in_data;
              state <= S_CHECK;
            end else begin
              out_valid <= 1'b1;
              out_data  <= in_data;
            end
          end
        end
        S_CHECK: begin
          if (!rd_word[idx_q[4:0]]) begin
            out_valid <= 1'b1;
            out_data  <= idx_q;
          end else begin
            dup_seen <= 1'b1;
          end
          state <= S_IDLE;
        end
        S_CLEAR: begin
          if (clr_addr == WA_W'(NWORDS - 1)) state <= S_IDLE;
          clr_addr <= clr_addr + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
