// piper_ctrl -- sequencer of Piper's two passes over the dataset.
//
// After start the controller clears the GenVocab bitmaps and the ApplyVocab
// counters (CLEAR), then runs loop 1 (LOOP1): num_rows rows are admitted into
// the column pipelines to build the vocabulary. It then closes the row gate
// and waits until every pipeline is empty (DRAIN), switches all PEs to loop 2
// (LOOP2) and admits num_rows rows again, which are mapped and stored. When
// num_rows rows have been stored it pulses done and returns to IDLE.
// The two consecutive loops are the paper's; the states, the drain step and the
// row counting are this design's way of sequencing them. The dataset must be
// presented twice, once per loop (loop tells the source which).
module piper_ctrl
  import piper_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_rows,
  input  logic        row_in,       // a row entered the column pipelines
  input  logic        row_out,      // a row was stored
  input  logic        clear_busy,   // some GenVocab is still clearing
  input  logic        pipe_idle,    // all column pipelines are empty
  output loop_e       loop,
  output logic        clear_start,
  output logic        row_gate,     // rows may enter the column pipelines
  output logic        busy,
  output logic        done
);
  typedef enum logic [2:0] {IDLE, CLEAR, LOOP1, DRAIN, LOOP2} state_e;
  state_e      state;
  logic [31:0] rows_in_q, rows_out_q;

  assign clear_start = (state == IDLE) && start;
  assign loop        = (state == LOOP2) ? LOOP_APPLY : LOOP_GEN;
  assign row_gate    = ((state == LOOP1) || (state == LOOP2)) && (rows_in_q != num_rows);
  assign busy        = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      rows_in_q  <= '0;
      rows_out_q <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (row_in)  rows_in_q  <= rows_in_q + 1;
      if (row_out) rows_out_q <= rows_out_q + 1;
      unique case (state)
        IDLE: if (start) begin
          state      <= CLEAR;
          rows_in_q  <= '0;
          rows_out_q <= '0;
        end
        CLEAR: if (!clear_busy) state <= LOOP1;
        LOOP1: if (rows_in_q == num_rows) state <= DRAIN;
        DRAIN: if (pipe_idle) begin
          state      <= LOOP2;
          rows_in_q  <= '0;
          rows_out_q <= '0;
        end
        LOOP2: if (rows_out_q == num_rows) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_no_row_when_closed: assert property (@(posedge clk) disable iff (!rst_n)
    row_in |-> row_gate);
endmodule
