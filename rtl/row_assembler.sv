// row_assembler -- turns the decoder's feature stream into whole rows
// ("split by column" in the Piper dataflow).
//
// Each decoded value carries its feature id; the assembler writes it into the
// matching column of a row buffer. When a value marked end-of-row arrives the
// completed row is moved to the output register and the buffer restarts at all
// zeros, so a feature that was empty or missing in the text reads as 0 (the
// paper's FillMissing is therefore free). Values with an id beyond the last
// column are dropped. Up to LANES values, including at most one end of row, are
// taken per cycle; values after the end-of-row in the same cycle start the next
// row. Interface: valid/ready in, valid/ready row out, one cycle latency.
// Input is accepted only while the output register is free or being emptied.
module row_assembler
  import piper_pkg::*;
#(
  parameter int LANES = DEC_LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [$clog2(LANES+1)-1:0]    in_cnt,
  input  feat_t [LANES-1:0]             in_val,
  input  logic  [LANES-1:0][FID_W-1:0]  in_fid,
  input  logic  [LANES-1:0]             in_last,
  output logic                          out_valid,
  input  logic                          out_ready,
  output row_t                          out_row,
  output logic                          busy
);
  row_t cur_q, cur_n, done_n;
  logic emit_n;

  always_comb begin
    cur_n  = cur_q;
    done_n = '0;
    emit_n = 1'b0;
    for (int i = 0; i < LANES; i++) begin
      if (i < int'(in_cnt)) begin
        if (in_fid[i] < FID_W'(NUM_COLS)) cur_n[in_fid[i]] = in_val[i];
        if (in_last[i]) begin
          done_n = cur_n;
          emit_n = 1'b1;
          cur_n  = '0;
        end
      end
    end
  end

  assign in_ready = !out_valid || out_ready;
  assign busy     = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q     <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        cur_q <= cur_n;
        if (emit_n) begin
          out_valid <= 1'b1;
          out_row   <= done_n;
        end
      end
    end
  end
endmodule
