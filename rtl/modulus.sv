// modulus -- the Modulus PE for one sparse column (Hex2Int folded in).
//
// The sparse feature arrives as the 32-bit value of its hexadecimal hash; no
// separate hex-to-integer step is needed because the decoder already produced
// binary bits (as the paper notes). The PE reduces it to the vocabulary range:
// out = in mod VOCAB_SIZE, with the input read as an unsigned number so the
// result is never negative (a "positive modulus"). The divisor is a parameter,
// as the vocabulary size is fixed per build. One register stage, valid/ready,
// II = 1, latency one cycle.
module modulus
  import piper_pkg::*;
#(
  parameter int VOCAB_SIZE = 5000,
  localparam int IDX_W = (VOCAB_SIZE > 1) ? $clog2(VOCAB_SIZE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  feat_t            in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_data,
  output logic             busy
);
  localparam logic [DATA_W-1:0] DIVISOR = DATA_W'(VOCAB_SIZE);

  assign in_ready = !out_valid || out_ready;
  assign busy     = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= IDX_W'(in_data % DIVISOR);
      end
    end
  end
endmodule
