// neg2zero -- the Neg2Zero PE for one dense column.
//
// A ternary operator on a signed 32-bit feature: negative values become 0,
// others pass unchanged, as the paper describes. One register stage with a
// valid/ready handshake; one value per cycle (II = 1), latency one cycle.
module neg2zero
  import piper_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  feat_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output feat_t out_data,
  output logic  busy
);
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
        out_data  <= in_data[DATA_W-1] ? '0 : in_data;
      end
    end
  end
endmodule
