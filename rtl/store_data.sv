// store_data -- the StoreData PE: gathers the columns back into rows.
//
// Every column of the pipeline ends in its own FIFO channel and runs at its own
// pace. StoreData waits until every column has a value at its head, takes one
// from each in the same cycle (the concatenation step) and writes the row out
// as three 512-bit lanes in the same layout as the binary input: label and
// dense results on lane 0, sparse results on lanes 1 and 2. One row per cycle
// (II = 1), latency one cycle, valid/ready on the output.
module store_data
  import piper_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_COLS-1:0] col_valid,
  output logic [NUM_COLS-1:0] col_ready,
  input  row_t                col_data,
  output logic                out_valid,
  input  logic                out_ready,
  output bin_beat_t           out_data
);
  logic gather;

  assign gather    = (&col_valid) && (!out_valid || out_ready);
  assign col_ready = {NUM_COLS{gather}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_data   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (gather) begin
        out_valid <= 1'b1;
        out_data  <= row_to_beat(col_data);
      end
    end
  end
endmodule
