// load_data -- the LoadData PE: brings 512-bit beats from memory or the network
// into the pipeline.
//
// UTF-8 mode (mode_binary = 0): a 512-bit beat of text (byte 0 in bits 7:0,
// first in the stream) is held and handed to the decoder DEC_LANES bytes per
// cycle, so one beat takes BUS_W/8/DEC_LANES = 16 cycles. The paper feeds its
// decoder from a 512-bit memory port; the width conversion is this design's way
// of doing that.
// Binary mode (mode_binary = 1): one row arrives as three parallel 512-bit lanes
// (label and 13 dense features on lane 0, 26 sparse features on lanes 1-2, as
// the paper lays them over three memory channels) and is registered as a row,
// one row per cycle (II = 1).
// Only the input belonging to the selected mode is accepted.
module load_data
  import piper_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        mode_binary,
  // UTF-8 text beats
  input  logic                        utf8_valid,
  output logic                        utf8_ready,
  input  logic [BUS_W-1:0]            utf8_data,
  // binary row beats
  input  logic                        bin_valid,
  output logic                        bin_ready,
  input  bin_beat_t                   bin_data,
  // to the decoder
  output logic                        chunk_valid,
  input  logic                        chunk_ready,
  output logic [DEC_LANES-1:0][7:0]   chunk_bytes,
  // binary rows
  output logic                        row_valid,
  input  logic                        row_ready,
  output row_t                        row_data,
  output logic                        busy
);
  localparam int CHUNKS = BUS_W / (8 * DEC_LANES);   // 16
  localparam int CI_W   = $clog2(CHUNKS);

  logic [BUS_W-1:0] word_q;
  logic             word_valid_q;
  logic [CI_W-1:0]  idx_q;
  logic             last_chunk;

  assign chunk_valid = word_valid_q;
  assign chunk_bytes = word_q[idx_q*(8*DEC_LANES) +: 8*DEC_LANES];
  assign last_chunk  = (idx_q == CI_W'(CHUNKS - 1));
  assign utf8_ready  = !mode_binary && (!word_valid_q || (chunk_ready && last_chunk));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_q       <= '0;
      word_valid_q <= 1'b0;
      idx_q        <= '0;
    end else begin
      if (word_valid_q && chunk_ready) begin
        idx_q <= idx_q + 1'b1;
        if (last_chunk) word_valid_q <= 1'b0;
      end
      if (utf8_valid && utf8_ready) begin
        word_q       <= utf8_data;
        word_valid_q <= 1'b1;
        idx_q        <= '0;
      end
    end
  end

  assign bin_ready = mode_binary && (!row_valid || row_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= 1'b0;
      row_data  <= '0;
    end else begin
      if (row_valid && row_ready) row_valid <= 1'b0;
      if (bin_valid && bin_ready) begin
        row_valid <= 1'b1;
        row_data  <= beat_to_row(bin_data);
      end
    end
  end

  assign busy = word_valid_q || row_valid;
endmodule
