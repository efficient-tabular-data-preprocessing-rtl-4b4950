// piper_pkg -- constants and types shared by the Piper preprocessing pipeline.
//
// A training row of the Criteo-style DLRM dataset holds one label, 13 dense
// (integer, decimal-encoded) features and 26 sparse (categorical, 32-bit hash,
// hexadecimal-encoded) features. The column counts and the 32-bit feature width
// follow the paper. Inside the accelerator a row travels as one vector of 40
// 32-bit columns, ordered as in the text file: column 0 is the label, columns
// 1..13 the dense features, columns 14..39 the sparse features. That column
// order and the binary lane layout below are this design's choices.
package piper_pkg;

  localparam int DATA_W     = 32;
  localparam int NUM_LABEL  = 1;
  localparam int NUM_DENSE  = 13;
  localparam int NUM_SPARSE = 26;
  localparam int NUM_COLS   = NUM_LABEL + NUM_DENSE + NUM_SPARSE;  // 40
  // Feature ids 0..NUM_DEC are decimal (label and dense), larger ids hexadecimal.
  localparam int NUM_DEC    = NUM_LABEL + NUM_DENSE - 1;           // 13
  localparam int FIRST_DENSE  = NUM_LABEL;                         // 1
  localparam int FIRST_SPARSE = NUM_LABEL + NUM_DENSE;             // 14
  localparam int FID_W      = 6;                                   // holds 0..63

  // Width of one memory / network beat.
  localparam int BUS_W      = 512;
  // Binary rows arrive on three 512-bit lanes: lane 0 carries label and dense
  // features (448 valid bits), lanes 1 and 2 the 26 sparse features (832 of 1024
  // valid bits). Unused bits are zero.
  localparam int NUM_LANES  = 3;
  localparam int SPARSE_PER_LANE = BUS_W / DATA_W;                 // 16

  // Bytes handed to the parallel decoder per cycle.
  localparam int DEC_LANES  = 4;

  typedef logic [DATA_W-1:0] feat_t;
  typedef feat_t [NUM_COLS-1:0] row_t;
  typedef logic [NUM_LANES-1:0][BUS_W-1:0] bin_beat_t;

  // Character classes produced by the ASCII mapper.
  typedef enum logic [2:0] {
    CH_OTHER = 3'd0,   // ignored (for instance zero padding)
    CH_TAB   = 3'd1,   // feature delimiter
    CH_NL    = 3'd2,   // end of row
    CH_MINUS = 3'd3,   // sign of a decimal feature
    CH_DIGIT = 3'd4    // 0-9 or a-f, value in the nibble
  } char_class_e;

  // Which of the two passes over the dataset is running.
  typedef enum logic {
    LOOP_GEN   = 1'b0, // loop 1: build the vocabulary
    LOOP_APPLY = 1'b1  // loop 2: map every feature and store the rows
  } loop_e;

  // Pack a row into the three-lane binary layout (also used for the output).
  function automatic bin_beat_t row_to_beat(input row_t r);
    bin_beat_t b;
    b = '0;
    for (int c = 0; c < NUM_LABEL + NUM_DENSE; c++) b[0][c*DATA_W +: DATA_W] = r[c];
    for (int s = 0; s < NUM_SPARSE; s++)
      b[1 + s / SPARSE_PER_LANE][(s % SPARSE_PER_LANE)*DATA_W +: DATA_W] = r[FIRST_SPARSE + s];
    return b;
  endfunction

  function automatic row_t beat_to_row(input bin_beat_t b);
    row_t r;
    for (int c = 0; c < NUM_LABEL + NUM_DENSE; c++) r[c] = b[0][c*DATA_W +: DATA_W];
    for (int s = 0; s < NUM_SPARSE; s++)
      r[FIRST_SPARSE + s] = b[1 + s / SPARSE_PER_LANE][(s % SPARSE_PER_LANE)*DATA_W +: DATA_W];
    return r;
  endfunction

endpackage
