// tb_store_data -- forty column sources present values at random times (each
// column its own ordered stream); every output row must hold the next value of
// each column, in the three-lane layout (label and dense on lane 0, sparse
// 0-15 on lane 1, 16-25 on lane 2, other bits zero). No column may be popped
// unless all are valid. When all columns are always valid, one row per cycle.
module tb_store_data;
  import piper_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NUM_COLS-1:0] col_valid, col_ready;
  row_t col_data;
  logic out_valid, out_ready;
  bin_beat_t out_data;
  store_data dut (.*);

  int checks = 0, failures = 0, rows_out = 0;
  int seq[NUM_COLS];      // next sequence number each column will present
  int exp_seq = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column c presents value {c, seq}
  always_comb for (int c = 0; c < NUM_COLS; c++) col_data[c] = {8'(c), 24'(seq[c])};

  always @(posedge clk) if (rst_n) begin
    if ((|col_ready) && !(&col_valid)) begin failures++; $display("popped with a column missing"); end
    for (int c = 0; c < NUM_COLS; c++) if (col_valid[c] && col_ready[c]) seq[c] <= seq[c] + 1;
    if (out_valid && out_ready) begin
      bin_beat_t e;
      e = '0;
      for (int c = 0; c < 14; c++) e[0][32*c +: 32] = {8'(c), 24'(exp_seq)};
      for (int s = 0; s < 26; s++) e[1 + s / 16][32*(s % 16) +: 32] = {8'(14 + s), 24'(exp_seq)};
      checks++;
      if (out_data !== e) begin failures++; $display("row %0d wrong: %h %h / %h %h", exp_seq, out_data[0][63:0], out_data[2][351:288], e[0][63:0], e[2][351:288]); end
      exp_seq++; rows_out++;
    end
  end

  initial begin
    int t0;
    col_valid = '0; out_ready = 1;
    foreach (seq[c]) seq[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 300; i++) begin
      for (int c = 0; c < NUM_COLS; c++) col_valid[c] = ($urandom_range(0, 9) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
    end
    col_valid = '1; out_ready = 1;
    @(posedge clk); #1;
    t0 = rows_out;
    repeat (50) @(posedge clk);
    #1;
    checks++;
    if (rows_out - t0 != 50) begin failures++; $display("%0d rows in 50 cycles", rows_out - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
