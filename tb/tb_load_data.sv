// tb_load_data -- UTF-8 mode: random 512-bit beats must come out as 4-byte
// chunks in stream order, 16 chunks per beat, one per cycle. Binary mode: random
// three-lane beats must be unpacked into the row columns (label/dense from lane
// 0, sparse 0-15 from lane 1, 16-25 from lane 2), one per cycle, and inputs of
// the other mode must not be accepted.
module tb_load_data;
  import piper_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mode_binary, utf8_valid, utf8_ready, bin_valid, bin_ready;
  logic [BUS_W-1:0] utf8_data;
  bin_beat_t bin_data;
  logic chunk_valid, chunk_ready, row_valid, row_ready, busy;
  logic [3:0][7:0] chunk_bytes;
  row_t row_data;

  load_data dut (.*);

  int checks = 0, failures = 0;
  byte unsigned exp_bytes[$];
  row_t exp_rows[$];
  int chunks = 0, rows = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && chunk_valid && chunk_ready) begin
      chunks++;
      for (int j = 0; j < 4; j++) begin
        automatic byte unsigned e = exp_bytes.pop_front();
        checks++;
        if (chunk_bytes[j] != e) begin failures++; $display("byte mismatch"); end
      end
    end
    if (rst_n && row_valid && row_ready) begin
      automatic row_t e = exp_rows.pop_front();
      rows++;
      checks++;
      if (row_data !== e) begin failures++; $display("row mismatch"); end
    end
  end

  initial begin
    int t0;
    mode_binary = 0; utf8_valid = 0; bin_valid = 0; utf8_data = '0; bin_data = '0;
    chunk_ready = 1; row_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // UTF-8: 4 beats back to back
    t0 = $time;
    for (int w = 0; w < 4; w++) begin
      bit fire;
      for (int b = 0; b < 64; b++) begin
        utf8_data[8*b +: 8] = 8'($urandom());
        exp_bytes.push_back(utf8_data[8*b +: 8]);
      end
      utf8_valid = 1;
      do begin @(negedge clk); fire = utf8_ready; @(posedge clk); #1; end while (!fire);
    end
    utf8_valid = 0;
    wait (chunks == 64);
    @(posedge clk); #1;
    checks++;
    if (($time - t0) / 10 > 66) begin failures++; $display("UTF-8 rate too low: %0d cycles", ($time - t0) / 10); end
    // a binary beat offered in UTF-8 mode must be ignored
    bin_valid = 1; bin_data = '1;
    @(negedge clk); checks++; if (bin_ready) begin failures++; $display("binary accepted in UTF-8 mode"); end
    @(posedge clk); #1; bin_valid = 0;
    // binary: 20 rows, with occasional stalls
    mode_binary = 1;
    for (int r = 0; r < 20; r++) begin
      bit fire;
      row_t e;
      for (int l = 0; l < 3; l++) for (int k = 0; k < 16; k++) bin_data[l][32*k +: 32] = $urandom();
      e[0] = bin_data[0][31:0];
      for (int d = 0; d < 13; d++) e[1 + d] = bin_data[0][32*(d+1) +: 32];
      for (int s = 0; s < 16; s++) e[14 + s] = bin_data[1][32*s +: 32];
      for (int s = 0; s < 10; s++) e[30 + s] = bin_data[2][32*s +: 32];
      exp_rows.push_back(e);
      bin_valid = 1;
      do begin
        row_ready = ($urandom_range(0, 3) != 0);
        @(negedge clk); fire = bin_ready; @(posedge clk); #1;
      end while (!fire);
    end
    bin_valid = 0; row_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (rows != 20 || exp_bytes.size() != 0) begin failures++; $display("counts: rows %0d", rows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
