// tb_row_assembler -- drives decoded values (0..4 per cycle, random grouping,
// random output stalls, some feature ids skipped) and checks each emitted row
// against a row built independently: skipped columns must read as zero and
// values after an end of row must start the next row.
module tb_row_assembler;
  import piper_pkg::*;
  localparam int ROWS = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [2:0] in_cnt;
  feat_t [3:0] in_val;
  logic [3:0][FID_W-1:0] in_fid;
  logic [3:0] in_last;
  row_t out_row;

  row_assembler dut (.*);

  int checks = 0, failures = 0;
  row_t exp_rows[$];
  feat_t q_val[$]; int q_fid[$]; bit q_last[$];
  int zeros_seen = 0, split_cycles = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      row_t e;
      checks++;
      e = exp_rows.pop_front();
      if (out_row !== e) begin
        failures++;
        $display("row mismatch");
      end
    end
  end

  initial begin
    in_valid = 0; in_cnt = 0; in_val = '0; in_fid = '0; in_last = '0; out_ready = 1;
    for (int r = 0; r < ROWS; r++) begin
      automatic row_t e = '0;
      for (int c = 0; c < NUM_COLS; c++) begin
        if (c != NUM_COLS - 1 && $urandom_range(0, 7) == 0) begin zeros_seen++; continue; end
        e[c] = $urandom();
        q_val.push_back(e[c]); q_fid.push_back(c); q_last.push_back(c == NUM_COLS - 1);
      end
      exp_rows.push_back(e);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    while (q_val.size() > 0) begin
      automatic int n = $urandom_range(0, 4);
      automatic bit fire, has_last = 0;
      if (n > q_val.size()) n = q_val.size();
      in_cnt = 3'(n); in_val = '0; in_fid = '0; in_last = '0;
      for (int i = 0; i < n; i++) begin
        in_val[i] = q_val[i]; in_fid[i] = FID_W'(q_fid[i]); in_last[i] = q_last[i];
        if (q_last[i] && i < n - 1) has_last = 1;
      end
      in_valid = 1;
      forever begin
        out_ready = ($urandom_range(0, 3) != 0);
        @(negedge clk); fire = in_ready;
        @(posedge clk); #1;
        if (fire) break;
      end
      if (has_last) split_cycles++;
      for (int i = 0; i < n; i++) begin void'(q_val.pop_front()); void'(q_fid.pop_front()); void'(q_last.pop_front()); end
    end
    in_valid = 0; out_ready = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_rows.size() != 0) begin failures++; $display("%0d rows missing", exp_rows.size()); end
    checks++;
    if (split_cycles == 0 || zeros_seen == 0) begin failures++; $display("corner cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
