// tb_piper_top -- end-to-end test of the whole pipeline at its default
// parameters (vocabulary 5000, 32-entry FIFOs, on-chip tables).
//
// A random dataset of ROWS rows is generated: labels 0/1, dense features with
// negative, empty and large values, sparse 32-bit hashes drawn partly from a
// small pool per column so that values repeat (and some fields empty). A
// reference model computes every expected output row: label unchanged,
// dense = ln(max(x,0)+1) as a float (checked within 2e-5 / 1e-5 relative),
// sparse = position of (x mod 5000) in the column's order of first appearance.
// Three runs: UTF-8 text with output stalls, binary rows at full speed (the
// loop-2 row rate is checked against ApplyVocab's two-cycle interval), and
// binary rows with output stalls. The dataset is sent once per loop. The
// vocabulary sizes reported after each run are checked too.
// Mechanisms counted (each must occur): decoder cycles with several values,
// empty fields filled with 0, negative dense values clamped, repeated sparse
// values filtered in loop 1, column FIFO back-pressure on the row broadcast,
// output back-pressure, rows in each input mode, and the loop-1 -> loop-2
// switch.
module tb_piper_top;
  import piper_pkg::*;
  localparam int ROWS = 200;
  localparam int V    = 5000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, mode_binary, utf8_valid, utf8_ready, bin_valid, bin_ready;
  logic out_valid, out_ready, busy, done;
  logic [31:0] num_rows;
  logic [BUS_W-1:0] utf8_data;
  bin_beat_t bin_data, out_data;
  loop_e loop;
  logic [NUM_SPARSE-1:0][$clog2(V+1)-1:0] vocab_count;
  // external vocabulary ports, unused with on-chip tables
  logic [NUM_SPARSE-1:0] vt_req_valid, vt_req_we, vt_rsp_valid;
  logic [NUM_SPARSE-1:0] vt_req_ready = '1;
  logic [NUM_SPARSE-1:0][$clog2(V)-1:0] vt_req_addr;
  logic [NUM_SPARSE-1:0][$clog2(V+1)-1:0] vt_req_wdata, vt_rsp_data;

  piper_top dut (.*);
  assign vt_rsp_valid = '0;
  assign vt_rsp_data  = '0;

  int checks = 0, failures = 0;

  // ---------------- dataset and reference ----------------
  int   raw [ROWS][NUM_COLS];      // values as 32-bit patterns
  bit   empty_f [ROWS][NUM_COLS];
  int   exp_idx [ROWS][NUM_SPARSE];
  int   n_distinct [NUM_SPARSE];
  byte unsigned text[$];

  int n_multi = 0, n_missing = 0, n_neg = 0, n_dup = 0, n_fifo_stall = 0,
      n_out_stall = 0, n_utf8_rows = 0, n_bin_rows = 0, n_switch = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f32_to_real(feat_t f);
    real r;
    int  e;
    if (f[30:0] == 0) return 0.0;
    r = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    while (e > 0) begin r = r * 2.0; e--; end
    while (e < 0) begin r = r / 2.0; e++; end
    return r;
  endfunction

  task automatic gen_data();
    int pool [NUM_SPARSE][6];
    int first_pos [NUM_SPARSE][int];
    foreach (pool[s, k]) pool[s][k] = int'($urandom());
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < NUM_COLS; c++) begin
        automatic int v;
        empty_f[r][c] = (c != 0) && ($urandom_range(0, 11) == 0);
        if (c == 0) v = $urandom_range(0, 1);
        else if (c < FIRST_SPARSE) begin
          case ($urandom_range(0, 3))
            0: v = -int'($urandom_range(1, 5000));
            1: v = $urandom_range(0, 20);
            2: v = $urandom_range(0, 100000);
            default: v = $urandom_range(0, 32'h7fff_ffff);
          endcase
        end else begin
          v = ($urandom_range(0, 2) != 0) ? pool[c - FIRST_SPARSE][$urandom_range(0, 5)] : int'($urandom());
        end
        if (empty_f[r][c]) begin v = 0; n_missing++; end
        if (c >= FIRST_DENSE && c < FIRST_SPARSE && v < 0) n_neg++;
        raw[r][c] = v;
      end
    end
    for (int s = 0; s < NUM_SPARSE; s++) begin
      n_distinct[s] = 0;
      for (int r = 0; r < ROWS; r++) begin
        automatic int m = int'(longint'(unsigned'(raw[r][FIRST_SPARSE + s])) % V);
        if (!first_pos[s].exists(m)) begin first_pos[s][m] = n_distinct[s]; n_distinct[s]++; end
        else n_dup++;
        exp_idx[r][s] = first_pos[s][m];
      end
    end
    // text
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < NUM_COLS; c++) begin
        automatic string s = "";
        if (!empty_f[r][c]) begin
          if (c < FIRST_SPARSE) s = $sformatf("%0d", raw[r][c]);
          else s = $sformatf("%08h", raw[r][c]);
        end
        for (int i = 0; i < s.len(); i++) text.push_back(s[i]);
        text.push_back(c == NUM_COLS - 1 ? 8'h0A : 8'h09);
      end
    end
    while (text.size() % 64 != 0) text.push_back(8'h00);
  endtask

  // ---------------- output checker ----------------
  int  out_row = 0;
  bit  stall_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) n_switch++;
    if (dut.row_valid && dut.row_gate && !dut.all_ready) n_fifo_stall++;
    if (dut.dec_valid && dut.dec_ready && dut.dec_cnt > 1) n_multi++;
    if (out_valid && !out_ready) n_out_stall++;
    if (out_valid && out_ready) begin
      automatic row_t got = beat_to_row(out_data);
      automatic int r = out_row;
      automatic bit bad = 0;
      if (r >= ROWS) begin failures++; $display("extra output row"); end
      else begin
        checks++;
        if (got[0] != feat_t'(raw[r][0])) bad = 1;
        for (int d = 0; d < NUM_DENSE; d++) begin
          automatic real x = raw[r][1 + d] < 0 ? 0.0 : real'(raw[r][1 + d]);
          automatic real ev = $ln(x + 1.0);
          automatic real gv = f32_to_real(got[1 + d]);
          automatic real err = gv > ev ? gv - ev : ev - gv;
          if (err > 2e-5 && err > 1e-5 * ev) bad = 1;
        end
        for (int s = 0; s < NUM_SPARSE; s++)
          if (got[FIRST_SPARSE + s] != feat_t'(exp_idx[r][s])) bad = 1;
        if (out_data[0][BUS_W-1:14*32] != 0 || out_data[2][BUS_W-1:10*32] != 0) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 5) $display("row %0d wrong: label %0d sparse0 %0d (exp %0d)", r, got[0],
                                     got[FIRST_SPARSE], exp_idx[r][0]);
        end
        if (mode_binary) n_bin_rows++; else n_utf8_rows++;
      end
      out_row++;
    end
  end

  always @(posedge clk) begin
    #1;
    if (stall_out) out_ready = ($urandom_range(0, 2) != 0);
    else out_ready = 1;
  end

  // ---------------- sources ----------------
  task automatic send_text();
    for (int w = 0; w < text.size() / 64; w++) begin
      bit fire;
      for (int b = 0; b < 64; b++) utf8_data[8*b +: 8] = text[64*w + b];
      utf8_valid = 1;
      do begin @(negedge clk); fire = utf8_ready; @(posedge clk); #1; end while (!fire);
      utf8_valid = 0;
    end
  endtask

  task automatic send_bin();
    for (int r = 0; r < ROWS; r++) begin
      bit fire;
      row_t row;
      for (int c = 0; c < NUM_COLS; c++) row[c] = feat_t'(raw[r][c]);
      bin_data = row_to_beat(row);
      bin_valid = 1;
      do begin @(negedge clk); fire = bin_ready; @(posedge clk); #1; end while (!fire);
      bin_valid = 0;
    end
  endtask

  task automatic run(bit binary, bit stalls, bit check_rate);
    int t_loop2, cycles;
    out_row = 0;
    stall_out = stalls;
    mode_binary = binary;
    num_rows = ROWS;
    start = 1; @(posedge clk); #1; start = 0;
    if (binary) send_bin(); else send_text();
    while (loop != LOOP_APPLY) begin @(posedge clk); #1; end
    t_loop2 = $time;
    if (binary) send_bin(); else send_text();
    while (busy) begin @(posedge clk); #1; end
    cycles = ($time - t_loop2) / 10;
    checks++;
    if (out_row != ROWS) begin failures++; $display("%0d of %0d rows out", out_row, ROWS); end
    for (int s = 0; s < NUM_SPARSE; s++) begin
      checks++;
      if (int'(vocab_count[s]) != n_distinct[s]) begin
        failures++; $display("column %0d vocabulary %0d, expected %0d", s, vocab_count[s], n_distinct[s]);
      end
    end
    if (check_rate) begin
      // ApplyVocab-2 takes one value every 2 cycles; allow the pipeline latency.
      checks++;
      if (cycles > 2 * ROWS + 40) begin failures++; $display("loop 2 took %0d cycles for %0d rows", cycles, ROWS); end
      $display("binary loop 2: %0d rows in %0d cycles", ROWS, cycles);
    end
    repeat (3) @(posedge clk); #1;
  endtask

  initial begin
    start = 0; mode_binary = 0; utf8_valid = 0; bin_valid = 0; utf8_data = '0; bin_data = '0;
    num_rows = 0; out_ready = 1;
    gen_data();
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    run(0, 1, 0);
    run(1, 0, 1);
    run(1, 1, 0);
    $display("mechanisms: multi-value decode cycles %0d, empty fields %0d, negative dense %0d,",
             n_multi, n_missing, n_neg);
    $display("  repeated sparse values %0d, FIFO stalls %0d, output stalls %0d,", n_dup, n_fifo_stall, n_out_stall);
    $display("  UTF-8 rows %0d, binary rows %0d, loop switches/done %0d", n_utf8_rows, n_bin_rows, n_switch);
    checks++; if (n_multi == 0)      begin failures++; $display("no multi-value decode cycle"); end
    checks++; if (n_missing == 0)    begin failures++; $display("no empty field"); end
    checks++; if (n_neg == 0)        begin failures++; $display("no negative dense value"); end
    checks++; if (n_dup == 0)        begin failures++; $display("no repeated sparse value"); end
    checks++; if (n_fifo_stall == 0) begin failures++; $display("no FIFO back-pressure"); end
    checks++; if (n_out_stall == 0)  begin failures++; $display("no output back-pressure"); end
    checks++; if (n_utf8_rows != ROWS || n_bin_rows != 2 * ROWS) begin failures++; $display("row counts per mode wrong"); end
    checks++; if (n_switch != 3)     begin failures++; $display("done pulsed %0d times", n_switch); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
