// tb_genvocab -- with a 100-entry vocabulary: clears the bitmap (checking the
// clear time), runs loop 1 on a random stream with many repeats and checks that
// exactly the first occurrences come out, in order, with the input taken every
// two cycles; then runs loop 2 and checks that every input passes, one per
// cycle. A second loop-1 pass after a new clear must again see fresh values.
module tb_genvocab;
  import piper_pkg::*;
  localparam int V = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  loop_e loop;
  logic clear_start, clear_busy, in_valid, in_ready, out_valid, out_ready, dup_seen, busy;
  logic [6:0] in_data, out_data;
  genvocab #(.VOCAB_SIZE(V)) dut (.*);

  int checks = 0, failures = 0, dups = 0;
  int expq[$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dup_seen) dups++;
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output %0d", out_data); end
      else begin
        automatic int e = expq.pop_front();
        if (int'(out_data) != e) begin failures++; $display("got %0d exp %0d", out_data, e); end
      end
    end
  end

  task automatic send(int x, bit stall);
    bit fire;
    in_data = 7'(x); in_valid = 1;
    do begin
      out_ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk); fire = in_ready; @(posedge clk); #1;
    end while (!fire);
    in_valid = 0;
  endtask

  task automatic do_clear();
    int t0 = $time;
    clear_start = 1; @(posedge clk); #1; clear_start = 0;
    while (clear_busy) begin @(posedge clk); #1; end
    checks++;
    if (($time - t0) / 10 != (V + 31) / 32 + 1) begin
      failures++; $display("clear took %0d cycles", ($time - t0) / 10);
    end
  endtask

  task automatic loop1(int n, bit stall);
    bit seen[V];
    int t0 = $time;
    loop = LOOP_GEN;
    for (int i = 0; i < n; i++) begin
      int x = $urandom_range(0, V - 1);
      if (!seen[x]) expq.push_back(x);
      seen[x] = 1;
      send(x, stall);
    end
    if (!stall) begin
      checks++;
      if (($time - t0) / 10 != 2 * n - 1) begin failures++; $display("loop 1: %0d inputs in %0d cycles", n, ($time - t0) / 10); end
    end
  endtask

  initial begin
    int t0;
    loop = LOOP_GEN; clear_start = 0; in_valid = 0; in_data = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    do_clear();
    loop1(300, 0);
    repeat (3) @(posedge clk); #1;
    checks++;
    if (dups == 0) begin failures++; $display("no repeats filtered"); end
    // loop 2: pass-through
    loop = LOOP_APPLY;
    t0 = $time;
    for (int i = 0; i < 100; i++) begin automatic int x = $urandom_range(0, V - 1); expq.push_back(x); send(x, 0); end
    checks++;
    if (($time - t0) / 10 != 100) begin failures++; $display("loop 2 II not 1"); end
    for (int i = 0; i < 100; i++) begin automatic int x = $urandom_range(0, V - 1); expq.push_back(x); send(x, 1); end
    out_ready = 1;
    repeat (3) @(posedge clk); #1;
    // new run after a clear, with stalls
    do_clear();
    loop1(200, 1);
    out_ready = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
