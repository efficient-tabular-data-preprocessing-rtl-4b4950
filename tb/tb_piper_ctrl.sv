// tb_piper_ctrl -- plays the pipeline around the controller: checks that start
// triggers one clear pulse, that loop 1 admits exactly num_rows rows and then
// closes the gate, that loop 2 only starts once the pipeline reports idle,
// that loop 2 admits num_rows rows, and that done pulses once after the last
// row is stored. Runs twice with different row counts.
module tb_piper_ctrl;
  import piper_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, row_in, row_out, clear_busy, pipe_idle;
  logic [31:0] num_rows;
  loop_e loop;
  logic clear_start, row_gate, busy, done;
  piper_ctrl dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int n);
    int admitted = 0, stored = 0, dones = 0;
    num_rows = n;
    start = 1;
    @(negedge clk); check(clear_start == 1, "clear_start with start");
    @(posedge clk); #1; start = 0;
    clear_busy = 1;
    repeat (5) begin @(negedge clk); check(!row_gate, "gate closed while clearing"); @(posedge clk); #1; end
    clear_busy = 0;
    pipe_idle = 0;   // rows are in flight from here on
    // loop 1: offer a row every cycle for a long time
    for (int i = 0; i < 3 * n + 20; i++) begin
      row_in = 0;
      @(negedge clk);
      if (row_gate && $urandom_range(0, 1)) begin
        check(loop == LOOP_GEN, "loop 1 flag");
        row_in = 1; admitted++;
      end
      @(posedge clk); #1; row_in = 0;
    end
    check(admitted == n, $sformatf("loop 1 admitted %0d of %0d", admitted, n));
    // pipeline still busy
    pipe_idle = 0;
    repeat (10) begin @(negedge clk); check(loop == LOOP_GEN && !row_gate, "waits for drain"); @(posedge clk); #1; end
    pipe_idle = 1;
    admitted = 0;
    for (int i = 0; i < 4 * n + 40 && dones == 0; i++) begin
      row_in = 0; row_out = 0;
      @(negedge clk);
      if (done) dones++;
      if (row_gate && $urandom_range(0, 1)) begin
        check(loop == LOOP_APPLY, "loop 2 flag");
        row_in = 1; admitted++;
      end
      if (stored < admitted - 1 && $urandom_range(0, 1)) begin row_out = 1; stored++; end
      if (stored == n - 1 && admitted == n && !row_out && $urandom_range(0, 1)) begin row_out = 1; stored++; end
      @(posedge clk); #1; row_in = 0; row_out = 0;
    end
    repeat (3) begin @(negedge clk); if (done) dones++; @(posedge clk); #1; end
    check(admitted == n, $sformatf("loop 2 admitted %0d of %0d", admitted, n));
    check(stored == n, "all rows stored");
    check(dones == 1, $sformatf("done pulsed %0d times", dones));
    check(!busy, "idle at the end");
  endtask

  initial begin
    start = 0; row_in = 0; row_out = 0; clear_busy = 0; pipe_idle = 1; num_rows = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    run(7);
    run(25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
