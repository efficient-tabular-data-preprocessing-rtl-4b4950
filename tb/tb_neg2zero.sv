// tb_neg2zero -- random signed inputs (many negative, plus the extremes) with
// random output stalls; every output must equal max(x, 0) and arrive in order;
// with the output always ready one value must pass per cycle.
module tb_neg2zero;
  import piper_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  feat_t in_data, out_data;
  neg2zero dut (.*);

  int checks = 0, failures = 0, negs = 0, outs = 0;
  feat_t expq[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic feat_t e = expq.pop_front();
    checks++; outs++;
    if (out_data !== e) begin failures++; $display("got %h exp %h", out_data, e); end
  end

  task automatic send(feat_t x, bit stall);
    bit fire;
    in_data = x; in_valid = 1;
    expq.push_back($signed(x) < 0 ? '0 : x);
    if ($signed(x) < 0) negs++;
    do begin
      out_ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk); fire = in_ready; @(posedge clk); #1;
    end while (!fire);
    in_valid = 0;
  endtask

  initial begin
    int t0;
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    send(32'h8000_0000, 0); send(32'h7fff_ffff, 0); send(0, 0); send(32'hffff_ffff, 0);
    t0 = $time;
    for (int i = 0; i < 200; i++) send($urandom(), 0);
    checks++;
    if (($time - t0) / 10 != 200) begin failures++; $display("II not 1"); end
    for (int i = 0; i < 300; i++) send($urandom(), 1);
    out_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (outs != 504 || negs == 0) begin failures++; $display("outs %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
