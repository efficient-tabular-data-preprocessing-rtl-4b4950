// tb_modulus -- random 32-bit hashes (including values with the top bit set)
// at the default vocabulary size 5000 and at a second size; every output must
// equal the unsigned remainder, in order, one per cycle when not stalled.
module tb_modulus;
  import piper_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic in_valid2, in_ready2, out_valid2, busy2;
  feat_t in_data;
  logic [12:0] out_data;
  logic [19:0] out_data2;
  modulus dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .busy);
  modulus #(.VOCAB_SIZE(1000000)) dut2 (.clk, .rst_n, .in_valid, .in_ready(in_ready2), .in_data,
    .out_valid(out_valid2), .out_ready, .out_data(out_data2), .busy(busy2));

  int checks = 0, failures = 0, outs = 0;
  longint unsigned expq[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic longint unsigned x = expq.pop_front();
    checks += 2; outs++;
    if (longint'(out_data) != x % 5000) begin failures++; $display("5K: %0d mod -> %0d", x, out_data); end
    if (!out_valid2 || longint'(out_data2) != x % 1000000) begin failures++; $display("1M: %0d -> %0d", x, out_data2); end
  end

  task automatic send(feat_t x, bit stall);
    bit fire;
    in_data = x; in_valid = 1;
    expq.push_back(longint'(x));
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
    send(32'hffff_ffff, 0); send(0, 0); send(4999, 0); send(5000, 0); send(32'hbe589b51, 0);
    t0 = $time;
    for (int i = 0; i < 200; i++) send($urandom(), 0);
    checks++;
    if (($time - t0) / 10 != 200) begin failures++; $display("II not 1"); end
    for (int i = 0; i < 300; i++) send($urandom(), 1);
    out_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (outs != 505) begin failures++; $display("outs %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
