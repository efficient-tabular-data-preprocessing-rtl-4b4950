// tb_logarithm -- ln(x+1) of random non-negative integers (small, medium and up
// to 2^31-1, plus 0 and 159) is compared with the simulator's real-valued $ln;
// the float result must be within 2e-5 absolute or 1e-5 relative. Also checks
// the latency (the result leaves FRAC_BITS+3 cycles after the input is taken), one result per cycle, and stalls.
module tb_logarithm;
  import piper_pkg::*;
  localparam int FRAC = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  feat_t in_data, out_data;
  logarithm dut (.*);

  int checks = 0, failures = 0, outs = 0;
  feat_t expq[$];
  int first_out_cycle = -1, cyc = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // IEEE-754 single (positive, normal or zero) to real, computed directly.
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

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      automatic feat_t x = expq.pop_front();
      real ref_v, got, err;
      ref_v = $ln(real'(x) + 1.0);
      got = f32_to_real(out_data);
      err = got - ref_v; if (err < 0) err = -err;
      checks++;
      if (first_out_cycle < 0) first_out_cycle = cyc;
      outs++;
      if (err > 2e-5 && err > 1e-5 * ref_v) begin
        failures++;
        $display("ln(%0d+1): got %f (%h) exp %f", x, got, out_data, ref_v);
      end
    end
  end

  task automatic send(feat_t x, bit stall);
    bit fire;
    in_data = x; in_valid = 1;
    expq.push_back(x);
    do begin
      out_ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk); fire = in_ready; @(posedge clk); #1;
    end while (!fire);
    in_valid = 0;
  endtask

  initial begin
    int t0, c0;
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    c0 = cyc;
    send(159, 0);
    t0 = $time;
    send(0, 0); send(1, 0); send(32'h7fff_ffff, 0); send(9, 0);
    for (int i = 0; i < 200; i++) begin
      case (i % 3)
        0: send($urandom_range(0, 100), 0);
        1: send($urandom_range(0, 100000), 0);
        default: send($urandom() >> 1, 0);
      endcase
    end
    checks++;
    if (($time - t0) / 10 != 204) begin failures++; $display("II not 1"); end
    for (int i = 0; i < 200; i++) send($urandom() >> ($urandom_range(1, 31)), 1);
    out_ready = 1;
    repeat (FRAC + 6) @(posedge clk);
    checks++;
    if (first_out_cycle - c0 != FRAC + 4) begin failures++; $display("latency %0d", first_out_cycle - c0); end
    checks++;
    if (outs != 405) begin failures++; $display("outs %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
