// tb_vocab_table -- random writes and reads against a shadow array; a read
// must answer exactly one cycle later with the last value written.
module tb_vocab_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [12:0] req_addr, req_wdata, rsp_data;
  vocab_table dut (.*);

  int checks = 0, failures = 0;
  int shadow[5000];
  bit written[5000];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 4000; i++) begin
      automatic int a = $urandom_range(0, 4999);
      if ($urandom_range(0, 1) == 0 || !written[a]) begin
        req_valid = 1; req_we = 1; req_addr = 13'(a); req_wdata = 13'($urandom());
        shadow[a] = int'(req_wdata); written[a] = 1;
        @(posedge clk); #1;
        checks++;
        if (rsp_valid) begin failures++; $display("response to a write"); end
      end else begin
        req_valid = 1; req_we = 0; req_addr = 13'(a);
        @(posedge clk); #1;
        req_valid = 0;
        checks++;
        if (!rsp_valid || int'(rsp_data) != shadow[a]) begin
          failures++; $display("read %0d: got %0d exp %0d", a, rsp_data, shadow[a]);
        end
      end
      req_valid = 0;
      if (req_ready !== 1'b1) begin failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
