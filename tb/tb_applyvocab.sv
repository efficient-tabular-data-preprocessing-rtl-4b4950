// tb_applyvocab -- loop 1 feeds a random permutation of distinct values (as
// genvocab would) and checks the vocabulary count; loop 2 feeds random values
// from that set and checks each output equals the value's position in the
// loop-1 order. The table is the on-chip vocab_table; loop-2 inputs must be
// taken every 2 cycles and loop-1 writes every cycle. A second instance with
// MAX_READS = LAT+1 runs the same vocabulary against a LAT-cycle memory channel
// model and must take one loop-2 input per cycle, also under output stalls.
module tb_applyvocab;
  import piper_pkg::*;
  localparam int V = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  loop_e loop;
  logic count_clear, in_valid, in_ready, out_valid, out_ready, busy;
  logic [7:0] in_data;
  feat_t out_data;
  logic [7:0] vocab_count;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [7:0] mem_req_addr, mem_req_wdata, mem_rsp_data;

  applyvocab #(.VOCAB_SIZE(V)) dut (.*);
  vocab_table #(.VOCAB_SIZE(V)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  // second PE with pipelined reads against a slow memory channel
  localparam int LAT = 6;
  loop_e p_loop;
  logic p_clear, p_in_valid, p_in_ready, p_out_valid, p_out_ready, p_busy;
  logic [7:0] p_in_data, p_count;
  feat_t p_out_data;
  logic p_req_valid, p_req_ready, p_req_we, p_rsp_valid;
  logic [7:0] p_req_addr, p_req_wdata, p_rsp_data;
  applyvocab #(.VOCAB_SIZE(V), .MAX_READS(LAT + 1)) dut_p (
    .clk, .rst_n, .loop(p_loop), .count_clear(p_clear), .in_valid(p_in_valid), .in_ready(p_in_ready),
    .in_data(p_in_data), .out_valid(p_out_valid), .out_ready(p_out_ready), .out_data(p_out_data),
    .vocab_count(p_count), .mem_req_valid(p_req_valid), .mem_req_ready(p_req_ready),
    .mem_req_we(p_req_we), .mem_req_addr(p_req_addr), .mem_req_wdata(p_req_wdata),
    .mem_rsp_valid(p_rsp_valid), .mem_rsp_data(p_rsp_data), .busy(p_busy));
  hbm_channel_model #(.LATENCY(LAT), .AW(8), .DW(8)) u_ch (.clk, .rst_n,
    .req_valid(p_req_valid), .req_ready(p_req_ready), .req_we(p_req_we), .req_addr(p_req_addr),
    .req_wdata(p_req_wdata), .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  int checks = 0, failures = 0;
  int expq2[$];
  int order[V];
  int vals[$];
  int expq[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      automatic int e = expq.pop_front();
      if (int'(out_data) != e) begin failures++; $display("got %0d exp %0d", out_data, e); end
    end
  end

  always @(posedge clk) if (rst_n && p_out_valid && p_out_ready) begin
    checks++;
    if (expq2.size() == 0) begin failures++; $display("pipelined: unexpected output"); end
    else begin
      automatic int e = expq2.pop_front();
      if (int'(p_out_data) != e) begin failures++; $display("pipelined: got %0d exp %0d", p_out_data, e); end
    end
  end

  task automatic send_p(int x, bit stall);
    bit fire;
    p_in_data = 8'(x); p_in_valid = 1;
    do begin
      p_out_ready = stall ? ($urandom_range(0, 3) == 0) : 1'b1;
      @(negedge clk); fire = p_in_ready; @(posedge clk); #1;
    end while (!fire);
    p_in_valid = 0;
  endtask

  task automatic send(int x, bit stall);
    bit fire;
    in_data = 8'(x); in_valid = 1;
    do begin
      out_ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk); fire = in_ready; @(posedge clk); #1;
    end while (!fire);
    in_valid = 0;
  endtask

  initial begin
    int t0, n;
    loop = LOOP_GEN; count_clear = 0; in_valid = 0; in_data = 0; out_ready = 1;
    p_loop = LOOP_GEN; p_clear = 0; p_in_valid = 0; p_in_data = 0; p_out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    count_clear = 1; @(posedge clk); #1; count_clear = 0;
    // distinct values in random order
    for (int i = 0; i < V; i++) if ($urandom_range(0, 2) != 0) vals.push_back(i);
    vals.shuffle();
    n = vals.size();
    t0 = $time;
    foreach (vals[i]) begin order[vals[i]] = i; send(vals[i], 0); end
    checks++;
    if (($time - t0) / 10 != n) begin failures++; $display("loop 1 writes: %0d in %0d cycles", n, ($time - t0) / 10); end
    checks++;
    if (int'(vocab_count) != n) begin failures++; $display("count %0d exp %0d", vocab_count, n); end
    @(posedge clk); #1;
    loop = LOOP_APPLY;
    t0 = $time;
    for (int i = 0; i < 100; i++) begin
      automatic int x = vals[$urandom_range(0, n - 1)];
      expq.push_back(order[x]);
      send(x, 0);
    end
    checks++;
    if (($time - t0) / 10 != 2 * 100 - 1) begin failures++; $display("loop 2: 100 reads in %0d cycles", ($time - t0) / 10); end
    for (int i = 0; i < 200; i++) begin
      automatic int x = vals[$urandom_range(0, n - 1)];
      expq.push_back(order[x]);
      send(x, 1);
    end
    out_ready = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    // pipelined PE: same vocabulary, reads of a LAT-cycle memory overlap
    p_clear = 1; @(posedge clk); #1; p_clear = 0;
    foreach (vals[i]) send_p(vals[i], 0);
    checks++;
    if (int'(p_count) != n) begin failures++; $display("pipelined count %0d exp %0d", p_count, n); end
    @(posedge clk); #1;
    p_loop = LOOP_APPLY;
    t0 = $time;
    for (int i = 0; i < 100; i++) begin
      automatic int x = vals[$urandom_range(0, n - 1)];
      expq2.push_back(order[x]);
      send_p(x, 0);
    end
    checks++;
    if (($time - t0) / 10 != 100) begin failures++; $display("pipelined loop 2: 100 reads in %0d cycles", ($time - t0) / 10); end
    for (int i = 0; i < 200; i++) begin
      automatic int x = vals[$urandom_range(0, n - 1)];
      expq2.push_back(order[x]);
      send_p(x, 1);
    end
    p_out_ready = 1;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (expq2.size() != 0) begin failures++; $display("pipelined: %0d outputs missing", expq2.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
