// tb_utf8_decode -- feeds random DLRM text rows (label, 13 signed decimal dense
// features, 26 hex sparse features, some fields empty) four bytes per cycle and
// compares every emitted value, feature id and end-of-row flag with the values
// the text was generated from. Also checks that a chunk is taken every cycle
// when the output is always ready, and that stalls lose nothing. The first row
// begins with a fixed example (label 0, dense 0, 159 and an empty field, first
// sparse field be589b51).
module tb_utf8_decode;
  import piper_pkg::*;
  localparam int ROWS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [3:0][7:0] in_bytes;
  logic [2:0] out_cnt;
  feat_t [3:0] out_val;
  logic [3:0][FID_W-1:0] out_fid;
  logic [3:0] out_last;

  utf8_decode dut (.*);

  int checks = 0, failures = 0;
  byte unsigned text[$];
  feat_t exp_val[$];
  int exp_fid[$];
  bit exp_last[$];
  int multi = 0;
  bit example_done = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic add_str(string s);
    for (int i = 0; i < s.len(); i++) text.push_back(s[i]);
  endtask

  task automatic gen_text();
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < NUM_COLS; c++) begin
        feat_t v;
        string s;
        automatic bit empty = ($urandom_range(0, 9) == 0);
        if (empty) begin
          v = 0; s = "";
        end else if (c == 0) begin
          v = $urandom_range(0, 1); s = $sformatf("%0d", v);
        end else if (c < FIRST_SPARSE) begin
          automatic int iv = int'($urandom_range(0, 200000)) - 1000;
          if ($urandom_range(0, 3) == 0) iv = int'($urandom_range(0, 20)) - 10;
          v = feat_t'(iv); s = $sformatf("%0d", iv);
        end else begin
          v = $urandom(); s = $sformatf("%08h", v);
        end
        // the very first row starts like the worked example of a text row:
        // "0", "0", "159", empty, ... and the first sparse field "be589b51"
        if (!example_done && r == 0) begin
          case (c)
            0, 1:         begin v = 0;            s = "0";        end
            2:            begin v = 159;          s = "159";      end
            3:            begin v = 0;            s = "";         end
            FIRST_SPARSE: begin v = 32'hbe589b51; s = "be589b51"; end
            default: ;
          endcase
        end
        add_str(s);
        text.push_back((c == NUM_COLS - 1) ? 8'h0A : 8'h09);
        exp_val.push_back(v); exp_fid.push_back(c); exp_last.push_back(c == NUM_COLS - 1);
      end
    end
    while (text.size() % 4 != 0) text.push_back(8'h00);
    example_done = 1;
  endtask

  // consumer
  int got = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (out_cnt > 1) multi++;
      for (int i = 0; i < int'(out_cnt); i++) begin
        checks++;
        if (exp_val.size() == 0) begin
          failures++; $display("unexpected output");
        end else begin
          automatic feat_t ev = exp_val.pop_front();
          automatic int ef = exp_fid.pop_front();
          automatic bit el = exp_last.pop_front();
          if (out_val[i] !== ev || int'(out_fid[i]) != ef || out_last[i] !== el) begin
            failures++;
            if (failures < 10) $display("out %0d: got %h fid %0d last %b, exp %h fid %0d last %b",
                                        got, out_val[i], out_fid[i], out_last[i], ev, ef, el);
          end
        end
        got++;
      end
    end
  end

  task automatic run(bit stalls);
    int n, cyc;
    gen_text();
    n = text.size() / 4;
    cyc = 0;
    for (int k = 0; k < n; k++) begin
      in_valid = 1;
      for (int j = 0; j < 4; j++) in_bytes[j] = text[4*k + j];
      forever begin
        bit fire;
        out_ready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
        @(negedge clk); fire = in_ready;
        @(posedge clk); cyc++; #1;
        if (fire) break;
      end
    end
    in_valid = 0;
    out_ready = 1;
    repeat (3) @(posedge clk);
    #1;
    text.delete();
    if (!stalls) begin
      checks++;
      if (cyc != n) begin failures++; $display("rate: %0d chunks took %0d cycles", n, cyc); end
    end
  endtask

  initial begin
    in_valid = 0; in_bytes = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(0);
    run(1);
    checks++;
    if (exp_val.size() != 0) begin failures++; $display("%0d values missing", exp_val.size()); end
    checks++;
    if (multi == 0) begin failures++; $display("never more than one value per chunk"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
