// tb_ascii_map -- exhaustive check of the byte classifier: all 256 byte values
// are applied and class and digit value are compared with a table written
// directly from the ASCII codes.
module tb_ascii_map;
  import piper_pkg::*;
  logic [7:0]  b;
  char_class_e cls;
  logic [3:0]  nib;
  int checks = 0, failures = 0;

  ascii_map dut (.in_byte(b), .cls(cls), .nibble(nib));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      char_class_e ec;
      int en;
      b = 8'(i);
      #1;
      en = 0;
      if (i == 9) ec = CH_TAB;
      else if (i == 10) ec = CH_NL;
      else if (i == 45) ec = CH_MINUS;
      else if (i >= "0" && i <= "9") begin ec = CH_DIGIT; en = i - "0"; end
      else if (i >= "a" && i <= "f") begin ec = CH_DIGIT; en = i - "a" + 10; end
      else ec = CH_OTHER;
      checks++;
      if (cls != ec || int'(nib) != en) begin
        failures++;
        $display("byte %02h: got %s/%0d expected %s/%0d", i, cls.name(), nib, ec.name(), en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
