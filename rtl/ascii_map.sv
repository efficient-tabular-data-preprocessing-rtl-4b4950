// ascii_map -- upstream half of the Decode PE: classify one UTF-8/ASCII byte.
//
// The DLRM text format uses only five kinds of characters: horizontal tab
// (feature delimiter), new line (end of row), minus sign, the digits 0-9 and the
// lower-case hex digits a-f. This purely combinational block maps a byte to its
// class and, for a digit, to its 4-bit value: '0'..'9' minus 48 and 'a'..'f'
// minus 87, as in the paper's decode flow chart. Any other byte (for instance
// zero padding at the end of a stream beat) is classed CH_OTHER and ignored
// downstream; upper-case hex digits are not part of the format and are also
// CH_OTHER -- both are this design's choices.
module ascii_map
  import piper_pkg::*;
(
  input  logic [7:0]  in_byte,
  output char_class_e cls,
  output logic [3:0]  nibble
);
  always_comb begin
    cls    = CH_OTHER;
    nibble = 4'd0;
    if (in_byte == 8'h09) begin
      cls = CH_TAB;
    end else if (in_byte == 8'h0A) begin
      cls = CH_NL;
    end else if (in_byte == 8'h2D) begin
      cls = CH_MINUS;
    end else if (in_byte >= 8'd48 && in_byte <= 8'd57) begin
      cls    = CH_DIGIT;
      nibble = 4'(in_byte - 8'd48);
    end else if (in_byte >= 8'd97 && in_byte <= 8'd102) begin
      cls    = CH_DIGIT;
      nibble = 4'(in_byte - 8'd87);
    end
  end
endmodule
