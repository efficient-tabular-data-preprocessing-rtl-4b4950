// utf8_decode -- four-byte-per-cycle parallel UTF-8 decoder (the Decode PE).
//
// Each cycle the decoder takes LANES consecutive bytes of the text stream
// (byte 0 first). Every byte is classified by an ascii_map instance, then the
// bytes are folded in order into the running value register v:
//   digit of a decimal feature (feature id <= NUM_DEC):  v = v*10 + d
//   digit of a hex (sparse) feature:                     v = (v << 4) + d
//   minus sign of a decimal feature:                     negative flag set
//   tab or new line:  emit v (two's complement if the flag is set), clear v and
//                     the flag, advance the feature id (new line: back to 0)
// Unrolling this fold over four bytes gives exactly the 16-case table of the
// paper (0b1111 .. 0b0000, one case per pattern of delimiters among the four
// bytes); it is written here as a loop so that the decimal case, the minus sign
// and the feature counter, which the paper's table leaves out for brevity, are
// covered by the same hardware. Emitted values are packed into output slots
// 0..cnt-1 in stream order, as o_0..o_3 in the paper.
//
// Interface: in_valid/in_ready for the byte chunk; the output register holds
// out_cnt (0..LANES) values with their feature id and an end-of-row flag and is
// valid for one handshake with out_valid/out_ready. A chunk without delimiter
// produces no output. Latency one cycle, one chunk per cycle (II = 1).
// Values wider than 32 bits wrap, as in the paper's 32-bit register.
module utf8_decode
  import piper_pkg::*;
#(
  parameter int LANES = DEC_LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [LANES-1:0][7:0]         in_bytes,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [$clog2(LANES+1)-1:0]    out_cnt,
  output feat_t [LANES-1:0]             out_val,
  output logic  [LANES-1:0][FID_W-1:0]  out_fid,
  output logic  [LANES-1:0]             out_last,
  output logic                          busy
);
  localparam int CW = $clog2(LANES+1);

  char_class_e cls    [LANES];
  logic [3:0]  nibble [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_map
    ascii_map u_map (.in_byte(in_bytes[i]), .cls(cls[i]), .nibble(nibble[i]));
  end

  // Decoder state between chunks.
  feat_t             v_q;
  logic              neg_q;
  logic [FID_W-1:0]  fid_q;

  // Next state and outputs of the fold.
  feat_t                    v_n;
  logic                     neg_n;
  logic [FID_W-1:0]         fid_n;
  logic [CW-1:0]            cnt_n;
  feat_t [LANES-1:0]        val_n;
  logic  [LANES-1:0][FID_W-1:0] ofid_n;
  logic  [LANES-1:0]        last_n;

  always_comb begin
    int k;
    k      = 0;
    v_n    = v_q;
    neg_n  = neg_q;
    fid_n  = fid_q;
    cnt_n  = '0;
    val_n  = '0;
    ofid_n = '0;
    last_n = '0;
    for (int i = 0; i < LANES; i++) begin
      unique case (cls[i])
        CH_TAB, CH_NL: begin
          val_n[k]  = neg_n ? (~v_n + 1'b1) : v_n;
          ofid_n[k] = fid_n;
          last_n[k] = (cls[i] == CH_NL);
          k         = k + 1;
          v_n           = '0;
          neg_n         = 1'b0;
          fid_n         = (cls[i] == CH_NL) ? '0 : fid_n + 1'b1;
        end
        CH_MINUS: begin
          if (fid_n <= FID_W'(NUM_DEC)) neg_n = 1'b1;
        end
        CH_DIGIT: begin
          if (fid_n <= FID_W'(NUM_DEC)) v_n = v_n * 10 + DATA_W'(nibble[i]);
          else                          v_n = {v_n[DATA_W-5:0], nibble[i]};
        end
        default: ;
      endcase
    end
    cnt_n = CW'(k);
  end

  assign in_ready = !out_valid || out_ready;
  assign busy     = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= '0;
      neg_q     <= 1'b0;
      fid_q     <= '0;
      out_valid <= 1'b0;
      out_cnt   <= '0;
      out_val   <= '0;
      out_fid   <= '0;
      out_last  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        v_q   <= v_n;
        neg_q <= neg_n;
        fid_q <= fid_n;
        if (cnt_n != '0) begin
          out_valid <= 1'b1;
          out_cnt   <= cnt_n;
          out_val   <= val_n;
          out_fid   <= ofid_n;
          out_last  <= last_n;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_val));
endmodule
