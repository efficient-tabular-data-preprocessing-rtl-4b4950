// logarithm -- the Logarithm PE for one dense column: out = ln(x + 1).
//
// The paper computes log(x+1) of each (already non-negative) dense feature with
// the HLS library operator and, as its example shows (159 -> 5.07), delivers a
// floating-point result. This RTL produces an IEEE-754 single-precision result
// from a 32-bit integer input with a fully pipelined shift-and-square algorithm,
// which is this design's own choice of method:
//   1. y = x + 1 (x read as unsigned); e = position of the leading one of y;
//      m = y normalised into [1, 2) with MANT_W bits.
//   2. FRAC_BITS stages, one fraction bit of log2(m) each: m = m*m; if m >= 2 the
//      bit is 1 and m is halved.
//   3. ln(y) = (e + 0.fraction) * ln 2 (constant multiply, ln 2 in Q0.32).
//   4. Normalise into sign/exponent/mantissa (truncating); ln(1) = 0 gives +0.0.
// Absolute error is below about 2^-17 over the input range. Latency FRAC_BITS+3
// cycles, one result per cycle (II = 1). The whole pipeline advances together
// and stalls when the last stage holds a result that out_ready does not take.
module logarithm
  import piper_pkg::*;
#(
  parameter int FRAC_BITS = 20,
  parameter int MANT_W    = 24
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  feat_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output feat_t out_data,     // IEEE-754 single precision bit pattern
  output logic  busy
);
  localparam int STAGES = FRAC_BITS + 3;
  localparam int LW     = 6 + FRAC_BITS;          // integer part holds 0..32
  localparam int PW     = LW + 32;
  localparam logic [31:0] LN2_Q32 = 32'hB17217F8; // ln(2) * 2^32

  logic adv;
  logic [STAGES-1:0] vld;

  // Stage 0 registers
  logic [5:0]        e_s   [FRAC_BITS+1];
  logic [MANT_W-1:0] m_s   [FRAC_BITS+1];
  logic [FRAC_BITS-1:0] f_s [FRAC_BITS+1];
  logic [PW-1:0]     p_q;
  feat_t             res_q;

  assign adv       = !vld[STAGES-1] || out_ready;
  assign in_ready  = adv;
  assign out_valid = vld[STAGES-1];
  assign out_data  = res_q;
  assign busy      = |vld;

  // 1. normalisation
  logic [32:0]       y;
  logic [5:0]        e0;
  logic [MANT_W-1:0] m0;
  always_comb begin
    logic [32:0] sh;
    y  = {1'b0, in_data} + 33'd1;
    e0 = '0;
    for (int b = 0; b <= 32; b++) if (y[b]) e0 = 6'(b);
    sh = y << (6'd32 - e0);
    m0 = sh[32 -: MANT_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (adv) vld <= {vld[STAGES-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      e_s[0] <= e0;
      m_s[0] <= m0;
      f_s[0] <= '0;
    end
  end

  // 2. one fraction bit per stage
  for (genvar k = 0; k < FRAC_BITS; k++) begin : g_sq
    logic [2*MANT_W-1:0] sq;
    assign sq = m_s[k] * m_s[k];
    always_ff @(posedge clk) begin
      if (adv) begin
        e_s[k+1] <= e_s[k];
        if (sq[2*MANT_W-1]) begin
          m_s[k+1] <= sq[2*MANT_W-1 -: MANT_W];
          f_s[k+1] <= {f_s[k][FRAC_BITS-2:0], 1'b1};
        end else begin
          m_s[k+1] <= sq[2*MANT_W-2 -: MANT_W];
          f_s[k+1] <= {f_s[k][FRAC_BITS-2:0], 1'b0};
        end
      end
    end
  end

  // 3. log2 -> ln
  always_ff @(posedge clk) begin
    if (adv) p_q <= PW'({e_s[FRAC_BITS], f_s[FRAC_BITS]}) * PW'(LN2_Q32);
  end

  // 4. fixed point (FRAC_BITS+32 fraction bits) -> float
  feat_t res_n;
  always_comb begin
    int          msb;
    logic [PW-1:0] norm;
    msb   = -1;
    for (int b = 0; b < PW; b++) if (p_q[b]) msb = b;
    norm  = p_q << (PW - 1 - msb);
    res_n = '0;
    if (msb >= 0) begin
      res_n[30:23] = 8'(msb - (FRAC_BITS + 32) + 127);
      res_n[22:0]  = norm[PW-2 -: 23];
    end
  end

  always_ff @(posedge clk) begin
    if (adv) res_q <= res_n;
  end
endmodule
