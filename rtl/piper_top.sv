// piper_top -- Piper: a column-wise dataflow accelerator for tabular (DLRM)
// data preprocessing.
//
// Dataflow (one instance of each stage, 40 column lanes):
//   LoadData -> [UTF-8: 4-byte parallel Decode -> row assembly | binary unpack]
//   -> broadcast of each row into one FIFO per column
//   -> label lane:   FIFO
//   -> 13 dense:     FIFO -> Neg2Zero -> Logarithm (ln(x+1), float32)
//   -> 26 sparse:    FIFO -> Modulus -> GenVocab -> ApplyVocab <-> vocab table
//   -> StoreData gathers one value per column into an output row (3 x 512 bit).
// piper_ctrl runs the two loops of the paper: in loop 1 only the sparse lanes
// are fed and each builds its vocabulary (first occurrences numbered in order
// of appearance); in loop 2 all lanes are fed and every row is transformed and
// stored. The dataset is presented twice, once per loop.
//
// Interface: mode_binary selects the input format for the whole run (text beats
// on utf8_*, or binary rows on bin_*, both 512-bit valid/ready streams, the
// stream a memory controller or TCP/IP stack would deliver). start with
// num_rows begins a run; loop shows the pass in progress; done pulses at the
// end. Output rows appear on out_* (valid/ready). vocab_count gives the size of
// each sparse column's vocabulary after loop 1.
// Column counts and per-PE behaviour follow the paper; the FIFO depth, lane
// order, handshakes and the drain between loops are this design's choices.
// FIFO_DEPTH must cover the latency gap between the lanes (the dense lanes are
// about 25 cycles deep, a sparse lane about 5) or the gather in StoreData
// throttles the sparse lanes; 32 lets the whole pipeline run at the two-cycle
// interval of GenVocab / ApplyVocab. The
// vocabulary tables are on-chip by default (the paper's 5K configuration);
// with EXT_VOCAB = 1 each sparse column's ApplyVocab talks to an external
// memory channel through the vt_* ports instead, as the paper does with HBM
// for a 1M vocabulary. VOCAB_READS lets each ApplyVocab overlap that many
// table reads: 1 (default) gives the per-PE interval of latency + 1 cycles, a
// value above the channel latency gives one read per cycle. With EXT_VOCAB = 0
// the vt_* inputs are unused and the vt_* outputs are tied to zero.
// The busy flags of the text front end and GenVocab's dup_seen pulse are not
// needed here (rows are counted where they enter the column FIFOs) and are
// left unconnected; they serve the block-level tests.
module piper_top
  import piper_pkg::*;
#(
  parameter int VOCAB_SIZE = 5000,
  parameter int FIFO_DEPTH = 32,
  // 0: vocabulary tables in on-chip RAM (vocab_table); 1: each sparse column's
  // table is reached through the vt_* ports (an HBM channel per column).
  parameter bit EXT_VOCAB  = 1'b0,
  // loop-2 table reads each ApplyVocab may keep in flight (1: one at a time)
  parameter int VOCAB_READS = 1,
  localparam int IDX_W = (VOCAB_SIZE > 1) ? $clog2(VOCAB_SIZE) : 1,
  localparam int VAL_W = $clog2(VOCAB_SIZE + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [31:0]                       num_rows,
  input  logic                              mode_binary,
  input  logic                              utf8_valid,
  output logic                              utf8_ready,
  input  logic [BUS_W-1:0]                  utf8_data,
  input  logic                              bin_valid,
  output logic                              bin_ready,
  input  bin_beat_t                         bin_data,
  output logic                              out_valid,
  input  logic                              out_ready,
  output bin_beat_t                         out_data,
  output loop_e                             loop,
  output logic                              busy,
  output logic                              done,
  output logic [NUM_SPARSE-1:0][VAL_W-1:0]  vocab_count,
  // external vocabulary tables (used when EXT_VOCAB = 1), one port per column
  output logic [NUM_SPARSE-1:0]             vt_req_valid,
  input  logic [NUM_SPARSE-1:0]             vt_req_ready,
  output logic [NUM_SPARSE-1:0]             vt_req_we,
  output logic [NUM_SPARSE-1:0][IDX_W-1:0]  vt_req_addr,
  output logic [NUM_SPARSE-1:0][VAL_W-1:0]  vt_req_wdata,
  input  logic [NUM_SPARSE-1:0]             vt_rsp_valid,
  input  logic [NUM_SPARSE-1:0][VAL_W-1:0]  vt_rsp_data
);
  localparam int CW = $clog2(DEC_LANES + 1);

  // ---------------- load, decode, assemble ----------------
  logic                          chunk_valid, chunk_ready;
  logic [DEC_LANES-1:0][7:0]     chunk_bytes;
  logic                          brow_valid, brow_ready;
  row_t                          brow;
  logic                          ld_busy;

  load_data u_load (
    .clk, .rst_n, .mode_binary,
    .utf8_valid, .utf8_ready, .utf8_data,
    .bin_valid, .bin_ready, .bin_data,
    .chunk_valid, .chunk_ready, .chunk_bytes,
    .row_valid(brow_valid), .row_ready(brow_ready), .row_data(brow),
    .busy(ld_busy)
  );

  logic                          dec_valid, dec_ready, dec_busy;
  logic [CW-1:0]                 dec_cnt;
  feat_t [DEC_LANES-1:0]         dec_val;
  logic  [DEC_LANES-1:0][FID_W-1:0] dec_fid;
  logic  [DEC_LANES-1:0]         dec_last;

  utf8_decode u_decode (
    .clk, .rst_n,
    .in_valid(chunk_valid), .in_ready(chunk_ready), .in_bytes(chunk_bytes),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_cnt(dec_cnt),
    .out_val(dec_val), .out_fid(dec_fid), .out_last(dec_last), .busy(dec_busy)
  );

  logic trow_valid, trow_ready, asm_busy;
  row_t trow;

  row_assembler u_asm (
    .clk, .rst_n,
    .in_valid(dec_valid), .in_ready(dec_ready), .in_cnt(dec_cnt),
    .in_val(dec_val), .in_fid(dec_fid), .in_last(dec_last),
    .out_valid(trow_valid), .out_ready(trow_ready), .out_row(trow), .busy(asm_busy)
  );

  // ---------------- controller ----------------
  logic clear_start, clear_busy_any, row_gate, pipe_idle, row_fire, row_stored;

  piper_ctrl u_ctrl (
    .clk, .rst_n, .start, .num_rows,
    .row_in(row_fire), .row_out(row_stored),
    .clear_busy(clear_busy_any), .pipe_idle,
    .loop, .clear_start, .row_gate, .busy, .done
  );

  // ---------------- broadcast into the column FIFOs ----------------
  logic                row_valid;
  row_t                row;
  logic [NUM_COLS-1:0] col_en, fifo_in_ready, fifo_push, fifo_empty;
  logic                all_ready;

  assign row_valid = mode_binary ? brow_valid : trow_valid;
  assign row       = mode_binary ? brow : trow;
  // Loop 1 only needs the sparse columns; label and dense lanes are fed in loop 2.
  always_comb begin
    for (int c = 0; c < NUM_COLS; c++)
      col_en[c] = (loop == LOOP_APPLY) || (c >= FIRST_SPARSE);
  end
  assign all_ready  = &(fifo_in_ready | ~col_en);
  assign row_fire   = row_valid && row_gate && all_ready;
  assign fifo_push  = {NUM_COLS{row_fire}} & col_en;
  assign brow_ready = mode_binary && row_gate && all_ready;
  assign trow_ready = !mode_binary && row_gate && all_ready;

  // ---------------- column lanes ----------------
  logic [NUM_COLS-1:0] q_valid, q_ready;
  row_t                q_data;
  logic [NUM_COLS-1:0] st_valid, st_ready;
  row_t                st_data;
  logic [NUM_COLS-1:0] lane_busy;
  logic [NUM_SPARSE-1:0] clr_busy;

  for (genvar c = 0; c < NUM_COLS; c++) begin : g_col
    stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(fifo_push[c]), .in_ready(fifo_in_ready[c]), .in_data(row[c]),
      .out_valid(q_valid[c]), .out_ready(q_ready[c]), .out_data(q_data[c]),
      .empty(fifo_empty[c])
    );

    if (c < FIRST_DENSE) begin : g_label
      // The label is carried unchanged.
      assign st_valid[c]  = q_valid[c];
      assign q_ready[c]   = st_ready[c];
      assign st_data[c]   = q_data[c];
      assign lane_busy[c] = 1'b0;
    end else if (c < FIRST_SPARSE) begin : g_dense
      logic  n_valid, n_ready, n_busy, l_busy;
      feat_t n_data;
      neg2zero u_n2z (
        .clk, .rst_n,
        .in_valid(q_valid[c]), .in_ready(q_ready[c]), .in_data(q_data[c]),
        .out_valid(n_valid), .out_ready(n_ready), .out_data(n_data), .busy(n_busy)
      );
      logarithm u_log (
        .clk, .rst_n,
        .in_valid(n_valid), .in_ready(n_ready), .in_data(n_data),
        .out_valid(st_valid[c]), .out_ready(st_ready[c]), .out_data(st_data[c]),
        .busy(l_busy)
      );
      assign lane_busy[c] = n_busy || l_busy;
    end else begin : g_sparse
      localparam int S = c - FIRST_SPARSE;
      logic             m_valid, m_ready, m_busy;
      logic [IDX_W-1:0] m_data;
      logic             g_valid, g_ready, g_busy, g_dup;
      logic [IDX_W-1:0] g_data;
      logic             a_busy;
      logic             req_valid, req_ready, req_we, rsp_valid;
      logic [IDX_W-1:0] req_addr;
      logic [VAL_W-1:0] req_wdata, rsp_data;

      modulus #(.VOCAB_SIZE(VOCAB_SIZE)) u_mod (
        .clk, .rst_n,
        .in_valid(q_valid[c]), .in_ready(q_ready[c]), .in_data(q_data[c]),
        .out_valid(m_valid), .out_ready(m_ready), .out_data(m_data), .busy(m_busy)
      );
      genvocab #(.VOCAB_SIZE(VOCAB_SIZE)) u_gen (
        .clk, .rst_n, .loop, .clear_start, .clear_busy(clr_busy[S]),
        .in_valid(m_valid), .in_ready(m_ready), .in_data(m_data),
        .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data),
        .dup_seen(g_dup), .busy(g_busy)
      );
      applyvocab #(.VOCAB_SIZE(VOCAB_SIZE), .MAX_READS(VOCAB_READS)) u_apply (
        .clk, .rst_n, .loop, .count_clear(clear_start),
        .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
        .out_valid(st_valid[c]), .out_ready(st_ready[c]), .out_data(st_data[c]),
        .vocab_count(vocab_count[S]),
        .mem_req_valid(req_valid), .mem_req_ready(req_ready), .mem_req_we(req_we),
        .mem_req_addr(req_addr), .mem_req_wdata(req_wdata),
        .mem_rsp_valid(rsp_valid), .mem_rsp_data(rsp_data),
        .busy(a_busy)
      );
      if (EXT_VOCAB) begin : g_ext
        assign vt_req_valid[S] = req_valid;
        assign vt_req_we[S]    = req_we;
        assign vt_req_addr[S]  = req_addr;
        assign vt_req_wdata[S] = req_wdata;
        assign req_ready       = vt_req_ready[S];
        assign rsp_valid       = vt_rsp_valid[S];
        assign rsp_data        = vt_rsp_data[S];
      end else begin : g_onchip
        vocab_table #(.VOCAB_SIZE(VOCAB_SIZE)) u_table (
          .clk, .rst_n,
          .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
          .rsp_valid, .rsp_data
        );
        assign vt_req_valid[S] = 1'b0;
        assign vt_req_we[S]    = 1'b0;
        assign vt_req_addr[S]  = '0;
        assign vt_req_wdata[S] = '0;
      end
      assign lane_busy[c] = m_busy || g_busy || a_busy;
    end
  end

  assign clear_busy_any = |clr_busy;
  assign pipe_idle      = (&fifo_empty) && !(|lane_busy);

  // ---------------- gather ----------------
  store_data u_store (
    .clk, .rst_n,
    .col_valid(st_valid), .col_ready(st_ready), .col_data(st_data),
    .out_valid, .out_ready, .out_data
  );
  // A row counts as stored once the output stream has taken it.
  assign row_stored = out_valid && out_ready;
endmodule
