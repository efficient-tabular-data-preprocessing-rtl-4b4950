// hbm_channel_model -- behavioural model of one off-chip memory (HBM) channel
// holding a vocabulary table, for simulation only (not synthesizable intent).
// It accepts one request per cycle; a write updates the stored entry; a read
// returns the entry LATENCY cycles later. Entries are kept in an associative
// array so that a 1M-entry table costs memory only for what is written.
// Unwritten entries read as zero.
module hbm_channel_model #(
  parameter int LATENCY = 13,
  parameter int AW = 20,
  parameter int DW = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [DW-1:0] req_wdata,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);
  logic [DW-1:0] store [int];
  logic          v_pipe [LATENCY];
  logic [DW-1:0] d_pipe [LATENCY];

  assign req_ready = 1'b1;
  assign rsp_valid = v_pipe[LATENCY-1];
  assign rsp_data  = d_pipe[LATENCY-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin v_pipe[i] <= 1'b0; d_pipe[i] <= '0; end
    end else begin
      for (int i = LATENCY - 1; i > 0; i--) begin v_pipe[i] <= v_pipe[i-1]; d_pipe[i] <= d_pipe[i-1]; end
      v_pipe[0] <= req_valid && !req_we;
      d_pipe[0] <= store.exists(int'(req_addr)) ? store[int'(req_addr)] : '0;
      if (req_valid && req_we) store[int'(req_addr)] = req_wdata;
    end
  end
endmodule
