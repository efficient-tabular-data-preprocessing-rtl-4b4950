// vocab_table -- on-chip vocabulary table of one sparse column.
//
// Holds, for every value a sparse feature can take after the modulus, the index
// it was given in loop 1 (the order of first appearance). The paper keeps this
// table in on-chip SRAM for small vocabularies and in HBM for large ones; this
// module is the on-chip variant, a single-port memory array with a request /
// response handshake: a request is always accepted (req_ready = 1); a write
// stores wdata at addr; a read returns the entry one cycle later with
// rsp_valid. The same handshake lets a slower memory (HBM channel) be attached
// to applyvocab instead. Entries are not cleared; loop 2 only reads entries that
// loop 1 wrote.
module vocab_table #(
  parameter int VOCAB_SIZE = 5000,
  localparam int IDX_W = (VOCAB_SIZE > 1) ? $clog2(VOCAB_SIZE) : 1,
  localparam int VAL_W = $clog2(VOCAB_SIZE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [IDX_W-1:0] req_addr,
  input  logic [VAL_W-1:0] req_wdata,
  output logic             rsp_valid,
  output logic [VAL_W-1:0] rsp_data
);
  logic [VAL_W-1:0] mem [VOCAB_SIZE];

  assign req_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (req_valid && req_we) mem[req_addr] <= req_wdata;
    if (req_valid && !req_we) rsp_data <= mem[req_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp_valid <= 1'b0;
    else        rsp_valid <= req_valid && !req_we;
  end
endmodule
