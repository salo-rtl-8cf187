// salo_buffer: an on-chip SRAM buffer (query, key, value and output buffers,
// and the small weight store beside the output buffer).
//
// One write port and one read port, one word per cycle each; the read is
// synchronous (rd_data valid the cycle after rd_en). A word is one whole
// vector (D elements), so a buffer of BYTES bytes holds DEPTH = BYTES / (word
// bytes) vectors. The capacities are the paper's (Table 1); the word
// organisation and port structure are this design's choices. Written as an
// array so synthesis maps it to an SRAM macro.
module salo_buffer #(
  parameter int W     = 512,
  parameter int DEPTH = 256,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
