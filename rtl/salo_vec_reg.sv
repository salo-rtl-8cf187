// salo_vec_reg: one input vector register at the edge of the spatial array
// (the q, k and v vector boxes drawn at the array's left and top edges).
//
// It is loaded with a whole D-element vector (and an "ok" flag telling the
// array whether this key lies inside the attention pattern) and then feeds
// the vector into the array one element per cycle: while run is high, element
// tcnt - SKEW is presented at e with vld high for tcnt in [SKEW, SKEW+D).
// tcnt is the controller's cycle counter within the stage. The per-register
// skew aligns elements that meet in a PE (see salo_array). Loading whole
// vectors from the buffers and the skew-by-index scheme are this design's
// choices; the paper only draws the registers.
module salo_vec_reg
  import salo_pkg::*;
#(
  parameter int D    = 64,
  parameter int SKEW = 0,
  parameter int TW   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld,
  input  logic [D*DATA_W-1:0] ld_data,
  input  logic              ld_ok,
  input  logic              run,
  input  logic [TW-1:0]     tcnt,
  output elem_t             e,
  output logic              vld,
  output logic              ok
);

  logic [D*DATA_W-1:0] vec_q;
  int                  idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_q <= '0;
      ok    <= 1'b0;
    end else if (ld) begin
      vec_q <= ld_data;
      ok    <= ld_ok;
    end
  end

  always_comb begin
    idx = int'(tcnt) - SKEW;
    vld = run && (idx >= 0) && (idx < D);
    e   = vld ? elem_t'(vec_q[idx*DATA_W +: DATA_W]) : '0;
  end

endmodule
