// tag_queue: the parallel queue that carries each row's valid bit and tag
// through the same number of cycles as the systolic array takes for the row.
//
// A row's output tag is decided before the row enters the array; this queue
// then delays {valid, tag} by LATENCY cycles so that they appear together with
// the output row. No logic is added inside the array's tiles or PEs; for a
// 2x2 array this is three tag registers (instead of one per tile). Valid bits
// reset to zero; tags need no reset. Following the paper: the queue and its
// latency match; carrying the valid bit along is this design's choice.
module tag_queue
  import dolma_pkg::*;
#(
  parameter int LATENCY = 63
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  tag_t tag_i,
  output logic valid_o,
  output tag_t tag_o
);

  logic [LATENCY-1:0] vld;
  tag_t               tags [LATENCY];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else        vld <= LATENCY'({vld, valid_i});

  always_ff @(posedge clk) begin
    tags[0] <= tag_i;
    for (int i = 1; i < LATENCY; i++) tags[i] <= tags[i-1];
  end

  assign valid_o = vld[LATENCY-1];
  assign tag_o   = tags[LATENCY-1];

endmodule
