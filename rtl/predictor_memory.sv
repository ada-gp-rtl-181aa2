// predictor_memory: dedicated storage for the predictor model's weights.
//
// In ADA-GP-MAX the predictor's weights live in their own memory next to the
// predictor PE array, so they never travel through the global buffer. The
// paper names this memory and its external "Predictor's Weights" connection;
// its organisation is this design's choice: DEPTH words (one per predictor
// input, i.e. one row of the fully connected predictor layer), each word a
// vector of VEC Q8.8 lanes (one per predicted gradient). One write port and
// one synchronous read port (rd_data one cycle after rd_en).
module predictor_memory
  import ada_gp_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic  clk,
  input  logic  wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  vec_t  wr_data,
  input  logic  rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output vec_t  rd_data
);
  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
