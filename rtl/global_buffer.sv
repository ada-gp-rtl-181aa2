// global_buffer: the accelerator's on-chip global buffer.
//
// Holds a layer's input vectors, weights, outputs, gradients and the
// predictor inputs/outputs kept between the forward and backward pass. The
// paper names the buffer and what it stores; its size, word width and port
// structure are not given. Here it is a simple dual-port RAM of DEPTH words,
// each word one vector of VEC Q8.8 lanes: one write port and one read port,
// usable in the same cycle. Reads are synchronous: rd_data shows the word
// one cycle after rd_en. A read and a write of the same address in the same
// cycle return the old word.
module global_buffer
  import ada_gp_pkg::*;
#(
  parameter int DEPTH = 4096
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
