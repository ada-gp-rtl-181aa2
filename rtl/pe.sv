// pe: one processing element of a weight-stationary PE array.
//
// Follows the PE drawn in the paper's baseline accelerator figure: an input
// register, a weight register, a multiplier and an adder that adds the
// product to the partial sum arriving from the PE above. The weight stays in
// its register until reloaded (weight-stationary); the input register also
// forwards the input to the PE on the right, and the sum is registered before
// it goes to the PE below (the paper does not say where the pipeline
// registers sit; registering the input and the partial sum is this design's
// choice).
//
// Timing: x_in is captured at a clock edge; x_out and psum_out show the
// forwarded input and the new partial sum after that edge and the next one
// respectively, so psum_in must arrive one cycle after x_in.
// w_we loads w_in; w_clr zeroes the weight (w_clr wins).
module pe
  import ada_gp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_we,
  input  logic  w_clr,
  input  data_t w_in,
  input  data_t x_in,
  input  acc_t  psum_in,
  output data_t x_out,
  output acc_t  psum_out
);
  data_t w_reg;
  data_t x_reg;
  acc_t  prod;

  assign prod  = acc_t'(x_reg) * acc_t'(w_reg);
  assign x_out = x_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_reg    <= '0;
      x_reg    <= '0;
      psum_out <= '0;
    end else begin
      if (w_clr)     w_reg <= '0;
      else if (w_we) w_reg <= w_in;
      x_reg    <= x_in;
      psum_out <= psum_in + prod;
    end
  end
endmodule
