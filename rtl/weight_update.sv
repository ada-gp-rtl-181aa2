// weight_update: lane-parallel SGD step w' = w - g * 2^-lr_shift.
//
// Used for the layer weights with the true (backpropagated) gradients in
// Phase BP and Warm Up, and with the predicted gradients in Phase GP. The
// paper trains the original model with SGD (with momentum) at learning rate
// 0.001; this unit implements plain SGD with a power-of-two learning rate
// given by lr_shift (momentum is left out, which is this design's
// simplification). Lanes at or above len are passed through unchanged. The
// result saturates to Q8.8. Purely combinational.
module weight_update
  import ada_gp_pkg::*;
#(
  parameter int LANES = VEC
) (
  input  data_t      w_in  [LANES],
  input  data_t      g_in  [LANES],
  input  logic [4:0] len,
  input  logic [3:0] lr_shift,
  output data_t      w_out [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (i < int'(len))
        w_out[i] = sat16(acc_t'(w_in[i]) - (acc_t'(g_in[i]) >>> lr_shift));
      else
        w_out[i] = w_in[i];
    end
  end
endmodule
