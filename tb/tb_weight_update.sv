// tb_weight_update: random weights, gradients, lengths and learning-rate
// shifts, including values that saturate; each output lane is compared with
// w - (g >>> shift) clipped to Q8.8 for lanes below len and with w for the
// rest.
module tb_weight_update;
  import ada_gp_pkg::*;
  data_t w_in [VEC], g_in [VEC], w_out [VEC];
  logic [4:0] len;
  logic [3:0] lr_shift;
  int checks = 0, failures = 0;

  weight_update #(.LANES(VEC)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      len = 5'($urandom % 17);
      lr_shift = 4'($urandom);
      for (int i = 0; i < VEC; i++) begin
        w_in[i] = data_t'($urandom);
        g_in[i] = data_t'($urandom);
      end
      #1;
      for (int i = 0; i < VEC; i++) begin
        int e;
        if (i < len) begin
          e = int'(w_in[i]) - (int'(g_in[i]) >>> lr_shift);
          if (e > 32767) e = 32767;
          if (e < -32768) e = -32768;
        end else e = int'(w_in[i]);
        checks++;
        if (int'(w_out[i]) != e) begin
          failures++;
          if (failures < 5) $display("lane %0d w %0d g %0d sh %0d got %0d exp %0d", i, w_in[i], g_in[i], lr_shift, w_out[i], e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
