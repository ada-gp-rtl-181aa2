// tb_pe: self-checking test of one processing element.
// Drives random inputs, weights and partial sums and compares psum_out and
// x_out each cycle against a cycle-level reference model written here:
// the input register captures x_in; one edge later psum_out = psum_in +
// x_reg * w_reg. Weight load, weight clear and clear priority are covered.
module tb_pe;
  import ada_gp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic w_we, w_clr;
  data_t w_in, x_in, x_out;
  acc_t psum_in, psum_out;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t m_w, m_x;
  acc_t  m_p;
  initial begin
    w_we = 0; w_clr = 0; w_in = 0; x_in = 0; psum_in = 0;
    m_w = 0; m_x = 0; m_p = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      w_we    = ($urandom % 8) == 0;
      w_clr   = ($urandom % 29) == 0;
      w_in    = data_t'($urandom);
      x_in    = data_t'($urandom);
      psum_in = acc_t'($signed($urandom)) >>> 4;
      @(posedge clk);
      // reference update (values sampled at this edge)
      m_p = psum_in + acc_t'(m_x) * acc_t'(m_w);
      m_x = x_in;
      if (w_clr) m_w = '0; else if (w_we) m_w = w_in;
      #1;
      checks++;
      if (psum_out !== m_p || x_out !== m_x) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d psum %0d exp %0d x %0d exp %0d", t, psum_out, m_p, x_out, m_x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
