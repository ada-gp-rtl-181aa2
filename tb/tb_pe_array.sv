// tb_pe_array: self-checking test of the weight-stationary PE array at its
// full 12 x 15 size. Weights are placed with a mix of row and column loads,
// a burst of back-to-back input vectors is streamed, and every output vector
// is compared with y[c] = sum_r W[r][c] x[r] computed here. The test also
// checks that each result leaves exactly ROWS + COLS cycles after its input
// (one vector per cycle throughput) and that w_clr zeroes the array.
module tb_pe_array;
  import ada_gp_pkg::*;
  localparam int ROWS = 12, COLS = 15, LAT = ROWS + COLS, NV = 40;
  logic clk = 0, rst_n = 0;
  logic w_clr, w_row_we, w_col_we, x_valid, y_valid;
  logic [$clog2(ROWS)-1:0] w_row_sel;
  logic [$clog2(COLS)-1:0] w_col_sel;
  data_t w_row_vec [COLS];
  data_t w_col_vec [ROWS];
  data_t x_vec [ROWS];
  acc_t  y_vec [COLS];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t W [ROWS][COLS];
  data_t X [NV][ROWS];
  int    t_in [NV];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  int nout = 0;
  logic zero_mode = 0;
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      for (int c = 0; c < COLS; c++) begin
        acc_t e;
        e = 0;
        if (!zero_mode) for (int r = 0; r < ROWS; r++) e += acc_t'(W[r][c]) * acc_t'(X[nout][r]);
        checks++;
        if (y_vec[c] !== e) begin
          failures++;
          if (failures < 5) $display("vec %0d col %0d got %0d exp %0d", nout, c, y_vec[c], e);
        end
      end
      checks++;
      if (cyc - t_in[nout] != LAT) begin
        failures++;
        $display("latency %0d expected %0d", cyc - t_in[nout], LAT);
      end
      nout++;
    end
  end

  initial begin
    w_clr = 0; w_row_we = 0; w_col_we = 0; x_valid = 0; w_row_sel = 0; w_col_sel = 0;
    foreach (w_row_vec[i]) w_row_vec[i] = 0;
    foreach (w_col_vec[i]) w_col_vec[i] = 0;
    foreach (x_vec[i]) x_vec[i] = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[r][c] = data_t'($urandom);
    for (int n = 0; n < NV; n++) for (int r = 0; r < ROWS; r++) X[n][r] = data_t'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // rows 0..5 by row load, rest by column load of rows 6..11 only
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      w_row_we = 1; w_row_sel = r[$clog2(ROWS)-1:0];
      for (int c = 0; c < COLS; c++) w_row_vec[c] = W[r][c];
    end
    @(negedge clk); w_row_we = 0;
    for (int c = 0; c < COLS; c++) begin
      @(negedge clk);
      w_col_we = 1; w_col_sel = c[$clog2(COLS)-1:0];
      for (int r = 0; r < ROWS; r++) w_col_vec[r] = (r < 6) ? W[r][c] : W[r][c];
    end
    @(negedge clk); w_col_we = 0;
    // stream NV vectors back to back
    for (int n = 0; n < NV; n++) begin
      x_valid = 1;
      for (int r = 0; r < ROWS; r++) x_vec[r] = X[n][r];
      t_in[n] = cyc;
      @(negedge clk);
    end
    x_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d outputs", nout); end
    // clear, then one vector must give zeros
    w_clr = 1; @(negedge clk); w_clr = 0;
    zero_mode = 1;
    nout = 0;
    x_valid = 1; t_in[0] = cyc; @(negedge clk); x_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
