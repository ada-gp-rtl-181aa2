// tb_predictor_unit: loads random predictor weights through the external
// port, prepares the predictor array and streams reorganized activation
// vectors through it. Each predicted gradient is compared with
// requant(Wp^T a), masked to k_len lanes, and must leave P + G cycles after
// its input. A training request is then checked row by row against
// Wp[p][g] - (a[p] * err[g]) >>> (FRAC + lrp_shift), read back through the
// external port, and a second forward pass must use the trained weights.
module tb_predictor_unit;
  import ada_gp_pkg::*;
  localparam int P = 8, G = 10, LAT = P + G;
  logic clk = 0, rst_n = 0;
  logic pm_we, pm_re, prep_req, prep_done, a_valid, g_valid, t_valid, t_ready, busy;
  logic [$clog2(P)-1:0] pm_addr;
  vec_t pm_wdata, pm_rdata;
  logic [4:0] k_len;
  logic [3:0] lrp_shift;
  data_t a_vec [P];
  data_t g_vec [G];
  data_t t_a [P];
  data_t t_err [G];
  int checks = 0, failures = 0;

  predictor_unit #(.P(P), .G(G)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t Wp [P][G];
  data_t A  [16][P];
  int    t_in [16];
  int    nout = 0;

  always @(posedge clk) begin
    if (rst_n && g_valid) begin
      for (int g = 0; g < G; g++) begin
        acc_t s;
        data_t e;
        s = 0;
        for (int p = 0; p < P; p++) s += acc_t'(Wp[p][g]) * acc_t'(A[nout][p]);
        e = (g < int'(k_len)) ? requant(s) : '0;
        checks++;
        if (g_vec[g] !== e) begin
          failures++;
          if (failures < 5) $display("out %0d lane %0d got %0d exp %0d", nout, g, g_vec[g], e);
        end
      end
      checks++;
      if (cyc - t_in[nout] != LAT) begin
        failures++;
        $display("latency %0d", cyc - t_in[nout]);
      end
      nout++;
    end
  end

  task automatic forward(input int nv);
    nout = 0;
    @(negedge clk); prep_req = 1; @(negedge clk); prep_req = 0;
    while (!prep_done) @(negedge clk);
    @(negedge clk);
    for (int n = 0; n < nv; n++) begin
      for (int p = 0; p < P; p++) A[n][p] = data_t'($signed($urandom) >>> 22);
      a_valid = 1;
      for (int p = 0; p < P; p++) a_vec[p] = A[n][p];
      t_in[n] = cyc;
      @(negedge clk);
    end
    a_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (nout != nv) failures++;
  endtask

  initial begin
    pm_we = 0; pm_re = 0; pm_addr = 0; pm_wdata = '0; prep_req = 0; a_valid = 0; t_valid = 0;
    k_len = 5'd7; lrp_shift = 4'd2;
    foreach (a_vec[i]) a_vec[i] = 0;
    foreach (t_a[i]) t_a[i] = 0;
    foreach (t_err[i]) t_err[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weights through the external port
    for (int p = 0; p < P; p++) begin
      @(negedge clk);
      pm_we = 1; pm_addr = p[$clog2(P)-1:0];
      pm_wdata = '0;
      for (int g = 0; g < G; g++) begin
        Wp[p][g] = data_t'($signed($urandom) >>> 21);
        pm_wdata[g] = Wp[p][g];
      end
    end
    @(negedge clk); pm_we = 0;
    forward(12);
    // a second prepare without changes answers at once
    @(negedge clk); prep_req = 1; @(negedge clk); prep_req = 0;
    checks++;
    if (!prep_done) failures++;
    // training step
    for (int p = 0; p < P; p++) t_a[p] = data_t'($signed($urandom) >>> 20);
    for (int g = 0; g < G; g++) t_err[g] = data_t'($signed($urandom) >>> 20);
    @(negedge clk);
    checks++;
    if (!t_ready) failures++;
    t_valid = 1;
    @(negedge clk); t_valid = 0;
    while (busy) @(negedge clk);
    for (int p = 0; p < P; p++)
      for (int g = 0; g < G; g++)
        Wp[p][g] = sat16(acc_t'(Wp[p][g]) - ((acc_t'(t_a[p]) * acc_t'(t_err[g])) >>> (FRAC + 2)));
    for (int p = 0; p < P; p++) begin
      @(negedge clk); pm_re = 1; pm_addr = p[$clog2(P)-1:0];
      @(posedge clk); #1;
      for (int g = 0; g < G; g++) begin
        checks++;
        if (pm_rdata[g] !== Wp[p][g]) begin
          failures++;
          if (failures < 5) $display("Wp[%0d][%0d] got %0d exp %0d", p, g, pm_rdata[g], Wp[p][g]);
        end
      end
    end
    @(negedge clk); pm_re = 0;
    k_len = 5'd10;
    forward(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
