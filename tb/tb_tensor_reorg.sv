// tb_tensor_reorg: streams a random layer output of B = 4 samples x
// S = 16 positions x 15 channels, pooled 2:1 into the 8 predictor inputs,
// and compares every reorganized vector with the batch average and
// average pooling computed here (sum of the B*2 values, arithmetic shift by
// 3). Output handshake back-pressure and the per-channel order are checked;
// a second run with fewer channels checks that only c_len vectors leave.
module tb_tensor_reorg;
  import ada_gp_pkg::*;
  localparam int CH = 15, P = 8;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, flush, out_valid, out_ready, done;
  logic [4:0] c_len, out_c;
  logic [3:0] log2_s, log2_pool;
  logic [2:0] log2_b;
  data_t in_vec [CH];
  data_t out_vec [P];
  int checks = 0, failures = 0;

  tensor_reorg #(.CH(CH), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t Y [64][CH];

  task automatic run(input int B, input int S, input int LP, input int C);
    int nexp;
    @(negedge clk);
    start = 1; c_len = 5'(C); log2_s = 4'($clog2(S)); log2_b = 3'($clog2(B)); log2_pool = 4'(LP);
    @(negedge clk); start = 0;
    for (int n = 0; n < B * S; n++) begin
      for (int c = 0; c < CH; c++) Y[n][c] = data_t'($signed($urandom) >>> 20);
      in_valid = 1;
      for (int c = 0; c < CH; c++) in_vec[c] = Y[n][c];
      @(negedge clk);
    end
    in_valid = 0;
    flush = 1; @(negedge clk); flush = 0;
    nexp = 0;
    while (nexp < C) begin
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_c) != nexp) failures++;
        for (int p = 0; p < P; p++) begin
          int sum = 0, e;
          for (int b = 0; b < B; b++)
            for (int s = 0; s < S; s++)
              if ((s >> LP) == p) sum += int'(Y[b * S + s][nexp]);
          e = sum >>> ($clog2(B) + LP);
          checks++;
          if (int'(out_vec[p]) != e) begin
            failures++;
            if (failures < 5) $display("c %0d p %0d got %0d exp %0d", nexp, p, out_vec[p], e);
          end
        end
        nexp++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (out_valid) failures++;
  endtask

  initial begin
    start = 0; in_valid = 0; flush = 0; out_ready = 0; c_len = 0;
    log2_s = 0; log2_b = 0; log2_pool = 0;
    foreach (in_vec[i]) in_vec[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(4, 16, 1, 15);
    run(2, 8, 0, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
