// tb_ada_gp_top: end-to-end training run of the accelerator at its default
// size (no parameter overrides).
//
// A two-layer network is trained: layer 1 is a 3x3 convolution from one
// input channel to 8 channels (K = 9, C = 8), layer 2 a 1x1 convolution to
// 4 channels (K = 8, C = 4), both over a batch of 4 samples x 16 output
// positions (N = 64 vectors), with the predictor input pooled 2:1 to 8
// values. Layer 2 reads layer 1's outputs in place. The loss gradient at the
// output is y - target, computed by the testbench.
//
// The schedule is 1 Warm Up epoch followed by 13 epochs of 5 batches, so
// every k:m ratio of the paper (4:1, 3:1, 2:1, 1:1) is used. For each batch
// the testbench asks for the phase, runs FW on both layers and, unless the
// phase is GP, BW on layer 2 (with input gradient) and layer 1. Once per
// run a BW command is also sent in Phase GP and must be skipped.
// After every batch the outputs, both layers' weights and the predictor
// weights are compared with ada_gp_ref_pkg. Each mechanism (Warm Up, Phase
// BP, Phase GP, every k value, weight update from predicted and from true
// gradients, predictor training, skipped BW, input-gradient pass) is counted
// and must occur. The run also checks that a Phase GP batch takes fewer
// cycles than a Phase BP batch.
module tb_ada_gp_top;
  import ada_gp_pkg::*;
  import ada_gp_ref_pkg::*;
  localparam int P = 8, G = 10;
  localparam int L = 1, BPE = 5, EPOCHS = 14;
  localparam int LR = 4, LRP = 4;
  localparam int N = 64;
  localparam int X1 = 0, W1 = 100, Y1 = 200, W2 = 300, Y2 = 400, DY2 = 500, DX2 = 600;
  localparam int A1 = 700, GP1 = 720, A2 = 740, GP2 = 760;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic          host_wr_en, host_rd_en, pm_we, pm_re, cmd_valid, cmd_ready, cmd_done, batch_done;
  logic [AW-1:0] host_wr_addr, host_rd_addr;
  vec_t          host_wr_data, host_rd_data, pm_wdata, pm_rdata;
  logic [2:0]    pm_addr;
  layer_cmd_t    cmd;
  logic [7:0]    warmup_epochs;
  logic [15:0]   batches_per_epoch, epoch;
  logic [3:0]    lr_shift, lrp_shift, k_cur, m_cur;
  phase_e        phase;
  logic [31:0]   gp_batches, bp_batches, n_fw, n_bw, n_gp_updates, n_bp_updates, n_bw_skipped, n_pred_train;

  ada_gp_top dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic host_write(input int a, input vec_t v);
    @(negedge clk); host_wr_en = 1; host_wr_addr = AW'(a); host_wr_data = v;
    @(negedge clk); host_wr_en = 0;
    gb[a] = v;
  endtask

  task automatic check_region(input int a0, input int n, input string what);
    for (int a = a0; a < a0 + n; a++) begin
      @(negedge clk); host_rd_en = 1; host_rd_addr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (host_rd_data !== gb[a]) begin
        failures++;
        if (failures < 6) $display("%s word %0d: got %h exp %h", what, a - a0, host_rd_data, gb[a]);
      end
    end
    @(negedge clk); host_rd_en = 0;
  endtask

  task automatic check_wp();
    for (int p = 0; p < P; p++) begin
      @(negedge clk); pm_re = 1; pm_addr = 3'(p);
      @(posedge clk); #1;
      checks++;
      if (pm_rdata !== wp[p]) begin
        failures++;
        if (failures < 6) $display("Wp row %0d: got %h exp %h", p, pm_rdata, wp[p]);
      end
    end
    @(negedge clk); pm_re = 0;
  endtask

  // returns the cycles the command took
  task automatic run_cmd(input layer_cmd_t c, input phase_e ph, output int cycles);
    int t0;
    @(negedge clk);
    cmd = c; cmd_valid = 1; t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    cycles = cyc - t0;
    if (c.op == OP_FW) fw(c, ph, LR);
    else if (ph != PH_GP) bw(c, LR, LRP);
  endtask

  function automatic vec_t rvec(input int lanes, input int sh);
    vec_t v = '0;
    for (int i = 0; i < lanes; i++) v[i] = data_t'($signed($urandom) >>> sh);
    return v;
  endfunction

  function automatic layer_cmd_t mk(input op_e op, input int k, input int c, input int xa,
                                    input int wa, input int ya, input int dya, input int dxa,
                                    input int aa, input int ga, input bit dx);
    layer_cmd_t m = '0;
    m.op = op; m.k_len = 5'(k); m.c_len = 5'(c); m.n_len = NW'(N);
    m.log2_b = 3'd2; m.log2_s = 4'd4; m.log2_pool = 4'd1; m.dx_en = dx;
    m.x_addr = AW'(xa); m.w_addr = AW'(wa); m.y_addr = AW'(ya); m.dy_addr = AW'(dya);
    m.dx_addr = AW'(dxa); m.a_addr = AW'(aa); m.gp_addr = AW'(ga);
    return m;
  endfunction

  // mechanism counters
  int n_warm = 0, n_bp = 0, n_gp = 0, n_skip_sent = 0;
  int k_seen [5];
  longint cyc_bp = 0, cyc_gp = 0;
  vec_t T [N];

  initial begin
    phase_e ph;
    int t, tb;
    host_wr_en = 0; host_rd_en = 0; host_wr_addr = 0; host_rd_addr = 0; host_wr_data = '0;
    pm_we = 0; pm_re = 0; pm_addr = 0; pm_wdata = '0; cmd_valid = 0; cmd = '0; batch_done = 0;
    warmup_epochs = 8'(L); batches_per_epoch = 16'(BPE); lr_shift = 4'(LR); lrp_shift = 4'(LRP);
    foreach (k_seen[i]) k_seen[i] = 0;
    for (int i = 0; i < 4096; i++) gb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < P; p++) begin
      wp[p] = rvec(G, 22);
      @(negedge clk); pm_we = 1; pm_addr = 3'(p); pm_wdata = wp[p];
    end
    @(negedge clk); pm_we = 0;
    for (int c = 0; c < 8; c++) host_write(W1 + c, rvec(9, 23));
    for (int c = 0; c < 4; c++) host_write(W2 + c, rvec(8, 23));
    for (int n = 0; n < N; n++) T[n] = rvec(4, 22);

    for (int e = 0; e < L + EPOCHS - 1; e++) begin
      for (int b = 0; b < BPE; b++) begin
        ph = phase;
        tb = 0;
        for (int n = 0; n < N; n++) host_write(X1 + n, rvec(9, 22));
        run_cmd(mk(OP_FW, 9, 8, X1, W1, Y1, 0, 0, A1, GP1, 0), ph, t); tb += t;
        run_cmd(mk(OP_FW, 8, 4, Y1, W2, Y2, 0, 0, A2, GP2, 0), ph, t); tb += t;
        if (ph != PH_GP) begin
          for (int n = 0; n < N; n++) begin
            vec_t d = '0;
            for (int j = 0; j < 4; j++) d[j] = sat16(acc_t'(gb[Y2 + n][j]) - acc_t'(T[n][j]));
            host_write(DY2 + n, d);
          end
          run_cmd(mk(OP_BW, 8, 4, Y1, W2, Y2, DY2, DX2, A2, GP2, 1), ph, t); tb += t;
          run_cmd(mk(OP_BW, 9, 8, X1, W1, Y1, DX2, 0, A1, GP1, 0), ph, t); tb += t;
          if (ph == PH_WARMUP) n_warm++; else begin n_bp++; cyc_bp += tb; end
        end else begin
          n_gp++;
          cyc_gp += tb;
          k_seen[k_cur]++;
          if (n_skip_sent == 0) begin
            run_cmd(mk(OP_BW, 9, 8, X1, W1, Y1, DX2, 0, A1, GP1, 0), ph, t);
            n_skip_sent++;
          end
        end
        check_region(Y2, N, "Y2");
        check_region(W1, 8, "W1");
        check_region(W2, 4, "W2");
        if (ph != PH_GP) check_region(DX2, N, "dX2");
        check_wp();
        @(negedge clk); batch_done = 1;
        @(negedge clk); batch_done = 0;
      end
    end

    // every mechanism must have happened
    checks++; if (n_warm == 0) begin failures++; $display("no Warm Up batch"); end
    checks++; if (n_bp == 0) begin failures++; $display("no Phase BP batch"); end
    checks++; if (n_gp == 0) begin failures++; $display("no Phase GP batch"); end
    for (int k = 1; k <= 4; k++) begin
      checks++;
      if (k_seen[k] == 0) begin failures++; $display("ratio %0d:1 never used", k); end
    end
    checks++; if (n_gp_updates == 0) begin failures++; $display("no predicted-gradient update"); end
    checks++; if (n_bp_updates == 0) begin failures++; $display("no true-gradient update"); end
    checks++; if (n_pred_train == 0) begin failures++; $display("no predictor training"); end
    checks++; if (n_bw_skipped != 1) begin failures++; $display("skipped BW %0d", n_bw_skipped); end
    checks++;
    if (int'(gp_batches) != n_gp || int'(bp_batches) != n_bp + n_warm) begin
      failures++; $display("batch counters gp %0d bp %0d", gp_batches, bp_batches);
    end
    checks++;
    if (cyc_gp / n_gp >= cyc_bp / n_bp) begin
      failures++; $display("GP batch not faster than BP batch");
    end
    $display("batches: warm up %0d, BP %0d, GP %0d (k=4:%0d k=3:%0d k=2:%0d k=1:%0d)",
             n_warm, n_bp, n_gp, k_seen[4], k_seen[3], k_seen[2], k_seen[1]);
    $display("cycles per batch (commands only): BP %0d, GP %0d",
             int'(cyc_bp / n_bp), int'(cyc_gp / n_gp));
    $display("updates: predicted %0d, true %0d, predictor trainings %0d, BW skipped %0d",
             n_gp_updates, n_bp_updates, n_pred_train, n_bw_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
