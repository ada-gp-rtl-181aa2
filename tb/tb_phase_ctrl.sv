// tb_phase_ctrl: runs the scheduler through Warm Up and every k:m step with
// the paper's defaults (ratio 4:1, 3:1, 2:1, 1:1, four epochs each, m = 1)
// and compares the phase of every batch with an independent model of the
// schedule: within an epoch, batch i is Phase GP when i mod (k+m) < k.
// Warm Up is 2 epochs and an epoch 11 batches here to keep the run short.
module tb_phase_ctrl;
  import ada_gp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  warmup_epochs;
  logic [15:0] batches_per_epoch;
  logic        batch_done;
  phase_e      phase;
  logic [15:0] epoch;
  logic [3:0]  k_cur, m_cur;
  logic [31:0] gp_batches, bp_batches;
  int checks = 0, failures = 0;

  phase_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int L, BPE, exp_gp, exp_bp;
    L = 2; BPE = 11; exp_gp = 0; exp_bp = 0;
    warmup_epochs = 8'(L); batches_per_epoch = 16'(BPE); batch_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < L + 18; e++) begin
      for (int b = 0; b < BPE; b++) begin
        phase_e ep;
        int k;
        if (e < L) ep = PH_WARMUP;
        else begin
          k = (e - L < 4) ? 4 : (e - L < 8) ? 3 : (e - L < 12) ? 2 : 1;
          ep = ((b % (k + 1)) < k) ? PH_GP : PH_BP;
          checks++;
          if (int'(k_cur) != k || m_cur != 4'd1) failures++;
        end
        checks++;
        if (phase != ep || int'(epoch) != e) begin
          failures++;
          if (failures < 6) $display("epoch %0d batch %0d phase %s exp %s", e, b, phase.name(), ep.name());
        end
        if (ep == PH_GP) exp_gp++; else exp_bp++;
        // a few idle cycles, then the batch ends
        repeat ($urandom % 3) @(negedge clk);
        @(negedge clk); batch_done = 1;
        @(negedge clk); batch_done = 0;
      end
    end
    checks++;
    if (int'(gp_batches) != exp_gp || int'(bp_batches) != exp_bp) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
