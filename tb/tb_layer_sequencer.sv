// tb_layer_sequencer: drives the layer sequencer with its real datapath
// (global buffer, 12 x 15 PE array, tensor reorganization, predictor unit)
// around it and checks each command against ada_gp_ref_pkg:
//   FW in Phase BP (predictions stored, weights untouched),
//   BW in Phase BP with input gradients (N = 32 vectors, so the weight
//   gradient runs in tiles of 12, 12 and 8 rows),
//   FW in Phase GP (weights updated with predicted gradients),
//   BW in Phase GP (must be skipped).
// After every command the used regions of the buffer and the predictor
// weights are compared word by word with the model.
module tb_layer_sequencer;
  import ada_gp_pkg::*;
  import ada_gp_ref_pkg::*;
  localparam int ROWS = 12, COLS = 15, P = 8, G = 10;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- datapath
  logic cmd_valid, cmd_ready, done;
  layer_cmd_t cmd;
  phase_e phase;
  logic [3:0] lr_shift, lrp_shift;
  logic gb_rd_en, gb_wr_en, s_rd_en, s_wr_en, h_rd_en, h_wr_en;
  logic [AW-1:0] gb_rd_addr, gb_wr_addr, s_rd_addr, s_wr_addr, h_rd_addr, h_wr_addr;
  vec_t gb_rd_data, gb_wr_data, s_wr_data, h_wr_data;
  logic pm_we, pm_re;
  logic [2:0] pm_addr;
  vec_t pm_wdata, pm_rdata;

  assign gb_rd_en   = cmd_ready ? h_rd_en   : s_rd_en;
  assign gb_rd_addr = cmd_ready ? h_rd_addr : s_rd_addr;
  assign gb_wr_en   = cmd_ready ? h_wr_en   : s_wr_en;
  assign gb_wr_addr = cmd_ready ? h_wr_addr : s_wr_addr;
  assign gb_wr_data = cmd_ready ? h_wr_data : s_wr_data;

  global_buffer #(.DEPTH(4096)) u_gb (.clk, .wr_en(gb_wr_en), .wr_addr(gb_wr_addr),
    .wr_data(gb_wr_data), .rd_en(gb_rd_en), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data));

  logic arr_clr, arr_row_we, arr_col_we, arr_x_valid, arr_y_valid;
  logic [3:0] arr_row_sel, arr_col_sel;
  data_t arr_row_vec [COLS];
  data_t arr_col_vec [ROWS];
  data_t arr_x_vec [ROWS];
  acc_t  arr_y_vec [COLS];
  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_arr (.clk, .rst_n, .w_clr(arr_clr),
    .w_row_we(arr_row_we), .w_row_sel(arr_row_sel), .w_row_vec(arr_row_vec),
    .w_col_we(arr_col_we), .w_col_sel(arr_col_sel), .w_col_vec(arr_col_vec),
    .x_valid(arr_x_valid), .x_vec(arr_x_vec), .y_valid(arr_y_valid), .y_vec(arr_y_vec));

  logic tr_start, tr_in_valid, tr_flush, tr_out_valid, tr_out_ready, tr_done;
  logic [4:0] tr_out_c;
  data_t tr_in_vec [COLS];
  data_t tr_out_vec [P];
  tensor_reorg #(.CH(COLS), .P(P)) u_tr (.clk, .rst_n, .start(tr_start),
    .c_len(cmd.c_len), .log2_s(cmd.log2_s), .log2_b(cmd.log2_b), .log2_pool(cmd.log2_pool),
    .in_valid(tr_in_valid), .in_vec(tr_in_vec), .flush(tr_flush), .out_valid(tr_out_valid),
    .out_ready(tr_out_ready), .out_c(tr_out_c), .out_vec(tr_out_vec), .done(tr_done));

  logic pr_prep_req, pr_prep_done, pr_a_valid, pr_g_valid, pr_t_valid, pr_t_ready, pr_busy;
  data_t pr_a_vec [P];
  data_t pr_g_vec [G];
  data_t pr_t_a [P];
  data_t pr_t_err [G];
  predictor_unit #(.P(P), .G(G)) u_pr (.clk, .rst_n, .pm_we, .pm_re, .pm_addr, .pm_wdata,
    .pm_rdata, .prep_req(pr_prep_req), .prep_done(pr_prep_done), .k_len(cmd.k_len),
    .a_valid(pr_a_valid), .a_vec(pr_a_vec), .g_valid(pr_g_valid), .g_vec(pr_g_vec),
    .t_valid(pr_t_valid), .t_ready(pr_t_ready), .t_a(pr_t_a), .t_err(pr_t_err),
    .lrp_shift, .busy(pr_busy));

  logic [31:0] n_fw, n_bw, n_gp_updates, n_bp_updates, n_bw_skipped, n_pred_train;
  layer_sequencer #(.ROWS(ROWS), .COLS(COLS), .P(P), .G(G)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .phase, .lr_shift,
    .gb_rd_en(s_rd_en), .gb_rd_addr(s_rd_addr), .gb_rd_data(gb_rd_data),
    .gb_wr_en(s_wr_en), .gb_wr_addr(s_wr_addr), .gb_wr_data(s_wr_data),
    .arr_clr, .arr_row_we, .arr_row_sel, .arr_row_vec, .arr_col_we, .arr_col_sel,
    .arr_col_vec, .arr_x_valid, .arr_x_vec, .arr_y_valid, .arr_y_vec,
    .tr_start, .tr_in_valid, .tr_in_vec, .tr_flush, .tr_out_valid, .tr_out_ready,
    .tr_out_c, .tr_out_vec,
    .pr_prep_req, .pr_prep_done, .pr_a_valid, .pr_a_vec, .pr_g_valid, .pr_g_vec,
    .pr_t_valid, .pr_t_ready, .pr_t_a, .pr_t_err,
    .n_fw, .n_bw, .n_gp_updates, .n_bp_updates, .n_bw_skipped, .n_pred_train);

  // ------------------------------------------------------------- host side
  task automatic host_write(input int a, input vec_t v);
    @(negedge clk); h_wr_en = 1; h_wr_addr = AW'(a); h_wr_data = v;
    @(negedge clk); h_wr_en = 0;
    gb[a] = v;
  endtask

  task automatic check_region(input int a0, input int n, input string what);
    for (int a = a0; a < a0 + n; a++) begin
      @(negedge clk); h_rd_en = 1; h_rd_addr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (gb_rd_data !== gb[a]) begin
        failures++;
        if (failures < 6) $display("%s word %0d: got %h exp %h", what, a - a0, gb_rd_data, gb[a]);
      end
    end
    @(negedge clk); h_rd_en = 0;
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

  task automatic run_cmd(input layer_cmd_t c, input phase_e ph);
    @(negedge clk);
    cmd = c; phase = ph; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    if (c.op == OP_FW) fw(c, ph, int'(lr_shift));
    else if (ph != PH_GP) bw(c, int'(lr_shift), int'(lrp_shift));
  endtask

  function automatic vec_t rvec(input int lanes, input int sh);
    vec_t v = '0;
    for (int i = 0; i < lanes; i++) v[i] = data_t'($signed($urandom) >>> sh);
    return v;
  endfunction

  initial begin
    layer_cmd_t c;
    cmd_valid = 0; cmd = '0; phase = PH_BP; lr_shift = 4'd3; lrp_shift = 4'd2;
    h_rd_en = 0; h_wr_en = 0; h_rd_addr = 0; h_wr_addr = 0; h_wr_data = '0;
    pm_we = 0; pm_re = 0; pm_addr = 0; pm_wdata = '0;
    for (int i = 0; i < 4096; i++) gb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // make the used part of the RAM agree with the model
    for (int a = 0; a < 700; a++) host_write(a, '0);
    // predictor weights
    for (int p = 0; p < P; p++) begin
      wp[p] = rvec(G, 22);
      @(negedge clk); pm_we = 1; pm_addr = 3'(p); pm_wdata = wp[p];
    end
    @(negedge clk); pm_we = 0;
    c = '0;
    c.k_len = 5'd9; c.c_len = 5'd11; c.n_len = 12'd32; c.log2_b = 3'd1; c.log2_s = 4'd4;
    c.log2_pool = 4'd1; c.dx_en = 1'b1;
    c.x_addr = 12'd0; c.w_addr = 12'd100; c.y_addr = 12'd200; c.dy_addr = 12'd300;
    c.dx_addr = 12'd400; c.a_addr = 12'd500; c.gp_addr = 12'd600;
    for (int n = 0; n < 32; n++) host_write(n, rvec(9, 23));
    for (int ch = 0; ch < 11; ch++) host_write(100 + ch, rvec(9, 24));
    for (int n = 0; n < 32; n++) host_write(300 + n, rvec(11, 24));

    c.op = OP_FW; run_cmd(c, PH_BP);
    check_region(100, 11, "W after FW(BP)");
    check_region(200, 32, "Y");
    check_region(500, 11, "A");
    check_region(600, 11, "Gp");
    c.op = OP_BW; run_cmd(c, PH_BP);
    check_region(100, 11, "W after BW");
    check_region(400, 32, "dX");
    check_wp();
    c.op = OP_FW; run_cmd(c, PH_GP);
    check_region(100, 11, "W after FW(GP)");
    check_region(200, 32, "Y(GP)");
    check_region(600, 11, "Gp(GP)");
    c.op = OP_BW; run_cmd(c, PH_GP);
    check_region(100, 11, "W after skipped BW");
    check_wp();
    checks++;
    if (n_fw != 2 || n_bw != 1 || n_bw_skipped != 1 || n_gp_updates != 11 ||
        n_bp_updates != 11 || n_pred_train != 11) begin
      failures++;
      $display("counters fw %0d bw %0d skip %0d gpu %0d bpu %0d pt %0d", n_fw, n_bw,
               n_bw_skipped, n_gp_updates, n_bp_updates, n_pred_train);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
