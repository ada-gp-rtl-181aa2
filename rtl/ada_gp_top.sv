// ada_gp_top: ADA-GP-MAX training accelerator.
//
// A weight-stationary DNN accelerator (global buffer + 12 x 15 PE array)
// extended, as in the paper's ADA-GP-MAX organisation, with a predictor
// model that has its own PE array (8 x 10) and its own predictor memory.
// The predictor turns a layer's output activations, reorganized by
// tensor_reorg (batch average, one sample per output channel, pooled to 8
// values), into predicted weight gradients. phase_ctrl decides per batch
// whether the batch is trained with backpropagation (Warm Up, Phase BP;
// the predictor learns from the true gradients) or with the predicted
// gradients (Phase GP; backward passes are skipped and each layer's weights
// are updated right after its forward pass). layer_sequencer runs one layer
// command at a time.
//
// External interface (all plain signals):
//   host_wr_* / host_rd_*  the figure's Inputs, Weights and Activations:
//                          write and read global buffer words (read data one
//                          cycle later). Only while cmd_ready is high.
//   pm_*                   the figure's Predictor's Weights: read/write the
//                          predictor memory while no command runs.
//   cmd_valid/cmd/cmd_ready/cmd_done   layer commands (layer_cmd_t).
//   batch_done             pulse at the end of each batch; advances the
//                          phase schedule. phase tells the host whether to
//                          issue backward commands for the next batch.
//   warmup_epochs, batches_per_epoch, lr_shift, lrp_shift   configuration.
// Off-chip memory is outside this module.
//
// Lint notes: tr_done and pr_busy are status outputs of the tensor
// reorganization and predictor units that the sequencer does not need (it
// follows out_valid/g_valid instead), so they are left unconnected here.
// Only the size fields of the latched command copy cmd_q feed the tensor
// reorganization; the other fields are used inside the sequencer. rst_n is
// both the flops' asynchronous reset and the 'disable iff' of the
// host-access assertion; the assertion is not logic.
module ada_gp_top
  import ada_gp_pkg::*;
#(
  parameter int ROWS     = 12,
  parameter int COLS     = 15,
  parameter int P        = 8,
  parameter int G        = 10,
  parameter int GB_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // global buffer host port
  input  logic        host_wr_en,
  input  logic [AW-1:0] host_wr_addr,
  input  vec_t        host_wr_data,
  input  logic        host_rd_en,
  input  logic [AW-1:0] host_rd_addr,
  output vec_t        host_rd_data,
  // predictor weight port
  input  logic        pm_we,
  input  logic        pm_re,
  input  logic [$clog2(P)-1:0] pm_addr,
  input  vec_t        pm_wdata,
  output vec_t        pm_rdata,
  // layer commands
  input  logic        cmd_valid,
  input  layer_cmd_t  cmd,
  output logic        cmd_ready,
  output logic        cmd_done,
  // phase schedule
  input  logic        batch_done,
  input  logic [7:0]  warmup_epochs,
  input  logic [15:0] batches_per_epoch,
  input  logic [3:0]  lr_shift,
  input  logic [3:0]  lrp_shift,
  output phase_e      phase,
  output logic [15:0] epoch,
  output logic [3:0]  k_cur,
  output logic [3:0]  m_cur,
  // statistics
  output logic [31:0] gp_batches,
  output logic [31:0] bp_batches,
  output logic [31:0] n_fw,
  output logic [31:0] n_bw,
  output logic [31:0] n_gp_updates,
  output logic [31:0] n_bp_updates,
  output logic [31:0] n_bw_skipped,
  output logic [31:0] n_pred_train
);
  // ---------------------------------------------------------- phase control
  phase_ctrl u_phase (
    .clk, .rst_n, .warmup_epochs, .batches_per_epoch, .batch_done,
    .phase, .epoch, .k_cur, .m_cur, .gp_batches, .bp_batches
  );

  // ---------------------------------------------------------- global buffer
  logic          s_rd_en, s_wr_en;
  logic [AW-1:0] s_rd_addr, s_wr_addr;
  vec_t          s_wr_data, gb_rd_data;
  logic          gb_rd_en, gb_wr_en;
  logic [AW-1:0] gb_rd_addr, gb_wr_addr;
  vec_t          gb_wr_data;

  always_comb begin
    if (cmd_ready) begin
      gb_rd_en = host_rd_en;  gb_rd_addr = host_rd_addr;
      gb_wr_en = host_wr_en;  gb_wr_addr = host_wr_addr;  gb_wr_data = host_wr_data;
    end else begin
      gb_rd_en = s_rd_en;     gb_rd_addr = s_rd_addr;
      gb_wr_en = s_wr_en;     gb_wr_addr = s_wr_addr;     gb_wr_data = s_wr_data;
    end
  end
  assign host_rd_data = gb_rd_data;

  global_buffer #(.DEPTH(GB_DEPTH)) u_gb (
    .clk,
    .wr_en(gb_wr_en), .wr_addr(gb_wr_addr[$clog2(GB_DEPTH)-1:0]), .wr_data(gb_wr_data),
    .rd_en(gb_rd_en), .rd_addr(gb_rd_addr[$clog2(GB_DEPTH)-1:0]), .rd_data(gb_rd_data)
  );

  // ---------------------------------------------------------- main PE array
  logic  arr_clr, arr_row_we, arr_col_we, arr_x_valid, arr_y_valid;
  logic [$clog2(ROWS)-1:0] arr_row_sel;
  logic [$clog2(COLS)-1:0] arr_col_sel;
  data_t arr_row_vec [COLS];
  data_t arr_col_vec [ROWS];
  data_t arr_x_vec   [ROWS];
  acc_t  arr_y_vec   [COLS];

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .w_clr(arr_clr),
    .w_row_we(arr_row_we), .w_row_sel(arr_row_sel), .w_row_vec(arr_row_vec),
    .w_col_we(arr_col_we), .w_col_sel(arr_col_sel), .w_col_vec(arr_col_vec),
    .x_valid(arr_x_valid), .x_vec(arr_x_vec),
    .y_valid(arr_y_valid), .y_vec(arr_y_vec)
  );

  // ---------------------------------------------------- tensor reorganizer
  logic       tr_start, tr_in_valid, tr_flush, tr_out_valid, tr_out_ready, tr_done;
  logic [4:0] tr_out_c;
  data_t      tr_in_vec  [COLS];
  data_t      tr_out_vec [P];
  layer_cmd_t cmd_q;

  // sizes are taken from the command while the sequencer is idle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      cmd_q <= '0;
    else if (cmd_valid && cmd_ready) cmd_q <= cmd;
  end

  tensor_reorg #(.CH(COLS), .P(P)) u_reorg (
    .clk, .rst_n,
    .start(tr_start), .c_len(cmd_q.c_len), .log2_s(cmd_q.log2_s),
    .log2_b(cmd_q.log2_b), .log2_pool(cmd_q.log2_pool),
    .in_valid(tr_in_valid), .in_vec(tr_in_vec), .flush(tr_flush),
    .out_valid(tr_out_valid), .out_ready(tr_out_ready), .out_c(tr_out_c),
    .out_vec(tr_out_vec), .done(tr_done)
  );

  // -------------------------------------------------------- predictor model
  logic  pr_prep_req, pr_prep_done, pr_a_valid, pr_g_valid, pr_t_valid, pr_t_ready, pr_busy;
  data_t pr_a_vec [P];
  data_t pr_g_vec [G];
  data_t pr_t_a   [P];
  data_t pr_t_err [G];

  predictor_unit #(.P(P), .G(G)) u_pred (
    .clk, .rst_n,
    .pm_we(pm_we && cmd_ready), .pm_re(pm_re && cmd_ready), .pm_addr, .pm_wdata, .pm_rdata,
    .prep_req(pr_prep_req), .prep_done(pr_prep_done), .k_len(cmd_q.k_len),
    .a_valid(pr_a_valid), .a_vec(pr_a_vec), .g_valid(pr_g_valid), .g_vec(pr_g_vec),
    .t_valid(pr_t_valid), .t_ready(pr_t_ready), .t_a(pr_t_a), .t_err(pr_t_err),
    .lrp_shift, .busy(pr_busy)
  );

  // -------------------------------------------------------- layer sequencer
  layer_sequencer #(.ROWS(ROWS), .COLS(COLS), .P(P), .G(G)) u_seq (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .done(cmd_done), .phase, .lr_shift,
    .gb_rd_en(s_rd_en), .gb_rd_addr(s_rd_addr), .gb_rd_data(gb_rd_data),
    .gb_wr_en(s_wr_en), .gb_wr_addr(s_wr_addr), .gb_wr_data(s_wr_data),
    .arr_clr, .arr_row_we, .arr_row_sel, .arr_row_vec, .arr_col_we, .arr_col_sel,
    .arr_col_vec, .arr_x_valid, .arr_x_vec, .arr_y_valid, .arr_y_vec,
    .tr_start, .tr_in_valid, .tr_in_vec, .tr_flush, .tr_out_valid, .tr_out_ready,
    .tr_out_c, .tr_out_vec,
    .pr_prep_req, .pr_prep_done, .pr_a_valid, .pr_a_vec, .pr_g_valid, .pr_g_vec,
    .pr_t_valid, .pr_t_ready, .pr_t_a, .pr_t_err,
    .n_fw, .n_bw, .n_gp_updates, .n_bp_updates, .n_bw_skipped, .n_pred_train
  );

  // Host traffic to the global buffer must wait for the sequencer.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (host_wr_en || host_rd_en) |-> cmd_ready);
endmodule
