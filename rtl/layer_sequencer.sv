// layer_sequencer: runs one layer command on the ADA-GP-MAX datapath.
//
// The host issues a layer command (layer_cmd_t) per layer and pass; the
// sequencer drives the global buffer, the main PE array, the tensor
// reorganization unit and the predictor unit. Layer geometry per command:
// K = in_ch*k*k filter length (K <= ROWS and <= G), C filters
// (C <= ROWS and <= COLS), N = batch * positions input vectors (im2col
// form, prepared by the host).
//
// OP_FW (every phase):
//   1. clear the array, load filter c into column c (weight-stationary),
//      start the predictor's weight reload and the tensor reorganization;
//   2. stream the N input vectors; each output vector (C lanes, Q8.8) is
//      written to y_addr+n and fed to the tensor reorganization at once;
//   3. stream the C reorganized vectors through the predictor's own PE
//      array, keep the C predicted gradient vectors, write the predictor
//      inputs to a_addr+c and predictions to gp_addr+c (needed for
//      training in Phase BP);
//   4. Phase GP only: update each filter with its predicted gradient at
//      once, without any backward pass (w -= g * 2^-lr_shift).
// OP_BW (Phase BP and Warm Up; in Phase GP it is skipped and counted):
//   1. if dx_en: load filter c into row c and stream the output gradients
//      dY (word n, C lanes) to get the input gradients dX = dY W (word n,
//      K lanes) for the layer below;
//   2. weight gradient dW[c][k] = sum_n dY[n][c] X[n][k]: per tile of ROWS
//      input vectors the tile is loaded into the array rows, the dY tile is
//      staged, and its column c is streamed for c = 0..C-1; the C outputs
//      (K lanes each) are accumulated in a C x K register file;
//   3. per filter: w -= dW * 2^-lr_shift, then the predictor is trained
//      with error (predicted - true) and the stored predictor input.
// In Phase BP/Warm Up the predictions from step 3 of OP_FW are computed but
// not applied, as the paper describes.
//
// The paper describes the phases and the separate predictor array but not
// the command format, buffer layout, tiling or how the backward pass is
// mapped onto the array; those are this design's own. The predictor is run
// after the layer's last output vector rather than overlapped with the next
// layer.
//
// Lint note: the batch, position and pooling sizes (log2_b, log2_s,
// log2_pool) of the latched command c_q are not read here; the top feeds
// them to the tensor reorganization from its own copy of the command. They
// are kept so the whole command is latched in one register.
module layer_sequencer
  import ada_gp_pkg::*;
#(
  parameter int ROWS = 12,
  parameter int COLS = 15,
  parameter int P    = 8,
  parameter int G    = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  layer_cmd_t cmd,
  output logic       done,
  input  phase_e     phase,
  input  logic [3:0] lr_shift,
  // global buffer
  output logic           gb_rd_en,
  output logic [AW-1:0]  gb_rd_addr,
  input  vec_t           gb_rd_data,
  output logic           gb_wr_en,
  output logic [AW-1:0]  gb_wr_addr,
  output vec_t           gb_wr_data,
  // main PE array
  output logic       arr_clr,
  output logic       arr_row_we,
  output logic [$clog2(ROWS)-1:0] arr_row_sel,
  output data_t      arr_row_vec [COLS],
  output logic       arr_col_we,
  output logic [$clog2(COLS)-1:0] arr_col_sel,
  output data_t      arr_col_vec [ROWS],
  output logic       arr_x_valid,
  output data_t      arr_x_vec [ROWS],
  input  logic       arr_y_valid,
  input  acc_t       arr_y_vec [COLS],
  // tensor reorganization
  output logic       tr_start,
  output logic       tr_in_valid,
  output data_t      tr_in_vec [COLS],
  output logic       tr_flush,
  input  logic       tr_out_valid,
  output logic       tr_out_ready,
  input  logic [4:0] tr_out_c,
  input  data_t      tr_out_vec [P],
  // predictor
  output logic       pr_prep_req,
  input  logic       pr_prep_done,
  output logic       pr_a_valid,
  output data_t      pr_a_vec [P],
  input  logic       pr_g_valid,
  input  data_t      pr_g_vec [G],
  output logic       pr_t_valid,
  input  logic       pr_t_ready,
  output data_t      pr_t_a [P],
  output data_t      pr_t_err [G],
  // statistics
  output logic [31:0] n_fw,
  output logic [31:0] n_bw,
  output logic [31:0] n_gp_updates,
  output logic [31:0] n_bp_updates,
  output logic [31:0] n_bw_skipped,
  output logic [31:0] n_pred_train
);
  typedef enum logic [4:0] {
    S_IDLE, S_F_INIT, S_F_LDW, S_F_STRM, S_F_FLUSH, S_F_PRED, S_F_GPW, S_F_UPD,
    S_B_INIT, S_B_DXLD, S_B_DXSTR, S_B_TINIT, S_B_TLDX, S_B_TLDY, S_B_TSTR,
    S_B_U0, S_B_U1, S_B_U2, S_B_U3, S_B_U4, S_DONE
  } state_e;

  state_e     st;
  layer_cmd_t c_q;
  phase_e     ph_q;
  logic [NW-1:0] iss, rcv, n0, tile_rows;
  logic       rd_pend;
  logic [NW-1:0] rd_idx;
  logic       prep_ok;
  logic [4:0] cnt_g;

  data_t g_rf  [COLS][G];      // predicted gradients of this layer
  acc_t  gacc  [ROWS][COLS];   // true weight gradients, [filter][k]
  data_t stage [ROWS][VEC];    // staged dY tile
  data_t gp_q  [VEC];
  data_t a_q   [P];

  logic [NW-1:0] k_n, c_n;
  assign k_n = NW'(c_q.k_len);
  assign c_n = NW'(c_q.c_len);

  // true gradient of the filter being updated
  data_t gtrue [VEC];
  always_comb begin
    for (int j = 0; j < VEC; j++) begin
      gtrue[j] = '0;
      if (j < COLS && NW'(j) < k_n)
        for (int f = 0; f < ROWS; f++)
          if (NW'(f) == iss) gtrue[j] = requant(gacc[f][j]);
    end
  end

  // weight update unit shared by Phase GP and Phase BP
  data_t wu_w [VEC], wu_g [VEC], wu_o [VEC];
  always_comb begin
    for (int j = 0; j < VEC; j++) begin
      wu_w[j] = gb_rd_data[j];
      wu_g[j] = '0;
      if (st == S_F_UPD) begin
        for (int f = 0; f < COLS; f++)
          if (j < G && NW'(f) == rd_idx) wu_g[j] = g_rf[f][j];
      end else begin
        wu_g[j] = gtrue[j];
      end
    end
  end
  weight_update #(.LANES(VEC)) u_wu (
    .w_in(wu_w), .g_in(wu_g), .len(c_q.k_len), .lr_shift(lr_shift), .w_out(wu_o)
  );

  // ---------------------------------------------------------------- datapath
  always_comb begin
    cmd_ready    = (st == S_IDLE);
    gb_rd_en     = 1'b0;
    gb_rd_addr   = '0;
    gb_wr_en     = 1'b0;
    gb_wr_addr   = '0;
    gb_wr_data   = '0;
    arr_clr      = 1'b0;
    arr_row_we   = 1'b0;
    arr_row_sel  = rd_idx[$clog2(ROWS)-1:0];
    arr_col_we   = 1'b0;
    arr_col_sel  = rd_idx[$clog2(COLS)-1:0];
    arr_x_valid  = 1'b0;
    tr_start     = 1'b0;
    tr_in_valid  = 1'b0;
    tr_flush     = 1'b0;
    tr_out_ready = 1'b0;
    pr_prep_req  = 1'b0;
    pr_a_valid   = 1'b0;
    pr_t_valid   = 1'b0;
    for (int j = 0; j < COLS; j++) arr_row_vec[j] = (NW'(j) < k_n) ? gb_rd_data[j] : '0;
    for (int r = 0; r < ROWS; r++) arr_col_vec[r] = (NW'(r) < k_n) ? gb_rd_data[r] : '0;
    for (int r = 0; r < ROWS; r++) arr_x_vec[r]   = '0;
    for (int c = 0; c < COLS; c++) tr_in_vec[c]   = (NW'(c) < c_n) ? requant(arr_y_vec[c]) : '0;
    for (int p = 0; p < P; p++)    pr_a_vec[p]    = tr_out_vec[p];
    for (int p = 0; p < P; p++)    pr_t_a[p]      = a_q[p];
    for (int g = 0; g < G; g++)
      pr_t_err[g] = (NW'(g) < k_n) ? sat16(acc_t'(gp_q[g]) - acc_t'(gtrue[g])) : '0;

    case (st)
      S_F_INIT: begin
        arr_clr     = 1'b1;
        tr_start    = 1'b1;
        pr_prep_req = 1'b1;
      end
      S_F_LDW: begin
        gb_rd_en   = (iss < c_n);
        gb_rd_addr = c_q.w_addr + AW'(iss);
        arr_col_we = rd_pend;
      end
      S_F_STRM: begin
        gb_rd_en    = (iss < c_q.n_len);
        gb_rd_addr  = c_q.x_addr + AW'(iss);
        arr_x_valid = rd_pend;
        for (int r = 0; r < ROWS; r++) arr_x_vec[r] = (NW'(r) < k_n) ? gb_rd_data[r] : '0;
        tr_in_valid = arr_y_valid;
        gb_wr_en    = arr_y_valid;
        gb_wr_addr  = c_q.y_addr + AW'(rcv);
        for (int c = 0; c < COLS; c++) gb_wr_data[c] = tr_in_vec[c];
      end
      S_F_FLUSH: tr_flush = 1'b1;
      S_F_PRED: begin
        tr_out_ready = prep_ok;
        pr_a_valid   = tr_out_valid && prep_ok;
        gb_wr_en     = tr_out_valid && prep_ok;
        gb_wr_addr   = c_q.a_addr + AW'(tr_out_c);
        for (int p = 0; p < P; p++) gb_wr_data[p] = tr_out_vec[p];
      end
      S_F_GPW: begin
        gb_wr_en   = 1'b1;
        gb_wr_addr = c_q.gp_addr + AW'(iss);
        for (int f = 0; f < COLS; f++)
          if (NW'(f) == iss)
            for (int g = 0; g < G; g++) gb_wr_data[g] = g_rf[f][g];
      end
      S_F_UPD: begin
        gb_rd_en   = (iss < c_n);
        gb_rd_addr = c_q.w_addr + AW'(iss);
        gb_wr_en   = rd_pend;
        gb_wr_addr = c_q.w_addr + AW'(rd_idx);
        for (int j = 0; j < VEC; j++) gb_wr_data[j] = wu_o[j];
      end
      S_B_INIT: arr_clr = 1'b1;
      S_B_DXLD: begin
        gb_rd_en   = (iss < c_n);
        gb_rd_addr = c_q.w_addr + AW'(iss);
        arr_row_we = rd_pend;
      end
      S_B_DXSTR: begin
        gb_rd_en    = (iss < c_q.n_len);
        gb_rd_addr  = c_q.dy_addr + AW'(iss);
        arr_x_valid = rd_pend;
        for (int r = 0; r < ROWS; r++) arr_x_vec[r] = (NW'(r) < c_n) ? gb_rd_data[r] : '0;
        gb_wr_en    = arr_y_valid;
        gb_wr_addr  = c_q.dx_addr + AW'(rcv);
        for (int j = 0; j < COLS; j++) gb_wr_data[j] = (NW'(j) < k_n) ? requant(arr_y_vec[j]) : '0;
      end
      S_B_TINIT: arr_clr = 1'b1;
      S_B_TLDX: begin
        gb_rd_en   = (iss < tile_rows);
        gb_rd_addr = c_q.x_addr + AW'(n0 + iss);
        arr_row_we = rd_pend;
      end
      S_B_TLDY: begin
        gb_rd_en   = (iss < tile_rows);
        gb_rd_addr = c_q.dy_addr + AW'(n0 + iss);
      end
      S_B_TSTR: begin
        arr_x_valid = (iss < c_n);
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < VEC; c++)
            if (NW'(c) == iss) arr_x_vec[r] = stage[r][c];
      end
      S_B_U0: begin
        gb_rd_en   = 1'b1;
        gb_rd_addr = c_q.w_addr + AW'(iss);
      end
      S_B_U1: begin
        gb_wr_en   = 1'b1;
        gb_wr_addr = c_q.w_addr + AW'(iss);
        for (int j = 0; j < VEC; j++) gb_wr_data[j] = wu_o[j];
        gb_rd_en   = 1'b1;
        gb_rd_addr = c_q.gp_addr + AW'(iss);
      end
      S_B_U2: begin
        gb_rd_en   = 1'b1;
        gb_rd_addr = c_q.a_addr + AW'(iss);
      end
      S_B_U4: pr_t_valid = 1'b1;
      default: ;
    endcase
  end

  // ------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      c_q          <= '0;
      ph_q         <= PH_WARMUP;
      iss          <= '0;
      rcv          <= '0;
      n0           <= '0;
      tile_rows    <= '0;
      rd_pend      <= 1'b0;
      rd_idx       <= '0;
      prep_ok      <= 1'b0;
      cnt_g        <= '0;
      done         <= 1'b0;
      n_fw         <= '0;
      n_bw         <= '0;
      n_gp_updates <= '0;
      n_bp_updates <= '0;
      n_bw_skipped <= '0;
      n_pred_train <= '0;
      for (int f = 0; f < COLS; f++) for (int g = 0; g < G; g++) g_rf[f][g] <= '0;
      for (int f = 0; f < ROWS; f++) for (int j = 0; j < COLS; j++) gacc[f][j] <= '0;
      for (int r = 0; r < ROWS; r++) for (int j = 0; j < VEC; j++) stage[r][j] <= '0;
      for (int j = 0; j < VEC; j++) gp_q[j] <= '0;
      for (int p = 0; p < P; p++) a_q[p] <= '0;
    end else begin
      done    <= 1'b0;
      rd_pend <= gb_rd_en;
      rd_idx  <= iss;
      if (pr_prep_done) prep_ok <= 1'b1;

      case (st)
        S_IDLE: begin
          if (cmd_valid) begin
            c_q  <= cmd;
            ph_q <= phase;
            iss  <= '0;
            rcv  <= '0;
            if (cmd.op == OP_FW) begin
              st <= S_F_INIT;
            end else if (phase == PH_GP) begin
              n_bw_skipped <= n_bw_skipped + 1;
              done         <= 1'b1;
              st           <= S_IDLE;
            end else begin
              st <= S_B_INIT;
            end
          end
        end
        // ------------------------------------------------ forward pass
        S_F_INIT: begin
          prep_ok <= pr_prep_done;
          st      <= S_F_LDW;
        end
        S_F_LDW: begin
          if (iss < c_n) iss <= iss + 1'b1;
          else if (!rd_pend) begin
            st  <= S_F_STRM;
            iss <= '0;
            rcv <= '0;
          end
        end
        S_F_STRM: begin
          if (iss < c_q.n_len) iss <= iss + 1'b1;
          if (arr_y_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 >= c_q.n_len) st <= S_F_FLUSH;
          end
        end
        S_F_FLUSH: begin
          st    <= S_F_PRED;
          cnt_g <= '0;
        end
        S_F_PRED: begin
          if (pr_g_valid) begin
            for (int f = 0; f < COLS; f++)
              if (5'(f) == cnt_g) g_rf[f] <= pr_g_vec;
            cnt_g <= cnt_g + 1'b1;
            if (NW'(cnt_g) + 1'b1 >= c_n) begin
              st  <= S_F_GPW;
              iss <= '0;
            end
          end
        end
        S_F_GPW: begin
          iss <= iss + 1'b1;
          if (iss + 1'b1 >= c_n) begin
            iss <= '0;
            st  <= (ph_q == PH_GP) ? S_F_UPD : S_DONE;
          end
        end
        S_F_UPD: begin
          if (iss < c_n) iss <= iss + 1'b1;
          if (rd_pend) n_gp_updates <= n_gp_updates + 1;
          if (iss >= c_n && !rd_pend) st <= S_DONE;
        end
        // ----------------------------------------------- backward pass
        S_B_INIT: begin
          for (int f = 0; f < ROWS; f++) for (int j = 0; j < COLS; j++) gacc[f][j] <= '0;
          iss <= '0;
          rcv <= '0;
          n0  <= '0;
          st  <= c_q.dx_en ? S_B_DXLD : S_B_TINIT;
        end
        S_B_DXLD: begin
          if (iss < c_n) iss <= iss + 1'b1;
          else if (!rd_pend) begin
            st  <= S_B_DXSTR;
            iss <= '0;
            rcv <= '0;
          end
        end
        S_B_DXSTR: begin
          if (iss < c_q.n_len) iss <= iss + 1'b1;
          if (arr_y_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 >= c_q.n_len) st <= S_B_TINIT;
          end
        end
        S_B_TINIT: begin
          iss       <= '0;
          rcv       <= '0;
          tile_rows <= (c_q.n_len - n0 < NW'(ROWS)) ? c_q.n_len - n0 : NW'(ROWS);
          for (int r = 0; r < ROWS; r++) for (int j = 0; j < VEC; j++) stage[r][j] <= '0;
          st        <= S_B_TLDX;
        end
        S_B_TLDX: begin
          if (iss < tile_rows) iss <= iss + 1'b1;
          else if (!rd_pend) begin
            st  <= S_B_TLDY;
            iss <= '0;
          end
        end
        S_B_TLDY: begin
          if (iss < tile_rows) iss <= iss + 1'b1;
          if (rd_pend)
            for (int r = 0; r < ROWS; r++)
              if (NW'(r) == rd_idx)
                for (int j = 0; j < VEC; j++) stage[r][j] <= gb_rd_data[j];
          if (iss >= tile_rows && !rd_pend) begin
            st  <= S_B_TSTR;
            iss <= '0;
            rcv <= '0;
          end
        end
        S_B_TSTR: begin
          if (iss < c_n) iss <= iss + 1'b1;
          if (arr_y_valid) begin
            for (int f = 0; f < ROWS; f++)
              if (NW'(f) == rcv)
                for (int j = 0; j < COLS; j++)
                  if (NW'(j) < k_n) gacc[f][j] <= gacc[f][j] + arr_y_vec[j];
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 >= c_n) begin
              iss <= '0;
              if (n0 + NW'(ROWS) >= c_q.n_len) st <= S_B_U0;
              else begin
                n0 <= n0 + NW'(ROWS);
                st <= S_B_TINIT;
              end
            end
          end
        end
        S_B_U0: st <= S_B_U1;
        S_B_U1: begin
          n_bp_updates <= n_bp_updates + 1;
          st <= S_B_U2;
        end
        S_B_U2: begin
          for (int j = 0; j < VEC; j++) gp_q[j] <= gb_rd_data[j];
          st <= S_B_U3;
        end
        S_B_U3: begin
          for (int p = 0; p < P; p++) a_q[p] <= gb_rd_data[p];
          st <= S_B_U4;
        end
        S_B_U4: begin
          if (pr_t_ready) begin
            n_pred_train <= n_pred_train + 1;
            if (iss + 1'b1 >= c_n) st <= S_DONE;
            else begin
              iss <= iss + 1'b1;
              st  <= S_B_U0;
            end
          end
        end
        S_DONE: begin
          done <= 1'b1;
          if (c_q.op == OP_FW) n_fw <= n_fw + 1;
          else                 n_bw <= n_bw + 1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Command limits of this datapath.
  a_cmd_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (int'(cmd.k_len) <= ROWS && int'(cmd.k_len) <= G &&
                                  int'(cmd.c_len) <= ROWS && int'(cmd.c_len) <= COLS));
endmodule
