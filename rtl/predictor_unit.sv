// predictor_unit: the gradient predictor of ADA-GP-MAX.
//
// One small predictor serves every layer. Its input is a reorganized
// activation vector a (P lanes, one output channel of a layer, see
// tensor_reorg); its output is the predicted weight gradient of that
// channel's filter, g = Wp^T a (G lanes, lanes at or above k_len masked to
// zero because smaller layers use only part of the predictor's output, as
// the paper describes). As in the ADA-GP-MAX figure the unit has its own PE
// array (P x G, weight-stationary, the same pe_array as the main datapath)
// and its own predictor memory, so it can run alongside the main array.
//
// Forward: prep_req reloads the PE array from predictor memory if the
// weights changed since the last load (training or an external write) and
// answers with prep_done. After that, vectors may stream in with a_valid,
// one per cycle; each result leaves with g_valid P+G cycles later, brought
// back to Q8.8.
// Backward (Phase BP / Warm Up): a training request (t_a, t_err) with
// t_valid/t_ready applies one SGD step for the mean-squared-error loss
// between predicted and true gradients:
//   Wp[p][g] -= (t_a[p] * t_err[g]) * 2^-(FRAC + lrp_shift),
// where t_err = predicted - true. It reads and rewrites one row of Wp per
// two cycles (2P cycles per request).
// The paper trains its predictor with Adam at learning rate 0.0001 and puts
// a small convolution and pooling in front of the fully connected layer;
// here the predictor is the fully connected layer alone trained with plain
// SGD (the convolution's sizes are not given), which is this design's
// simplification.
// External port (the figure's Predictor's Weights): pm_* reads and writes
// predictor memory words while the unit is idle (rd data one cycle later).
module predictor_unit
  import ada_gp_pkg::*;
#(
  parameter int P = 8,
  parameter int G = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  // external predictor weight port
  input  logic       pm_we,
  input  logic       pm_re,
  input  logic [$clog2(P)-1:0] pm_addr,
  input  vec_t       pm_wdata,
  output vec_t       pm_rdata,
  // forward
  input  logic       prep_req,
  output logic       prep_done,
  input  logic [4:0] k_len,
  input  logic       a_valid,
  input  data_t      a_vec [P],
  output logic       g_valid,
  output data_t      g_vec [G],
  // backward
  input  logic       t_valid,
  output logic       t_ready,
  input  data_t      t_a   [P],
  input  data_t      t_err [G],
  input  logic [3:0] lrp_shift,
  output logic       busy
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_TRAIN} state_e;
  state_e st;

  localparam int PAW = $clog2(P);

  logic [PAW:0]   idx;       // address being issued
  logic           rd_pend;   // read issued last cycle
  logic [PAW-1:0] rd_tag;
  logic           dirty;
  data_t          ta_q  [P];
  data_t          te_q  [G];

  // memory ports
  logic           m_we, m_re;
  logic [PAW-1:0] m_waddr, m_raddr;
  vec_t           m_wdata, m_rdata;

  predictor_memory #(.DEPTH(P)) u_mem (
    .clk, .wr_en(m_we), .wr_addr(m_waddr), .wr_data(m_wdata),
    .rd_en(m_re), .rd_addr(m_raddr), .rd_data(m_rdata)
  );
  assign pm_rdata = m_rdata;

  // PE array
  logic  arr_row_we;
  data_t arr_row_vec [G];
  data_t arr_col_vec [P];
  acc_t  arr_y [G];
  logic  arr_y_valid;

  for (genvar g = 0; g < G; g++) begin : g_rowvec
    assign arr_row_vec[g] = m_rdata[g];
  end
  for (genvar p = 0; p < P; p++) begin : g_colvec
    assign arr_col_vec[p] = '0;
  end

  pe_array #(.ROWS(P), .COLS(G)) u_arr (
    .clk, .rst_n,
    .w_clr    (1'b0),
    .w_row_we (arr_row_we),
    .w_row_sel(rd_tag),
    .w_row_vec(arr_row_vec),
    .w_col_we (1'b0),
    .w_col_sel('0),
    .w_col_vec(arr_col_vec),
    .x_valid  (a_valid),
    .x_vec    (a_vec),
    .y_valid  (arr_y_valid),
    .y_vec    (arr_y)
  );

  assign g_valid = arr_y_valid;
  always_comb begin
    for (int g = 0; g < G; g++)
      g_vec[g] = (g < int'(k_len)) ? requant(arr_y[g]) : '0;
  end

  assign arr_row_we = rd_pend && (st == S_LOAD);
  assign t_ready    = (st == S_IDLE) && !prep_req;
  assign busy       = (st != S_IDLE);

  // memory port selection: engine when busy, external port when idle
  always_comb begin
    m_re    = 1'b0;
    m_raddr = pm_addr;
    m_we    = 1'b0;
    m_waddr = pm_addr;
    m_wdata = pm_wdata;
    if (st == S_IDLE) begin
      m_re = pm_re;
      m_we = pm_we;
    end else begin
      m_re    = (int'(idx) < P);
      m_raddr = idx[PAW-1:0];
      if (st == S_TRAIN && rd_pend) begin
        m_we    = 1'b1;
        m_waddr = rd_tag;
        for (int g = 0; g < VEC; g++) begin
          if (g < G)
            m_wdata[g] = sat16(acc_t'(m_rdata[g]) -
                               ((acc_t'(ta_q[rd_tag]) * acc_t'(te_q[g])) >>> (FRAC + int'(lrp_shift))));
          else
            m_wdata[g] = m_rdata[g];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      idx       <= '0;
      rd_pend   <= 1'b0;
      rd_tag    <= '0;
      dirty     <= 1'b1;
      prep_done <= 1'b0;
      for (int p = 0; p < P; p++) ta_q[p] <= '0;
      for (int g = 0; g < G; g++) te_q[g] <= '0;
    end else begin
      prep_done <= 1'b0;
      rd_pend   <= 1'b0;
      case (st)
        S_IDLE: begin
          if (pm_we) dirty <= 1'b1;
          if (prep_req) begin
            if (dirty) begin
              st  <= S_LOAD;
              idx <= '0;
            end else begin
              prep_done <= 1'b1;
            end
          end else if (t_valid) begin
            st   <= S_TRAIN;
            idx  <= '0;
            ta_q <= t_a;
            te_q <= t_err;
          end
        end
        S_LOAD: begin
          if (int'(idx) < P) begin
            rd_pend <= 1'b1;
            rd_tag  <= idx[PAW-1:0];
            idx     <= idx + 1'b1;
          end else if (!rd_pend) begin
            st        <= S_IDLE;
            dirty     <= 1'b0;
            prep_done <= 1'b1;
          end
        end
        S_TRAIN: begin
          // one read, then its write-back, per row
          if (rd_pend) begin
            if (int'(idx) >= P) begin
              st    <= S_IDLE;
              dirty <= 1'b1;
            end
          end else if (int'(idx) < P) begin
            rd_pend <= 1'b1;
            rd_tag  <= idx[PAW-1:0];
            idx     <= idx + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
