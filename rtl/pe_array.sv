// pe_array: weight-stationary systolic array of ROWS x COLS PEs.
//
// PE (r,c) holds the weight W[r][c]. An input vector x (ROWS lanes) enters
// with x_valid; lane r is delayed r cycles so that it meets the partial sum
// travelling down column c, and the inputs move one PE to the right per
// cycle. Column c therefore produces y[c] = sum_r W[r][c] * x[r] at its
// bottom, and the columns are re-aligned so that the whole output vector
// (COLS lanes, full-precision accumulators) leaves together with y_valid
// exactly LAT = ROWS + COLS cycles after the input was taken. One vector can
// enter every cycle.
//
// The paper gives the PE count (180) and the weight-stationary dataflow in
// which inputs are sent across the array and partial sums are reduced
// spatially; the 12 x 15 shape, the skew registers and the load ports are
// this design's choices. Weights are loaded a row at a time (w_row_we) or a
// column at a time (w_col_we), which lets the sequencer place a matrix
// either way round; w_clr zeroes every weight.
module pe_array
  import ada_gp_pkg::*;
#(
  parameter int ROWS = 12,
  parameter int COLS = 15
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_clr,
  input  logic  w_row_we,
  input  logic [$clog2(ROWS)-1:0] w_row_sel,
  input  data_t w_row_vec [COLS],
  input  logic  w_col_we,
  input  logic [$clog2(COLS)-1:0] w_col_sel,
  input  data_t w_col_vec [ROWS],
  input  logic  x_valid,
  input  data_t x_vec [ROWS],
  output logic  y_valid,
  output acc_t  y_vec [COLS]
);
  localparam int LAT = ROWS + COLS;

  data_t x_h [ROWS][COLS+1];   // horizontal input wires
  acc_t  p_v [ROWS+1][COLS];   // vertical partial-sum wires
  logic [LAT-1:0] vld_sr;

  // Input skew: lane r passes through r registers.
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_none
      assign x_h[r][0] = x_vec[r];
    end else begin : g_dly
      data_t sk [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) sk[i] <= '0;
        end else begin
          sk[0] <= x_vec[r];
          for (int i = 1; i < r; i++) sk[i] <= sk[i-1];
        end
      end
      assign x_h[r][0] = sk[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign p_v[0][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic we;
      data_t win;
      assign we  = (w_row_we && w_row_sel == r) || (w_col_we && w_col_sel == c);
      assign win = (w_row_we && w_row_sel == r) ? w_row_vec[c] : w_col_vec[r];
      pe u_pe (
        .clk, .rst_n,
        .w_we    (we),
        .w_clr   (w_clr),
        .w_in    (win),
        .x_in    (x_h[r][c]),
        .psum_in (p_v[r][c]),
        .x_out   (x_h[r][c+1]),
        .psum_out(p_v[r+1][c])
      );
    end
  end

  // Output de-skew: column c waits COLS-1-c more cycles.
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int D = COLS - 1 - c;
    if (D == 0) begin : g_none
      assign y_vec[c] = p_v[ROWS][c];
    end else begin : g_dly
      acc_t dk [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < D; i++) dk[i] <= '0;
        end else begin
          dk[0] <= p_v[ROWS][c];
          for (int i = 1; i < D; i++) dk[i] <= dk[i-1];
        end
      end
      assign y_vec[c] = dk[D-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LAT-2:0], x_valid};
  end
  assign y_valid = vld_sr[LAT-1];

endmodule
