// tensor_reorg: tensor reorganization in front of the gradient predictor.
//
// A layer's outputs (batch B x channels C x positions S) are reorganized as
// the paper describes: they are averaged over the batch, and every output
// channel becomes one sample for the predictor, whose input is that
// channel's S positions reduced by average pooling to P values. The paper
// gives the averaging over the batch and the channel-as-sample view and
// says pooling layers bring the map to the predictor's input size; the
// streaming organisation, power-of-two batch and pooling sizes, and this
// interface are this design's choices.
//
// Interface: start clears the accumulators and takes the sizes. Output
// vectors of the layer arrive one per cycle with in_valid, in the order
// n = b*S + s (S = 2^log2_s), one lane per channel. acc[p][c] sums
// position s into p = s >> log2_pool (positions with p >= P are dropped).
// After the last input, flush starts the read-out: for c = 0 .. c_len-1
// one vector a_c (P lanes, a_c[p] = acc[p][c] / (B * 2^log2_pool)) is
// offered with out_valid/out_ready, tagged with out_c; done pulses after
// the last one. The result is ready the cycle after the last input, so the
// reorganization adds one cycle per channel after the layer's forward pass.
module tensor_reorg
  import ada_gp_pkg::*;
#(
  parameter int CH = 15,
  parameter int P  = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [4:0] c_len,
  input  logic [3:0] log2_s,
  input  logic [2:0] log2_b,
  input  logic [3:0] log2_pool,
  input  logic       in_valid,
  input  data_t      in_vec [CH],
  input  logic       flush,
  output logic       out_valid,
  input  logic       out_ready,
  output logic [4:0] out_c,
  output data_t      out_vec [P],
  output logic       done
);
  acc_t        acc [P][CH];
  logic [15:0] s_cnt;
  logic [15:0] p_idx;
  logic        draining;
  logic [4:0]  c_q;
  logic [3:0]  lg_s_q, lg_pool_q;
  logic [2:0]  lg_b_q;
  logic [4:0]  sh;

  assign p_idx = s_cnt >> lg_pool_q;
  assign sh    = 5'(lg_b_q) + 5'(lg_pool_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++)
        for (int c = 0; c < CH; c++) acc[p][c] <= '0;
      s_cnt     <= '0;
      draining  <= 1'b0;
      out_c     <= '0;
      c_q       <= '0;
      lg_s_q    <= '0;
      lg_b_q    <= '0;
      lg_pool_q <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int p = 0; p < P; p++)
          for (int c = 0; c < CH; c++) acc[p][c] <= '0;
        s_cnt     <= '0;
        draining  <= 1'b0;
        out_c     <= '0;
        c_q       <= c_len;
        lg_s_q    <= log2_s;
        lg_b_q    <= log2_b;
        lg_pool_q <= log2_pool;
      end else begin
        if (in_valid) begin
          if (int'(p_idx) < P)
            for (int c = 0; c < CH; c++)
              acc[p_idx[$clog2(P)-1:0]][c] <= acc[p_idx[$clog2(P)-1:0]][c] + acc_t'(in_vec[c]);
          if (s_cnt + 16'd1 >= (16'd1 << lg_s_q)) s_cnt <= '0;
          else                                    s_cnt <= s_cnt + 16'd1;
        end
        if (flush && c_q != 0) begin
          draining <= 1'b1;
          out_c    <= '0;
        end else if (draining && out_ready) begin
          if (out_c + 5'd1 >= c_q) begin
            draining <= 1'b0;
            done     <= 1'b1;
          end
          out_c <= out_c + 5'd1;
        end
      end
    end
  end

  assign out_valid = draining;
  always_comb begin
    for (int p = 0; p < P; p++) begin
      out_vec[p] = '0;
      for (int c = 0; c < CH; c++)
        if (5'(c) == out_c) out_vec[p] = sat16(acc[p][c] >>> sh);
    end
  end
endmodule
