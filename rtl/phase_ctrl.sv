// phase_ctrl: adaptive scheduler of the ADA-GP training phases.
//
// Training starts with warmup_epochs epochs of Warm Up (ordinary
// backpropagation while the predictor learns). After that each epoch is
// split into repeating groups of k batches of Phase GP (predicted gradients,
// no backpropagation) followed by m batches of Phase BP (backpropagation,
// predictor trained). As in the paper's heuristic, k:m is 4:1 for the first
// 4 epochs after Warm Up, 3:1 for the next 4, 2:1 for the next 4 and 1:1
// from then on (m = 1 throughout). The ratio table and the epochs per step
// are parameters with the paper's numbers as defaults.
//
// This design's choices: the host marks the end of every batch with a
// one-cycle batch_done pulse and sets batches_per_epoch; the GP/BP group
// restarts with Phase GP at every epoch boundary; the phase output changes on
// the clock edge that takes batch_done, i.e. it is valid for the next batch.
module phase_ctrl
  import ada_gp_pkg::*;
#(
  parameter int EPOCHS_PER_STEP = 4,
  parameter int NSTEPS          = 4,
  parameter int K_TABLE [NSTEPS] = '{4, 3, 2, 1},
  parameter int M_BATCHES       = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  warmup_epochs,
  input  logic [15:0] batches_per_epoch,
  input  logic        batch_done,
  output phase_e      phase,
  output logic [15:0] epoch,
  output logic [3:0]  k_cur,
  output logic [3:0]  m_cur,
  output logic [31:0] gp_batches,
  output logic [31:0] bp_batches
);
  logic [15:0] batch_in_epoch;
  logic [7:0]  pos;          // position inside the current GP/BP group
  logic [15:0] post;         // epochs since Warm Up ended
  logic        warm;

  assign warm = (epoch < 16'(warmup_epochs));
  assign post = epoch - 16'(warmup_epochs);

  always_comb begin
    k_cur = 4'(K_TABLE[NSTEPS-1]);
    for (int s = NSTEPS - 1; s >= 0; s--)
      if (!warm && int'(post) < (s + 1) * EPOCHS_PER_STEP) k_cur = 4'(K_TABLE[s]);
    m_cur = 4'(M_BATCHES);
  end

  always_comb begin
    if (warm)                  phase = PH_WARMUP;
    else if (pos < 8'(k_cur))  phase = PH_GP;
    else                       phase = PH_BP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      epoch          <= '0;
      batch_in_epoch <= '0;
      pos            <= '0;
      gp_batches     <= '0;
      bp_batches     <= '0;
    end else if (batch_done) begin
      if (phase == PH_GP) gp_batches <= gp_batches + 1;
      else                bp_batches <= bp_batches + 1;
      if (batch_in_epoch + 16'd1 >= batches_per_epoch) begin
        batch_in_epoch <= '0;
        epoch          <= epoch + 16'd1;
        pos            <= '0;
      end else begin
        batch_in_epoch <= batch_in_epoch + 16'd1;
        if (warm || pos + 8'd1 >= 8'(k_cur) + 8'(m_cur)) pos <= '0;
        else                                             pos <= pos + 8'd1;
      end
    end
  end
endmodule
