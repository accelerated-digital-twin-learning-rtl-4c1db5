// loss_unit: running reconstruction loss of one model-recovery pass.
//
// For every sample that leaves the GRU flow layer it adds
//   sum over measured states i of (pred[i] - meas[i])^2
// to a 48-bit accumulator. Each square is formed exactly at 34 bits and shifted
// right by 12, so the sum has the Q.12 scale of the data (4096 = 1.0).
// mask[i] = 0 leaves state i out, for twins in which only some states are
// measured (in the insulin twin only blood glucose is).
//
// Interface: clear zeroes the sum; in_valid & en adds one sample; loss is the
// current sum.
// Timing: the sum includes a sample one cycle after it is presented; clear has
// priority over accumulation.
// That a loss is computed in the pipeline follows the source; the squared-error
// form, the mask and the widths are this design's choices.
module loss_unit
  import mr_pkg::*;
#(
  parameter int unsigned N     = N_STATE,
  parameter int unsigned ACC_W = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en,
  input  logic             in_valid,
  input  fx_t              pred [N],
  input  fx_t              meas [N],
  input  logic [N-1:0]     mask,
  output logic [ACC_W-1:0] loss
);

  logic [ACC_W-1:0] term;

  always_comb begin
    term = '0;
    for (int i = 0; i < N; i++) begin
      logic signed [16:0] d;
      logic        [33:0] sq;
      d  = 17'(pred[i]) - 17'(meas[i]);
      sq = 34'(unsigned'(34'(d * d)));
      if (mask[i]) term += ACC_W'(sq >> FX_FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                loss <= '0;
    else if (clear)            loss <= '0;
    else if (en && in_valid)   loss <= loss + term;
  end

endmodule
