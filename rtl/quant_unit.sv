// quant_unit: turns 16 engine sums into 16 8-bit activations.
//
// Every compute engine ends in one of these.  For each lane c:
//   y = sum[c] * scale[c] + bias[c]      (per-channel, batch norm folded in)
//   y = max(y, 0)                        when relu is set
//   q[c] = (y >>> shift)[7:0]            lower 8 bits, no saturation
// The multiply, the add and the "lower 8 bits" result are the paper's; the
// ReLU position, the layer-wise arithmetic shift (shift = 0 gives the plain
// multiply-add) and the 16-bit scale / 32-bit bias widths are this design's
// choices.  The unit is combinational; the engines register its result when
// they write it to their output FIFO.
module quant_unit
  import codenet_pkg::*;
#(
  parameter int NLANES = LANES
) (
  input  sum_t    [NLANES-1:0] sum,
  input  qparam_t [NLANES-1:0] qp,
  input  logic    [4:0]        shift,
  input  logic                 relu,
  output act_t    [NLANES-1:0] q
);
  localparam int Y_W = SUM_W + SCALE_W + 1;  // product plus bias, 33 bits

  always_comb begin
    for (int c = 0; c < NLANES; c++) begin
      logic signed [Y_W-1:0] y;
      y = Y_W'(sum[c] * qp[c].scale) + Y_W'(qp[c].bias);
      if (relu && y < 0) y = '0;
      y = y >>> shift;
      q[c] = y[ACT_W-1:0];
    end
  end

endmodule
