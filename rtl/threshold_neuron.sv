// threshold_neuron: one Threshold Neuron, the single circuit prototype from
// which every kernel and layer of the network is built.
//
// Function (combinational, no clock):
//   T(x_i, w_i) = x_i - w_i   if x_i > w_i, else 0        (threshold + subtract)
//   S           = sum_i T(x_i, w_i)
//   Y           = (+S or -S, chosen by polarity) + bias
// There is no multiplier and no activation function: the per-input threshold
// is the only non-linearity. The thresholds w_i are the learned weights.
//
// Interface: x, w are N_IN signed DATA_W-bit values; bias is signed DATA_W;
// polarity is POL_POS or POL_NEG. y is the result saturated to OUT_W signed
// bits; sat flags that clipping happened; fired[i] is 1 where x_i > w_i.
//
// The compare/subtract/sum/bias chain and the two polarities follow the paper.
// The number format (signed), the strict comparison for equal values, adding
// the bias after the sign is applied, and saturating the output so that the
// same neuron can feed the next layer are choices of this design.
module threshold_neuron
  import tn_pkg::*;
#(
  parameter int unsigned N_IN   = 3,
  parameter int unsigned DATA_W = TN_DATA_W,
  parameter int unsigned OUT_W  = DATA_W
) (
  input  logic signed [DATA_W-1:0] x    [N_IN],
  input  logic signed [DATA_W-1:0] w    [N_IN],
  input  logic signed [DATA_W-1:0] bias,
  input  polarity_e                polarity,
  output logic signed [OUT_W-1:0]  y,
  output logic        [N_IN-1:0]   fired,
  output logic                     sat
);

  // x - w spans -(2^DATA_W - 1) .. 2^DATA_W - 1; a passed term is positive and
  // fits DATA_W unsigned bits. The sum of N_IN terms, its sign and the bias
  // need DATA_W + clog2(N_IN+1) + 2 signed bits; the accumulator is also kept
  // at least one bit wider than the output so the clip limits are exact.
  localparam int unsigned DIFF_W = DATA_W + 1;
  localparam int unsigned SUM_W  = DATA_W + $clog2(N_IN + 1) + 2;
  localparam int unsigned ACC_W  = (SUM_W > OUT_W) ? SUM_W : OUT_W + 1;

  localparam logic signed [ACC_W-1:0] OUT_MAX = ACC_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] OUT_MIN = -ACC_W'(1 << (OUT_W - 1));

  logic signed [DIFF_W-1:0] diff [N_IN];
  logic signed [ACC_W-1:0]  sum;
  logic signed [ACC_W-1:0]  acc;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N_IN; i++) begin
      diff[i]  = DIFF_W'(x[i]) - DIFF_W'(w[i]);
      fired[i] = (x[i] > w[i]);
      if (fired[i]) sum += ACC_W'(diff[i]);
    end
    acc = (polarity == POL_NEG) ? -sum : sum;
    acc += ACC_W'(bias);
  end

  always_comb begin
    sat = 1'b0;
    if (acc > OUT_MAX) begin
      y   = OUT_MAX[OUT_W-1:0];
      sat = 1'b1;
    end else if (acc < OUT_MIN) begin
      y   = OUT_MIN[OUT_W-1:0];
      sat = 1'b1;
    end else begin
      y   = acc[OUT_W-1:0];
    end
  end

endmodule
