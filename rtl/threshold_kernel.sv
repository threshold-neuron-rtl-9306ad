// threshold_kernel: a KH x KW threshold convolution kernel with one output
// register.
//
// Each cycle with in_valid high, the kernel applies one Threshold Neuron to a
// whole KH x KW input window 'win' against the threshold array 'thr':
//   y = sign(polarity) * sum_{i,j} T(win[i][j], thr[i][j]) + bias
// (see threshold_neuron for T), saturated to DATA_W bits. The result appears
// on y with out_valid exactly one cycle later; a new window can be accepted
// every cycle. There is no back-pressure.
//
// Kernel sizes 1x1, 3x3 and 5x5 are the ones the paper synthesised; 5x5 is the
// default. A smaller kernel can run on a larger one by setting the unused
// thresholds to the most positive value (the input can never exceed it, so
// those positions contribute 0).
//
// Building a kernel by reusing the single neuron circuit follows the paper.
// The single input channel, the whole-window-per-cycle interface, the output
// register and the synchronous active-low reset are this design's choices.
module threshold_kernel
  import tn_pkg::*;
#(
  parameter int unsigned KH     = 5,
  parameter int unsigned KW     = 5,
  parameter int unsigned DATA_W = TN_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] win  [KH][KW],
  input  logic signed [DATA_W-1:0] thr  [KH][KW],
  input  logic signed [DATA_W-1:0] bias,
  input  polarity_e                polarity,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat
);

  localparam int unsigned N = KH * KW;

  logic signed [DATA_W-1:0] x_flat [N];
  logic signed [DATA_W-1:0] w_flat [N];
  logic signed [DATA_W-1:0] y_comb;
  logic                     sat_comb;
  logic [N-1:0]             fired_unused;

  always_comb begin
    for (int i = 0; i < KH; i++) begin
      for (int j = 0; j < KW; j++) begin
        x_flat[i*KW + j] = win[i][j];
        w_flat[i*KW + j] = thr[i][j];
      end
    end
  end

  threshold_neuron #(
    .N_IN  (N),
    .DATA_W(DATA_W),
    .OUT_W (DATA_W)
  ) u_neuron (
    .x       (x_flat),
    .w       (w_flat),
    .bias    (bias),
    .polarity(polarity),
    .y       (y_comb),
    .fired   (fired_unused),
    .sat     (sat_comb)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y   <= y_comb;
        sat <= sat_comb;
      end
    end
  end

endmodule
