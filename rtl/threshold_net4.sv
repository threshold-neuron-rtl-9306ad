// threshold_net4: the four-layer Threshold-Net used for the FPGA prototype,
// N3(5) - N5(3) - N3(1) - N1(1).
//
//   x[3] -> layer 1: 5 neurons x 3 inputs -> layer 2: 3 neurons x 5 inputs
//        -> layer 3: 1 neuron  x 3 inputs -> layer 4: 1 neuron  x 1 input -> y
//
// Layers are chained directly: there is no normalization, no activation
// function and no pooling between them, since each Threshold Neuron is already
// non-linear. Every layer is a threshold_layer, itself made only of copies of
// the one threshold_neuron circuit.
//
// All thresholds, biases and polarities are input ports, so a trained network
// is loaded by driving them (held steady while samples flow). One sample can
// enter per clock; y and out_valid follow in_valid by exactly 4 cycles (one
// register per layer). sat_any is high when some neuron clipped its result for
// the sample currently at the output.
//
// The layer sizes and the parameters-as-ports arrangement follow the paper;
// the pipelining, the 8-bit signed saturating datapath and the reset are this
// design's choices. The board-side interface that feeds inputs and weights is
// not part of this module.
module threshold_net4
  import tn_pkg::*;
#(
  parameter int unsigned DATA_W = TN_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x     [3],
  input  logic signed [DATA_W-1:0] thr1  [5][3],
  input  logic signed [DATA_W-1:0] bias1 [5],
  input  logic        [4:0]        pol1,
  input  logic signed [DATA_W-1:0] thr2  [3][5],
  input  logic signed [DATA_W-1:0] bias2 [3],
  input  logic        [2:0]        pol2,
  input  logic signed [DATA_W-1:0] thr3  [1][3],
  input  logic signed [DATA_W-1:0] bias3 [1],
  input  logic        [0:0]        pol3,
  input  logic signed [DATA_W-1:0] thr4  [1][1],
  input  logic signed [DATA_W-1:0] bias4 [1],
  input  logic        [0:0]        pol4,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat_any
);

  logic                     v1, v2, v3, v4;
  logic signed [DATA_W-1:0] a1 [5];
  logic signed [DATA_W-1:0] a2 [3];
  logic signed [DATA_W-1:0] a3 [1];
  logic signed [DATA_W-1:0] a4 [1];
  logic [4:0]               s1;
  logic [2:0]               s2;
  logic [0:0]               s3, s4;

  // Saturation flags travel with their sample down the pipeline.
  logic                     sat_p2, sat_p3, sat_p4;

  threshold_layer #(.N_IN(3), .N_OUT(5), .DATA_W(DATA_W)) u_l1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .thr(thr1), .bias(bias1), .polarity(pol1),
    .out_valid(v1), .y(a1), .sat(s1)
  );

  threshold_layer #(.N_IN(5), .N_OUT(3), .DATA_W(DATA_W)) u_l2 (
    .clk(clk), .rst_n(rst_n), .in_valid(v1), .x(a1),
    .thr(thr2), .bias(bias2), .polarity(pol2),
    .out_valid(v2), .y(a2), .sat(s2)
  );

  threshold_layer #(.N_IN(3), .N_OUT(1), .DATA_W(DATA_W)) u_l3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v2), .x(a2),
    .thr(thr3), .bias(bias3), .polarity(pol3),
    .out_valid(v3), .y(a3), .sat(s3)
  );

  threshold_layer #(.N_IN(1), .N_OUT(1), .DATA_W(DATA_W)) u_l4 (
    .clk(clk), .rst_n(rst_n), .in_valid(v3), .x(a3),
    .thr(thr4), .bias(bias4), .polarity(pol4),
    .out_valid(v4), .y(a4), .sat(s4)
  );

  // Stage k+1 registers the OR of the earlier flags on the same edge as layer
  // k+1 registers its result, so flags and data stay aligned.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sat_p2 <= 1'b0;
      sat_p3 <= 1'b0;
      sat_p4 <= 1'b0;
    end else begin
      if (v1) sat_p2 <= |s1;
      if (v2) sat_p3 <= sat_p2 | (|s2);
      if (v3) sat_p4 <= sat_p3 | s3[0];
    end
  end

  assign out_valid = v4;
  assign y         = a4[0];
  assign sat_any   = sat_p4 | s4[0];

endmodule
