// threshold_layer: a fully connected layer of N_OUT Threshold Neurons.
//
// Every neuron n sees the whole input vector x[0..N_IN-1] and has its own
// threshold row thr[n], bias[n] and polarity[n]:
//   y[n] = sign(polarity[n]) * sum_i T(x[i], thr[n][i]) + bias[n]
// saturated to DATA_W bits. All neurons work in parallel; each is a 1 x N_IN
// threshold_kernel, so the layer is made only of copies of the one neuron
// circuit. y and out_valid follow in_valid by one clock cycle, one vector per
// cycle, no back-pressure. sat[n] reports that neuron n clipped its result.
//
// The layer notation (N_IN inputs per neuron, N_OUT neurons; defaults are the
// first layer of the paper's 4-layer network, 3 inputs and 5 neurons) follows
// the paper. Full connectivity and the single register stage are this
// design's choices.
module threshold_layer
  import tn_pkg::*;
#(
  parameter int unsigned N_IN   = 3,
  parameter int unsigned N_OUT  = 5,
  parameter int unsigned DATA_W = TN_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x        [N_IN],
  input  logic signed [DATA_W-1:0] thr      [N_OUT][N_IN],
  input  logic signed [DATA_W-1:0] bias     [N_OUT],
  input  logic        [N_OUT-1:0]  polarity,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y        [N_OUT],
  output logic        [N_OUT-1:0]  sat
);

  logic signed [DATA_W-1:0] x_win [1][N_IN];
  logic [N_OUT-1:0]         valid_n;

  always_comb begin
    for (int i = 0; i < N_IN; i++) x_win[0][i] = x[i];
  end

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    logic signed [DATA_W-1:0] thr_win [1][N_IN];

    always_comb begin
      for (int i = 0; i < N_IN; i++) thr_win[0][i] = thr[n][i];
    end

    threshold_kernel #(
      .KH    (1),
      .KW    (N_IN),
      .DATA_W(DATA_W)
    ) u_kernel (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .win      (x_win),
      .thr      (thr_win),
      .bias     (bias[n]),
      .polarity (polarity_e'(polarity[n])),
      .out_valid(valid_n[n]),
      .y        (y[n]),
      .sat      (sat[n])
    );
  end

  // All neurons share in_valid, so their valid flags are identical.
  assign out_valid = valid_n[0];

  always_ff @(posedge clk) begin
    if (rst_n) assert (valid_n == '0 || valid_n == '1)
      else $error("threshold_layer: neuron valid flags disagree");
  end

endmodule
