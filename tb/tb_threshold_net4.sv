// tb_threshold_net4: end-to-end test of the four-layer network
// N3(5)-N5(3)-N3(1)-N1(1) at its default parameters.
//
// The weights (thresholds, biases, polarities) are reprogrammed 60 times,
// each time with the pipeline empty, and 200 samples stream through per
// weight set with random bubbles. A plain-integer model of the whole network
// gives the expected output of every sample; out_valid must follow in_valid
// by exactly 4 cycles and back-to-back samples must come out back-to-back.
// The test also counts, from the model, how often each mechanism of the
// network happened: an input above its threshold (fires) and one at or below
// it (blocked), positive and negative neurons, saturation at the top and at
// the bottom of the range, bubbles, back-to-back outputs, and weight
// reloads. A mechanism that never happened counts as a failure.
module tb_threshold_net4;
  import tn_pkg::*;
  import tn_ref_pkg::*;

  int checks = 0, failures = 0;
  int cycle = 0;

  logic clk = 0, rst_n = 0, vin = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic signed [7:0] x [3];
  logic signed [7:0] thr1 [5][3], bias1 [5];
  logic signed [7:0] thr2 [3][5], bias2 [3];
  logic signed [7:0] thr3 [1][3], bias3 [1];
  logic signed [7:0] thr4 [1][1], bias4 [1];
  logic [4:0] pol1;
  logic [2:0] pol2;
  logic [0:0] pol3, pol4;
  logic vout, sat_any;
  logic signed [7:0] y;

  threshold_net4 dut (
    .clk, .rst_n, .in_valid(vin), .x,
    .thr1, .bias1, .pol1, .thr2, .bias2, .pol2,
    .thr3, .bias3, .pol3, .thr4, .bias4, .pol4,
    .out_valid(vout), .y, .sat_any
  );

  // Mechanism counters.
  int n_fire = 0, n_block = 0, n_pos = 0, n_neg = 0, n_sat_hi = 0, n_sat_lo = 0;
  int n_bubble = 0, n_b2b = 0, n_reload = 0;
  bit last_vout = 0;

  typedef struct { int y; bit sat; int t; } exp_t;
  exp_t q[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One layer of the model; updates the counters.
  function automatic void model_layer(input int xin[], input int n_out, output int yo[],
                                      inout bit sat, input int w[][], input int b[], input bit p[]);
    int xi[] = new[xin.size()];
    int hi = 127, lo = -128;
    yo = new[n_out];
    for (int n = 0; n < n_out; n++) begin
      int s = 0, r;
      foreach (xin[i]) begin
        if (xin[i] > w[n][i]) begin s += xin[i] - w[n][i]; n_fire++; end
        else n_block++;
      end
      if (p[n]) n_neg++; else n_pos++;
      r = (p[n] ? -s : s) + b[n];
      if (r > hi) begin r = hi; sat = 1; n_sat_hi++; end
      if (r < lo) begin r = lo; sat = 1; n_sat_lo++; end
      yo[n] = r;
    end
  endfunction

  function automatic exp_t model();
    int a0[] = new[3], a1[], a2[], a3[], a4[];
    int w1[][] = new[5], w2[][] = new[3], w3[][] = new[1], w4[][] = new[1];
    int b1[] = new[5], b2[] = new[3], b3[] = new[1], b4[] = new[1];
    bit p1[] = new[5], p2[] = new[3], p3[] = new[1], p4[] = new[1];
    exp_t e;
    bit sat = 0;
    foreach (a0[i]) a0[i] = int'(x[i]);
    for (int n = 0; n < 5; n++) begin
      w1[n] = new[3]; foreach (w1[n][i]) w1[n][i] = int'(thr1[n][i]);
      b1[n] = int'(bias1[n]); p1[n] = pol1[n];
    end
    for (int n = 0; n < 3; n++) begin
      w2[n] = new[5]; foreach (w2[n][i]) w2[n][i] = int'(thr2[n][i]);
      b2[n] = int'(bias2[n]); p2[n] = pol2[n];
    end
    w3[0] = new[3]; foreach (w3[0][i]) w3[0][i] = int'(thr3[0][i]);
    b3[0] = int'(bias3[0]); p3[0] = pol3[0];
    w4[0] = new[1]; w4[0][0] = int'(thr4[0][0]);
    b4[0] = int'(bias4[0]); p4[0] = pol4[0];
    model_layer(a0, 5, a1, sat, w1, b1, p1);
    model_layer(a1, 3, a2, sat, w2, b2, p2);
    model_layer(a2, 1, a3, sat, w3, b3, p3);
    model_layer(a3, 1, a4, sat, w4, b4, p4);
    e.y = a4[0]; e.sat = sat; e.t = cycle;
    return e;
  endfunction

  task automatic load_weights(int scale);
    foreach (thr1[n, i]) thr1[n][i] = 8'(rnd8() / scale);
    foreach (thr2[n, i]) thr2[n][i] = 8'(rnd8() / scale);
    foreach (thr3[n, i]) thr3[n][i] = 8'(rnd8() / scale);
    thr4[0][0] = 8'(rnd8() / scale);
    foreach (bias1[n]) bias1[n] = 8'(rnd8() / 4);
    foreach (bias2[n]) bias2[n] = 8'(rnd8() / 4);
    bias3[0] = 8'(rnd8() / 4);
    bias4[0] = 8'(rnd8() / 4);
    pol1 = 5'($urandom); pol2 = 3'($urandom); pol3 = 1'($urandom); pol4 = 1'($urandom);
    n_reload++;
  endtask

  always @(posedge clk) begin
    #1;
    if (rst_n && vout) begin
      exp_t e;
      checks++;
      if (last_vout) n_b2b++;
      if (q.size() == 0) begin
        failures++; $display("FAIL unexpected out_valid @%0d", cycle);
      end else begin
        e = q.pop_front();
        if (int'(y) != e.y || sat_any != e.sat) begin
          failures++;
          $display("FAIL @%0d y=%0d exp %0d sat=%0b exp %0b", cycle, y, e.y, sat_any, e.sat);
        end
        if (cycle - e.t != 4) begin failures++; $display("FAIL latency %0d", cycle - e.t); end
      end
    end
    last_vout = rst_n && vout;
  end

  initial begin
    x = '{0, 0, 0};
    load_weights(1);
    n_reload = 0;
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    for (int set = 0; set < 60; set++) begin
      @(negedge clk);
      load_weights((set % 4) + 1);
      for (int t = 0; t < 200; t++) begin
        @(negedge clk);
        vin = ($urandom_range(5) != 0);
        if (!vin) n_bubble++;
        if (vin) begin
          foreach (x[i]) x[i] = 8'(rnd8());
          q.push_back(model());
        end
      end
      @(negedge clk) vin = 0;
      repeat (6) @(posedge clk);
      checks++;
      if (q.size() != 0) begin failures++; $display("FAIL %0d samples lost", q.size()); q.delete(); end
    end
    $display("mechanisms: fire=%0d block=%0d pos=%0d neg=%0d sat_hi=%0d sat_lo=%0d bubble=%0d b2b=%0d reload=%0d",
             n_fire, n_block, n_pos, n_neg, n_sat_hi, n_sat_lo, n_bubble, n_b2b, n_reload);
    checks++; if (n_fire   == 0) begin failures++; $display("FAIL never fired"); end
    checks++; if (n_block  == 0) begin failures++; $display("FAIL never blocked"); end
    checks++; if (n_pos    == 0) begin failures++; $display("FAIL no positive neuron"); end
    checks++; if (n_neg    == 0) begin failures++; $display("FAIL no negative neuron"); end
    checks++; if (n_sat_hi == 0) begin failures++; $display("FAIL never saturated high"); end
    checks++; if (n_sat_lo == 0) begin failures++; $display("FAIL never saturated low"); end
    checks++; if (n_bubble == 0) begin failures++; $display("FAIL no bubble"); end
    checks++; if (n_b2b    == 0) begin failures++; $display("FAIL no back-to-back outputs"); end
    checks++; if (n_reload == 0) begin failures++; $display("FAIL no weight reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
