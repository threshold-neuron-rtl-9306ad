// tb_threshold_neuron: self-checking test of the combinational Threshold Neuron.
//
// Two instances: the default 3-input, 8-bit-output neuron, and a 25-input
// neuron with a 16-bit output (wide enough never to saturate) to check the
// full-precision sum. Directed cases cover: all inputs below threshold (output
// equals bias), equality (no fire), both polarities, positive and negative
// saturation. Then random vectors. Every output is compared with tn_ref_pkg.
module tb_threshold_neuron;
  import tn_pkg::*;
  import tn_ref_pkg::*;

  int checks = 0, failures = 0;

  logic signed [7:0] xa [3], wa [3], ba;
  polarity_e         pa;
  logic signed [7:0] ya;
  logic [2:0]        fa;
  logic              sa;

  logic signed [7:0]  xb [25], wb [25], bb;
  polarity_e          pb;
  logic signed [15:0] yb;
  logic [24:0]        fb;
  logic               sb;

  threshold_neuron dut_a (.x(xa), .w(wa), .bias(ba), .polarity(pa), .y(ya), .fired(fa), .sat(sa));
  threshold_neuron #(.N_IN(25), .DATA_W(8), .OUT_W(16)) dut_b (
    .x(xb), .w(wb), .bias(bb), .polarity(pb), .y(yb), .fired(fb), .sat(sb));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a(string tag);
    int xi[] = new[3];
    int wi[] = new[3];
    int e;
    bit es;
    logic [2:0] ef;
    #1;
    foreach (xi[i]) begin xi[i] = int'(xa[i]); wi[i] = int'(wa[i]); ef[i] = xi[i] > wi[i]; end
    e  = ref_neuron(xi, wi, int'(ba), pa == POL_NEG, 8);
    es = ref_sat(xi, wi, int'(ba), pa == POL_NEG, 8);
    checks++;
    if (int'(ya) != e || sa != es || fa != ef) begin
      failures++;
      $display("FAIL %s: y=%0d exp %0d sat=%0b exp %0b fired=%b exp %b", tag, ya, e, sa, es, fa, ef);
    end
  endtask

  task automatic check_b(string tag);
    int xi[] = new[25];
    int wi[] = new[25];
    int e;
    #1;
    foreach (xi[i]) begin xi[i] = int'(xb[i]); wi[i] = int'(wb[i]); end
    e = ref_neuron(xi, wi, int'(bb), pb == POL_NEG, 16);
    checks++;
    if (int'(yb) != e || sb) begin
      failures++;
      $display("FAIL %s: y=%0d exp %0d sat=%0b", tag, yb, e, sb);
    end
  endtask

  initial begin
    // All below threshold: output is the bias.
    xa = '{-5, 0, 10}; wa = '{0, 0, 20}; ba = 8'sd17; pa = POL_POS; check_a("below");
    pa = POL_NEG; check_a("below_neg");
    // Equality does not fire.
    xa = '{7, 7, 7}; wa = '{7, 7, 7}; ba = -8'sd3; check_a("equal");
    // Simple pass, both polarities: (10-2)+(5-(-5)) = 18.
    xa = '{10, 5, -100}; wa = '{2, -5, 0}; ba = 8'sd1; pa = POL_POS; check_a("pos");
    if (ya != 8'sd19) begin failures++; $display("FAIL pos literal %0d", ya); end
    checks++;
    pa = POL_NEG; check_a("neg");
    if (ya != -8'sd17) begin failures++; $display("FAIL neg literal %0d", ya); end
    checks++;
    // Saturation high and low.
    xa = '{127, 127, 127}; wa = '{-128, -128, -128}; ba = 8'sd0; pa = POL_POS; check_a("sat_hi");
    if (ya != 8'sd127 || !sa) begin failures++; $display("FAIL sat_hi literal"); end
    checks++;
    pa = POL_NEG; check_a("sat_lo");
    if (ya != -8'sd128 || !sa) begin failures++; $display("FAIL sat_lo literal"); end
    checks++;
    // Random.
    for (int t = 0; t < 2000; t++) begin
      foreach (xa[i]) begin xa[i] = 8'(rnd8()); wa[i] = 8'(rnd8() / ((t % 3) + 1)); end
      ba = 8'(rnd8());
      pa = polarity_e'($urandom_range(1));
      check_a("rand_a");
    end
    for (int t = 0; t < 2000; t++) begin
      foreach (xb[i]) begin xb[i] = 8'(rnd8()); wb[i] = 8'(rnd8()); end
      bb = 8'(rnd8());
      pb = polarity_e'($urandom_range(1));
      check_b("rand_b");
    end
    // Extreme 25-input case: largest sum 25*255 + 127 fits 16 bits.
    foreach (xb[i]) begin xb[i] = 8'sd127; wb[i] = -8'sd128; end
    bb = 8'sd127; pb = POL_POS; check_b("max_b");
    pb = POL_NEG; bb = -8'sd128; check_b("min_b");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
