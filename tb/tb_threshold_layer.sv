// tb_threshold_layer: self-checking test of a fully connected threshold layer.
//
// Drives the default layer (3 inputs, 5 neurons) and a 5-input, 3-neuron layer
// with random vectors, thresholds, biases and polarities, with random bubbles
// in in_valid. Thresholds change together with the inputs, as when the
// weights are reprogrammed between samples. Every output vector is compared
// neuron by neuron with tn_ref_pkg, and its latency must be one cycle.
module tb_threshold_layer;
  import tn_pkg::*;
  import tn_ref_pkg::*;

  int checks = 0, failures = 0;
  int cycle = 0;

  logic clk = 0, rst_n = 0, vin = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic signed [7:0] xa [3], ta [5][3], ba [5], ya [5];
  logic [4:0] pa, sa;
  logic va;
  logic signed [7:0] xb [5], tb_ [3][5], bb [3], yb [3];
  logic [2:0] pb, sb;
  logic vb;

  threshold_layer dut_a (.clk, .rst_n, .in_valid(vin), .x(xa), .thr(ta), .bias(ba), .polarity(pa),
                         .out_valid(va), .y(ya), .sat(sa));
  threshold_layer #(.N_IN(5), .N_OUT(3)) dut_b (.clk, .rst_n, .in_valid(vin), .x(xb), .thr(tb_),
                         .bias(bb), .polarity(pb), .out_valid(vb), .y(yb), .sat(sb));

  typedef struct { int ya[5]; bit sa[5]; int yb[3]; bit sb[3]; int t; } exp_t;
  exp_t q[$];
  int n_pos = 0, n_neg = 0, n_sat = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive();
    exp_t e;
    int xi3[] = new[3], xi5[] = new[5], wi3[] = new[3], wi5[] = new[5];
    foreach (xa[i]) begin xa[i] = 8'(rnd8()); xi3[i] = int'(xa[i]); end
    foreach (xb[i]) begin xb[i] = 8'(rnd8()); xi5[i] = int'(xb[i]); end
    for (int n = 0; n < 5; n++) begin
      for (int i = 0; i < 3; i++) begin ta[n][i] = 8'(rnd8() / 2); wi3[i] = int'(ta[n][i]); end
      ba[n] = 8'(rnd8() / 4); pa[n] = 1'($urandom_range(1));
      e.ya[n] = ref_neuron(xi3, wi3, int'(ba[n]), pa[n], 8);
      e.sa[n] = ref_sat(xi3, wi3, int'(ba[n]), pa[n], 8);
      if (pa[n]) n_neg++; else n_pos++;
      if (e.sa[n]) n_sat++;
    end
    for (int n = 0; n < 3; n++) begin
      for (int i = 0; i < 5; i++) begin tb_[n][i] = 8'(rnd8() / 2); wi5[i] = int'(tb_[n][i]); end
      bb[n] = 8'(rnd8() / 4); pb[n] = 1'($urandom_range(1));
      e.yb[n] = ref_neuron(xi5, wi5, int'(bb[n]), pb[n], 8);
      e.sb[n] = ref_sat(xi5, wi5, int'(bb[n]), pb[n], 8);
    end
    e.t = cycle;
    q.push_back(e);
  endtask

  always @(posedge clk) begin
    #1;
    if (rst_n && (va || vb)) begin
      exp_t e;
      checks++;
      if (!(va && vb) || q.size() == 0) begin
        failures++; $display("FAIL valid %b%b q=%0d", va, vb, q.size());
      end else begin
        e = q.pop_front();
        for (int n = 0; n < 5; n++) if (int'(ya[n]) != e.ya[n] || sa[n] != e.sa[n]) begin
          failures++; $display("FAIL A n=%0d y=%0d exp %0d", n, ya[n], e.ya[n]);
        end
        for (int n = 0; n < 3; n++) if (int'(yb[n]) != e.yb[n] || sb[n] != e.sb[n]) begin
          failures++; $display("FAIL B n=%0d y=%0d exp %0d", n, yb[n], e.yb[n]);
        end
        if (cycle - e.t != 1) begin failures++; $display("FAIL latency %0d", cycle - e.t); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      vin = ($urandom_range(4) != 0);
      if (vin) drive();
    end
    @(negedge clk) vin = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_pos == 0 || n_neg == 0 || n_sat == 0) begin
      failures++; $display("FAIL coverage q=%0d pos=%0d neg=%0d sat=%0d", q.size(), n_pos, n_neg, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
