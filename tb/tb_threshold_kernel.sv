// tb_threshold_kernel: self-checking test of the registered threshold kernel.
//
// Runs the default 5x5 kernel and 1x1 and 3x3 instances side by side with the
// same random stream. Each cycle in_valid is random (bubbles included); the
// expected output of every accepted window is queued and compared when
// out_valid rises, and the latency is checked to be exactly one cycle. A 3x3
// kernel embedded in the 5x5 one (outer thresholds at +127, so they never
// fire) must give the same result as the 3x3 instance. Reset must clear
// out_valid.
module tb_threshold_kernel;
  import tn_pkg::*;
  import tn_ref_pkg::*;

  int checks = 0, failures = 0;
  int cycle = 0;

  logic clk = 0, rst_n = 0, vin = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic signed [7:0] win5 [5][5], thr5 [5][5], b5;
  logic signed [7:0] win3 [3][3], thr3 [3][3], b3;
  logic signed [7:0] win1 [1][1], thr1 [1][1], b1;
  polarity_e p5, p3, p1;
  logic v5, v3, v1, s5, s3, s1;
  logic signed [7:0] y5, y3, y1;

  threshold_kernel dut5 (.clk, .rst_n, .in_valid(vin), .win(win5), .thr(thr5), .bias(b5),
                         .polarity(p5), .out_valid(v5), .y(y5), .sat(s5));
  threshold_kernel #(.KH(3), .KW(3)) dut3 (.clk, .rst_n, .in_valid(vin), .win(win3), .thr(thr3),
                         .bias(b3), .polarity(p3), .out_valid(v3), .y(y3), .sat(s3));
  threshold_kernel #(.KH(1), .KW(1)) dut1 (.clk, .rst_n, .in_valid(vin), .win(win1), .thr(thr1),
                         .bias(b1), .polarity(p1), .out_valid(v1), .y(y1), .sat(s1));

  typedef struct { int y5, y3, y1; bit s5, s3, s1; int t; } exp_t;
  exp_t q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(bit embed);
    int x5[] = new[25], w5[] = new[25], x3[] = new[9], w3[] = new[9], x1[] = new[1], w1[] = new[1];
    exp_t e;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
      win3[i][j] = 8'(rnd8()); thr3[i][j] = 8'(rnd8() / 2);
    end
    b3 = 8'(rnd8() / 4); p3 = polarity_e'($urandom_range(1));
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
      if (embed && i >= 1 && i <= 3 && j >= 1 && j <= 3) begin
        win5[i][j] = win3[i-1][j-1]; thr5[i][j] = thr3[i-1][j-1];
      end else if (embed) begin
        win5[i][j] = 8'(rnd8()); thr5[i][j] = 8'sd127;
      end else begin
        win5[i][j] = 8'(rnd8()); thr5[i][j] = 8'(rnd8() / 2);
      end
    end
    b5 = embed ? b3 : 8'(rnd8() / 4); p5 = embed ? p3 : polarity_e'($urandom_range(1));
    win1[0][0] = 8'(rnd8()); thr1[0][0] = 8'(rnd8()); b1 = 8'(rnd8()); p1 = polarity_e'($urandom_range(1));
    for (int i = 0; i < 25; i++) begin x5[i] = int'(win5[i/5][i%5]); w5[i] = int'(thr5[i/5][i%5]); end
    for (int i = 0; i < 9; i++)  begin x3[i] = int'(win3[i/3][i%3]); w3[i] = int'(thr3[i/3][i%3]); end
    x1[0] = int'(win1[0][0]); w1[0] = int'(thr1[0][0]);
    e.y5 = ref_neuron(x5, w5, int'(b5), p5 == POL_NEG, 8); e.s5 = ref_sat(x5, w5, int'(b5), p5 == POL_NEG, 8);
    e.y3 = ref_neuron(x3, w3, int'(b3), p3 == POL_NEG, 8); e.s3 = ref_sat(x3, w3, int'(b3), p3 == POL_NEG, 8);
    e.y1 = ref_neuron(x1, w1, int'(b1), p1 == POL_NEG, 8); e.s1 = ref_sat(x1, w1, int'(b1), p1 == POL_NEG, 8);
    e.t  = cycle;
    if (embed && e.y5 != e.y3) begin failures++; $display("FAIL model embed mismatch"); end
    q.push_back(e);
  endtask

  // Output checker.
  always @(posedge clk) begin
    #1;
    if (rst_n && (v5 || v3 || v1)) begin
      exp_t e;
      checks++;
      if (!(v5 && v3 && v1) || q.size() == 0) begin
        failures++; $display("FAIL valid mismatch %b%b%b q=%0d", v5, v3, v1, q.size());
      end else begin
        e = q.pop_front();
        if (int'(y5) != e.y5 || int'(y3) != e.y3 || int'(y1) != e.y1 ||
            s5 != e.s5 || s3 != e.s3 || s1 != e.s1) begin
          failures++;
          $display("FAIL @%0d y5=%0d/%0d y3=%0d/%0d y1=%0d/%0d", cycle, y5, e.y5, y3, e.y3, y1, e.y1);
        end
        if (cycle - e.t != 1) begin
          failures++; $display("FAIL latency %0d", cycle - e.t);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #2 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      vin = ($urandom_range(3) != 0);
      if (vin) drive(t % 4 == 0);
    end
    @(negedge clk) vin = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    // Reset clears valid.
    @(negedge clk) begin vin = 1; drive(0); end
    @(negedge clk) begin rst_n = 0; vin = 0; q.delete(); end
    @(negedge clk);
    checks++;
    if (v5 || v3 || v1) begin failures++; $display("FAIL valid after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
