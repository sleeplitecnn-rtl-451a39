// tb_softmax4: feeds random and hand-picked Q8.8 logits to the softmax and
// checks the class index exactly (largest logit, first on a tie), each
// probability against exp(z_i) / sum exp(z_j) * 256 computed in reals to
// within 3 LSB (clipped to 255), and the latency 1 + 9*N clocks.
module tb_softmax4;
  localparam int N = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic signed [15:0] logits [N];
  logic [7:0] prob [N];
  logic [1:0] cls;

  softmax4 #(.N(N)) dut (.*);

  longint cyc = 0, t0, t1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (done) t1 = cyc;

  task automatic run(int z0, int z1, int z2, int z3);
    int   z [N];
    real  ex [N], s, p;
    int   best, e;
    z = '{z0, z1, z2, z3};
    @(negedge clk);
    for (int i = 0; i < N; i++) logits[i] = 16'(z[i]);
    start = 1; t0 = cyc + 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < N; i++) logits[i] = 16'($urandom);   // must be latched
    wait (done); @(negedge clk); @(negedge clk);
    best = 0;
    for (int i = 1; i < N; i++) if (z[i] > z[best]) best = i;
    s = 0;
    for (int i = 0; i < N; i++) begin
      ex[i] = $exp(real'(z[i] - z[best]) / 256.0);
      s += ex[i];
    end
    checks++;
    if (int'(cls) != best) begin
      failures++;
      $display("FAIL class %0d exp %0d for %0d %0d %0d %0d", cls, best, z0, z1, z2, z3);
    end
    for (int i = 0; i < N; i++) begin
      p = ex[i] / s * 256.0;
      e = (p > 255.0) ? 255 : int'($floor(p));
      checks++;
      if (int'(prob[i]) > e + 3 || int'(prob[i]) < e - 3) begin
        failures++;
        $display("FAIL prob[%0d] %0d exp %0d for %0d %0d %0d %0d", i, prob[i], e,
                 z0, z1, z2, z3);
      end
    end
    checks++;
    if (t1 - t0 != 1 + 9 * N) begin
      failures++;
      $display("FAIL latency %0d exp %0d", t1 - t0, 1 + 9 * N);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    for (int i = 0; i < N; i++) logits[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0, 0, 0);                        // uniform: 64 each
    run(256, 0, 0, 0);
    run(-300, 500, 499, -32768);
    run(32767, -32768, 0, 100);             // one class takes all
    run(100, 100, -50, 100);                // tie: first wins
    run(-1000, -1200, -900, -901);
    for (int k = 0; k < 300; k++) begin
      int r [N];
      for (int i = 0; i < N; i++) r[i] = $urandom_range(2400) - 1200;
      run(r[0], r[1], r[2], r[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
