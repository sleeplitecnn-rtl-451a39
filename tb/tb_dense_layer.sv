// tb_dense_layer: loads random weights and biases into the full-size dense
// layer (3450 inputs, 4 outputs), runs it twice on random feature vectors
// and checks the four logits, sat16(sum >>> 4), against a direct
// evaluation, plus the clock count NIN + 1 from start to done. The second
// vector is scaled up so that the 16-bit saturation is exercised.
module tb_dense_layer;
  localparam int NIN = 3450, NOUT = 4, SHIFT = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done, wr_en;
  logic [11:0] rd_addr, wr_row;
  logic signed [7:0] rd_data;
  logic [1:0]  wr_col;
  logic signed [15:0] wr_data;
  logic signed [15:0] logits [NOUT];

  dense_layer #(.NIN(NIN), .NOUT(NOUT), .SHIFT(SHIFT)) dut (.*);

  int x [NIN];
  int w [NIN][NOUT];
  int b [NOUT];
  int n_sat = 0;

  always_ff @(posedge clk) rd_data <= 8'(x[rd_addr < NIN ? rd_addr : 0]);

  function automatic int ref_logit(int o);
    longint s = b[o];
    for (int i = 0; i < NIN; i++) s += w[i][o] * x[i];
    s = s >>> SHIFT;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  longint cyc = 0, t0, t1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (done) t1 = cyc;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; wr_en = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= NIN; i++)
      for (int o = 0; o < NOUT; o++) begin
        if (i < NIN) w[i][o] = $urandom_range(255) - 128;
        else         b[o]    = $urandom_range(65535) - 32768;
        @(negedge clk); wr_en = 1; wr_row = 12'(i); wr_col = 2'(o);
        wr_data = 16'(i < NIN ? w[i][o] : b[o]);
      end
    @(negedge clk); wr_en = 0;
    for (int run = 0; run < 2; run++) begin
      foreach (x[i]) x[i] = (run == 0) ? $urandom_range(60) - 30 : $urandom_range(255) - 128;
      if (run == 1) for (int i = 0; i < NIN; i++) x[i] = (w[i][0] >= 0) ? 127 : -128;
      @(negedge clk); start = 1; t0 = cyc + 1;
      @(negedge clk); start = 0;
      wait (done); @(negedge clk); @(negedge clk);
      checks++;
      if (t1 - t0 != NIN + 1) begin
        failures++;
        $display("FAIL latency %0d exp %0d", t1 - t0, NIN + 1);
      end
      for (int o = 0; o < NOUT; o++) begin
        int e;
        e = ref_logit(o);
        if (e == 32767 || e == -32768) n_sat++;
        checks++;
        if (int'(logits[o]) != e) begin
          failures++;
          $display("FAIL run %0d logit %0d = %0d exp %0d", run, o, logits[o], e);
        end
      end
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
