// tb_layer_sequencer: drives the sequencer with stage models that answer
// each start with a done pulse after a random delay, and checks that the
// stages start strictly in the order conv1, conv2, conv3, dense, softmax,
// that every conv stage is followed by at least DRAIN idle clocks, that
// win_take comes with start_c1, that busy covers the whole run, and that
// result_valid follows the softmax's done once per window.
module tb_layer_sequencer;
  localparam int DRAIN = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic win_ready, win_take;
  logic start_c1, done_c1, start_c2, done_c2, start_c3, done_c3;
  logic start_dense, done_dense, start_smax, done_smax, busy, result_valid;

  layer_sequencer #(.DRAIN(DRAIN)) dut (.*);

  // stage models: done pulses 3..40 clocks after start
  logic [4:0] st;
  logic [4:0] dn;
  assign st = {start_smax, start_dense, start_c3, start_c2, start_c1};
  assign {done_smax, done_dense, done_c3, done_c2, done_c1} = dn;
  int cnt [5];
  always @(posedge clk) begin
    dn <= '0;
    for (int s = 0; s < 5; s++) begin
      if (!rst_n) cnt[s] <= 0;
      else if (st[s]) cnt[s] <= $urandom_range(40, 3);
      else if (cnt[s] > 1) cnt[s] <= cnt[s] - 1;
      else if (cnt[s] == 1) begin
        cnt[s] <= 0;
        dn[s]  <= 1'b1;
      end
    end
  end

  // order and drain checks
  int expect_stage = 0;
  longint cyc = 0, last_done = 0;
  int results = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (|dn[2:0]) last_done = cyc;
      for (int s = 0; s < 5; s++) if (st[s]) begin
        checks++;
        if (s != expect_stage) begin
          failures++;
          $display("FAIL stage %0d started, expected %0d", s, expect_stage);
        end
        if (s >= 1 && s <= 3) begin
          checks++;
          if (cyc - last_done < longint'(DRAIN)) begin
            failures++;
            $display("FAIL stage %0d started %0d clocks after the previous done", s,
                     cyc - last_done);
          end
        end
        if (s == 0) begin
          checks++;
          if (!win_take) begin
            failures++;
            $display("FAIL start_c1 without win_take");
          end
        end
        expect_stage = (s + 1) % 5;
      end
      if (win_take && !start_c1) begin
        failures++;
        $display("FAIL win_take without start_c1");
      end
      if (result_valid) begin
        results++;
        checks++;
        if (expect_stage != 0) begin
          failures++;
          $display("FAIL result before the softmax finished");
        end
      end
      if ((|cnt[0] || |cnt[1] || |cnt[2] || |cnt[3] || |cnt[4]) && !busy) begin
        failures++;
        $display("FAIL a stage runs while busy is low: t=%0d cnt %0d %0d %0d %0d %0d", cyc, cnt[0], cnt[1], cnt[2], cnt[3], cnt[4]);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win_ready = 0;
    for (int s = 0; s < 5; s++) cnt[s] = 0;
    dn = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 20; w++) begin
      @(negedge clk); win_ready = 1;
      wait (win_take); @(negedge clk); win_ready = 0;
      // sometimes the next window is already waiting when this one ends
      if (w % 3 == 0) begin
        @(negedge clk); win_ready = 1;
      end
      wait (result_valid); @(negedge clk);
      checks++;
      if (busy) begin
        failures++;
        $display("FAIL busy after result");
      end
      win_ready = 0;
    end
    repeat (10) @(negedge clk);
    checks++;
    if (results != 20) begin
      failures++;
      $display("FAIL %0d results exp 20", results);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
