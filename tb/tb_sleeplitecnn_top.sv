// tb_sleeplitecnn_top: end-to-end test of the whole engine at its default
// (full) size: 1408-sample windows, 128-sample hop, conv 1->5->45->25,
// dense 3450->4.
//
// The testbench loads random weights through the parameter bus, streams a
// synthetic ECG-like signal, and recomputes every inference with its own
// plain-loop model of the network (same fixed-point rules: flooring shifts,
// ReLU clip to [0,127], valid convolution and pooling, folded batch
// normalisation). Per result it checks the four logits exactly, the class
// exactly and each probability to within 3/256 of a real-valued softmax.
//
// Scenario: the first window is streamed at one sample per clock; the next
// 128 samples arrive slowly while the first inference runs, so the second
// window completes and waits; once the second inference has finished its
// first convolution, 256 samples arrive in a burst, so a third window is
// replaced by a fourth (overrun). Expected results: windows starting at
// samples 0, 128 and 384. Each mechanism is counted and must occur: window
// waiting while busy, samples written during an inference, overrun, ReLU
// clipping at 0 and at 127, batch-normalisation saturation. The inference
// time is checked against the sum of the stage times.
module tb_sleeplitecnn_top;
  import slcnn_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               sample_valid;
  logic signed [15:0] sample;
  logic               wt_we;
  logic [2:0]         wt_sel;
  logic [15:0]        wt_row;
  logic [5:0]         wt_col;
  logic signed [15:0] wt_data;
  logic               result_valid;
  logic [1:0]         result_class;
  logic [7:0]         result_prob [NCLASS];
  logic               busy, overrun;

  sleeplitecnn_top dut (.*);

  // ------------------------------------------------------------ sizes
  localparam int L0 = 1408;
  localparam int L1C = (L0 - 10) / 2 + 1;    // 700
  localparam int L1P = L1C / 2;              // 350
  localparam int L2C = L1P - 10 + 1;         // 341
  localparam int L2P = L2C / 2;              // 170
  localparam int L3C = L2P - 30 + 1;         // 141
  localparam int L3P = L3C - 4 + 1;          // 138
  localparam int NIN = L3P * 25;             // 3450

  // ------------------------------------------------------------ model parameters
  int bn0_sc, bn0_bi;
  int w1 [10][1][5];   int b1 [5];
  int w2 [10][5][45];  int b2 [45];
  int w3 [30][45][25]; int b3 [25];
  int bn1_sc [25], bn1_bi [25];
  int wd [NIN][4];     int bd [4];

  // ------------------------------------------------------------ mechanism counters
  int n_relu_zero = 0, n_relu_sat = 0, n_bn_sat = 0;
  int n_wait_busy = 0, n_write_busy = 0, n_overrun = 0, n_take = 0;

  function automatic int clip8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int relu_q(longint acc, int sh);
    longint q;
    q = acc >>> sh;
    if (q < 0) begin n_relu_zero++; return 0; end
    if (q > 127) begin n_relu_sat++; return 127; end
    return int'(q);
  endfunction

  function automatic int bn(longint x, int sc, int bi, int sh);
    longint v;
    v = ((x * sc) >>> sh) + bi;
    if (v > 127 || v < -128) n_bn_sat++;
    return clip8(v);
  endfunction

  int stream [$];      // normalised samples, as the window buffer holds them

  int a0 [L0];
  int p1 [L1P][5];
  int p2 [L2P][45];
  int q3 [L3P][25];
  int r1 [L1C][5];
  int r2 [L2C][45];
  int r3 [L3C][25];

  // reference logits of the window that starts at stream sample `s0`
  task automatic ref_model(int s0, output int z [4]);
    for (int t = 0; t < L0; t++) a0[t] = stream[s0 + t];
    for (int t = 0; t < L1C; t++)
      for (int co = 0; co < 5; co++) begin
        longint s = b1[co];
        for (int k = 0; k < 10; k++) s += w1[k][0][co] * a0[2 * t + k];
        r1[t][co] = relu_q(s, 6);
      end
    for (int t = 0; t < L1P; t++)
      for (int c = 0; c < 5; c++)
        p1[t][c] = (r1[2*t][c] > r1[2*t+1][c]) ? r1[2*t][c] : r1[2*t+1][c];
    for (int t = 0; t < L2C; t++)
      for (int co = 0; co < 45; co++) begin
        longint s = b2[co];
        for (int k = 0; k < 10; k++)
          for (int ci = 0; ci < 5; ci++) s += w2[k][ci][co] * p1[t + k][ci];
        r2[t][co] = relu_q(s, 8);
      end
    for (int t = 0; t < L2P; t++)
      for (int c = 0; c < 45; c++)
        p2[t][c] = (r2[2*t][c] > r2[2*t+1][c]) ? r2[2*t][c] : r2[2*t+1][c];
    for (int t = 0; t < L3C; t++)
      for (int co = 0; co < 25; co++) begin
        longint s = b3[co];
        for (int k = 0; k < 30; k++)
          for (int ci = 0; ci < 45; ci++) s += w3[k][ci][co] * p2[t + k][ci];
        r3[t][co] = relu_q(s, 10);
      end
    for (int t = 0; t < L3P; t++)
      for (int c = 0; c < 25; c++) begin
        int m = r3[t][c];
        for (int j = 1; j < 4; j++) if (r3[t + j][c] > m) m = r3[t + j][c];
        q3[t][c] = bn(m, bn1_sc[c], bn1_bi[c], 6);
      end
    for (int o = 0; o < 4; o++) begin
      longint s = bd[o];
      for (int t = 0; t < L3P; t++)
        for (int c = 0; c < 25; c++) s += wd[t * 25 + c][o] * q3[t][c];
      s = s >>> 4;
      z[o] = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
    end
  endtask

  // ------------------------------------------------------------ bus tasks
  task automatic wr(wsel_e sel, int row, int col, int data);
    @(negedge clk);
    wt_we = 1; wt_sel = sel; wt_row = 16'(row); wt_col = 6'(col); wt_data = 16'(data);
  endtask

  int ecg_phase = 0;
  int ecg_level = 0;
  // synthetic ECG: slow wander, noise and a sharp beat every ~100 samples
  function automatic int ecg_next();
    int v;
    ecg_phase++;
    ecg_level += $urandom_range(40) - 20;
    if (ecg_level > 800) ecg_level = 800;
    if (ecg_level < -800) ecg_level = -800;
    v = ecg_level + $urandom_range(200) - 100;
    if (ecg_phase % 97 == 0) v += 2500;
    if (ecg_phase % 97 == 1) v -= 900;
    return v;
  endfunction

  task automatic push(int gap);
    int x;
    x = ecg_next();
    @(negedge clk);
    sample_valid = 1; sample = 16'(x);
    stream.push_back(bn(x, bn0_sc, bn0_bi, 8));
    if (busy) n_write_busy++;
    @(negedge clk);
    sample_valid = 0;
    repeat (gap) @(negedge clk);
  endtask

  // ------------------------------------------------------------ result checking
  int exp_start [$] = '{0, 128, 384};
  int n_results = 0;
  longint cyc = 0, t_take = 0;
  longint stage_sum;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.win_take) begin
        n_take++;
        t_take = cyc;
      end
      if (dut.win_ready && busy) n_wait_busy++;
      if (overrun) n_overrun++;
    end
  end

  always @(posedge clk) begin
    if (rst_n && result_valid) begin
      int z [4];
      int best, e;
      real ex [4], s;
      checks++;
      if (cyc - t_take < stage_sum || cyc - t_take > stage_sum + 40) begin
        failures++;
        $display("FAIL inference took %0d clocks, stages sum to %0d", cyc - t_take, stage_sum);
      end
      if (n_results >= exp_start.size()) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        ref_model(exp_start[n_results], z);
        for (int o = 0; o < 4; o++) begin
          checks++;
          if (int'(dut.logits[o]) != z[o]) begin
            failures++;
            $display("FAIL result %0d logit %0d = %0d exp %0d", n_results, o,
                     dut.logits[o], z[o]);
          end
        end
        best = 0;
        for (int o = 1; o < 4; o++) if (z[o] > z[best]) best = o;
        s = 0;
        for (int o = 0; o < 4; o++) begin
          ex[o] = $exp(real'(z[o] - z[best]) / 256.0);
          s += ex[o];
        end
        checks++;
        if (int'(result_class) != best) begin
          failures++;
          $display("FAIL result %0d class %0d exp %0d", n_results, result_class, best);
        end
        for (int o = 0; o < 4; o++) begin
          e = (ex[o] / s * 256.0 > 255.0) ? 255 : int'($floor(ex[o] / s * 256.0));
          checks++;
          if (int'(result_prob[o]) > e + 3 || int'(result_prob[o]) < e - 3) begin
            failures++;
            $display("FAIL result %0d prob %0d = %0d exp %0d", n_results, o,
                     result_prob[o], e);
          end
        end
        $display("result %0d after %0d clocks (window at sample %0d): logits %0d %0d %0d %0d class %0d probs %0d %0d %0d %0d",
                 n_results, cyc - t_take, exp_start[n_results], z[0], z[1], z[2], z[3], result_class,
                 result_prob[0], result_prob[1], result_prob[2], result_prob[3]);
      end
      n_results++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    sample_valid = 0; sample = 0; wt_we = 0; wt_sel = 0; wt_row = 0; wt_col = 0; wt_data = 0;
    stage_sum = L1C * (10 + 1 + 5) + L2C * (50 + 1 + 45) + L3C * (1350 + 1 + 25)
              + (NIN + 1) + (1 + 9 * 4);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // parameters
    bn0_sc = 16; bn0_bi = 3;
    wr(SEL_BN_IN, 0, 0, bn0_sc); wr(SEL_BN_IN, 1, 0, bn0_bi);
    for (int k = 0; k < 10; k++)
      for (int co = 0; co < 5; co++) begin
        w1[k][0][co] = $urandom_range(127) - 64;
        wr(SEL_CONV1, k, co, w1[k][0][co]);
      end
    for (int co = 0; co < 5; co++) begin b1[co] = $urandom_range(2000) - 1000; wr(SEL_CONV1, 10, co, b1[co]); end
    for (int k = 0; k < 10; k++)
      for (int ci = 0; ci < 5; ci++)
        for (int co = 0; co < 45; co++) begin
          w2[k][ci][co] = $urandom_range(63) - 32;
          wr(SEL_CONV2, k * 5 + ci, co, w2[k][ci][co]);
        end
    for (int co = 0; co < 45; co++) begin b2[co] = $urandom_range(8000) - 2000; wr(SEL_CONV2, 50, co, b2[co]); end
    for (int k = 0; k < 30; k++)
      for (int ci = 0; ci < 45; ci++)
        for (int co = 0; co < 25; co++) begin
          w3[k][ci][co] = $urandom_range(63) - 32;
          wr(SEL_CONV3, k * 45 + ci, co, w3[k][ci][co]);
        end
    for (int co = 0; co < 25; co++) begin b3[co] = $urandom_range(20000) - 5000; wr(SEL_CONV3, 1350, co, b3[co]); end
    for (int c = 0; c < 25; c++) begin
      bn1_sc[c] = $urandom_range(100) + 20;
      bn1_bi[c] = $urandom_range(60) - 40;
      wr(SEL_BN_OUT, 0, c, bn1_sc[c]); wr(SEL_BN_OUT, 1, c, bn1_bi[c]);
    end
    for (int i = 0; i < NIN; i++)
      for (int o = 0; o < 4; o++) begin
        wd[i][o] = $urandom_range(63) - 32;
        wr(SEL_DENSE, i, o, wd[i][o]);
      end
    for (int o = 0; o < 4; o++) begin bd[o] = $urandom_range(4000) - 2000; wr(SEL_DENSE, NIN, o, bd[o]); end
    @(negedge clk); wt_we = 0;

    // first window at full speed
    for (int i = 0; i < L0; i++) push(0);
    // the next second arrives slowly during the first inference
    for (int i = 0; i < 128; i++) push(1500);
    // second inference: wait until its first convolution is over, then burst
    wait (n_results == 1);
    wait (dut.u_conv1.done);
    for (int i = 0; i < 256; i++) push(0);
    wait (n_results == 3);
    repeat (100) @(negedge clk);

    checks++;
    if (n_take != 3) begin failures++; $display("FAIL %0d windows taken, exp 3", n_take); end
    checks++;
    if (n_overrun != 1) begin failures++; $display("FAIL %0d overruns, exp 1", n_overrun); end
    checks++;
    if (n_wait_busy == 0) begin failures++; $display("FAIL no window waited while busy"); end
    checks++;
    if (n_write_busy == 0) begin failures++; $display("FAIL no sample written during an inference"); end
    checks++;
    if (n_relu_zero == 0 || n_relu_sat == 0) begin
      failures++; $display("FAIL ReLU clipping not exercised (%0d, %0d)", n_relu_zero, n_relu_sat);
    end
    checks++;
    if (n_bn_sat == 0) begin failures++; $display("FAIL batch-norm saturation not exercised"); end
    $display("mechanisms: taken %0d, waited-while-busy clocks %0d, samples during inference %0d, overrun %0d, relu0 %0d, relu127 %0d, bn-sat %0d",
             n_take, n_wait_busy, n_write_busy, n_overrun, n_relu_zero, n_relu_sat, n_bn_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
