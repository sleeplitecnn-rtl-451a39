// tb_conv1d_layer: runs two convolution instances on random data and
// weights, the second layer of the network (5 -> 45 filters, K 10,
// stride 1, 350 positions) and a short stride-2 single-channel layer, and
// checks every output sum, its position and channel tags, the emission
// order, the number of outputs and the layer's clock count
// LOUT * (K*CIN + 1 + COUT) from start to done. The reference is a
// direct evaluation of the convolution formula on the tb's own arrays.
module tb_conv1d_layer;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // instance A: CIN 5, COUT 45, K 10, S 1, LIN 350
  localparam int CI_A = 5, CO_A = 45, K_A = 10, S_A = 1, LI_A = 350;
  localparam int LO_A = (LI_A - K_A) / S_A + 1;
  // instance B: CIN 1, COUT 5, K 10, S 2, LIN 64
  localparam int CI_B = 1, CO_B = 5, K_B = 10, S_B = 2, LI_B = 64;
  localparam int LO_B = (LI_B - K_B) / S_B + 1;

  logic        st_a, busy_a, done_a, st_b, busy_b, done_b;
  logic [10:0] ra_a;
  logic [5:0]  ra_b;
  logic signed [7:0] rd_a, rd_b;
  logic        we_a, we_b;
  logic [5:0]  row_a;
  logic [3:0]  row_b;
  logic [5:0]  col_a;
  logic [2:0]  col_b;
  logic signed [15:0] wd;
  logic        ov_a, ov_b;
  logic [8:0]  op_a;
  logic [4:0]  op_b;
  logic [5:0]  oc_a;
  logic [2:0]  oc_b;
  logic signed [31:0] od_a, od_b;

  conv1d_layer #(.CIN(CI_A), .COUT(CO_A), .K(K_A), .STRIDE(S_A), .LIN(LI_A)) u_a (
    .clk, .rst_n, .start(st_a), .busy(busy_a), .done(done_a),
    .rd_addr(ra_a), .rd_data(rd_a),
    .wr_en(we_a), .wr_row(row_a), .wr_col(col_a), .wr_data(wd),
    .out_valid(ov_a), .out_pos(op_a), .out_chan(oc_a), .out_data(od_a));

  conv1d_layer #(.CIN(CI_B), .COUT(CO_B), .K(K_B), .STRIDE(S_B), .LIN(LI_B)) u_b (
    .clk, .rst_n, .start(st_b), .busy(busy_b), .done(done_b),
    .rd_addr(ra_b), .rd_data(rd_b),
    .wr_en(we_b), .wr_row(row_b), .wr_col(col_b), .wr_data(wd),
    .out_valid(ov_b), .out_pos(op_b), .out_chan(oc_b), .out_data(od_b));

  int xa [LI_A * CI_A];
  int wa [K_A][CI_A][CO_A];
  int ba [CO_A];
  int xb [LI_B * CI_B];
  int wb [K_B][CI_B][CO_B];
  int bb [CO_B];

  // input memories with one clock of read latency
  always_ff @(posedge clk) begin
    rd_a <= 8'(xa[ra_a]);
    rd_b <= 8'(xb[ra_b]);
  end

  function automatic int ref_a(int t, int co);
    int s = ba[co];
    for (int k = 0; k < K_A; k++)
      for (int ci = 0; ci < CI_A; ci++) s += wa[k][ci][co] * xa[(t * S_A + k) * CI_A + ci];
    return s;
  endfunction
  function automatic int ref_b(int t, int co);
    int s = bb[co];
    for (int k = 0; k < K_B; k++) s += wb[k][0][co] * xb[t * S_B + k];
    return s;
  endfunction

  int na = 0, nb = 0;
  longint t_start_a, t_start_b, t_done_a, t_done_b;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && ov_a) begin
      checks++;
      if (int'(op_a) != na / CO_A || int'(oc_a) != na % CO_A ||
          od_a != ref_a(na / CO_A, na % CO_A)) begin
        failures++;
        if (failures < 10)
          $display("FAIL a #%0d: p%0d c%0d %0d exp %0d", na, op_a, oc_a, od_a,
                   ref_a(na / CO_A, na % CO_A));
      end
      na++;
    end
    if (rst_n && ov_b) begin
      checks++;
      if (int'(op_b) != nb / CO_B || int'(oc_b) != nb % CO_B ||
          od_b != ref_b(nb / CO_B, nb % CO_B)) begin
        failures++;
        if (failures < 10)
          $display("FAIL b #%0d: p%0d c%0d %0d exp %0d", nb, op_b, oc_b, od_b,
                   ref_b(nb / CO_B, nb % CO_B));
      end
      nb++;
    end
    if (done_a) t_done_a = cyc;
    if (done_b) t_done_b = cyc;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    st_a = 0; st_b = 0; we_a = 0; we_b = 0; row_a = 0; row_b = 0; col_a = 0; col_b = 0; wd = 0;
    foreach (xa[i]) xa[i] = $urandom_range(255) - 128;
    foreach (xb[i]) xb[i] = $urandom_range(255) - 128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights: row k*CIN + ci, column filter; row K*CIN = bias
    for (int k = 0; k < K_A; k++)
      for (int ci = 0; ci < CI_A; ci++)
        for (int co = 0; co < CO_A; co++) begin
          wa[k][ci][co] = $urandom_range(255) - 128;
          @(negedge clk); we_a = 1; row_a = 6'(k * CI_A + ci); col_a = 6'(co);
          wd = 16'(wa[k][ci][co]);
        end
    for (int co = 0; co < CO_A; co++) begin
      ba[co] = $urandom_range(65535) - 32768;
      @(negedge clk); we_a = 1; row_a = 6'(K_A * CI_A); col_a = 6'(co); wd = 16'(ba[co]);
    end
    @(negedge clk); we_a = 0;
    for (int k = 0; k < K_B; k++)
      for (int co = 0; co < CO_B; co++) begin
        wb[k][0][co] = $urandom_range(255) - 128;
        @(negedge clk); we_b = 1; row_b = 4'(k); col_b = 3'(co); wd = 16'(wb[k][0][co]);
      end
    for (int co = 0; co < CO_B; co++) begin
      bb[co] = $urandom_range(65535) - 32768;
      @(negedge clk); we_b = 1; row_b = 4'(K_B); col_b = 3'(co); wd = 16'(bb[co]);
    end
    @(negedge clk); we_b = 0;
    // run B then A
    @(negedge clk); st_b = 1; t_start_b = cyc + 1;
    @(negedge clk); st_b = 0;
    wait (done_b); @(negedge clk);
    @(negedge clk); st_a = 1; t_start_a = cyc + 1;
    @(negedge clk); st_a = 0;
    wait (done_a); @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (na != LO_A * CO_A || nb != LO_B * CO_B) begin
      failures++;
      $display("FAIL output counts a %0d (exp %0d) b %0d (exp %0d)", na, LO_A * CO_A,
               nb, LO_B * CO_B);
    end
    checks++;
    if (t_done_a - t_start_a != LO_A * (K_A * CI_A + 1 + CO_A) ||
        t_done_b - t_start_b != LO_B * (K_B * CI_B + 1 + CO_B)) begin
      failures++;
      $display("FAIL cycles a %0d (exp %0d) b %0d (exp %0d)", t_done_a - t_start_a,
               LO_A * (K_A * CI_A + 1 + CO_A), t_done_b - t_start_b,
               LO_B * (K_B * CI_B + 1 + CO_B));
    end
    checks++;
    if (busy_a || busy_b) begin
      failures++;
      $display("FAIL busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
