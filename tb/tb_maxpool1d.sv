// tb_maxpool1d: streams random activation maps through two pooling
// instances, size 2 / stride 2 over 5 channels and size 4 / stride 1 over
// 25 channels (the overlapping case), and checks every pooled element, its
// position and channel tags, the output order and the number of outputs
// against a reference that takes the maximum over each window directly.
module tb_maxpool1d;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int LA = 21, CA = 5;    // 21 positions: the last one is dropped
  localparam int LB = 30, CB = 25;

  logic              ia_v, ib_v;
  logic [7:0]        ia_p, ib_p;
  logic [2:0]        ia_c;
  logic [4:0]        ib_c;
  logic signed [7:0] ia_d, ib_d;
  logic              oa_v, ob_v;
  logic [7:0]        oa_p, ob_p;
  logic [2:0]        oa_c;
  logic [4:0]        ob_c;
  logic signed [7:0] oa_d, ob_d;

  maxpool1d #(.P(2), .S(2), .C(CA), .PW(8)) u_a (
    .clk, .rst_n, .in_valid(ia_v), .in_pos(ia_p), .in_chan(ia_c), .in_data(ia_d),
    .out_valid(oa_v), .out_pos(oa_p), .out_chan(oa_c), .out_data(oa_d));
  maxpool1d #(.P(4), .S(1), .C(CB), .PW(8)) u_b (
    .clk, .rst_n, .in_valid(ib_v), .in_pos(ib_p), .in_chan(ib_c), .in_data(ib_d),
    .out_valid(ob_v), .out_pos(ob_p), .out_chan(ob_c), .out_data(ob_d));

  int xa [LA][CA];
  int xb [LB][CB];
  int na = 0, nb = 0;   // outputs seen, in order

  function automatic int max_a(int p, int c);
    int m = -1000;
    for (int j = 0; j < 2; j++) if (xa[2*p + j][c] > m) m = xa[2*p + j][c];
    return m;
  endfunction
  function automatic int max_b(int p, int c);
    int m = -1000;
    for (int j = 0; j < 4; j++) if (xb[p + j][c] > m) m = xb[p + j][c];
    return m;
  endfunction

  always @(posedge clk) begin
    if (rst_n && oa_v) begin
      checks++;
      if (int'(oa_p) != na / CA || int'(oa_c) != na % CA ||
          int'(oa_d) != max_a(na / CA, na % CA)) begin
        failures++;
        $display("FAIL a #%0d: p%0d c%0d d%0d exp p%0d c%0d d%0d", na, oa_p, oa_c, oa_d,
                 na / CA, na % CA, max_a(na / CA, na % CA));
      end
      na++;
    end
    if (rst_n && ob_v) begin
      checks++;
      if (int'(ob_p) != nb / CB || int'(ob_c) != nb % CB ||
          int'(ob_d) != max_b(nb / CB, nb % CB)) begin
        failures++;
        $display("FAIL b #%0d: p%0d c%0d d%0d exp %0d", nb, ob_p, ob_c, ob_d,
                 max_b(nb / CB, nb % CB));
      end
      nb++;
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
    ia_v = 0; ia_p = 0; ia_c = 0; ia_d = 0;
    ib_v = 0; ib_p = 0; ib_c = 0; ib_d = 0;
    foreach (xa[p, c]) xa[p][c] = $urandom_range(255) - 128;
    foreach (xb[p, c]) xb[p][c] = $urandom_range(255) - 128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < LA; p++)
      for (int c = 0; c < CA; c++) begin
        @(negedge clk);
        ia_v = 1; ia_p = 8'(p); ia_c = 3'(c); ia_d = 8'(xa[p][c]);
      end
    @(negedge clk); ia_v = 0;
    for (int p = 0; p < LB; p++)
      for (int c = 0; c < CB; c++) begin
        @(negedge clk);
        // idle gaps in the stream must not matter
        if ($urandom_range(3) == 0) begin
          ib_v = 0;
          @(negedge clk);
        end
        ib_v = 1; ib_p = 8'(p); ib_c = 5'(c); ib_d = 8'(xb[p][c]);
      end
    @(negedge clk); ib_v = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (na != (LA / 2) * CA) begin
      failures++;
      $display("FAIL a produced %0d outputs, exp %0d", na, (LA / 2) * CA);
    end
    checks++;
    if (nb != (LB - 3) * CB) begin
      failures++;
      $display("FAIL b produced %0d outputs, exp %0d", nb, (LB - 3) * CB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
