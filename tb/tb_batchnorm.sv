// tb_batchnorm: loads random per-channel scales and biases into a 25-channel
// 8-bit instance and a 1-channel 16-bit instance, streams random elements
// and compares each output, one clock later, with
// clip(floor(x * scale / 2^SHIFT) + bias, -128, 127) computed in reals.
module tb_batchnorm;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // 25 channels, 8-bit input, SHIFT 6
  logic              wa_en, wa_sel;
  logic [4:0]        wa_chan;
  logic signed [15:0] wa_data;
  logic              ia_valid;
  logic [4:0]        ia_chan;
  logic signed [7:0] ia_data;
  logic              oa_valid;
  logic [4:0]        oa_chan;
  logic signed [7:0] oa_data;

  batchnorm #(.C(25), .IN_W(8), .SHIFT(6)) u_a (
    .clk, .rst_n, .wr_en(wa_en), .wr_chan(wa_chan), .wr_sel(wa_sel), .wr_data(wa_data),
    .in_valid(ia_valid), .in_chan(ia_chan), .in_data(ia_data),
    .out_valid(oa_valid), .out_chan(oa_chan), .out_data(oa_data));

  // 1 channel, 16-bit input, SHIFT 8
  logic              wb_en, wb_sel;
  logic signed [15:0] wb_data;
  logic              ib_valid;
  logic signed [15:0] ib_data;
  logic              ob_valid;
  logic [0:0]        ob_chan;
  logic signed [7:0] ob_data;

  batchnorm #(.C(1), .IN_W(16), .SHIFT(8)) u_b (
    .clk, .rst_n, .wr_en(wb_en), .wr_chan(1'b0), .wr_sel(wb_sel), .wr_data(wb_data),
    .in_valid(ib_valid), .in_chan(1'b0), .in_data(ib_data),
    .out_valid(ob_valid), .out_chan(ob_chan), .out_data(ob_data));

  int sc_a [25], bi_a [25];
  int sc_b, bi_b;

  function automatic int ref_bn(int x, int sc, int bi, int sh);
    longint f;
    f = longint'($floor(real'(x) * real'(sc) / real'(1 << sh))) + longint'(bi);
    if (f > 127) return 127;
    if (f < -128) return -128;
    return int'(f);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_a, exp_b, exp_ch;
  int n_sat = 0;

  initial begin
    wa_en = 0; wa_sel = 0; wa_chan = 0; wa_data = 0; ia_valid = 0; ia_chan = 0; ia_data = 0;
    wb_en = 0; wb_sel = 0; wb_data = 0; ib_valid = 0; ib_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 25; c++) begin
      sc_a[c] = $urandom_range(255) - 128;
      bi_a[c] = $urandom_range(80) - 40;
      @(negedge clk); wa_en = 1; wa_chan = 5'(c); wa_sel = 0; wa_data = 16'(sc_a[c]);
      @(negedge clk); wa_sel = 1; wa_data = 16'(bi_a[c]);
    end
    sc_b = $urandom_range(100) + 10;
    bi_b = -7;
    @(negedge clk); wa_en = 0; wb_en = 1; wb_sel = 0; wb_data = 16'(sc_b);
    @(negedge clk); wb_sel = 1; wb_data = 16'(bi_b);
    @(negedge clk); wb_en = 0;
    for (int i = 0; i < 3000; i++) begin
      int x, c, xb;
      c = $urandom_range(24);
      x = $urandom_range(255) - 128;
      xb = $urandom_range(4000) - 2000;
      @(negedge clk);
      ia_valid = 1; ia_chan = 5'(c); ia_data = 8'(x);
      ib_valid = 1; ib_data = 16'(xb);
      exp_a  = ref_bn(x, sc_a[c], bi_a[c], 6);
      exp_b  = ref_bn(xb, sc_b, bi_b, 8);
      exp_ch = c;
      if (exp_a == 127 || exp_a == -128) n_sat++;
      @(posedge clk); #1;
      checks++;
      if (!oa_valid || int'(oa_chan) != exp_ch || int'(oa_data) != exp_a) begin
        failures++;
        $display("FAIL a: ch %0d x %0d -> %0d exp %0d", c, x, oa_data, exp_a);
      end
      checks++;
      if (!ob_valid || int'(ob_data) != exp_b) begin
        failures++;
        $display("FAIL b: x %0d -> %0d exp %0d", xb, ob_data, exp_b);
      end
    end
    @(negedge clk); ia_valid = 0; ib_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (oa_valid || ob_valid) begin
      failures++;
      $display("FAIL valid did not drop");
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
