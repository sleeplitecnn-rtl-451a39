// tb_requant_relu: checks the ReLU/requantisation against a floating-point
// reference, floor(acc / 2^SHIFT) clipped to [0, 127], for edge values and
// random accumulators at two shift settings.
module tb_requant_relu;
  int checks = 0, failures = 0;

  logic signed [31:0] acc;
  logic signed [7:0]  y8, y0;

  requant_relu #(.SHIFT(8)) u_s8 (.in_data(acc), .out_data(y8));
  requant_relu #(.SHIFT(0)) u_s0 (.in_data(acc), .out_data(y0));

  function automatic int ref_relu(longint a, int sh);
    real q;
    longint f;
    q = real'(a) / real'(longint'(1) << sh);
    f = longint'($floor(q));
    if (f < 0) return 0;
    if (f > 127) return 127;
    return int'(f);
  endfunction

  task automatic check(logic signed [31:0] v);
    acc = v;
    #1;
    checks++;
    if (int'(y8) != ref_relu(longint'(v), 8) || int'(y0) != ref_relu(longint'(v), 0)) begin
      failures++;
      $display("FAIL acc=%0d y8=%0d (exp %0d) y0=%0d (exp %0d)", v, y8,
               ref_relu(longint'(v), 8), y0, ref_relu(longint'(v), 0));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(1); check(-1); check(127); check(128); check(-128);
    check(255); check(256); check(32767); check(32768); check(32512);
    check(32'sh7fffffff); check(32'sh80000000);
    for (int i = 0; i < 2000; i++) begin
      logic signed [31:0] r;
      r = $urandom;
      if (i % 2 == 0) r = r >>> 16;    // many values near the clip points
      check(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
