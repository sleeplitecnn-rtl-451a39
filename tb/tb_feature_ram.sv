// tb_feature_ram: writes random words to the feature RAM, reads them back
// with the one-clock latency, and checks that a read of the address being
// written returns the old word.
module tb_feature_ram;
  localparam int DEPTH = 350;
  int checks = 0, failures = 0;

  logic       clk = 0;
  logic       we;
  logic [8:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [DEPTH];

  feature_ram #(.DEPTH(DEPTH), .W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // read back in random order
    for (int i = 0; i < 1000; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk); raddr = 9'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL read %0d: %0h exp %0h", a, rdata, model[a]);
      end
    end
    // read during write of the same address returns the old word
    for (int i = 0; i < 100; i++) begin
      int a;
      logic [7:0] old;
      a = $urandom_range(DEPTH - 1);
      old = model[a];
      @(negedge clk); raddr = 9'(a); waddr = 9'(a); we = 1; wdata = 8'($urandom);
      model[a] = wdata;
      @(negedge clk); we = 0;
      checks++;
      if (rdata !== old) begin
        failures++;
        $display("FAIL rw %0d: %0h exp old %0h", a, rdata, old);
      end
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL after write %0d: %0h exp %0h", a, rdata, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
