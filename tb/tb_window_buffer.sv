// tb_window_buffer: feeds a numbered sample stream into the full-size window
// buffer (1408-sample windows, 128-sample hop) and checks that
//  - win_ready rises exactly when sample 1408, then every 128th sample, is in;
//  - a taken window reads back as samples s .. s+1407 of the stream, also
//    while the next samples are being written and across the wrap of the
//    circular memory;
//  - a window left waiting is replaced by the next one with one overrun
//    pulse, and the newer window is the one read.
module tb_window_buffer;
  localparam int WIN = 1408, HOP = 128;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, win_ready, win_take, overrun;
  logic [7:0]  in_data, rd_data;
  logic [10:0] rd_addr;

  window_buffer #(.WIN(WIN), .HOP(HOP), .W(8)) dut (.*);

  int stream [$];      // every sample written, in order
  int n_overrun = 0;
  always @(posedge clk) if (rst_n && overrun) n_overrun++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write one sample at the next clock
  task automatic push();
    @(negedge clk);
    in_valid = 1; in_data = 8'($urandom); stream.push_back(int'(in_data));
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic expect_ready(bit r, string what);
    checks++;
    if (win_ready !== r) begin
      failures++;
      $display("FAIL %s: win_ready=%0b after %0d samples", what, win_ready, stream.size());
    end
  endtask

  task automatic take();
    @(negedge clk); win_take = 1;
    @(negedge clk); win_take = 0;
  endtask

  // read the taken window; push `extra` samples in between the reads
  task automatic read_window(int first, int extra);
    int bad = 0;
    int every;
    every = (extra > 0) ? WIN / extra : WIN + 1;
    for (int a = 0; a < WIN; a++) begin
      @(negedge clk);
      rd_addr = 11'(a);
      in_valid = 0;
      if (extra > 0 && a % every == 0) begin
        in_valid = 1; in_data = 8'($urandom); stream.push_back(int'(in_data)); extra--;
      end
      @(posedge clk); #1;
      in_valid = 0;
      @(negedge clk);
      if (int'(rd_data) != stream[first + a]) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL window from sample %0d: %0d mismatches", first, bad);
    end
  endtask

  initial begin
    in_valid = 0; in_data = 0; win_take = 0; rd_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < WIN - 1; i++) push();
    expect_ready(0, "before first window");
    push();
    expect_ready(1, "first window");
    take();
    expect_ready(0, "after take");
    read_window(0, HOP - 1);                 // next samples arrive meanwhile
    expect_ready(0, "one sample short of the hop");
    push();
    expect_ready(1, "second window");
    take();
    read_window(HOP, 0);
    for (int i = 0; i < HOP; i++) push();
    expect_ready(1, "third window");
    checks++;
    if (n_overrun != 0) begin
      failures++;
      $display("FAIL early overrun");
    end
    for (int i = 0; i < HOP; i++) push();    // third window never taken
    @(negedge clk);
    checks++;
    if (n_overrun != 1) begin
      failures++;
      $display("FAIL overrun count %0d exp 1", n_overrun);
    end
    take();
    read_window(3 * HOP, 0);                 // the fourth window, wrapped
    for (int k = 0; k < 5; k++) begin        // several more hops around the ring
      for (int i = 0; i < HOP; i++) push();
      expect_ready(1, "later window");
      take();
      read_window((4 + k) * HOP, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
