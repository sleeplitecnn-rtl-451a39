// window_buffer: sliding 11-second window over the incoming ECG stream.
//
// The classifier labels every second of the recording from an 11-second
// window, so a new window is complete every HOP = 128 samples once the
// first WIN = 1408 samples have arrived. Samples are written into a
// circular memory of DEPTH = WIN + HOP words. The extra HOP words are the
// design's own choice: while the next second of samples arrives it fills
// the words just before the current window, so a window stays intact for
// HOP sample periods after it completes, which is the time an inference
// has (one second at 128 Hz; the engine needs a few hundred thousand
// clocks).
//
// Interface: one sample per in_valid. win_ready is high while a complete
// window waits; a one-clock win_take consumes it and fixes the start
// address that the read port uses. A window that is still waiting when the
// next one completes is replaced by the newer one and overrun pulses for
// one clock. rd_addr is relative to the start of the taken window
// (0 = oldest sample); rd_data follows one clock later.
module window_buffer #(
  parameter int unsigned WIN   = 1408,
  parameter int unsigned HOP   = 128,
  parameter int unsigned W     = 8,
  localparam int unsigned DEPTH = WIN + HOP,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  output logic          win_ready,
  input  logic          win_take,
  output logic          overrun,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr;              // next address to write
  logic [AW-1:0] fill;              // samples held, saturates at WIN
  logic [AW-1:0] hop_cnt;           // samples since the last window
  logic [AW-1:0] pend_base;         // start of the waiting window
  logic [AW-1:0] base;              // start of the taken window
  logic [AW-1:0] wptr_nx;
  logic [AW-1:0] new_base;
  logic          complete;          // this sample completes a window

  always_comb begin
    wptr_nx  = (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
    // start of the window whose last sample is the one written now
    if (32'(wptr) + 1 >= WIN) new_base = AW'(32'(wptr) + 1 - WIN);
    else                      new_base = AW'(32'(wptr) + 1 + DEPTH - WIN);
    complete = 1'b0;
    if (in_valid) begin
      if (32'(fill) == WIN - 1)                      complete = 1'b1;
      else if (32'(fill) == WIN && 32'(hop_cnt) == HOP - 1) complete = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      fill      <= '0;
      hop_cnt   <= '0;
      win_ready <= 1'b0;
      overrun   <= 1'b0;
      pend_base <= '0;
      base      <= '0;
    end else begin
      overrun <= 1'b0;
      if (win_take && win_ready) base <= pend_base;
      if (in_valid) begin
        wptr <= wptr_nx;
        if (32'(fill) < WIN) fill <= fill + 1'b1;
        if (complete || 32'(fill) < WIN) hop_cnt <= '0;
        else                             hop_cnt <= hop_cnt + 1'b1;
      end
      if (complete) begin
        pend_base <= new_base;
        win_ready <= 1'b1;
        overrun   <= win_ready && !win_take;
      end else if (win_take) begin
        win_ready <= 1'b0;
      end
    end
  end

  // Physical read address: start of the taken window plus the offset,
  // wrapped around the circular memory.
  logic [AW:0] raw_addr;
  logic [AW-1:0] phys_addr;
  always_comb begin
    raw_addr  = {1'b0, base} + {1'b0, rd_addr};
    phys_addr = (32'(raw_addr) >= DEPTH) ? AW'(32'(raw_addr) - DEPTH) : raw_addr[AW-1:0];
  end

  always_ff @(posedge clk) rd_data <= mem[phys_addr];

endmodule
