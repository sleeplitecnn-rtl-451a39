// maxpool1d: streaming 1-D max pooling, per channel, over positions.
//
// The input is the activation stream of a convolution layer, position-major
// (all channels of position t, then position t+1). For every channel the
// module keeps the values of the last P-1 positions in a small shift
// register. When the element (t, c) arrives and t closes a pooling window,
// i.e. t >= P-1 and (t - (P-1)) is a multiple of the stride S, the maximum
// of that element and the P-1 stored values of channel c is emitted as
// output position (t - (P-1)) / S. This handles overlapping windows
// (S < P) as well as disjoint ones (S = P). Positions after the last full
// window are dropped (valid pooling). The network uses pool size / stride
// 2/2, 2/2 and 4/1.
//
// Interface: one element per clock in, no stall; outputs are registered,
// one clock after the element that closes the window. PW and CW are the
// widths of the position and channel tags; both tags use the input widths,
// so with S > 1 the top bit of out_pos is always zero.
module maxpool1d #(
  parameter int unsigned P  = 2,
  parameter int unsigned S  = 2,
  parameter int unsigned C  = 5,
  parameter int unsigned PW = 10,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [PW-1:0]       in_pos,
  input  logic [CW-1:0]       in_chan,
  input  logic signed [7:0]   in_data,
  output logic                out_valid,
  output logic [PW-1:0]       out_pos,
  output logic [CW-1:0]       out_chan,
  output logic signed [7:0]   out_data
);
  // hist[j][c]: value of channel c at position (current - 1 - j)
  logic signed [7:0] hist [P-1][C];
  logic signed [7:0] mx;
  logic              closes;
  logic [PW-1:0]     rel;

  always_comb begin
    rel    = in_pos - PW'(P - 1);
    closes = (32'(in_pos) >= P - 1) && ((32'(rel) % S) == 0);
    mx     = in_data;
    for (int j = 0; j < P - 1; j++)
      if (hist[j][in_chan] > mx) mx = hist[j][in_chan];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < P - 1; j++)
        for (int c = 0; c < C; c++) hist[j][c] <= '0;
    end else if (in_valid) begin
      hist[0][in_chan] <= in_data;
      for (int j = 1; j < P - 1; j++) hist[j][in_chan] <= hist[j-1][in_chan];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      out_chan  <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && closes;
      out_pos   <= PW'(32'(rel) / S);
      out_chan  <= in_chan;
      out_data  <= mx;
    end
  end

endmodule
