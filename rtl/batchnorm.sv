// batchnorm: inference-time batch normalisation of a channel-tagged stream.
//
// At inference a batch-normalisation layer is a per-channel affine map. The
// trained gamma, beta, mean and variance are folded off-line into one 8-bit
// signed scale and one 16-bit signed bias per channel, so that
//     y = sat8( (x * scale + (bias << SHIFT)) >>> SHIFT )
// with an arithmetic (flooring) shift and saturation to [-128, 127]. The
// scale is thus a fixed-point number with SHIFT fraction bits and the bias
// is in output LSBs. The engine uses two instances: one on the raw ECG
// samples (C = 1, 16-bit input) and one after the third max pooling
// (C = 25, 8-bit input), at the two places the network puts them. The
// folding and all widths are this design's choices.
//
// Interface: parameters are written through wr_en / wr_chan / wr_sel
// (0 = scale, 1 = bias) / wr_data; both reset to zero. An element enters
// with in_valid, its channel and value, and leaves one clock later on the
// out_* signals with the same channel. One element per clock, no stall.
module batchnorm #(
  parameter int unsigned C     = 25,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned SHIFT = 6,
  localparam int unsigned CW   = (C > 1) ? $clog2(C) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parameter load
  input  logic                    wr_en,
  input  logic [CW-1:0]           wr_chan,
  input  logic                    wr_sel,
  input  logic signed [15:0]      wr_data,
  // input stream
  input  logic                    in_valid,
  input  logic [CW-1:0]           in_chan,
  input  logic signed [IN_W-1:0]  in_data,
  // output stream
  output logic                    out_valid,
  output logic [CW-1:0]           out_chan,
  output logic signed [7:0]       out_data
);
  localparam int unsigned SUM_W = IN_W + 8 + 16 + SHIFT + 2;

  logic signed [7:0]  scale [C];
  logic signed [15:0] bias  [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) begin
        scale[i] <= '0;
        bias[i]  <= '0;
      end
    end else if (wr_en && 32'(wr_chan) < C) begin
      if (wr_sel) bias[wr_chan]  <= wr_data;
      else        scale[wr_chan] <= wr_data[7:0];
    end
  end

  logic signed [SUM_W-1:0] sum, shifted;
  logic signed [7:0]       sat;

  always_comb begin
    sum     = SUM_W'(in_data) * SUM_W'(scale[in_chan])
            + (SUM_W'(bias[in_chan]) <<< SHIFT);
    shifted = sum >>> SHIFT;
    if (shifted > 127)       sat = 8'sd127;
    else if (shifted < -128) sat = -8'sd128;
    else                     sat = shifted[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_chan  <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_chan  <= in_chan;
      out_data  <= sat;
    end
  end

endmodule
