// dense_layer: the fully connected classification layer (NIN -> NOUT).
//
// Computes z[o] = bias[o] + sum_i w[i][o] * x[i] over the flattened feature
// vector x (138 positions x 25 channels = 3450 elements in the network as
// built), for the NOUT = 4 class neurons. Dropout precedes this layer in the
// network but is the identity at inference, so x is read straight from the
// last feature memory. The vector is read one element per clock and the
// four sums are updated in parallel from one weight-memory row holding the
// four weights of that element. After the last element each sum is
// requantised to a 16-bit Q8.8 logit: sat16(sum >>> SHIFT). The datapath,
// widths and the logit format are this design's choices.
//
// Timing: a one-clock start; done is seen NIN + 1 clocks after the edge
// that samples start, when the
// logits are valid; they hold until the next start. rd_addr / rd_data read
// the feature vector with one clock of latency. Parameter load: row i,
// column o, data[7:0] = weight w[i][o] (the (NIN, NOUT) layout of a Keras
// Dense kernel); row NIN holds the 16-bit biases.
module dense_layer #(
  parameter int unsigned NIN   = 3450,
  parameter int unsigned NOUT  = 4,
  parameter int unsigned SHIFT = 4,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned AW   = $clog2(NIN + 1),
  localparam int unsigned OW   = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [AW-1:0]       rd_addr,
  input  logic signed [7:0]   rd_data,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_row,
  input  logic [OW-1:0]       wr_col,
  input  logic signed [15:0]  wr_data,
  output logic signed [15:0]  logits [NOUT]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_e;

  logic [NOUT*8-1:0]       wmem [NIN];
  logic signed [15:0]      bias [NOUT];
  logic [NOUT*8-1:0]       wrow;
  logic signed [ACC_W-1:0] acc  [NOUT];
  state_e                  state;
  logic [AW-1:0]           idx;
  logic                    mac_en;

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_row) < NIN && 32'(wr_col) < NOUT)
      wmem[wr_row][wr_col*8 +: 8] <= wr_data[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NOUT; o++) bias[o] <= '0;
    end else if (wr_en && 32'(wr_row) == NIN && 32'(wr_col) < NOUT) begin
      bias[wr_col] <= wr_data;
    end
  end

  assign rd_addr = idx;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk) wrow <= wmem[(32'(idx) < NIN) ? idx : '0];

  function automatic logic signed [15:0] sat16(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> SHIFT;
    if (s > 32767)       return 16'sh7fff;
    else if (s < -32768) return 16'sh8000;
    else                 return s[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      mac_en <= 1'b0;
      done   <= 1'b0;
      for (int o = 0; o < NOUT; o++) begin
        acc[o]    <= '0;
        logits[o] <= '0;
      end
    end else begin
      done   <= 1'b0;
      mac_en <= (state == S_RUN);
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          idx   <= '0;
        end
        S_RUN: begin
          if (32'(idx) == NIN - 1) state <= S_LAST;
          else                     idx   <= idx + 1'b1;
        end
        S_LAST: begin
          state <= S_IDLE;
          done  <= 1'b1;
          for (int o = 0; o < NOUT; o++)
            logits[o] <= sat16(acc[o] + ACC_W'($signed(wrow[o*8 +: 8])) * ACC_W'(rd_data));
        end
        default: state <= S_IDLE;
      endcase
      for (int o = 0; o < NOUT; o++) begin
        if (state == S_RUN && idx == '0)
          acc[o] <= ACC_W'(bias[o]);
        else if (mac_en)
          acc[o] <= acc[o] + ACC_W'($signed(wrow[o*8 +: 8])) * ACC_W'(rd_data);
      end
    end
  end

endmodule
