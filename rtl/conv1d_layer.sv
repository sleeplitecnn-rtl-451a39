// conv1d_layer: one 1-D convolution layer (valid padding, bias, stride).
//
// Computes y[t][co] = bias[co] + sum_{k<K} sum_{ci<CIN}
//                     w[k][ci][co] * x[t*STRIDE + k][ci]
// for t = 0 .. LOUT-1, LOUT = (LIN - K) / STRIDE + 1. The network uses three
// instances: 1->5 filters (K 10, stride 2), 5->45 (K 10, stride 1) and
// 45->25 (K 30, stride 1); shapes follow the network, the datapath below is
// this design's own.
//
// How it works: the input map is stored position-major (address =
// position * CIN + channel), so the K*CIN taps of one output position are
// the contiguous addresses base .. base+K*CIN-1 with base = t*STRIDE*CIN,
// and tap number j = k*CIN + ci is also the row of the weight memory. Each
// row holds the weights of all COUT filters for that tap, so COUT
// multiply-accumulates run in parallel, one tap per clock. After the last
// tap the COUT sums leave one per clock, channel 0 first. One output
// position therefore takes K*CIN + 1 + COUT clocks, and done is seen
// LOUT * (K*CIN + 1 + COUT) clocks after the clock edge that samples start.
//
// Interface: a one-clock start runs the whole layer; busy is high until
// done pulses after the last output. rd_addr / rd_data read the input map
// with one clock of latency. Parameters are loaded through wr_*: row
// j = k*CIN + ci, column = filter, data[7:0] = weight; row K*CIN holds the
// 16-bit biases. This follows the (K, CIN, COUT) kernel layout of a
// Keras Conv1D. Weights and biases are signed; sums are 32 bits and wrap
// on overflow (ACC_W bits are ample for the layer sizes used).
module conv1d_layer #(
  parameter int unsigned CIN    = 5,
  parameter int unsigned COUT   = 45,
  parameter int unsigned K      = 10,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned LIN    = 350,
  parameter int unsigned ACC_W  = 32,
  localparam int unsigned LOUT  = (LIN - K) / STRIDE + 1,
  localparam int unsigned NTAP  = K * CIN,
  localparam int unsigned IN_AW = $clog2(LIN * CIN),
  localparam int unsigned RW    = $clog2(NTAP + 1),
  localparam int unsigned CW    = (COUT > 1) ? $clog2(COUT) : 1,
  localparam int unsigned PW    = (LOUT > 1) ? $clog2(LOUT) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // input feature map
  output logic [IN_AW-1:0]        rd_addr,
  input  logic signed [7:0]       rd_data,
  // parameter load
  input  logic                    wr_en,
  input  logic [RW-1:0]           wr_row,
  input  logic [CW-1:0]           wr_col,
  input  logic signed [15:0]      wr_data,
  // output stream (pre-activation)
  output logic                    out_valid,
  output logic [PW-1:0]           out_pos,
  output logic [CW-1:0]           out_chan,
  output logic signed [ACC_W-1:0] out_data
);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_LAST, S_EMIT} state_e;

  logic [COUT*8-1:0]       wmem [NTAP];   // one row of COUT weights per tap
  logic signed [15:0]      bias [COUT];
  logic [COUT*8-1:0]       wrow;          // weight row of the tap in flight
  logic signed [ACC_W-1:0] acc  [COUT];

  state_e           state;
  logic [PW-1:0]    pos;
  logic [RW-1:0]    tap;
  logic [IN_AW-1:0] base;
  logic [CW-1:0]    eidx;
  logic             mac_en;

  // ---------------- parameter load ----------------
  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_row) < NTAP && 32'(wr_col) < COUT)
      wmem[wr_row][wr_col*8 +: 8] <= wr_data[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < COUT; i++) bias[i] <= '0;
    end else if (wr_en && 32'(wr_row) == NTAP && 32'(wr_col) < COUT) begin
      bias[wr_col] <= wr_data;
    end
  end

  // ---------------- tap sequencing ----------------
  assign rd_addr = base + IN_AW'(tap);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk) begin
    wrow <= wmem[(32'(tap) < NTAP) ? tap : '0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pos    <= '0;
      tap    <= '0;
      base   <= '0;
      eidx   <= '0;
      mac_en <= 1'b0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      mac_en <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ACC;
          pos   <= '0;
          tap   <= '0;
          base  <= '0;
        end
        S_ACC: begin
          mac_en <= 1'b1;
          if (32'(tap) == NTAP - 1) state <= S_LAST;
          else                      tap   <= tap + 1'b1;
        end
        S_LAST: begin
          state <= S_EMIT;
          eidx  <= '0;
        end
        S_EMIT: begin
          if (32'(eidx) == COUT - 1) begin
            if (32'(pos) == LOUT - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ACC;
              pos   <= pos + 1'b1;
              tap   <= '0;
              base  <= base + IN_AW'(STRIDE * CIN);
            end
          end else begin
            eidx <= eidx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- multiply-accumulate ----------------
  // The first tap of a position loads the biases; the MAC of a tap happens
  // one clock after it was issued, when its input and weight row arrive.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < COUT; i++) acc[i] <= '0;
    end else begin
      for (int i = 0; i < COUT; i++) begin
        if (state == S_ACC && tap == '0)
          acc[i] <= ACC_W'(bias[i]);
        else if (mac_en)
          acc[i] <= acc[i] + ACC_W'($signed(wrow[i*8 +: 8])) * ACC_W'(rd_data);
      end
    end
  end

  // ---------------- output stream ----------------
  assign out_valid = (state == S_EMIT);
  assign out_pos   = pos;
  assign out_chan  = eidx;
  assign out_data  = acc[eidx];

endmodule
