// sleeplitecnn_top: SleepLiteCNN inference engine for single-lead ECG.
//
// Classifies every second of a 128 Hz ECG stream as Normal, obstructive
// (OSA), central (CSA) or mixed (MSA) apnea from the 11 seconds that end
// there. Data path, in the order of the network:
//
//   sample -> batchnorm (1 ch) -> window_buffer (1408 of 1536 words)
//          -> conv1d 1->5, K10, s2 -> ReLU -> maxpool 2/2 -> feature_ram 350x5
//          -> conv1d 5->45, K10, s1 -> ReLU -> maxpool 2/2 -> feature_ram 170x45
//          -> conv1d 45->25, K30, s1 -> ReLU -> maxpool 4/1 -> batchnorm (25 ch)
//          -> feature_ram 138x25 (= the flattened vector; dropout is the
//             identity at inference) -> dense 3450->4 -> softmax4 -> result
//
// Layer shapes, filter counts, kernel sizes, strides and pool sizes are the
// network's. The 8-bit fixed-point formats, the layer-serial schedule run by
// layer_sequencer, the per-layer requantisation shifts and the parameter
// load bus are this design's own. The stride of the third pooling is a
// parameter (POOL3_S): 1 as in the layer diagram; 4 gives the smaller
// dense layer (3,504 weights instead of 13,804) that matches a total of
// about 39K network parameters.
//
// Parameter load (while idle): wt_sel picks the target (slcnn_pkg::wsel_e),
// wt_row/wt_col the element, wt_data the value. Convolutions: row
// k*CIN + ci, column filter, row K*CIN = biases. Dense: row input index,
// column class, row NIN = biases. Batch normalisation: column channel,
// row 0 = scale (Q.SHIFT), row 1 = bias.
//
// Timing: one sample per sample_valid. Every HOP samples, once WIN have
// arrived, a window is ready; an idle engine takes it at once. At the
// default sizes an inference takes 241,465 clocks from take to
// result_valid: conv1 700 * 16, conv2 341 * 96, conv3 141 * 1376, dense
// 3451, softmax 37, the rest control. Only conv1 (the first 11,200 clocks)
// reads the window; it must be done before HOP more samples have arrived,
// and the whole inference should end within one hop (one second at
// 128 Hz, so any clock above 0.25 MHz keeps up). A window that completes
// while the previous one is still waiting is dropped and overrun pulses.
// result_valid pulses once per inference with the class and four
// probabilities (255 = 1.0).
//
// The assertion a_serial checks that at most one stage is busy at a time;
// its reset qualification is the reason for verilator's SYNCASYNCNET note
// on rst_n, which is harmless here.
module sleeplitecnn_top
  import slcnn_pkg::NCLASS, slcnn_pkg::IN_W, slcnn_pkg::out_len, slcnn_pkg::wsel_e,
         slcnn_pkg::SEL_BN_IN, slcnn_pkg::SEL_CONV1, slcnn_pkg::SEL_CONV2,
         slcnn_pkg::SEL_CONV3, slcnn_pkg::SEL_BN_OUT, slcnn_pkg::SEL_DENSE,
         slcnn_pkg::C1_OUT, slcnn_pkg::C1_K, slcnn_pkg::C1_S,
         slcnn_pkg::P1_P, slcnn_pkg::P1_S,
         slcnn_pkg::C2_OUT, slcnn_pkg::C2_K, slcnn_pkg::C2_S,
         slcnn_pkg::P2_P, slcnn_pkg::P2_S,
         slcnn_pkg::C3_OUT, slcnn_pkg::C3_K, slcnn_pkg::C3_S, slcnn_pkg::P3_P;
#(
  parameter int unsigned WIN          = slcnn_pkg::WIN,
  parameter int unsigned HOP          = slcnn_pkg::HOP,
  parameter int unsigned POOL3_S      = slcnn_pkg::P3_S,
  parameter int unsigned BN_IN_SHIFT  = 8,
  parameter int unsigned C1_SHIFT     = 6,
  parameter int unsigned C2_SHIFT     = 8,
  parameter int unsigned C3_SHIFT     = 10,
  parameter int unsigned BN_OUT_SHIFT = 6,
  parameter int unsigned DENSE_SHIFT  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // ECG samples
  input  logic                sample_valid,
  input  logic signed [15:0]  sample,
  // parameter load
  input  logic                wt_we,
  input  logic [2:0]          wt_sel,
  input  logic [15:0]         wt_row,
  input  logic [5:0]          wt_col,
  input  logic signed [15:0]  wt_data,
  // results
  output logic                result_valid,
  output logic [1:0]          result_class,
  output logic [7:0]          result_prob [NCLASS],
  output logic                busy,
  output logic                overrun
);
  // ---------------- derived sizes ----------------
  localparam int unsigned L1C = out_len(WIN, C1_K, C1_S);
  localparam int unsigned L1P = out_len(L1C, P1_P, P1_S);
  localparam int unsigned L2C = out_len(L1P, C2_K, C2_S);
  localparam int unsigned L2P = out_len(L2C, P2_P, P2_S);
  localparam int unsigned L3C = out_len(L2P, C3_K, C3_S);
  localparam int unsigned L3P = out_len(L3C, P3_P, POOL3_S);
  localparam int unsigned NIN = L3P * C3_OUT;

  localparam int unsigned M1 = L1P * C1_OUT;    // feature map sizes
  localparam int unsigned M2 = L2P * C2_OUT;
  localparam int unsigned M3 = NIN;
  localparam int unsigned A1 = $clog2(M1);
  localparam int unsigned A2 = $clog2(M2);
  localparam int unsigned A3 = $clog2(M3);
  localparam int unsigned AWIN = $clog2(WIN + HOP);
  localparam int unsigned PW1 = $clog2(L1C);
  localparam int unsigned PW2 = $clog2(L2C);
  localparam int unsigned PW3 = $clog2(L3C);

  wsel_e sel;
  assign sel = wsel_e'(wt_sel);

  // ---------------- control ----------------
  logic win_ready, win_take;
  logic start_c1, start_c2, start_c3, start_dense, start_smax;
  logic done_c1, done_c2, done_c3, done_dense, done_smax;
  logic busy_c1, busy_c2, busy_c3, busy_dense, busy_smax;

  layer_sequencer u_seq (
    .clk, .rst_n,
    .win_ready, .win_take,
    .start_c1, .done_c1, .start_c2, .done_c2, .start_c3, .done_c3,
    .start_dense, .done_dense, .start_smax, .done_smax,
    .busy, .result_valid
  );

  // ---------------- input normalisation and window ----------------
  logic              bn0_valid;
  logic [0:0]        bn0_chan;
  logic signed [7:0] bn0_data;

  batchnorm #(.C(1), .IN_W(IN_W), .SHIFT(BN_IN_SHIFT)) u_bn_in (
    .clk, .rst_n,
    .wr_en(wt_we && sel == SEL_BN_IN), .wr_chan(wt_col[0]), .wr_sel(wt_row[0]),
    .wr_data(wt_data),
    .in_valid(sample_valid), .in_chan(1'b0), .in_data(sample),
    .out_valid(bn0_valid), .out_chan(bn0_chan), .out_data(bn0_data)
  );

  logic [AWIN-1:0]   win_raddr;
  logic [7:0]        win_rdata;

  window_buffer #(.WIN(WIN), .HOP(HOP), .W(8)) u_win (
    .clk, .rst_n,
    .in_valid(bn0_valid), .in_data(bn0_data),
    .win_ready, .win_take, .overrun,
    .rd_addr(win_raddr), .rd_data(win_rdata)
  );

  // ---------------- stage 1 ----------------
  localparam int unsigned IA1 = $clog2(WIN);
  logic [IA1-1:0]    c1_raddr;
  logic              c1_valid;
  logic [PW1-1:0]    c1_pos;
  logic [2:0]        c1_chan;
  logic signed [31:0] c1_data;
  logic signed [7:0] a1_data;
  logic              p1_valid;
  logic [PW1-1:0]    p1_pos;
  logic [2:0]        p1_chan;
  logic signed [7:0] p1_data;

  assign win_raddr = AWIN'(c1_raddr);

  conv1d_layer #(.CIN(1), .COUT(C1_OUT), .K(C1_K), .STRIDE(C1_S), .LIN(WIN)) u_conv1 (
    .clk, .rst_n, .start(start_c1), .busy(busy_c1), .done(done_c1),
    .rd_addr(c1_raddr), .rd_data(win_rdata),
    .wr_en(wt_we && sel == SEL_CONV1), .wr_row(4'(wt_row)), .wr_col(3'(wt_col)),
    .wr_data(wt_data),
    .out_valid(c1_valid), .out_pos(c1_pos), .out_chan(c1_chan), .out_data(c1_data)
  );

  requant_relu #(.SHIFT(C1_SHIFT)) u_relu1 (.in_data(c1_data), .out_data(a1_data));

  maxpool1d #(.P(P1_P), .S(P1_S), .C(C1_OUT), .PW(PW1)) u_pool1 (
    .clk, .rst_n,
    .in_valid(c1_valid), .in_pos(c1_pos), .in_chan(c1_chan), .in_data(a1_data),
    .out_valid(p1_valid), .out_pos(p1_pos), .out_chan(p1_chan), .out_data(p1_data)
  );

  logic [A1-1:0] m1_raddr;
  logic [7:0]    m1_rdata;

  feature_ram #(.DEPTH(M1), .W(8)) u_fm1 (
    .clk, .we(p1_valid),
    .waddr(A1'(32'(p1_pos) * C1_OUT + 32'(p1_chan))), .wdata(p1_data),
    .raddr(m1_raddr), .rdata(m1_rdata)
  );

  // ---------------- stage 2 ----------------
  localparam int unsigned IA2 = $clog2(L1P * C1_OUT);
  logic [IA2-1:0]    c2_raddr;
  logic              c2_valid;
  logic [PW2-1:0]    c2_pos;
  logic [5:0]        c2_chan;
  logic signed [31:0] c2_data;
  logic signed [7:0] a2_data;
  logic              p2_valid;
  logic [PW2-1:0]    p2_pos;
  logic [5:0]        p2_chan;
  logic signed [7:0] p2_data;

  assign m1_raddr = A1'(c2_raddr);

  conv1d_layer #(.CIN(C1_OUT), .COUT(C2_OUT), .K(C2_K), .STRIDE(C2_S), .LIN(L1P)) u_conv2 (
    .clk, .rst_n, .start(start_c2), .busy(busy_c2), .done(done_c2),
    .rd_addr(c2_raddr), .rd_data(m1_rdata),
    .wr_en(wt_we && sel == SEL_CONV2), .wr_row(6'(wt_row)), .wr_col(6'(wt_col)),
    .wr_data(wt_data),
    .out_valid(c2_valid), .out_pos(c2_pos), .out_chan(c2_chan), .out_data(c2_data)
  );

  requant_relu #(.SHIFT(C2_SHIFT)) u_relu2 (.in_data(c2_data), .out_data(a2_data));

  maxpool1d #(.P(P2_P), .S(P2_S), .C(C2_OUT), .PW(PW2)) u_pool2 (
    .clk, .rst_n,
    .in_valid(c2_valid), .in_pos(c2_pos), .in_chan(c2_chan), .in_data(a2_data),
    .out_valid(p2_valid), .out_pos(p2_pos), .out_chan(p2_chan), .out_data(p2_data)
  );

  logic [A2-1:0] m2_raddr;
  logic [7:0]    m2_rdata;

  feature_ram #(.DEPTH(M2), .W(8)) u_fm2 (
    .clk, .we(p2_valid),
    .waddr(A2'(32'(p2_pos) * C2_OUT + 32'(p2_chan))), .wdata(p2_data),
    .raddr(m2_raddr), .rdata(m2_rdata)
  );

  // ---------------- stage 3 ----------------
  localparam int unsigned IA3 = $clog2(L2P * C2_OUT);
  logic [IA3-1:0]    c3_raddr;
  logic              c3_valid;
  logic [PW3-1:0]    c3_pos;
  logic [4:0]        c3_chan;
  logic signed [31:0] c3_data;
  logic signed [7:0] a3_data;
  logic              p3_valid;
  logic [PW3-1:0]    p3_pos;
  logic [4:0]        p3_chan;
  logic signed [7:0] p3_data;
  logic              bn1_valid;
  logic [4:0]        bn1_chan;
  logic signed [7:0] bn1_data;
  logic [PW3-1:0]    bn1_pos;

  assign m2_raddr = A2'(c3_raddr);

  conv1d_layer #(.CIN(C2_OUT), .COUT(C3_OUT), .K(C3_K), .STRIDE(C3_S), .LIN(L2P)) u_conv3 (
    .clk, .rst_n, .start(start_c3), .busy(busy_c3), .done(done_c3),
    .rd_addr(c3_raddr), .rd_data(m2_rdata),
    .wr_en(wt_we && sel == SEL_CONV3), .wr_row(11'(wt_row)), .wr_col(5'(wt_col)),
    .wr_data(wt_data),
    .out_valid(c3_valid), .out_pos(c3_pos), .out_chan(c3_chan), .out_data(c3_data)
  );

  requant_relu #(.SHIFT(C3_SHIFT)) u_relu3 (.in_data(c3_data), .out_data(a3_data));

  maxpool1d #(.P(P3_P), .S(POOL3_S), .C(C3_OUT), .PW(PW3)) u_pool3 (
    .clk, .rst_n,
    .in_valid(c3_valid), .in_pos(c3_pos), .in_chan(c3_chan), .in_data(a3_data),
    .out_valid(p3_valid), .out_pos(p3_pos), .out_chan(p3_chan), .out_data(p3_data)
  );

  batchnorm #(.C(C3_OUT), .IN_W(8), .SHIFT(BN_OUT_SHIFT)) u_bn_out (
    .clk, .rst_n,
    .wr_en(wt_we && sel == SEL_BN_OUT), .wr_chan(5'(wt_col)), .wr_sel(wt_row[0]),
    .wr_data(wt_data),
    .in_valid(p3_valid), .in_chan(p3_chan), .in_data(p3_data),
    .out_valid(bn1_valid), .out_chan(bn1_chan), .out_data(bn1_data)
  );

  // the normalisation takes one clock; its position tag follows alongside
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bn1_pos <= '0;
    else        bn1_pos <= p3_pos;
  end

  localparam int unsigned DAW = $clog2(NIN + 1);
  logic [DAW-1:0] d_raddr;
  logic [7:0]     m3_rdata;

  feature_ram #(.DEPTH(M3), .W(8)) u_fm3 (
    .clk, .we(bn1_valid),
    .waddr(A3'(32'(bn1_pos) * C3_OUT + 32'(bn1_chan))), .wdata(bn1_data),
    .raddr(A3'(d_raddr)), .rdata(m3_rdata)
  );

  // ---------------- classifier ----------------
  logic signed [15:0] logits [NCLASS];

  dense_layer #(.NIN(NIN), .NOUT(NCLASS), .SHIFT(DENSE_SHIFT)) u_dense (
    .clk, .rst_n, .start(start_dense), .busy(busy_dense), .done(done_dense),
    .rd_addr(d_raddr), .rd_data(m3_rdata),
    .wr_en(wt_we && sel == SEL_DENSE), .wr_row(DAW'(wt_row)), .wr_col(2'(wt_col)),
    .wr_data(wt_data),
    .logits
  );

  softmax4 #(.N(NCLASS)) u_smax (
    .clk, .rst_n, .start(start_smax), .logits,
    .busy(busy_smax), .done(done_smax), .prob(result_prob), .cls(result_class)
  );

  // A stage is only started when the one before has finished.
  a_serial: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({busy_c1, busy_c2, busy_c3, busy_dense, busy_smax}));

endmodule
