// slcnn_pkg: shared types and constants of the SleepLiteCNN inference engine.
//
// The network shape follows the layer diagram of SleepLiteCNN: input batch
// normalisation, three 1-D convolutions with 5, 45 and 25 filters (kernel
// 10, 10, 30; stride 2, 1, 1), each followed by ReLU and max pooling (size
// 2, 2, 4; stride 2, 2, 1), a second batch normalisation, flatten, dropout
// (identity at inference), a 4-neuron dense layer and softmax. The ECG is
// sampled at 128 Hz and one window spans 11 s, so the network input is 1408
// samples and a new window starts every 128 samples (1-second resolution).
//
// Fixed-point formats are this design's own choice (the network is 8-bit
// quantised, nothing more is specified): 8-bit signed activations and
// weights, 16-bit biases, 32-bit accumulators, Q8.8 logits and 8-bit
// probabilities where 255 stands for 1.0.
package slcnn_pkg;

  localparam int unsigned FS_HZ   = 128;        // ECG sample rate
  localparam int unsigned WIN_SEC = 11;         // window length in seconds
  localparam int unsigned WIN     = FS_HZ * WIN_SEC;  // 1408 samples
  localparam int unsigned HOP     = FS_HZ;      // one new window per second

  localparam int unsigned ACT_W  = 8;   // activation / weight width
  localparam int unsigned BIAS_W = 16;  // bias and load-bus data width
  localparam int unsigned ACC_W  = 32;  // accumulator width
  localparam int unsigned LOG_W  = 16;  // Q8.8 logit width
  localparam int unsigned PROB_W = 8;   // probability width (255 = 1.0)
  localparam int unsigned IN_W   = 16;  // raw ECG sample width

  localparam int unsigned NCLASS = 4;

  // Layer shapes.
  localparam int unsigned C1_OUT = 5,  C1_K = 10, C1_S = 2;
  localparam int unsigned P1_P   = 2,  P1_S = 2;
  localparam int unsigned C2_OUT = 45, C2_K = 10, C2_S = 1;
  localparam int unsigned P2_P   = 2,  P2_S = 2;
  localparam int unsigned C3_OUT = 25, C3_K = 30, C3_S = 1;
  localparam int unsigned P3_P   = 4,  P3_S = 1;

  // Output length of a valid (unpadded) convolution or pooling window.
  function automatic int unsigned out_len(int unsigned lin, int unsigned k,
                                          int unsigned s);
    return (lin - k) / s + 1;
  endfunction

  // Output classes, in the order of the network's output neurons.
  typedef enum logic [1:0] {
    CLS_NORMAL = 2'd0,
    CLS_OSA    = 2'd1,
    CLS_CSA    = 2'd2,
    CLS_MSA    = 2'd3
  } apnea_class_e;

  // Targets of the parameter load bus.
  typedef enum logic [2:0] {
    SEL_BN_IN  = 3'd0,  // input batch normalisation
    SEL_CONV1  = 3'd1,
    SEL_CONV2  = 3'd2,
    SEL_CONV3  = 3'd3,
    SEL_BN_OUT = 3'd4,  // batch normalisation after the third pooling
    SEL_DENSE  = 3'd5
  } wsel_e;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [LOG_W-1:0] logit_t;
  typedef logic [PROB_W-1:0]       prob_t;

endpackage
