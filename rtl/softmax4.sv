// softmax4: softmax over the class logits, plus the winning class.
//
// The network ends in a softmax over four neurons (Normal, OSA, CSA, MSA).
// This unit turns N Q8.8 logits into probabilities scaled so that 255
// means 1.0, and reports the index of the largest logit (the first one on
// a tie), which is the predicted class. The method is this design's own:
//   1. subtract the largest logit, so every d = z - max <= 0;
//   2. exp(d) = 2^(d * log2 e); with y = (d * 369) >>> 8 in Q8.8
//      (369/256 ~ log2 e), split y into its integer part -n and its
//      fraction f (Q0.8), and take 2^f ~ 1 + f * (0.6565 + 0.3435 f), a
//      quadratic fit good to about 0.2 %, as the Q1.15 value
//      p = 32768 + ((f * (21512 + ((11256 * f) >> 8))) >> 8);
//      then e = p >> n (zero once n >= 16);
//   3. prob = min(255, (e * 256) / sum(e)), found one quotient bit per
//      clock by a restoring divider.
//
// Timing: a one-clock start latches the logits; done is seen 1 + 9*N clocks
// after the edge that samples start,
// with prob and cls valid; they hold until the next start.
module softmax4 #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [15:0] logits [N],
  output logic               busy,
  output logic               done,
  output logic [7:0]         prob [N],
  output logic [IW-1:0]      cls
);
  typedef enum logic [1:0] {S_IDLE, S_EXP, S_DIV} state_e;

  localparam int unsigned SUM_W = 16 + $clog2(N) + 1;
  localparam int unsigned NUM_W = SUM_W + 9;

  // 2^(d * log2 e) for d <= 0 in Q8.8, result in Q1.15 (32768 = 1.0).
  function automatic logic [15:0] exp_q15(logic signed [16:0] d);
    logic signed [26:0] y;
    logic [18:0]        n;
    logic [7:0]         f;
    logic [31:0]        term, p;
    y    = (27'(d) * 27'sd369) >>> 8;
    n    = 19'(-(y >>> 8));
    f    = y[7:0];
    term = 32'd21512 + ((32'd11256 * 32'(f)) >> 8);
    p    = 32'd32768 + ((32'(f) * term) >> 8);
    if (n >= 16) return 16'd0;
    return 16'(p >> n);
  endfunction

  state_e               state;
  logic signed [15:0]   z   [N];
  logic [15:0]          e   [N];
  logic [SUM_W-1:0]     sum;
  logic [IW-1:0]        i;
  logic [3:0]           b;
  logic [NUM_W-1:0]     rem;
  logic [8:0]           q;

  // combinational maximum of the latched logits
  logic signed [15:0] zmax;
  logic [IW-1:0]      zarg;
  always_comb begin
    zmax = z[0];
    zarg = '0;
    for (int k = 1; k < N; k++)
      if (z[k] > zmax) begin
        zmax = z[k];
        zarg = IW'(k);
      end
  end

  // exponentials of the latched logits and their sum
  logic [15:0]      ev [N];
  logic [SUM_W-1:0] esum;
  always_comb begin
    esum = '0;
    for (int k = 0; k < N; k++) begin
      ev[k] = exp_q15(17'(z[k]) - 17'(zmax));
      esum  = esum + SUM_W'(ev[k]);
    end
  end

  // one restoring-division step: quotient bit b
  logic [NUM_W-1:0] trial;
  logic             take;
  logic [8:0]       qn;
  always_comb begin
    trial = NUM_W'(sum) << b;
    take  = (rem >= trial);
    qn    = q;
    if (take) qn[b] = 1'b1;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      cls   <= '0;
      sum   <= '0;
      i     <= '0;
      b     <= '0;
      rem   <= '0;
      q     <= '0;
      for (int k = 0; k < N; k++) begin
        z[k]    <= '0;
        e[k]    <= '0;
        prob[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < N; k++) z[k] <= logits[k];
          state <= S_EXP;
        end
        S_EXP: begin
          for (int k = 0; k < N; k++) e[k] <= ev[k];
          sum   <= esum;
          cls   <= zarg;
          i     <= '0;
          b     <= 4'd8;
          q     <= '0;
          rem   <= NUM_W'(ev[0]) << 8;
          state <= S_DIV;
        end
        S_DIV: begin
          if (take) rem <= rem - trial;
          q <= qn;
          if (b == 4'd0) begin
            prob[i] <= (qn > 9'd255) ? 8'd255 : qn[7:0];
            if (32'(i) == N - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              i   <= i + 1'b1;
              b   <= 4'd8;
              q   <= '0;
              rem <= NUM_W'(e[IW'(i + 1'b1)]) << 8;
            end
          end else begin
            b <= b - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
