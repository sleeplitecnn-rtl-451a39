// layer_sequencer: runs the layers of one inference in order.
//
// The engine evaluates the network one layer at a time, each layer reading
// the whole feature map the previous one left in memory. This controller
// takes a waiting window from the window buffer and starts, one after the
// other, convolution stages 1, 2 and 3 (each with its ReLU, pooling and,
// for stage 3, batch normalisation in the output stream), the dense layer
// and the softmax. After a convolution stage reports done it waits DRAIN
// clocks so that the last elements have passed the pooling and
// normalisation registers and been written, before the next stage reads
// the memory. The layer-serial schedule is this design's choice.
//
// Interface: win_take and every start_* are one-clock pulses; each done_*
// is a one-clock pulse from the stage. result_valid pulses with the
// softmax's done. busy is high from win_take until result_valid.
module layer_sequencer #(
  parameter int unsigned DRAIN = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic win_ready,
  output logic win_take,
  output logic start_c1,
  input  logic done_c1,
  output logic start_c2,
  input  logic done_c2,
  output logic start_c3,
  input  logic done_c3,
  output logic start_dense,
  input  logic done_dense,
  output logic start_smax,
  input  logic done_smax,
  output logic busy,
  output logic result_valid
);
  typedef enum logic [3:0] {
    S_IDLE, S_C1, S_D1, S_C2, S_D2, S_C3, S_D3, S_DENSE, S_SMAX
  } state_e;

  state_e     state;
  logic [7:0] cnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cnt          <= '0;
      win_take     <= 1'b0;
      start_c1     <= 1'b0;
      start_c2     <= 1'b0;
      start_c3     <= 1'b0;
      start_dense  <= 1'b0;
      start_smax   <= 1'b0;
      result_valid <= 1'b0;
    end else begin
      win_take     <= 1'b0;
      start_c1     <= 1'b0;
      start_c2     <= 1'b0;
      start_c3     <= 1'b0;
      start_dense  <= 1'b0;
      start_smax   <= 1'b0;
      result_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (win_ready && !win_take) begin
          win_take <= 1'b1;
          start_c1 <= 1'b1;
          state    <= S_C1;
        end
        S_C1: if (done_c1) begin
          state <= S_D1;
          cnt   <= 8'(DRAIN);
        end
        S_D1: if (cnt == 0) begin
          start_c2 <= 1'b1;
          state    <= S_C2;
        end else cnt <= cnt - 1'b1;
        S_C2: if (done_c2) begin
          state <= S_D2;
          cnt   <= 8'(DRAIN);
        end
        S_D2: if (cnt == 0) begin
          start_c3 <= 1'b1;
          state    <= S_C3;
        end else cnt <= cnt - 1'b1;
        S_C3: if (done_c3) begin
          state <= S_D3;
          cnt   <= 8'(DRAIN);
        end
        S_D3: if (cnt == 0) begin
          start_dense <= 1'b1;
          state       <= S_DENSE;
        end else cnt <= cnt - 1'b1;
        S_DENSE: if (done_dense) begin
          start_smax <= 1'b1;
          state      <= S_SMAX;
        end
        S_SMAX: if (done_smax) begin
          result_valid <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
