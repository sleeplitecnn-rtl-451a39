// feature_ram: simple dual-port RAM for one intermediate feature map.
//
// The engine runs the network layer by layer; every feature map between two
// layers is kept whole in one of these memories, stored position-major
// (address = position * channels + channel). That order is also the order
// of the Flatten step, so the dense layer reads the last map linearly.
// One write port and one read port with a registered output: rdata shows
// the word at raddr one clock after raddr is presented. Read and write of
// the same address in one clock return the old word. Contents are not
// reset; every word is written before it is read.
module feature_ram #(
  parameter int unsigned DEPTH = 1750,
  parameter int unsigned W     = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
