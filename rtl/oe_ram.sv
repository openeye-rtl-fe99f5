// oe_ram: on-chip RAM of the serial front end (IAct, Weights or PSUM RAM).
//
// Simple dual-port RAM: one synchronous write port and one synchronous read
// port with one cycle of read latency, which maps onto FPGA block or Ultra
// RAM. Words are BUS_W (64) bits, the width of the host port. The depth is a
// parameter; its default is this design's choice, sized to hold the largest
// feature map of the evaluated MNIST network in sparse stream form.
module oe_ram #(
  parameter int DEPTH = 16384,
  parameter int W     = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
