// oe_spad: PE scratchpad RAM (one of the IAct ADDR, IAct DATA, Weight ADDR
// and Weight DATA RAMs of a PE).
//
// One synchronous write port and two asynchronous read ports, the shape of
// an FPGA distributed (LUT) RAM. Entries are appended: each accepted write
// goes to the next free address, and clear rewinds the write pointer, so the
// sparse streams can be written without addresses. `used` is the number of
// valid entries; full is raised when DEPTH entries are held. Reading is
// combinational (same cycle). The depth is a parameter; the defaults in the
// PE follow Eyeriss v2, which the design builds on for its sparse format.
module oe_spad #(
  parameter int DEPTH = 16,
  parameter int W     = 13
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         we,
  input  logic [W-1:0] wdata,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] used,
  input  logic [$clog2(DEPTH)-1:0]   raddr0,
  output logic [W-1:0] rdata0,
  input  logic [$clog2(DEPTH)-1:0]   raddr1,
  output logic [W-1:0] rdata1
);
  logic [W-1:0] mem [DEPTH];

  assign full   = (used == ($clog2(DEPTH+1))'(DEPTH));
  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               used <= '0;
    else if (clear)           used <= '0;
    else if (we && !full)     used <= used + 1'b1;
  end

  always_ff @(posedge clk)
    if (we && !full && !clear) mem[used[$clog2(DEPTH)-1:0]] <= wdata;
endmodule
