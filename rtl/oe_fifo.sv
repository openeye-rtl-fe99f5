// oe_fifo: synchronous FIFO with valid/ready on both sides.
//
// Used as the register slice on every router output, as the weight
// forwarding stage of a PE and as the host command queue. in_ready depends
// only on the fill level (a register), never on out_ready, so chains of
// FIFOs form no combinational loops. out_data shows the head entry while
// out_valid is high. count gives the fill level. Reset empties the FIFO.
module oe_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  T mem [DEPTH];
  logic [AW-1:0] rd, wr;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (push) wr <= (wr == AW'(DEPTH-1)) ? '0 : wr + 1'b1;
      if (pop)  rd <= (rd == AW'(DEPTH-1)) ? '0 : rd + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr] <= in_data;
endmodule
