// oe_act_fn: activation function unit of a cluster.
//
// Sits between the PSUM output of the PE cluster and the "results" input of
// the PSUM router. mode ACT_RELU replaces negative sums by zero; ACT_BYPASS
// passes them unchanged, which is used for intermediate partial sums that
// still have to be accumulated elsewhere. The result is registered in a
// 2-entry FIFO: one cycle of latency, one value per cycle, valid/ready on
// both sides. The choice of functions (ReLU and bypass) is this design's;
// the source only names the unit.
module oe_act_fn
  import oe_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  act_mode_e mode,
  input  logic      in_valid,
  output logic      in_ready,
  input  psum_t     in_data,
  output logic      out_valid,
  input  logic      out_ready,
  output psum_t     out_data
);
  psum_t f;
  always_comb begin
    unique case (mode)
      ACT_RELU: f = (in_data < 0) ? '0 : in_data;
      default:  f = in_data;
    endcase
  end

  oe_fifo #(.T(psum_t), .DEPTH(2)) u_reg (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(f),
    .out_valid, .out_ready, .out_data, .count());
endmodule
