// oe_router: configurable stream crossbar of an OpenEye cluster.
//
// Each cluster has three of them, one each for activations, weights and
// partial sums; the port lists differ (see oe_cluster). Every output o takes
// the input named by sel[o]; a select value of N_IN or more leaves the output
// unused. One input may feed several outputs (multicast): a word leaves its
// input only when every output that selects it can take it, and is then
// copied to all of them in the same cycle. Each output has a 2-entry FIFO,
// so the router adds one cycle of latency, sustains one word per cycle, and
// its ready signals depend on FIFO fill levels only, which keeps router
// chains between clusters free of combinational loops. The select registers
// are written by the control logic; changing them while words are in flight
// is the controller's responsibility. Handshake: ready/enable (valid/ready);
// a source must hold valid and data until ready, which an assertion checks.
// The crossbar structure and multicast rule are this design's reading of
// "configurable routers" with a ready/enable handshake.
module oe_router #(
  parameter type T     = logic [7:0],
  parameter int  N_IN  = 2,
  parameter int  N_OUT = 2,
  parameter int  SW    = $clog2(N_IN + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_OUT-1:0][SW-1:0] sel,
  input  logic [N_IN-1:0]     in_valid,
  output logic [N_IN-1:0]     in_ready,
  input  T                    in_data [N_IN],
  output logic [N_OUT-1:0]    out_valid,
  input  logic [N_OUT-1:0]    out_ready,
  output T                    out_data [N_OUT]
);
  logic [N_OUT-1:0] f_ready, push;
  logic [N_IN-1:0]  used, all_ready;
  T                 f_in [N_OUT];

  always_comb begin
    used = '0;
    all_ready = '1;
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        if (sel[o] == SW'(i)) begin
          used[i] = 1'b1;
          if (!f_ready[o]) all_ready[i] = 1'b0;
        end
      end
    end
    in_ready = used & all_ready;
    for (int o = 0; o < N_OUT; o++) begin
      push[o] = 1'b0;
      f_in[o] = in_data[0];
      for (int i = 0; i < N_IN; i++) begin
        if (sel[o] == SW'(i)) begin
          push[o] = in_valid[i] && all_ready[i];
          f_in[o] = in_data[i];
        end
      end
    end
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    oe_fifo #(.T(T), .DEPTH(2)) u_slice (
      .clk, .rst_n, .in_valid(push[o]), .in_ready(f_ready[o]), .in_data(f_in[o]),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_data(out_data[o]), .count());
  end

  // A source keeps valid asserted until its word is taken.
  for (genvar i = 0; i < N_IN; i++) begin : g_chk
    property p_hold;
      @(posedge clk) disable iff (!rst_n) (in_valid[i] && !in_ready[i] && used[i]) |=> in_valid[i];
    endproperty
    assert property (p_hold) else $error("oe_router: input %0d dropped valid", i);
  end
endmodule
