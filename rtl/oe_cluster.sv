// oe_cluster: one OpenEye cluster, the replicated building block.
//
// Holds a PE cluster (oe_pe_cluster), an activation function unit
// (oe_act_fn) and three routers (oe_router), one per data type:
//   activations  in : EXT, N, S, E, W          out: PE, N, S, E, W
//   weights      in : EXT, W                   out: PE, E
//   partial sums in : EXT, N, S, RESULTS       out: PE, N, S, EXT
// Activations can thus move in every direction, weights only from west to
// east and partial sums north and south in both directions, as the source
// describes. EXT is the stream from / to the serial front end. The PSUM
// output of the PE cluster passes through the activation function and
// enters the PSUM router as RESULTS; the router's PE output drives the PSum
// bus input (bias or partial sums from neighbours) of the PE cluster.
// Neighbour links use index 0=N, 1=S, 2=E, 3=W. All links are valid/ready
// streams; every router output is registered. cfg (router selects, PE
// masks, PSUM column, PE settings, activation mode) and cmd come from the
// parallel control logic. The global buffers of the source's block diagram
// are not built (the source's own implementation omits them too).
module oe_cluster
  import oe_pkg::*;
#(
  parameter int PE_X = 4,
  parameter int PE_Y = 3,
  parameter int IACT_ADDR_DEPTH = 9,
  parameter int IACT_DATA_DEPTH = 16,
  parameter int W_ADDR_DEPTH    = 16,
  parameter int W_DATA_DEPTH    = 96,
  parameter int PSUM_DEPTH      = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cluster_cfg_t cfg,
  input  pe_cmd_t      cmd,
  output logic         busy,
  // external streams (serial front end)
  input  logic         ext_iact_valid,
  output logic         ext_iact_ready,
  input  iact_word_t   ext_iact_data,
  input  logic         ext_w_valid,
  output logic         ext_w_ready,
  input  weight_word_t ext_w_data,
  input  logic         ext_psum_in_valid,
  output logic         ext_psum_in_ready,
  input  psum_t        ext_psum_in_data,
  output logic         ext_psum_out_valid,
  input  logic         ext_psum_out_ready,
  output psum_t        ext_psum_out_data,
  // activation links, index 0=N 1=S 2=E 3=W
  input  logic [3:0]   nb_iact_in_valid,
  output logic [3:0]   nb_iact_in_ready,
  input  iact_word_t   nb_iact_in_data [4],
  output logic [3:0]   nb_iact_out_valid,
  input  logic [3:0]   nb_iact_out_ready,
  output iact_word_t   nb_iact_out_data [4],
  // weight links
  input  logic         w_west_valid,
  output logic         w_west_ready,
  input  weight_word_t w_west_data,
  output logic         w_east_valid,
  input  logic         w_east_ready,
  output weight_word_t w_east_data,
  // psum links, index 0=N 1=S
  input  logic [1:0]   nb_psum_in_valid,
  output logic [1:0]   nb_psum_in_ready,
  input  psum_t        nb_psum_in_data [2],
  output logic [1:0]   nb_psum_out_valid,
  input  logic [1:0]   nb_psum_out_ready,
  output psum_t        nb_psum_out_data [2]
);
  // ---------------- activation router ----------------
  logic [4:0] ir_iv, ir_ir, ir_ov, ir_or;
  iact_word_t ir_id [5];
  iact_word_t ir_od [5];
  assign ir_iv = {nb_iact_in_valid, ext_iact_valid};
  assign ir_id[0] = ext_iact_data;
  for (genvar d = 0; d < 4; d++) begin : g_ia
    assign ir_id[d+1] = nb_iact_in_data[d];
    assign nb_iact_out_data[d] = ir_od[d+1];
  end
  assign ext_iact_ready   = ir_ir[0];
  assign nb_iact_in_ready = ir_ir[4:1];
  assign nb_iact_out_valid = ir_ov[4:1];
  assign ir_or[4:1] = nb_iact_out_ready;

  oe_router #(.T(iact_word_t), .N_IN(5), .N_OUT(5)) u_iact_router (
    .clk, .rst_n, .sel(cfg.iact_sel), .in_valid(ir_iv), .in_ready(ir_ir), .in_data(ir_id),
    .out_valid(ir_ov), .out_ready(ir_or), .out_data(ir_od));

  // ---------------- weight router ----------------
  logic [1:0] wr_iv, wr_ir, wr_ov, wr_or;
  weight_word_t wr_id [2];
  weight_word_t wr_od [2];
  assign wr_iv = {w_west_valid, ext_w_valid};
  assign wr_id[0] = ext_w_data;
  assign wr_id[1] = w_west_data;
  assign ext_w_ready  = wr_ir[0];
  assign w_west_ready = wr_ir[1];
  assign w_east_valid = wr_ov[1];
  assign w_east_data  = wr_od[1];
  assign wr_or[1]     = w_east_ready;

  oe_router #(.T(weight_word_t), .N_IN(2), .N_OUT(2)) u_w_router (
    .clk, .rst_n, .sel(cfg.w_sel), .in_valid(wr_iv), .in_ready(wr_ir), .in_data(wr_id),
    .out_valid(wr_ov), .out_ready(wr_or), .out_data(wr_od));

  // ---------------- psum router ----------------
  logic [3:0] pr_iv, pr_ir, pr_ov, pr_or;
  psum_t pr_id [4];
  psum_t pr_od [4];
  logic  res_valid, res_ready;
  psum_t res_data;
  assign pr_iv = {res_valid, nb_psum_in_valid, ext_psum_in_valid};
  assign pr_id[0] = ext_psum_in_data;
  assign pr_id[1] = nb_psum_in_data[0];
  assign pr_id[2] = nb_psum_in_data[1];
  assign pr_id[3] = res_data;
  assign ext_psum_in_ready = pr_ir[0];
  assign nb_psum_in_ready  = pr_ir[2:1];
  assign res_ready         = pr_ir[3];
  assign nb_psum_out_valid = pr_ov[2:1];
  assign nb_psum_out_data[0] = pr_od[1];
  assign nb_psum_out_data[1] = pr_od[2];
  assign ext_psum_out_valid = pr_ov[3];
  assign ext_psum_out_data  = pr_od[3];
  assign pr_or[3:1] = {ext_psum_out_ready, nb_psum_out_ready};

  oe_router #(.T(psum_t), .N_IN(4), .N_OUT(4)) u_psum_router (
    .clk, .rst_n, .sel(cfg.psum_sel), .in_valid(pr_iv), .in_ready(pr_ir), .in_data(pr_id),
    .out_valid(pr_ov), .out_ready(pr_or), .out_data(pr_od));

  // ---------------- PE cluster and activation function ----------------
  logic  pc_out_valid, pc_out_ready, pes_busy;
  psum_t pc_out_data;

  oe_pe_cluster #(.PE_X(PE_X), .PE_Y(PE_Y), .IACT_ADDR_DEPTH(IACT_ADDR_DEPTH),
    .IACT_DATA_DEPTH(IACT_DATA_DEPTH), .W_ADDR_DEPTH(W_ADDR_DEPTH),
    .W_DATA_DEPTH(W_DATA_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) u_pes (
    .clk, .rst_n, .cmd, .cfg(cfg.pe_cfg),
    .iact_mask(cfg.iact_mask[PE_X*PE_Y-1:0]), .w_row_mask(cfg.w_row_mask[PE_Y-1:0]),
    .psum_col(cfg.psum_col),
    .iact_valid(ir_ov[0]), .iact_ready(ir_or[0]), .iact_data(ir_od[0]),
    .w_valid(wr_ov[0]), .w_ready(wr_or[0]), .w_data(wr_od[0]),
    .psum_in_valid(pr_ov[0]), .psum_in_ready(pr_or[0]), .psum_in_data(pr_od[0]),
    .psum_out_valid(pc_out_valid), .psum_out_ready(pc_out_ready), .psum_out_data(pc_out_data),
    .busy(pes_busy));

  // busy also covers words still travelling through the routers and the
  // activation unit, so the controller can wait for streams to settle.
  assign busy = pes_busy || (|ir_ov) || (|wr_ov) || (|pr_ov) || res_valid || pc_out_valid;

  oe_act_fn u_act (
    .clk, .rst_n, .mode(cfg.act_mode),
    .in_valid(pc_out_valid), .in_ready(pc_out_ready), .in_data(pc_out_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data));
endmodule
